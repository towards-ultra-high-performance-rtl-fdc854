// tb_fft_engine -- self-checking test of the basic computing block in both directions.
//
// FFT: words of random real values with block sizes 128, 8 and 2; the half-spectrum word that
// comes out is compared with a double-precision DFT/k of each block (bin 0 and bin k/2 packed
// into the first two values of a block).
// IFFT: random half-spectrum words with block sizes 128, 16 and 4; the expected time-domain
// block is the real inverse DFT of the conjugate-symmetric spectrum the half implies, plus a
// random bias, clamped at zero when ReLU is on.  The bias word is presented 8 cycles after its
// vector, as the engine's interface requires.  Latencies of 7 (FFT) and 9 (IFFT) are checked.
module tb_fft_engine;
  import bc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, inverse, relu, out_valid;
  logic [2:0] log2k;
  logic [6:0] scale;
  sample_t din [N], bias [N], dout [N];

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fft_engine dut (.*);

  localparam int NV = 6;
  real exp_v [NV][N];
  int  in_cycle [NV], exp_lat [NV];
  sample_t bias_of [NV][N];
  int  cycle = 0, out_idx = 0;
  int  bias_at [NV];            // cycle in which vector v's bias must be on the port

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    int lks [NV];
    int xs [N];
    real sr, si, a;
    int k;
    lks = '{7, 3, 1, 7, 4, 2};
    in_valid = 0; inverse = 0; relu = 0; log2k = 0; scale = 0;
    foreach (din[l]) din[l] = '0;
    foreach (bias[l]) bias[l] = '0;
    foreach (bias_at[v]) bias_at[v] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      k = 1 << lks[v];
      if (v < 3) begin
        // forward: real words, expected packed half spectrum / k
        for (int l = 0; l < N; l++) xs[l] = int'($urandom_range(3000)) - 1500;
        for (int g = 0; g < N / k; g++)
          for (int m = 0; m < k / 2; m++) begin
            real bre [2], bim [2];
            for (int h = 0; h < 2; h++) begin
              int f;
              f = (h == 0) ? m : ((m == 0) ? k / 2 : m);
              sr = 0.0; si = 0.0;
              for (int n = 0; n < k; n++) begin
                a = -2.0 * 3.14159265358979 * real'(f * n) / real'(k);
                sr += real'(xs[g*k+n]) * $cos(a);
                si += real'(xs[g*k+n]) * $sin(a);
              end
              bre[h] = sr / real'(k);
              bim[h] = si / real'(k);
            end
            if (m == 0) begin
              exp_v[v][g*k]     = bre[0];
              exp_v[v][g*k + 1] = bre[1];
            end else begin
              exp_v[v][g*k + 2*m]     = bre[0];
              exp_v[v][g*k + 2*m + 1] = bim[0];
            end
          end
        exp_lat[v] = LOG2N;
      end else begin
        // inverse: random half spectrum, expected real IDFT + bias (+ReLU)
        for (int l = 0; l < N; l++) xs[l] = int'($urandom_range(2000)) - 1000;
        for (int l = 0; l < N; l++) bias_of[v][l] = sample_t'(int'($urandom_range(400)) - 200);
        for (int g = 0; g < N / k; g++)
          for (int n = 0; n < k; n++) begin
            real acc;
            acc = real'(xs[g*k]) + real'(xs[g*k+1]) * ((n % 2 == 0) ? 1.0 : -1.0);
            for (int m = 1; m < k / 2; m++) begin
              a = 2.0 * 3.14159265358979 * real'(m * n) / real'(k);
              acc += 2.0 * (real'(xs[g*k+2*m]) * $cos(a) - real'(xs[g*k+2*m+1]) * $sin(a));
            end
            acc = acc / real'(k) + real'(bias_of[v][g*k+n]);
            if (acc > 2047.0) acc = 2047.0;
            if (v != 4 && acc < 0.0) acc = 0.0;     // ReLU on for vectors 3 and 5
            exp_v[v][g*k+n] = acc;
          end
        exp_lat[v] = LOG2N + 2;
      end
      if (v == 3) repeat (12) @(posedge clk);       // drain before changing direction
      @(negedge clk);
      in_valid = 1;
      inverse  = (v >= 3);
      relu     = (v == 3 || v == 5);
      log2k    = 3'(lks[v]);
      scale    = 7'((1 << lks[v]) - 1);
      for (int l = 0; l < N; l++) din[l] = sample_t'(xs[l]);
      in_cycle[v] = cycle;
      if (v >= 3) bias_at[v] = cycle + 8;
      @(negedge clk);
      in_valid = 0;
    end
  end

  // Present each inverse vector's bias in its slot.
  always @(negedge clk) begin
    for (int v = 3; v < NV; v++)
      if (bias_at[v] == cycle) bias = bias_of[v];
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int errs, got;
      real e;
      errs = 0;
      for (int l = 0; l < N; l++) begin
        got = int'(dout[l]);
        e = real'(got) - exp_v[out_idx][l];
        checks++;
        if (e > 3.0 || e < -3.0) begin
          if (errs < 3) $display("vec %0d value %0d: got %0d expected %f", out_idx, l, got,
                                 exp_v[out_idx][l]);
          errs++;
          failures++;
        end
      end
      checks++;
      if (cycle - in_cycle[out_idx] != exp_lat[out_idx]) begin
        $display("vec %0d latency %0d expected %0d", out_idx, cycle - in_cycle[out_idx],
                 exp_lat[out_idx]);
        failures++;
      end
      out_idx++;
      if (out_idx == NV) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("watchdog: only %0d of %0d vectors came out", out_idx, NV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
