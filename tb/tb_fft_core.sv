// tb_fft_core -- self-checking test of the N-point pipelined FFT structure.
//
// Drives back-to-back vectors with block sizes k = 128, 16, 2 and 8 (N/k FFTs in parallel),
// loads each k-group in bit-reversed order as the core expects, and compares every output lane
// with a double-precision DFT of the same group computed here.  With all active stages halving,
// the expected result is DFT/k; one set runs without halving on small inputs (plain DFT).
// Also checks the latency of LOG2N cycles and that a vector's block size does not leak into
// its neighbours in the pipeline.
module tb_fft_core;
  import bc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [2:0] log2k;
  logic [6:0] scale;
  cplx_t din [N], dout [N];

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fft_core dut (.*);

  localparam int NV = 8;
  int    vec_lk   [NV];
  bit    vec_half [NV];
  real   exp_re   [NV][N], exp_im [NV][N];
  int    cycle = 0, in_cycle [NV];
  int    out_idx = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int bitrev(int x, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (x & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // Build vector v: random complex samples in natural order per group, its reference DFT,
  // and the bit-reversed arrangement for the core.
  task automatic make_vec(int v, int lk, bit half, int amp, output cplx_t arr [N]);
    int k = 1 << lk;
    int xr [N], xi [N];
    for (int l = 0; l < N; l++) begin
      xr[l] = int'($urandom_range(2 * amp)) - amp;
      xi[l] = int'($urandom_range(2 * amp)) - amp;
    end
    for (int g = 0; g < N / k; g++)
      for (int f = 0; f < k; f++) begin
        real sr, si;
        sr = 0.0;
        si = 0.0;
        for (int n = 0; n < k; n++) begin
          real a;
          a = -2.0 * 3.14159265358979 * real'(f * n) / real'(k);
          sr += real'(xr[g*k+n]) * $cos(a) - real'(xi[g*k+n]) * $sin(a);
          si += real'(xr[g*k+n]) * $sin(a) + real'(xi[g*k+n]) * $cos(a);
        end
        if (half) begin sr /= real'(k); si /= real'(k); end
        exp_re[v][g*k+f] = sr;
        exp_im[v][g*k+f] = si;
      end
    for (int g = 0; g < N / k; g++)
      for (int n = 0; n < k; n++) begin
        arr[g*k + bitrev(n, lk)].re = sample_t'(xr[g*k+n]);
        arr[g*k + bitrev(n, lk)].im = sample_t'(xi[g*k+n]);
      end
    vec_lk[v] = lk;
    vec_half[v] = half;
  endtask

  initial begin
    cplx_t arr [N];
    int lks [NV];
    bit half;
    lks = '{7, 4, 1, 3, 7, 5, 2, 6};
    in_valid = 0; log2k = 0; scale = 0;
    foreach (din[l]) din[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      half = (v != 3);
      make_vec(v, lks[v], half, half ? 1500 : 6, arr);
      @(negedge clk);
      in_valid = 1;
      log2k    = 3'(lks[v]);
      scale    = half ? 7'((1 << lks[v]) - 1) : 7'd0;
      din      = arr;
      in_cycle[v] = cycle;
    end
    @(negedge clk);
    in_valid = 0;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int errs, gr, gi;
      real tol, er, ei;
      errs = 0;
      tol  = vec_half[out_idx] ? 3.0 : 1.5;
      for (int l = 0; l < N; l++) begin
        gr = int'(dout[l].re);
        gi = int'(dout[l].im);
        er = real'(gr) - exp_re[out_idx][l];
        ei = real'(gi) - exp_im[out_idx][l];
        checks++;
        if (er > tol || er < -tol || ei > tol || ei < -tol) begin
          if (errs < 3)
            $display("vec %0d lane %0d: got (%0d,%0d) expected (%f,%f)", out_idx, l, gr, gi, exp_re[out_idx][l], exp_im[out_idx][l]);
          errs++;
          failures++;
        end
      end
      checks++;
      if (cycle - in_cycle[out_idx] != LOG2N) begin
        $display("vec %0d latency %0d, expected %0d", out_idx, cycle - in_cycle[out_idx], LOG2N);
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
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog: only %0d of %0d vectors came out", out_idx, NV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
