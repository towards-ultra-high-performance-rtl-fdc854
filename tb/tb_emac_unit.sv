// tb_emac_unit -- self-checking test of the phase-2 multiply-accumulate unit.
//
// For block sizes 128, 8 and 2 it runs one full output word: for every output block i of the
// word (grp = i mod G) and every input word w, one operation with random half-spectrum words
// X_w and W_{i,w}.  The expected output word is computed here directly from the definition:
// for each output block, the sum over all input blocks j of FFT(w_ij)[m] * FFT(x_j)[m] per bin
// (bins 0 and k/2 real), shifted right with rounding and saturated to 12 bits.  The operations
// are issued back to back; the 2-cycle latency from the last operation to out_valid is checked.
module tb_emac_unit;
  import bc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, clr, last, out_valid;
  logic [2:0] log2k;
  logic [6:0] grp;
  logic [4:0] shift;
  sample_t x [N], wt [N], dout [N];

  int checks = 0, failures = 0;
  int cycle = 0, last_cycle = 0;
  bit got_out;
  sample_t res [N];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  emac_unit dut (.*);

  always @(posedge clk) if (rst_n && out_valid) begin
    got_out <= 1'b1;
    res <= dout;
    checks++;
    if (cycle - last_cycle != 2) begin
      failures++;
      $display("latency %0d, expected 2", cycle - last_cycle);
    end
  end

  function automatic int rnd_out(longint v, int sh);
    longint r;
    r = v;
    if (sh > 0) r = (v + (longint'(1) << (sh - 1))) >>> sh;
    if (r > 2047) r = 2047;
    if (r < -2048) r = -2048;
    return int'(r);
  endfunction

  task automatic run_word(int lk, int nwords, int sh);
    int k, hk, G;
    int xw [8][N];
    int ww [N][8][N];  // [grp][word][value]
    longint er [N/2], ei [N/2];
    k = 1 << lk; hk = k / 2; G = N / k;
    for (int w = 0; w < nwords; w++)
      for (int l = 0; l < N; l++) xw[w][l] = int'($urandom_range(4095)) - 2048;
    for (int g = 0; g < G; g++)
      for (int w = 0; w < nwords; w++)
        for (int l = 0; l < N; l++) ww[g][w][l] = int'($urandom_range(4095)) - 2048;
    // reference
    for (int c = 0; c < N / 2; c++) begin er[c] = 0; ei[c] = 0; end
    for (int go = 0; go < G; go++)
      for (int w = 0; w < nwords; w++)
        for (int gi = 0; gi < G; gi++)
          for (int m = 0; m < hk; m++) begin
            int c, xr, xi, wr, wi;
            c  = gi * hk + m;
            xr = xw[w][2*c]; xi = xw[w][2*c+1];
            wr = ww[go][w][2*c]; wi = ww[go][w][2*c+1];
            if (m == 0) begin
              er[go*hk + m] += longint'(xr) * wr;
              ei[go*hk + m] += longint'(xi) * wi;
            end else begin
              er[go*hk + m] += longint'(xr) * wr - longint'(xi) * wi;
              ei[go*hk + m] += longint'(xr) * wi + longint'(xi) * wr;
            end
          end
    // drive
    got_out = 0;
    for (int go = 0; go < G; go++)
      for (int w = 0; w < nwords; w++) begin
        @(negedge clk);
        in_valid = 1;
        log2k = 3'(lk);
        clr   = (go == 0 && w == 0);
        last  = (go == G - 1 && w == nwords - 1);
        grp   = 7'(go);
        shift = 5'(sh);
        for (int l = 0; l < N; l++) begin
          x[l]  = sample_t'(xw[w][l]);
          wt[l] = sample_t'(ww[go][w][l]);
        end
        if (last) last_cycle = cycle;
      end
    @(negedge clk);
    in_valid = 0; last = 0; clr = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (!got_out) begin failures++; $display("k=%0d: no output", k); end
    for (int c = 0; c < N / 2; c++) begin
      int r, i;
      r = rnd_out(er[c], sh);
      i = rnd_out(ei[c], sh);
      checks++;
      if (int'(res[2*c]) != r || int'(res[2*c+1]) != i) begin
        failures++;
        if (failures < 6) $display("k=%0d lane %0d: got (%0d,%0d) expected (%0d,%0d)", k, c,
                                   int'(res[2*c]), int'(res[2*c+1]), r, i);
      end
    end
  endtask

  initial begin
    in_valid = 0; clr = 0; last = 0; log2k = 1; grp = 0; shift = 0;
    foreach (x[l]) begin x[l] = '0; wt[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_word(7, 3, 22);
    run_word(3, 2, 21);
    run_word(1, 1, 12);
    run_word(5, 2, 30);   // no saturation pressure: large shift
    run_word(4, 1, 8);    // saturates
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
