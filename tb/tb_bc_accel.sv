// tb_bc_accel -- end-to-end test of the accelerator at its default size.
//
// A four-layer network on a batch of 4 pictures:
//   layer 0  FC 256 -> 256, k = 128, ReLU       (two input words, two output blocks)
//   layer 1  FC 256 -> 128, k = 64,  ReLU       (two blocks share an output word)
//   layer 2  FC 128 -> 16,  k = 16               (8 small FFTs per word)
//   layer 3  lowered CONV, 2 rows of 128 -> 32, k = 4, ReLU
// Weight spectra, biases and inputs are random and loaded through the host port.  A
// bit-accurate model written here (plain radix-2 loops over each block, the same number
// format: 12-bit values, twiddles rounded to 10 fractional bits, rounding halving, saturation)
// computes the expected feature memory.  Run 1 executes layer 0 only, run 2 the whole network;
// each picture's words are read back through the host port and compared value by value.
// The busy time of each run is compared with one operation per cycle plus the drain waits.
// Every mechanism of the design must show up at least once: the three operation kinds, the
// drains between phases, small-block FFTs, several blocks per word in phase 2, ReLU clamping,
// saturation, CONV rows, in-place overwrite and batch interleaving.
module tb_bc_accel;
  import bc_pkg::*;

  localparam int MAX_LAYERS = 16, BATCH = 64, PIC_WORDS = 32;
  localparam int NB = 4, NL = 4, DRAIN = LOG2N + 7;

  logic clk = 0, rst_n = 0;
  logic host_we, host_re, cfg_we, start, busy, done;
  logic [1:0] host_sel;
  logic [15:0] host_addr, host_raddr;
  sample_t host_wdata [N], host_rdata [N];
  logic [3:0] cfg_addr;
  layer_cfg_t cfg_wdata;
  logic [4:0] n_layers;
  logic [6:0] batch;

  always #5 clk = ~clk;

  bc_accel dut (.*);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ network and model state
  layer_cfg_t L [NL];
  int wmem [32][N];
  int bmem [8][N];
  int inp  [NB][2][N];
  int feat [NB][PIC_WORDS][N];
  int spec [NB][PIC_WORDS][N];
  int accm [NB][PIC_WORDS][N];

  // mechanism counters
  int n_fft = 0, n_mac = 0, n_ifft = 0, n_drain = 0, n_small = 0, n_grp = 0;
  int n_relu = 0, n_sat = 0, n_rows = 0, n_inplace = 0, n_interleave = 0;

  function automatic int sat12(longint v);
    if (v > 2047) begin n_sat++; return 2047; end
    if (v < -2048) begin n_sat++; return -2048; end
    return int'(v);
  endfunction

  function automatic int brev(int x, int bits);
    int r;
    r = 0;
    for (int i = 0; i < bits; i++) if (((x >> i) & 1) != 0) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // radix-2 DIT stages on one block already in bit-reversed order
  function automatic void stages(ref int re [N], ref int im [N], input int k, input int lk,
                                 input int sc);
    for (int s = 1; s <= lk; s++) begin
      int h;
      h = 1 << (s - 1);
      for (int st = 0; st < k; st += 2 * h)
        for (int m = 0; m < h; m++) begin
          int t, b, wr, wi;
          longint pr, pi, tr, ti, sr, si, dr, di;
          real a;
          a  = 2.0 * 3.14159265358979323846 * real'(m) / real'(2 * h);
          wr = $rtoi($floor($cos(a) * 1024.0 + 0.5));
          wi = $rtoi($floor(-$sin(a) * 1024.0 + 0.5));
          t = st + m; b = t + h;
          pr = longint'(re[b]) * wr - longint'(im[b]) * wi;
          pi = longint'(re[b]) * wi + longint'(im[b]) * wr;
          tr = (pr + 512) >>> 10;
          ti = (pi + 512) >>> 10;
          sr = re[t] + tr; si = im[t] + ti; dr = re[t] - tr; di = im[t] - ti;
          if (((sc >> (s - 1)) & 1) != 0) begin
            sr = (sr + 1) >>> 1; si = (si + 1) >>> 1; dr = (dr + 1) >>> 1; di = (di + 1) >>> 1;
          end
          re[t] = sat12(sr); im[t] = sat12(si); re[b] = sat12(dr); im[b] = sat12(di);
        end
    end
  endfunction

  // one layer of the model on all pictures
  task automatic model_layer(layer_cfg_t c);
    int k, lk, G, hk, ow, iw;
    lk = int'(c.log2k); k = 1 << lk; G = N / k; hk = k / 2;
    iw = int'(c.in_words);
    ow = (int'(c.out_blocks) + G - 1) / G;
    // phase 1
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < int'(c.rows); r++)
        for (int w = 0; w < iw; w++) begin
          int a;
          a = r * iw + w;
          for (int g = 0; g < G; g++) begin
            int re [N], im [N];
            for (int n = 0; n < k; n++) begin
              re[brev(n, lk)] = feat[b][a][g*k + n];
              im[brev(n, lk)] = 0;
            end
            stages(re, im, k, lk, int'(c.fft_scale));
            spec[b][a][g*k]     = re[0];
            spec[b][a][g*k + 1] = re[hk];
            for (int m = 1; m < hk; m++) begin
              spec[b][a][g*k + 2*m]     = re[m];
              spec[b][a][g*k + 2*m + 1] = im[m];
            end
          end
        end
    // phase 2
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < int'(c.rows); r++)
        for (int u = 0; u < ow; u++) begin
          longint ar [N/2], ai [N/2];
          for (int q = 0; q < N / 2; q++) begin ar[q] = 0; ai[q] = 0; end
          for (int go = 0; go < G; go++) begin
            int i;
            i = u * G + go;
            if (i < int'(c.out_blocks))
              for (int j = 0; j < iw * G; j++) begin
                int w, gi;
                w = j / G; gi = j % G;
                for (int m = 0; m < hk; m++) begin
                  int xr, xi, wr, wi;
                  xr = spec[b][r*iw + w][gi*k + 2*m];
                  xi = spec[b][r*iw + w][gi*k + 2*m + 1];
                  wr = wmem[int'(c.wbase) + i*iw + w][gi*k + 2*m];
                  wi = wmem[int'(c.wbase) + i*iw + w][gi*k + 2*m + 1];
                  if (m == 0) begin
                    ar[go*hk] += longint'(xr) * wr;
                    ai[go*hk] += longint'(xi) * wi;
                  end else begin
                    ar[go*hk + m] += longint'(xr) * wr - longint'(xi) * wi;
                    ai[go*hk + m] += longint'(xr) * wi + longint'(xi) * wr;
                  end
                end
              end
          end
          for (int q = 0; q < N / 2; q++) begin
            longint sh;
            sh = longint'(c.mac_shift);
            if (sh > 0) begin
              ar[q] = (ar[q] + (longint'(1) << (sh - 1))) >>> sh;
              ai[q] = (ai[q] + (longint'(1) << (sh - 1))) >>> sh;
            end
            accm[b][r*ow + u][2*q]     = sat12(ar[q]);
            accm[b][r*ow + u][2*q + 1] = sat12(ai[q]);
          end
        end
    // phase 3
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < int'(c.rows); r++)
        for (int u = 0; u < ow; u++) begin
          int a;
          a = r * ow + u;
          if (a < int'(c.rows) * iw) n_inplace++;
          for (int g = 0; g < G; g++) begin
            int re [N], im [N];
            int h [N];
            for (int n = 0; n < k; n++) h[n] = accm[b][a][g*k + n];
            re[brev(0, lk)] = h[0];  im[brev(0, lk)] = 0;
            re[brev(hk, lk)] = h[1]; im[brev(hk, lk)] = 0;
            for (int m = 1; m < hk; m++) begin
              re[brev(m, lk)]     = h[2*m];
              im[brev(m, lk)]     = sat12(-longint'(h[2*m + 1]));
              re[brev(k - m, lk)] = h[2*m];
              im[brev(k - m, lk)] = h[2*m + 1];
            end
            stages(re, im, k, lk, int'(c.ifft_scale));
            for (int n = 0; n < k; n++) begin
              int v;
              v = sat12(longint'(re[n]) + bmem[int'(c.bbase) + u][g*k + n]);
              if (c.relu && v < 0) begin v = 0; n_relu++; end
              feat[b][a][g*k + n] = v;
            end
          end
        end
  endtask

  // ------------------------------------------------------------------ host access
  task automatic host_write(int sel, int addr, int vals [N]);
    @(negedge clk);
    host_we = 1; host_sel = 2'(sel); host_addr = 16'(addr);
    for (int l = 0; l < N; l++) host_wdata[l] = sample_t'(vals[l]);
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic load_inputs();
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < 2; w++) begin
        host_write(0, b * PIC_WORDS + w, inp[b][w]);
        feat[b][w] = inp[b][w];
      end
  endtask

  task automatic check_words(int nw, string tag);
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < nw; w++) begin
        int errs;
        errs = 0;
        @(negedge clk);
        host_re = 1; host_raddr = 16'(b * PIC_WORDS + w);
        @(negedge clk);
        host_re = 0;
        for (int l = 0; l < N; l++) begin
          checks++;
          if (int'(host_rdata[l]) != feat[b][w][l]) begin
            failures++;
            if (errs < 3) $display("%s pic %0d word %0d value %0d: got %0d expected %0d", tag,
                                   b, w, l, int'(host_rdata[l]), feat[b][w][l]);
            errs++;
          end
        end
      end
  endtask

  function automatic int expected_busy(int nl);
    int t;
    t = 1;   // DONE
    for (int l = 0; l < nl; l++) begin
      int G, ow;
      G = N >> int'(L[l].log2k);
      ow = (int'(L[l].out_blocks) + G - 1) / G;
      t += 1 + 3 * DRAIN;
      t += int'(L[l].rows) * (int'(L[l].in_words) + int'(L[l].out_blocks) * int'(L[l].in_words)
                              + ow) * NB;
    end
    return t;
  endfunction

  task automatic run(int nl, string tag);
    int t0, t;
    @(negedge clk);
    start = 1; n_layers = 5'(nl); batch = 7'(NB);
    @(negedge clk);
    start = 0;
    t0 = 0;
    while (busy) begin
      @(negedge clk);
      t0++;
    end
    t = expected_busy(nl);
    checks++;
    if (t0 != t) begin
      failures++;
      $display("%s: busy for %0d cycles, expected %0d", tag, t0, t);
    end else $display("%s: %0d cycles", tag, t0);
  endtask

  // ------------------------------------------------------------------ mechanism monitors
  int last_pic_op;
  always @(posedge clk) if (rst_n) begin
    if (dut.op_valid) begin
      case (dut.op_kind)
        OP_FFT:  n_fft++;
        OP_MAC:  n_mac++;
        default: n_ifft++;
      endcase
      if (dut.op_log2k < 3'd7) n_small++;
      if (dut.op_kind == OP_MAC && dut.op_grp != 0) n_grp++;
      if (dut.u_ctrl.row != 0) n_rows++;
      if (dut.u_ctrl.pic != 0 && last_pic_op == 0 && dut.op_kind == OP_FFT) n_interleave++;
      last_pic_op = int'(dut.u_ctrl.pic);
    end
    if (int'(dut.u_ctrl.state) == 3 && dut.u_ctrl.drain_cnt == 0) n_drain++;  // S_DRAIN
  end

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  // ------------------------------------------------------------------ stimulus
  initial begin
    host_we = 0; host_re = 0; host_sel = 0; host_addr = 0; host_raddr = 0;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = '0; start = 0; n_layers = 0; batch = 0;
    foreach (host_wdata[l]) host_wdata[l] = '0;
    last_pic_op = 0;

    L[0] = '{log2k: 3'd7, in_words: 8'd2, out_blocks: 10'd2, rows: 8'd1, wbase: 16'd0,
             bbase: 12'd0, relu: 1'b1, fft_scale: 7'h7f, ifft_scale: 7'h0f, mac_shift: 5'd8};
    L[1] = '{log2k: 3'd6, in_words: 8'd2, out_blocks: 10'd2, rows: 8'd1, wbase: 16'd4,
             bbase: 12'd2, relu: 1'b1, fft_scale: 7'h3f, ifft_scale: 7'h0f, mac_shift: 5'd11};
    L[2] = '{log2k: 3'd4, in_words: 8'd1, out_blocks: 10'd1, rows: 8'd1, wbase: 16'd8,
             bbase: 12'd3, relu: 1'b0, fft_scale: 7'h0f, ifft_scale: 7'h03, mac_shift: 5'd10};
    L[3] = '{log2k: 3'd2, in_words: 8'd1, out_blocks: 10'd8, rows: 8'd2, wbase: 16'd9,
             bbase: 12'd4, relu: 1'b1, fft_scale: 7'h03, ifft_scale: 7'h01, mac_shift: 5'd9};

    for (int a = 0; a < 32; a++)
      for (int l = 0; l < N; l++) wmem[a][l] = int'($urandom_range(4095)) - 2048;
    for (int a = 0; a < 8; a++)
      for (int l = 0; l < N; l++) bmem[a][l] = int'($urandom_range(400)) - 200;
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < 2; w++)
        for (int l = 0; l < N; l++) inp[b][w][l] = int'($urandom_range(1023));

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 17; a++) host_write(1, a, wmem[a]);
    for (int a = 0; a < 5; a++) host_write(2, a, bmem[a]);
    for (int l = 0; l < NL; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(l); cfg_wdata = L[l];
    end
    @(negedge clk);
    cfg_we = 0;

    // run 1: layer 0 only
    load_inputs();
    model_layer(L[0]);
    run(1, "run 1 (layer 0)");
    check_words(2, "run 1");

    // run 2: whole network from fresh inputs
    load_inputs();
    for (int l = 0; l < NL; l++) model_layer(L[l]);
    run(NL, "run 2 (4 layers)");
    check_words(2, "run 2");

    $display("mechanisms:");
    need("FFT operations", n_fft);
    need("MAC operations", n_mac);
    need("IFFT operations", n_ifft);
    need("phase drains", n_drain);
    need("small-block FFT ops (k<N)", n_small);
    need("MAC into block group > 0", n_grp);
    need("ReLU clamps", n_relu);
    need("saturations", n_sat);
    need("CONV row ops (row > 0)", n_rows);
    need("in-place output words", n_inplace);
    need("batch interleave", n_interleave);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
