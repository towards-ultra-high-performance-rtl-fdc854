// tb_bc_ctrl -- self-checking test of the hierarchical controller.
//
// Loads a two-layer table (an FC layer with k = 128, and a lowered CONV layer with k = 8, two
// rows and output blocks that do not fill the last word), runs a batch of 3 pictures and
// compares the issued operation stream, one by one, with a stream generated here from the loop
// nest layer > phase > picture > row > block > word.  Also checks that every phase boundary
// leaves at least DRAIN idle cycles, that operations are back to back inside a phase (one per
// cycle), and that done pulses once after the last phase.
module tb_bc_ctrl;
  import bc_pkg::*;

  localparam int MAX_LAYERS = 16, BATCH = 64, PIC_WORDS = 16, DRAIN = 14, AW = 16;

  logic clk = 0, rst_n = 0;
  logic cfg_we, start, busy, done;
  logic [3:0] cfg_addr;
  layer_cfg_t cfg_wdata;
  logic [4:0] n_layers;
  logic [6:0] batch;
  logic op_valid, op_relu, op_clr, op_last;
  op_e  op_kind;
  logic [2:0] op_log2k;
  logic [6:0] op_scale, op_grp;
  logic [4:0] op_shift;
  logic [AW-1:0] op_rd_addr, op_w_addr, op_b_addr, op_wr_addr;

  always #5 clk = ~clk;

  bc_ctrl #(.MAX_LAYERS(MAX_LAYERS), .BATCH(BATCH), .PIC_WORDS(PIC_WORDS), .DRAIN(DRAIN),
            .AW(AW)) dut (.*);

  typedef struct {
    op_e kind; int rd, wa, ba, wr; bit clr, last; int grp; int scale; bit relu;
  } exp_op_t;
  exp_op_t q [$];
  layer_cfg_t L [2];
  int checks = 0, failures = 0;
  int n_ops = 0, gap = 0, min_gap = 1000, phase_changes = 0, done_cnt = 0;
  op_e prev_kind;
  bit seen_op = 0;

  task automatic gen(int nb);
    for (int l = 0; l < 2; l++) begin
      int k, G, ow;
      k = 1 << L[l].log2k; G = N / k;
      ow = (int'(L[l].out_blocks) + G - 1) / G;
      for (int ph = 0; ph < 3; ph++)
        for (int b = 0; b < nb; b++)
          for (int r = 0; r < int'(L[l].rows); r++) begin
            int ib, ob;
            ib = b * PIC_WORDS + r * int'(L[l].in_words);
            ob = b * PIC_WORDS + r * ow;
            if (ph == 0)
              for (int w = 0; w < int'(L[l].in_words); w++)
                q.push_back('{OP_FFT, ib + w, -1, -1, ib + w, 0, 0, -1, int'(L[l].fft_scale), 0});
            else if (ph == 1)
              for (int i = 0; i < int'(L[l].out_blocks); i++)
                for (int w = 0; w < int'(L[l].in_words); w++)
                  q.push_back('{OP_MAC, ib + w, int'(L[l].wbase) + i * int'(L[l].in_words) + w,
                                -1, ob + i / G, (i % G == 0) && (w == 0),
                                (w == int'(L[l].in_words) - 1) &&
                                ((i % G == G - 1) || (i == int'(L[l].out_blocks) - 1)),
                                i % G, -1, 0});
            else
              for (int u = 0; u < ow; u++)
                q.push_back('{OP_IFFT, ob + u, -1, int'(L[l].bbase) + u, ob + u, 0, 0, -1,
                              int'(L[l].ifft_scale), L[l].relu});
          end
    end
  endtask

  task automatic cmp(string what, int got, int expv);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 10) $display("op %0d %s: got %0d expected %0d", n_ops, what, got, expv);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (done) done_cnt++;
    if (op_valid) begin
      exp_op_t e;
      if (seen_op && op_kind != prev_kind) begin
        phase_changes++;
        if (gap < min_gap) min_gap = gap;
      end else if (seen_op && gap != 0) begin
        // inside a phase operations are back to back (layer changes show as FFT after IFFT)
        failures++;
        $display("op %0d: bubble of %0d cycles inside a phase", n_ops, gap);
      end
      seen_op = 1;
      prev_kind = op_kind;
      gap = 0;
      if (q.size() == 0) begin
        failures++;
        $display("extra operation");
      end else begin
        e = q.pop_front();
        cmp("kind", int'(op_kind), int'(e.kind));
        cmp("rd", int'(op_rd_addr), e.rd);
        cmp("wr", int'(op_wr_addr), e.wr);
        if (e.kind == OP_MAC) begin
          cmp("w", int'(op_w_addr), e.wa);
          cmp("clr", int'(op_clr), int'(e.clr));
          cmp("last", int'(op_last), int'(e.last));
          cmp("grp", int'(op_grp), e.grp);
        end else begin
          cmp("scale", int'(op_scale), e.scale);
        end
        if (e.kind == OP_IFFT) begin
          cmp("b", int'(op_b_addr), e.ba);
          cmp("relu", int'(op_relu), int'(e.relu));
        end
      end
      n_ops++;
    end else if (seen_op) gap++;
  end

  initial begin
    cfg_we = 0; start = 0; cfg_addr = 0; cfg_wdata = '0; n_layers = 0; batch = 0;
    L[0] = '{log2k: 3'd7, in_words: 8'd2, out_blocks: 10'd3, rows: 8'd1, wbase: 16'd0,
             bbase: 12'd0, relu: 1'b1, fft_scale: 7'h7f, ifft_scale: 7'h3f, mac_shift: 5'd9};
    L[1] = '{log2k: 3'd3, in_words: 8'd1, out_blocks: 10'd19, rows: 8'd2, wbase: 16'd6,
             bbase: 12'd3, relu: 1'b0, fft_scale: 7'h07, ifft_scale: 7'h05, mac_shift: 5'd4};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(l); cfg_wdata = L[l];
    end
    @(negedge clk);
    cfg_we = 0;
    gen(3);
    checks++;
    if (busy) begin failures++; $display("busy before start"); end
    @(negedge clk);
    start = 1; n_layers = 2; batch = 3;
    @(negedge clk);
    start = 0;
    wait (done_cnt == 1);
    repeat (5) @(posedge clk);
    checks += 4;
    if (q.size() != 0) begin failures++; $display("%0d operations missing", q.size()); end
    if (busy) begin failures++; $display("still busy after done"); end
    if (min_gap < DRAIN) begin failures++; $display("drain gap %0d < %0d", min_gap, DRAIN); end
    if (phase_changes != 5) begin failures++; $display("%0d phase changes", phase_changes); end
    $display("ops=%0d phase changes=%0d min drain gap=%0d", n_ops, phase_changes, min_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
