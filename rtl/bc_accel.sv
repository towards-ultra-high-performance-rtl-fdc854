// bc_accel -- block-circulant DNN inference accelerator (top level).
//
// Every layer computes y = relu(W x + b) where W (m x n) is cut into k x k circulant blocks
// C_ij, each defined by one vector w_ij, so that
//     a_i = IFFT( sum_j FFT(w_ij) o FFT(x_j) )
// The spectra FFT(w_ij) are computed offline and stored; FFT(x_j) is computed once per input
// block and reused for every i; the sum is taken in the frequency domain so there is one IFFT
// per output block.  The three phases run on shared hardware:
//   phase 1  feature memory -> fft_engine (FFT)          -> spectrum buffer
//   phase 2  spectrum buffer, weight memory -> emac_unit  -> accumulation buffer
//   phase 3  accumulation buffer -> fft_engine (IFFT, bias from bias memory, ReLU)
//            -> feature memory, in place of the layer's inputs
// bc_ctrl sequences layers, phases, the pictures of a batch and the blocks, one operation per
// clock, and drains the pipeline between phases.  The whole model and all intermediate data
// stay in on-chip memories (block_ram).
//
// Pipeline of one operation issued by the controller in cycle t (op_* registered = memory
// stage 1): memory read data in t+1 (stage 2); FFT result in t+8, IFFT result in t+10 (the
// IFFT adds a pre-processing and a bias/ReLU stage), MAC result in t+3; result registered
// (stage 3) and written (stage 4) one cycle later.  So an FFT takes 7 + 4 cycles and an IFFT
// 9 + 4 from issue to memory, as the paper gives for its 128-point block.
//
// Host interface (only while busy is low): host_we writes host_wdata to word host_addr of the
// memory chosen by host_sel (0 feature, 1 weight spectra, 2 bias); host_re reads a feature word,
// host_rdata valid the next cycle.  Layer records are written through cfg_*; start runs
// n_layers layers on batch pictures; done pulses at the end.
// Memory sizes are this design's choice (the paper gives only ">2 MB on chip", "50-100 pictures"
// per batch and "several KB" per picture); see the parameters.
// The assertion block reads rst_n synchronously so that it stays quiet during reset; lint
// reports rst_n as used both asynchronously and synchronously, which is harmless here since
// that block holds no state.
module bc_accel
  import bc_pkg::*;
#(
  parameter int MAX_LAYERS = 16,
  parameter int BATCH      = 64,      // pictures per batch (paper: around 50-100)
  parameter int PIC_WORDS  = 32,      // words of N values per picture (6 KB)
  parameter int WDEPTH     = 2048,    // weight-spectrum words (2048 x 128 values)
  parameter int BDEPTH     = 256      // bias words
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host load / readback
  input  logic                          host_we,
  input  logic [1:0]                    host_sel,
  input  logic [15:0]                   host_addr,
  input  sample_t                       host_wdata [N],
  input  logic                          host_re,
  input  logic [15:0]                   host_raddr,
  output sample_t                       host_rdata [N],
  // layer table
  input  logic                          cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_addr,
  input  layer_cfg_t                    cfg_wdata,
  // run control
  input  logic                          start,
  input  logic [$clog2(MAX_LAYERS):0]   n_layers,
  input  logic [$clog2(BATCH):0]        batch,
  output logic                          busy,
  output logic                          done
);

  localparam int WORD  = N * DW;
  localparam int FDEPTH = BATCH * PIC_WORDS;
  localparam int FAW   = $clog2(FDEPTH);
  localparam int WAW   = $clog2(WDEPTH);
  localparam int BAW   = $clog2(BDEPTH);
  localparam int DRAIN = LOG2N + 7;      // longest issue-to-write distance (IFFT) + margin
  localparam int DL    = LOG2N + 3;      // delay line length for result addresses (IFFT: 10)

  typedef logic [WORD-1:0] word_t;

  function automatic word_t to_word(sample_t v [N]);
    word_t r;
    for (int l = 0; l < N; l++) r[l*DW +: DW] = v[l];
    return r;
  endfunction

  function automatic void from_word(word_t w, output sample_t v [N]);
    for (int l = 0; l < N; l++) v[l] = sample_t'(w[l*DW +: DW]);
  endfunction

  // ---------------------------------------------------------------- controller
  logic       op_valid, op_relu, op_clr, op_last;
  op_e        op_kind;
  logic [2:0] op_log2k;
  logic [6:0] op_scale, op_grp;
  logic [4:0] op_shift;
  logic [15:0] op_rd_addr, op_w_addr, op_b_addr, op_wr_addr;

  bc_ctrl #(
    .MAX_LAYERS(MAX_LAYERS), .BATCH(BATCH), .PIC_WORDS(PIC_WORDS), .DRAIN(DRAIN), .AW(16)
  ) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .start, .n_layers, .batch, .busy, .done,
    .op_valid, .op_kind, .op_log2k, .op_scale, .op_relu, .op_shift, .op_clr, .op_last,
    .op_grp, .op_rd_addr, .op_w_addr, .op_b_addr, .op_wr_addr
  );

  // ---------------------------------------------------------------- memories
  logic  feat_we, feat_re, spec_we, spec_re, acc_we, acc_re, w_we, w_re, b_we, b_re;
  logic [FAW-1:0] feat_waddr, feat_raddr, spec_waddr, spec_raddr, acc_waddr, acc_raddr;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [BAW-1:0] b_waddr, b_raddr;
  word_t feat_wdata, feat_rdata, spec_wdata, spec_rdata, acc_wdata, acc_rdata;
  word_t w_wdata, w_rdata, b_wdata, b_rdata;

  block_ram #(.DEPTH(FDEPTH), .WIDTH(WORD)) u_feat (
    .clk, .we(feat_we), .waddr(feat_waddr), .wdata(feat_wdata),
    .re(feat_re), .raddr(feat_raddr), .rdata(feat_rdata));
  block_ram #(.DEPTH(FDEPTH), .WIDTH(WORD)) u_spec (
    .clk, .we(spec_we), .waddr(spec_waddr), .wdata(spec_wdata),
    .re(spec_re), .raddr(spec_raddr), .rdata(spec_rdata));
  block_ram #(.DEPTH(FDEPTH), .WIDTH(WORD)) u_acc (
    .clk, .we(acc_we), .waddr(acc_waddr), .wdata(acc_wdata),
    .re(acc_re), .raddr(acc_raddr), .rdata(acc_rdata));
  block_ram #(.DEPTH(WDEPTH), .WIDTH(WORD)) u_wmem (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata));
  block_ram #(.DEPTH(BDEPTH), .WIDTH(WORD)) u_bmem (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
    .re(b_re), .raddr(b_raddr), .rdata(b_rdata));

  // ---------------------------------------------------------------- stage 2: read data
  logic       s2_valid, s2_relu, s2_clr, s2_last;
  op_e        s2_kind;
  logic [2:0] s2_log2k;
  logic [6:0] s2_scale, s2_grp;
  logic [4:0] s2_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_kind  <= OP_FFT;
      s2_relu  <= 1'b0;
      s2_clr   <= 1'b0;
      s2_last  <= 1'b0;
      s2_log2k <= '0;
      s2_scale <= '0;
      s2_grp   <= '0;
      s2_shift <= '0;
    end else begin
      s2_valid <= op_valid;
      s2_kind  <= op_kind;
      s2_relu  <= op_relu;
      s2_clr   <= op_clr;
      s2_last  <= op_last;
      s2_log2k <= op_log2k;
      s2_scale <= op_scale;
      s2_grp   <= op_grp;
      s2_shift <= op_shift;
    end
  end

  // ---------------------------------------------------------------- compute units
  sample_t eng_din [N], eng_bias [N], eng_dout [N];
  sample_t mac_x [N], mac_w [N], mac_dout [N];
  logic    eng_valid, eng_out_valid, mac_valid, mac_out_valid;

  assign eng_valid = s2_valid && (s2_kind != OP_MAC);
  assign mac_valid = s2_valid && (s2_kind == OP_MAC);

  always_comb begin
    from_word((s2_kind == OP_FFT) ? feat_rdata : acc_rdata, eng_din);
    from_word(b_rdata, eng_bias);
    from_word(spec_rdata, mac_x);
    from_word(w_rdata, mac_w);
  end

  fft_engine u_engine (
    .clk, .rst_n,
    .in_valid (eng_valid),
    .inverse  (s2_kind == OP_IFFT),
    .log2k    (s2_log2k),
    .scale    (s2_scale),
    .relu     (s2_relu),
    .din      (eng_din),
    .bias     (eng_bias),
    .out_valid(eng_out_valid),
    .dout     (eng_dout)
  );

  emac_unit u_emac (
    .clk, .rst_n,
    .in_valid (mac_valid),
    .log2k    (s2_log2k),
    .clr      (s2_clr),
    .last     (s2_last),
    .grp      (s2_grp),
    .shift    (s2_shift),
    .x        (mac_x),
    .wt       (mac_w),
    .out_valid(mac_out_valid),
    .dout     (mac_dout)
  );

  // Result addresses and bias read addresses travel in delay lines indexed by cycles since
  // issue: tap d holds what was issued d cycles ago.
  logic [15:0] wa_dl [1:DL];
  logic [15:0] ba_dl [1:8];
  logic        bv_dl [1:8];
  op_e         kind_dl [1:DL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wa_dl   <= '{default: '0};
      ba_dl   <= '{default: '0};
      bv_dl   <= '{default: 1'b0};
      kind_dl <= '{default: OP_FFT};
    end else begin
      wa_dl[1]   <= op_wr_addr;
      kind_dl[1] <= op_kind;
      ba_dl[1]   <= op_b_addr;
      bv_dl[1]   <= op_valid && (op_kind == OP_IFFT);
      for (int d = 2; d <= DL; d++) begin
        wa_dl[d]   <= wa_dl[d-1];
        kind_dl[d] <= kind_dl[d-1];
      end
      for (int d = 2; d <= 8; d++) begin
        ba_dl[d] <= ba_dl[d-1];
        bv_dl[d] <= bv_dl[d-1];
      end
    end
  end

  // ---------------------------------------------------------------- stage 3: result register
  logic        r_valid;
  op_e         r_kind;
  logic [15:0] r_addr;
  word_t       r_data;
  logic [15:0] res_addr;
  op_e         res_kind;
  logic        res_valid;

  always_comb begin
    res_valid = 1'b0;
    res_kind  = OP_FFT;
    res_addr  = '0;
    if (mac_out_valid) begin
      res_valid = 1'b1;
      res_kind  = OP_MAC;
      res_addr  = wa_dl[3];
    end else if (eng_out_valid) begin
      res_valid = 1'b1;
      res_kind  = kind_dl[LOG2N + 1] == OP_FFT ? OP_FFT : OP_IFFT;
      res_addr  = (res_kind == OP_FFT) ? wa_dl[LOG2N + 1] : wa_dl[LOG2N + 3];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      r_kind  <= OP_FFT;
      r_addr  <= '0;
    end else begin
      r_valid <= res_valid;
      r_kind  <= res_kind;
      r_addr  <= res_addr;
    end
  end

  always_ff @(posedge clk) begin
    r_data <= to_word(mac_out_valid ? mac_dout : eng_dout);
  end

  // ---------------------------------------------------------------- stage 4: memory ports
  always_comb begin
    // feature memory: phase-1 reads, phase-3 writes, host access while idle
    feat_re    = (op_valid && op_kind == OP_FFT) || (!busy && host_re);
    feat_raddr = busy ? FAW'(op_rd_addr) : FAW'(host_raddr);
    feat_we    = (r_valid && r_kind == OP_IFFT) || (!busy && host_we && host_sel == 2'd0);
    feat_waddr = busy ? FAW'(r_addr) : FAW'(host_addr);
    feat_wdata = busy ? r_data : to_word(host_wdata);

    spec_we    = r_valid && r_kind == OP_FFT;
    spec_waddr = FAW'(r_addr);
    spec_wdata = r_data;
    spec_re    = op_valid && op_kind == OP_MAC;
    spec_raddr = FAW'(op_rd_addr);

    acc_we     = r_valid && r_kind == OP_MAC;
    acc_waddr  = FAW'(r_addr);
    acc_wdata  = r_data;
    acc_re     = op_valid && op_kind == OP_IFFT;
    acc_raddr  = FAW'(op_rd_addr);

    w_we       = !busy && host_we && host_sel == 2'd1;
    w_waddr    = WAW'(host_addr);
    w_wdata    = to_word(host_wdata);
    w_re       = op_valid && op_kind == OP_MAC;
    w_raddr    = WAW'(op_w_addr);

    b_we       = !busy && host_we && host_sel == 2'd2;
    b_waddr    = BAW'(host_addr);
    b_wdata    = to_word(host_wdata);
    b_re       = bv_dl[8];
    b_raddr    = BAW'(ba_dl[8]);
  end

  always_comb from_word(feat_rdata, host_rdata);

  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_one_result: assert (!(mac_out_valid && eng_out_valid))
        else $error("MAC and engine results in the same cycle");
    end
  end

endmodule
