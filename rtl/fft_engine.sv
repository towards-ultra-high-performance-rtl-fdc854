// fft_engine -- the basic computing block shared by phase 1 (FFT) and phase 3 (IFFT).
//
// One fft_core is time-multiplexed between the two directions.  A memory word holds N 12-bit
// values; with block size k = 2**log2k it carries N/k blocks, block g in values [g*k, g*k+k).
//
// FFT mode (phase 1): the N real values of a word are placed, per block, in bit-reversed order
// with zero imaginary part and transformed.  Because the inputs are real, the spectrum of a
// block is conjugate-symmetric, so only its first half is kept ("half-spectrum word"): in the
// k values of block g, values 2m and 2m+1 hold Re and Im of bin m for 1 <= m < k/2, and values
// 0 and 1 hold Re of bin 0 and Re of bin k/2 (both bins are real).  Latency LOG2N = 7 cycles.
//
// IFFT mode (phase 3): a pre-processing stage rebuilds the full spectrum of every block from its
// half and conjugates it, IFFT(Y) being conj(FFT(conj(Y)))/k; after the core only the real part
// is needed, which conjugation leaves alone.  A post stage adds the bias and applies ReLU when
// relu is set.  Latency LOG2N + 2 = 9 cycles.  The bias word is not carried along the pipeline:
// it must be presented on `bias` in the cycle the vector leaves the core, 8 cycles after din.
//
// From the paper: IFFT on the FFT structure through a pre-processing step, the two extra
// stages (pre-processing; bias and ReLU), storing only half of each real spectrum, small FFTs
// in parallel inside the large structure.  Chosen here: the packing of bins 0 and k/2, the
// bias timing, and that a direction change needs the pipeline empty (the controller drains it
// between phases; an assertion checks it).
// The assertion block reads rst_n synchronously so that it stays quiet during reset; lint
// reports rst_n as used both asynchronously and synchronously, which is harmless here since
// that block holds no state.
module fft_engine
  import bc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       inverse,    // 0: FFT (phase 1), 1: IFFT (phase 3)
  input  logic [2:0] log2k,      // 1..7
  input  logic [6:0] scale,      // per-stage halving enables
  input  logic       relu,       // IFFT only
  input  sample_t    din  [N],
  input  sample_t    bias [N],   // IFFT only, aligned with the core output
  output logic       out_valid,
  output sample_t    dout [N]
);

  // ---------------------------------------------------------------- input arrangements
  // For every block size, the core input for the FFT (real word) and for the IFFT
  // (conjugated, rebuilt spectrum), both bit-reversed inside each block.
  cplx_t fwd_in [LOG2N+1][N];
  cplx_t inv_in [LOG2N+1][N];

  function automatic int bitrev(int x, int bits);
    int r;
    r = 0;
    for (int i = 0; i < bits; i++) if (((x >> i) & 1) != 0) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  assign fwd_in[0] = '{default: '0};
  assign inv_in[0] = '{default: '0};

  for (genvar L = 1; L <= LOG2N; L++) begin : g_arr
    localparam int K = 1 << L;
    for (genvar l = 0; l < N; l++) begin : g_lane
      localparam int G  = l / K;
      localparam int F  = bitrev(l % K, L);   // bin (or time index) placed in this lane
      localparam int B0 = G * K;
      assign fwd_in[L][l] = '{re: din[B0 + F], im: '0};
      if (F == 0) begin : g_b0
        assign inv_in[L][l] = '{re: din[B0], im: '0};
      end else if (F == K / 2) begin : g_bh
        assign inv_in[L][l] = '{re: din[B0 + 1], im: '0};
      end else if (F < K / 2) begin : g_lo
        // conj of stored bin F
        assign inv_in[L][l] = '{re: din[B0 + 2*F], im: sat_dw(-32'(din[B0 + 2*F + 1]))};
      end else begin : g_hi
        // bin F = conj(bin K-F); conjugated again for the IFFT
        assign inv_in[L][l] = '{re: din[B0 + 2*(K-F)], im: din[B0 + 2*(K-F) + 1]};
      end
    end
  end

  // ---------------------------------------------------------------- pre-processing stage
  logic       pre_valid;
  logic [2:0] pre_log2k;
  logic [6:0] pre_scale;
  logic       pre_relu;
  cplx_t      pre_data [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_valid <= 1'b0;
      pre_log2k <= '0;
      pre_scale <= '0;
      pre_relu  <= 1'b0;
    end else begin
      pre_valid <= in_valid && inverse;
      pre_log2k <= log2k;
      pre_scale <= scale;
      pre_relu  <= relu;
    end
  end

  always_ff @(posedge clk) begin
    pre_data <= inv_in[log2k];
  end

  // ---------------------------------------------------------------- core
  logic       core_in_valid, core_out_valid, fwd_now;
  logic [2:0] core_log2k;
  logic [6:0] core_scale;
  cplx_t      core_din [N], core_dout [N];

  assign fwd_now       = in_valid && !inverse;
  assign core_in_valid = fwd_now || pre_valid;
  assign core_log2k    = fwd_now ? log2k : pre_log2k;
  assign core_scale    = fwd_now ? scale : pre_scale;
  assign core_din      = fwd_now ? fwd_in[log2k] : pre_data;

  fft_core u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (core_in_valid),
    .log2k    (core_log2k),
    .scale    (core_scale),
    .din      (core_din),
    .out_valid(core_out_valid),
    .dout     (core_dout)
  );

  // Side pipeline: direction, block size and ReLU of the vector inside the core.
  logic       sp_inv  [LOG2N];
  logic       sp_relu [LOG2N];
  logic [2:0] sp_lk   [LOG2N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_inv  <= '{default: 1'b0};
      sp_relu <= '{default: 1'b0};
      sp_lk   <= '{default: '0};
    end else begin
      sp_inv[0]  <= pre_valid;
      sp_relu[0] <= pre_relu;
      sp_lk[0]   <= core_log2k;
      for (int s = 1; s < LOG2N; s++) begin
        sp_inv[s]  <= sp_inv[s-1];
        sp_relu[s] <= sp_relu[s-1];
        sp_lk[s]   <= sp_lk[s-1];
      end
    end
  end

  // ---------------------------------------------------------------- FFT output packing
  sample_t pack [LOG2N+1][N];
  assign pack[0] = '{default: '0};

  for (genvar L = 1; L <= LOG2N; L++) begin : g_pack
    localparam int K = 1 << L;
    for (genvar l = 0; l < N; l++) begin : g_lane
      localparam int B0 = (l / K) * K;
      localparam int P  = l % K;
      if (P == 0) begin : g_b0
        assign pack[L][l] = core_dout[B0].re;
      end else if (P == 1) begin : g_bh
        assign pack[L][l] = core_dout[B0 + K/2].re;
      end else if (P % 2 == 0) begin : g_re
        assign pack[L][l] = core_dout[B0 + P/2].re;
      end else begin : g_im
        assign pack[L][l] = core_dout[B0 + P/2].im;
      end
    end
  end

  // ---------------------------------------------------------------- bias and ReLU stage
  logic    post_valid;
  sample_t post_data [N];
  sample_t post_nxt  [N];

  always_comb begin
    for (int l = 0; l < N; l++) begin
      post_nxt[l] = sat_dw(32'(core_dout[l].re) + 32'(bias[l]));
      if (sp_relu[LOG2N-1] && post_nxt[l] < 0) post_nxt[l] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) post_valid <= 1'b0;
    else        post_valid <= core_out_valid && sp_inv[LOG2N-1];
  end

  always_ff @(posedge clk) begin
    post_data <= post_nxt;
  end

  // ---------------------------------------------------------------- output
  logic fwd_out;
  assign fwd_out   = core_out_valid && !sp_inv[LOG2N-1];
  assign out_valid = fwd_out || post_valid;
  assign dout      = fwd_out ? pack[sp_lk[LOG2N-1]] : post_data;

  // A forward vector may not enter while an inverse one waits in the pre-processing stage,
  // and the two outputs never meet.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_collision_in:  assert (!(fwd_now && pre_valid))
        else $error("forward vector entered while an inverse one was in pre-processing");
      a_no_collision_out: assert (!(fwd_out && post_valid))
        else $error("forward and inverse results left the engine together");
    end
  end

endmodule
