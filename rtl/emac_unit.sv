// emac_unit -- phase 2: element-wise products FFT(w_ij) o FFT(x_j), summed over j.
//
// Inputs are two half-spectrum words (see fft_engine for the layout): x carries the spectra of
// the N/k input blocks j = w*G .. w*G+G-1 held in input word w (G = N/k), and wt carries
// FFT(w_ij) of the same G blocks for one output block i.  Each of the N/2 complex lanes is
// multiplied; the first lane of every block holds the two real bins 0 and k/2 and is
// multiplied component-wise.  A fold tree then adds the G block products of the word together
// (lane c plus lane c + len/2 while len > k/2), giving the sum over those G values of j.  The
// k/2-lane result is added into lane group `grp` (= i mod G) of the accumulator, which holds one
// output word (G output blocks).  The accumulator keeps the frequency-domain sum, so a single
// IFFT per output block follows in phase 3.
// clr zeroes the accumulator before this operation adds in; last emits the accumulator, shifted
// right by `shift` with rounding and saturated to 12 bits, as a half-spectrum word.
// Timing: products are registered (1 cycle), accumulation and output registered (1 cycle):
// out_valid follows an operation carrying `last` by 2 cycles.  One operation per cycle.
// From the paper: the element-wise multiplications and additions of phase 2, pipelined, and
// summation before the IFFT.  Chosen here: the fold tree, accumulator width and output shift.
module emac_unit
  import bc_pkg::*;
#(
  parameter int ACC_W = 40
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [2:0] log2k,
  input  logic       clr,
  input  logic       last,
  input  logic [6:0] grp,
  input  logic [4:0] shift,
  input  sample_t    x  [N],
  input  sample_t    wt [N],
  output logic       out_valid,
  output sample_t    dout [N]
);

  localparam int NC = N / 2;

  typedef logic signed [ACC_W-1:0] acc_t;

  // ---------------------------------------------------------------- stage 1: products
  logic       s1_valid, s1_clr, s1_last;
  logic [2:0] s1_lk;
  logic [6:0] s1_grp;
  logic [4:0] s1_shift;
  acc_t       p_re [NC], p_im [NC];
  acc_t       p_re_n [NC], p_im_n [NC];

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      acc_t xr, xi, wr, wi;
      xr = ACC_W'(x[2*c]);
      xi = ACC_W'(x[2*c+1]);
      wr = ACC_W'(wt[2*c]);
      wi = ACC_W'(wt[2*c+1]);
      // first lane of a block: bins 0 and k/2, both real
      if ((c & ((1 << (int'(log2k) - 1)) - 1)) == 0) begin
        p_re_n[c] = xr * wr;
        p_im_n[c] = xi * wi;
      end else begin
        p_re_n[c] = xr * wr - xi * wi;
        p_im_n[c] = xr * wi + xi * wr;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_clr   <= 1'b0;
      s1_last  <= 1'b0;
      s1_lk    <= '0;
      s1_grp   <= '0;
      s1_shift <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_clr   <= clr;
      s1_last  <= last;
      s1_lk    <= log2k;
      s1_grp   <= grp;
      s1_shift <= shift;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      p_re <= p_re_n;
      p_im <= p_im_n;
    end
  end

  // ---------------------------------------------------------------- stage 2: fold, accumulate
  acc_t f_re [NC], f_im [NC];
  acc_t acc_re [NC], acc_im [NC];
  acc_t nxt_re [NC], nxt_im [NC];
  int   half_k;

  always_comb begin
    half_k = 1 << (int'(s1_lk) - 1);
    f_re = p_re;
    f_im = p_im;
    for (int len = NC; len > 1; len = len / 2) begin
      if (half_k < len) begin
        for (int c = 0; c < len / 2; c++) begin
          f_re[c] = f_re[c] + f_re[c + len/2];
          f_im[c] = f_im[c] + f_im[c + len/2];
        end
      end
    end
    for (int c = 0; c < NC; c++) begin
      nxt_re[c] = s1_clr ? '0 : acc_re[c];
      nxt_im[c] = s1_clr ? '0 : acc_im[c];
      if ((c >> (int'(s1_lk) - 1)) == int'(s1_grp)) begin
        nxt_re[c] = nxt_re[c] + f_re[c & (half_k - 1)];
        nxt_im[c] = nxt_im[c] + f_im[c & (half_k - 1)];
      end
    end
  end

  function automatic sample_t scale_out(acc_t v, logic [4:0] sh);
    acc_t r;
    r = v;
    if (sh != 0) r = (v + (acc_t'(1) <<< (sh - 1))) >>> sh;
    if (r > acc_t'((1 << (DW - 1)) - 1)) return sample_t'((1 << (DW - 1)) - 1);
    if (r < -acc_t'(1 << (DW - 1)))      return sample_t'(-(1 << (DW - 1)));
    return sample_t'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid && s1_last;
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      acc_re <= nxt_re;
      acc_im <= nxt_im;
    end
    if (s1_valid && s1_last) begin
      for (int c = 0; c < NC; c++) begin
        dout[2*c]   <= scale_out(nxt_re[c], s1_shift);
        dout[2*c+1] <= scale_out(nxt_im[c], s1_shift);
      end
    end
  end

endmodule
