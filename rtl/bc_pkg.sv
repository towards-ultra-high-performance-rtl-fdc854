// bc_pkg -- shared constants and types of the block-circulant DNN accelerator.
//
// The accelerator evaluates every layer y = relu(Wx + b) with W made of k x k circulant
// blocks, as IFFT( sum_j FFT(w_ij) o FFT(x_j) ).  One FFT structure of N points processes a
// whole memory word per cycle.  A memory word always holds N consecutive 12-bit values of a
// vector, whatever the block size k of the layer: with k < N one word carries N/k blocks and
// the FFT structure runs N/k small FFTs side by side.
//
// Taken from the paper: the 128-point FFT structure, 12-bit precision, the three phases and the
// per-layer block size.  Chosen here: the layer record below (its fields and widths), the
// twiddle format and the per-stage scaling schedule.
package bc_pkg;

  // FFT points of the basic computing block and its number of butterfly stages.
  localparam int N      = 128;
  localparam int LOG2N  = 7;
  // Data precision of values held in memory (real values and spectrum components).
  localparam int DW     = 12;
  // Twiddle factors: signed TW bits, 1.0 is 2**TWF.
  localparam int TW     = 12;
  localparam int TWF    = 10;

  typedef logic signed [DW-1:0] sample_t;
  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Saturate a wide signed value to DW bits.
  function automatic sample_t sat_dw(logic signed [31:0] x);
    localparam logic signed [31:0] MAXV = (32'sd1 <<< (DW - 1)) - 32'sd1;
    localparam logic signed [31:0] MINV = -(32'sd1 <<< (DW - 1));
    if (x > MAXV)      return sample_t'(MAXV);
    else if (x < MINV) return sample_t'(MINV);
    else               return sample_t'(x);
  endfunction

  // Twiddle exp(-j*2*pi*m/n) in TW-bit fixed point, rounded to nearest.
  function automatic logic signed [TW-1:0] tw_re(int m, int n);
    real a;
    a = 2.0 * 3.14159265358979323846 * real'(m) / real'(n);
    return TW'($rtoi($floor($cos(a) * real'(1 << TWF) + 0.5)));
  endfunction
  function automatic logic signed [TW-1:0] tw_im(int m, int n);
    real a;
    a = 2.0 * 3.14159265358979323846 * real'(m) / real'(n);
    return TW'($rtoi($floor(-$sin(a) * real'(1 << TWF) + 0.5)));
  endfunction

  // Operation kinds of the three phases.
  typedef enum logic [1:0] {
    OP_FFT  = 2'd0,   // phase 1: FFT(x_j)
    OP_MAC  = 2'd1,   // phase 2: sum_j FFT(w_ij) o FFT(x_j)
    OP_IFFT = 2'd2    // phase 3: IFFT, bias and ReLU
  } op_e;

  // Per-layer configuration, written by the host before a run.
  typedef struct packed {
    logic [2:0]  log2k;       // block size k = 2**log2k, 1..7
    logic [7:0]  in_words;    // input length in words of N values (= n/N rounded up)
    logic [9:0]  out_blocks;  // p, number of output blocks of k values
    logic [7:0]  rows;        // vectors per picture (1 for FC, im2col rows for CONV)
    logic [15:0] wbase;       // first word of this layer in the weight-spectrum memory
    logic [11:0] bbase;       // first word of this layer in the bias memory
    logic        relu;        // apply ReLU after the bias
    logic [6:0]  fft_scale;   // per-stage divide-by-2 enables of the forward FFT
    logic [6:0]  ifft_scale;  // per-stage divide-by-2 enables of the IFFT
    logic [4:0]  mac_shift;   // right shift of the phase-2 accumulator before storing
  } layer_cfg_t;

  // Output words of a layer: p blocks of k values, N/k blocks per word.
  function automatic logic [9:0] out_words(layer_cfg_t c);
    logic [10:0] g_m1;
    g_m1 = 11'((1 << (LOG2N - int'(c.log2k))) - 1);
    return 10'((11'(c.out_blocks) + g_m1) >> (LOG2N - int'(c.log2k)));
  endfunction

endpackage
