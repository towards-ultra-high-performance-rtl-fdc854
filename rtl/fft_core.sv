// fft_core -- the fully parallel, deeply pipelined N-point FFT structure (N = 128).
//
// LOG2N = 7 registered butterfly columns (fft_stage), one per radix-2 stage, as in the
// "FFT Basic Computing Block" of the paper: a new N-lane vector can enter every clock and leaves
// LOG2N clocks later.  Decimation in time: the input of each k-point group must be in
// bit-reversed order inside the group; the output is in natural order.
// Reconfiguration by block size (the recursive property of the FFT): with log2k < LOG2N only the
// first log2k stages act, so the core computes N/k independent k-point FFTs on lane groups
// [g*k, g*k+k).  log2k and the per-stage halving mask scale travel with each vector, so
// consecutive vectors may use different block sizes.
// Interface: in_valid/din/log2k/scale in, out_valid/dout out, latency LOG2N cycles, no stalls.
module fft_core
  import bc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [2:0] log2k,
  input  logic [6:0] scale,
  input  cplx_t      din  [N],
  output logic       out_valid,
  output cplx_t      dout [N]
);

  logic       v  [LOG2N+1];
  logic [2:0] lk [LOG2N+1];
  logic [6:0] sc [LOG2N+1];
  cplx_t      d  [LOG2N+1][N];

  assign v[0]  = in_valid;
  assign lk[0] = log2k;
  assign sc[0] = scale;
  assign d[0]  = din;

  for (genvar s = 1; s <= LOG2N; s++) begin : g_stage
    fft_stage #(.STAGE(s)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v[s-1]),
      .in_log2k (lk[s-1]),
      .in_scale (sc[s-1]),
      .din      (d[s-1]),
      .out_valid(v[s]),
      .out_log2k(lk[s]),
      .out_scale(sc[s]),
      .dout     (d[s])
    );
  end

  assign out_valid = v[LOG2N];
  assign dout      = d[LOG2N];

endmodule
