// fft_stage -- one registered column of radix-2 decimation-in-time butterflies.
//
// Stage STAGE (1..LOG2N) pairs lanes that are H = 2**(STAGE-1) apart inside groups of 2**STAGE
// lanes.  For the pair (top, top+H) with m = top mod H:
//     t = bot * exp(-j*2*pi*m / 2**STAGE)
//     top' = top + t,  bot' = top - t
// each result optionally halved (rounded) to keep the sum inside DW bits, then saturated.
// When the stage is not enabled (STAGE > log2k of the vector in flight) the lanes pass through
// unchanged, which is what lets N/k independent k-point FFTs share the N-point structure.
// Interface: one vector in, one vector out one clock later; the per-vector controls
// (valid, log2k, scale) travel with the data.  Rounding and the scaling option are choices of
// this design; the paper only gives the register-separated butterfly columns (its Fig. 4).
module fft_stage
  import bc_pkg::*;
#(
  parameter int STAGE = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [2:0] in_log2k,
  input  logic [6:0] in_scale,
  input  cplx_t      din  [N],
  output logic       out_valid,
  output logic [2:0] out_log2k,
  output logic [6:0] out_scale,
  output cplx_t      dout [N]
);

  localparam int H = 1 << (STAGE - 1);

  logic  active, halve;
  cplx_t nxt [N];

  assign active = (int'(in_log2k) >= STAGE);
  assign halve  = in_scale[STAGE-1];

  for (genvar b = 0; b < N / 2; b++) begin : g_bfly
    localparam int M   = b % H;
    localparam int TOP = (b / H) * 2 * H + M;
    localparam int BOT = TOP + H;
    localparam logic signed [TW-1:0] WR = tw_re(M, 2 * H);
    localparam logic signed [TW-1:0] WI = tw_im(M, 2 * H);

    logic signed [31:0] pr, pi, tr, ti, sr, si, dr, di;

    always_comb begin
      pr = 32'(din[BOT].re) * 32'(WR) - 32'(din[BOT].im) * 32'(WI);
      pi = 32'(din[BOT].re) * 32'(WI) + 32'(din[BOT].im) * 32'(WR);
      tr = (pr + (32'sd1 <<< (TWF - 1))) >>> TWF;
      ti = (pi + (32'sd1 <<< (TWF - 1))) >>> TWF;
      sr = 32'(din[TOP].re) + tr;
      si = 32'(din[TOP].im) + ti;
      dr = 32'(din[TOP].re) - tr;
      di = 32'(din[TOP].im) - ti;
      if (halve) begin
        sr = (sr + 32'sd1) >>> 1;
        si = (si + 32'sd1) >>> 1;
        dr = (dr + 32'sd1) >>> 1;
        di = (di + 32'sd1) >>> 1;
      end
      if (active) begin
        nxt[TOP] = '{re: sat_dw(sr), im: sat_dw(si)};
        nxt[BOT] = '{re: sat_dw(dr), im: sat_dw(di)};
      end else begin
        nxt[TOP] = din[TOP];
        nxt[BOT] = din[BOT];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_log2k <= '0;
      out_scale <= '0;
    end else begin
      out_valid <= in_valid;
      out_log2k <= in_log2k;
      out_scale <= in_scale;
    end
  end

  // Data registers carry no reset: only valid-qualified values are ever used.
  always_ff @(posedge clk) begin
    dout <= nxt;
  end

endmodule
