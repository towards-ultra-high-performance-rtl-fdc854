// block_ram -- simple dual-port on-chip block memory (one write port, one read port).
//
// The accelerator keeps the whole model and all intermediate data on chip; every buffer is an
// instance of this memory: the in-place feature memory, the spectrum buffer of FFT(x_j), the
// accumulation buffer, the weight-spectrum memory FFT(w_ij) and the bias memory.  One word is
// WIDTH bits (N values of 12 bits in the accelerator).
// Timing: a write happens at the clock edge where we is high.  A read is synchronous: rdata
// holds the word addressed by raddr one cycle after re (block-RAM style output register);
// reading the address being written returns the old word.  No reset of the contents.
// The paper names on-chip block memory; ports, timing and read-during-write are this design's.
module block_ram #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 1536,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
