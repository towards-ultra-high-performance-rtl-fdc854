// tb_block_ram -- self-checking test of the simple dual-port block memory.
//
// Writes a random word to every address of a 64 x 40 memory while reading back the previous
// address in the same cycle, then reads every address again in random order and compares with
// a copy kept here.  Also checks the one-cycle read latency, that rdata holds when re is low,
// and that a read of the address being written returns the old word.
module tb_block_ram;
  localparam int DEPTH = 64, WIDTH = 40, AW = 6;

  logic clk = 0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  block_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  task automatic check(logic [WIDTH-1:0] expv, string what);
    checks++;
    if (rdata !== expv) begin
      failures++;
      $display("%s: got %h expected %h", what, rdata, expv);
    end
  endtask

  initial begin
    int a;
    logic [WIDTH-1:0] old;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom} ; model[i] = wdata;
      re = (i > 0); raddr = AW'(i - 1);
      @(negedge clk);
      we = 0;
      if (i > 0) check(model[i-1], "read behind write");
      re = 0;
    end
    for (int n = 0; n < 3 * DEPTH; n++) begin
      a = int'($urandom_range(DEPTH - 1));
      @(negedge clk);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0;
      check(model[a], "random read");
      @(negedge clk);
      check(model[a], "hold with re low");
    end
    // read during write to the same address returns the old word
    @(negedge clk);
    old = model[5];
    we = 1; waddr = 5; wdata = ~old; model[5] = ~old;
    re = 1; raddr = 5;
    @(negedge clk);
    we = 0; re = 0;
    check(old, "read during write");
    @(negedge clk);
    re = 1;
    @(negedge clk);
    re = 0;
    check(model[5], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
