// tb_mars_subarray: self-checking test of the DRAM subarray model (16 rows of
// 64 bits). Writes a distinct pattern to every row, then activates the rows
// in random order and checks that the row buffer shows the row's data with
// rvalid one cycle after the request, that writes raise no rvalid, and that a
// rewrite replaces the old contents.
module tb_mars_subarray;
  localparam int ROWS = 16, RB = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic          req, we, rvalid;
  logic [3:0]    row;
  logic [RB-1:0] wdata, rdata;
  logic [RB-1:0] model [ROWS];
  int checks = 0, failures = 0;

  mars_subarray #(.ROWS(ROWS), .ROW_BITS(RB)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int r, input logic [RB-1:0] d);
    req = 1; we = 1; row = 4'(r); wdata = d;
    model[r] = d;
    @(negedge clk);
    req = 0; we = 0;
    check(!rvalid, "no rvalid after write");
  endtask

  task automatic rd(input int r);
    req = 1; we = 0; row = 4'(r);
    @(negedge clk);
    req = 0;
    check(rvalid, "rvalid one cycle after activation");
    check(rdata == model[r], $sformatf("row %0d data", r));
  endtask

  initial begin
    req = 0; we = 0; row = 0; wdata = 0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) wr(r, {$urandom(), $urandom()});
    for (int i = 0; i < 40; i++) rd($urandom_range(0, ROWS - 1));
    wr(5, 64'h0123_4567_89ab_cdef);
    rd(5);
    @(negedge clk);
    check(!rvalid, "rvalid low when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
