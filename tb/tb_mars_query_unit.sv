// tb_mars_query_unit: self-checking test of the Querying Unit with a small
// subarray (16 rows of 8 sixteen-bit slots).
// The testbench writes a lookup table into rows 4..11 (table indices
// key_base .. key_base+7; row r holds 1000*r + slot in each slot, so a wrong
// slot or row is visible), writes a key row with hits and misses, runs a
// query and reads back the result row. Expected values are computed from the
// table definition. Two queries with different key_base are run, and the
// start-to-done time is checked: n_rows + 5 clock edges.
module tb_mars_query_unit;
  localparam int ROWS = 16, RB = 128, SL = RB / 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start, busy, done;
  logic [3:0]    key_row, dst_row, first_row;
  logic [4:0]    n_rows;
  logic [15:0]   key_base;
  logic          q_req, q_we, t_req, t_we, s_req, s_we, rvalid;
  logic [3:0]    q_row, t_row, s_row;
  logic [RB-1:0] q_wdata, t_wdata, s_wdata, rdata;
  int checks = 0, failures = 0;

  mars_query_unit #(.ROWS(ROWS), .ROW_BITS(RB)) dut (
    .clk, .rst_n, .start, .key_row, .dst_row, .first_row, .n_rows, .key_base, .busy, .done,
    .sa_req(q_req), .sa_we(q_we), .sa_row(q_row), .sa_wdata(q_wdata), .sa_rdata(rdata), .sa_rvalid(rvalid)
  );
  assign s_req   = busy ? q_req   : t_req;
  assign s_we    = busy ? q_we    : t_we;
  assign s_row   = busy ? q_row   : t_row;
  assign s_wdata = busy ? q_wdata : t_wdata;
  mars_subarray #(.ROWS(ROWS), .ROW_BITS(RB)) u_sa (
    .clk, .req(s_req), .we(s_we), .row(s_row), .wdata(s_wdata), .rdata, .rvalid
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_row(input int r, input logic [RB-1:0] d);
    t_req = 1; t_we = 1; t_row = 4'(r); t_wdata = d;
    @(negedge clk);
    t_req = 0; t_we = 0;
  endtask

  task automatic rd_row(input int r, output logic [RB-1:0] d);
    t_req = 1; t_we = 0; t_row = 4'(r);
    @(negedge clk);
    t_req = 0;
    @(negedge clk);
    d = rdata;
  endtask

  task automatic run_query(input int base);
    logic [15:0]   keys [SL];
    logic [RB-1:0] kr, res;
    int            t;
    for (int s = 0; s < SL; s++) keys[s] = 16'(base - 3 + $urandom_range(0, 13));
    keys[0] = 16'(base);        // first table entry
    keys[1] = 16'(base + 7);    // last table entry
    keys[2] = 16'(base + 8);    // just past the table
    for (int s = 0; s < SL; s++) kr[s*16 +: 16] = keys[s];
    wr_row(1, kr);
    key_row <= 1; dst_row <= 2; first_row <= 4; n_rows <= 8; key_base <= 16'(base);
    start <= 1;
    @(negedge clk);
    start <= 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    check(t == 8 + 5, $sformatf("query took %0d edges", t));
    @(negedge clk);
    rd_row(2, res);
    for (int s = 0; s < SL; s++) begin
      logic [15:0] e;
      int k = int'(keys[s]);
      e = (k >= base && k < base + 8) ? 16'(1000 * (4 + k - base) + s) : 16'hFFFF;
      check(res[s*16 +: 16] == e, $sformatf("slot %0d key %0d got %0d exp %0d", s, k, res[s*16 +: 16], e));
    end
  endtask

  initial begin
    start = 0; t_req = 0; t_we = 0; t_row = 0; t_wdata = 0;
    key_row = 0; dst_row = 0; first_row = 0; n_rows = 1; key_base = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      logic [RB-1:0] d;
      for (int s = 0; s < SL; s++) d[s*16 +: 16] = 16'(1000 * r + s);
      wr_row(r, d);
    end
    run_query(100);
    run_query(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
