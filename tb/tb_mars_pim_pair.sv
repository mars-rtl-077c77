// tb_mars_pim_pair: self-checking test of one subarray pair with its
// Arithmetic Unit and two Querying Units (16 rows of 8 sixteen-bit words).
//  1 the external port writes a key row (row 1) and a four-row lookup table
//    (rows 4..7, table indices 10..13) into subarray 0 and reads them back;
//  2 an Arithmetic Unit program copies these five rows into subarray 1
//    (ACT from subarray 0, WB into subarray 1); its run time must be
//    17 clock edges (two per ACT, one per WB, one each for start and HALT);
//  3 both Querying Units run the same query (keys of row 1 against rows 4..7)
//    at once and write row 9 of their own subarray; their busy time is
//    checked against n_rows + 5;
//  4 a second AU program copies subarray 1's result row into subarray 0
//    row 10; both result rows are read through the external port and
//    compared with the lookup done here (unmatched keys give all ones).
// The arbitration assertion in the pair checks that at most one unit drives
// a subarray in every cycle.
module tb_mars_pim_pair;
  import mars_pkg::*;
  localparam int ROWS = 16, RB = 128, SL = RB / WORD_W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               ib_we, au_start, au_busy, qu_start, qu_busy;
  logic [AU_PC_W-1:0] ib_addr, au_pc;
  au_instr_t          ib_data;
  logic [3:0]         qu_key_row, qu_dst_row, qu_first_row;
  logic [4:0]         qu_n_rows;
  logic [WORD_W-1:0]  qu_key_base;
  logic               ext_req, ext_we, ext_rvalid;
  logic [3:0]         ext_row;
  logic [RB-1:0]      ext_wdata, ext_rdata;
  int checks = 0, failures = 0;

  mars_pim_pair #(.ROWS(ROWS), .ROW_BITS(RB)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic au_instr_t I(au_op_e op, int w, int sub, int imm, int nt);
    au_instr_t x = '0;
    x.op = op; x.w = 2'(w); x.sub = sub[0]; x.use_imm = 1'b1; x.imm = 16'(imm);
    x.next_t = AU_PC_W'(nt); x.next_f = AU_PC_W'(nt);
    return x;
  endfunction

  task automatic load(input int a, input au_instr_t x);
    ib_we = 1; ib_addr = AU_PC_W'(a); ib_data = x;
    @(negedge clk);
    ib_we = 0;
  endtask

  task automatic wr_row(input int r, input logic [RB-1:0] d);
    ext_req = 1; ext_we = 1; ext_row = 4'(r); ext_wdata = d;
    @(negedge clk);
    ext_req = 0; ext_we = 0;
  endtask

  task automatic rd_row(input int r, output logic [RB-1:0] d);
    ext_req = 1; ext_we = 0; ext_row = 4'(r);
    @(negedge clk);
    ext_req = 0;
    check(ext_rvalid, "external read valid after one cycle");
    d = ext_rdata;
  endtask

  task automatic run_au(input int pc, output int t);
    au_start = 1; au_pc = AU_PC_W'(pc);
    @(negedge clk);
    au_start = 0;
    t = 1;
    while (au_busy && t < 500) begin @(negedge clk); t++; end
  endtask

  logic [RB-1:0] keys, row, table_r [4];
  int t, k;
  logic [WORD_W-1:0] exp;

  initial begin
    ib_we = 0; ib_addr = 0; ib_data = '0; au_start = 0; au_pc = 0;
    qu_start = 0; qu_key_row = 0; qu_dst_row = 0; qu_first_row = 0; qu_n_rows = 0; qu_key_base = 0;
    ext_req = 0; ext_we = 0; ext_row = 0; ext_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1: data through the external port
    for (int s = 0; s < SL; s++) keys[s*WORD_W +: WORD_W] = WORD_W'($urandom_range(8, 15));
    wr_row(1, keys);
    for (int i = 0; i < 4; i++) begin
      for (int s = 0; s < SL; s++) table_r[i][s*WORD_W +: WORD_W] = WORD_W'($urandom());
      wr_row(4 + i, table_r[i]);
    end
    rd_row(1, row); check(row == keys, "key row readback");
    for (int i = 0; i < 4; i++) begin rd_row(4 + i, row); check(row == table_r[i], "table row readback"); end
    // 2: AU copies rows 1, 4..7 from subarray 0 to subarray 1
    begin
      int rs [5] = '{1, 4, 5, 6, 7};
      for (int k = 0; k < 5; k++) begin
        load(2 * k,     I(AU_ACT, 0, 0, rs[k], 2 * k + 1));
        load(2 * k + 1, I(AU_WB,  0, 1, rs[k], 2 * k + 2));
      end
      load(10, I(AU_HALT, 0, 0, 0, 10));
    end
    run_au(0, t);
    check(t == 17, $sformatf("copy program took %0d edges, expected 17", t));
    // 3: both Querying Units
    qu_key_row = 1; qu_dst_row = 9; qu_first_row = 4; qu_n_rows = 4; qu_key_base = 10;
    qu_start = 1;
    @(negedge clk);
    qu_start = 0;
    t = 1;
    while (qu_busy && t < 500) begin @(negedge clk); t++; end
    check(t == 4 + 5, $sformatf("query took %0d edges, expected %0d", t, 4 + 5));
    // 4: bring subarray 1's result row to subarray 0 row 10
    load(20, I(AU_ACT, 1, 1, 9, 21));
    load(21, I(AU_WB, 1, 0, 10, 22));
    load(22, I(AU_HALT, 0, 0, 0, 22));
    run_au(20, t);
    check(t == 5, $sformatf("result copy took %0d edges, expected 5", t));
    for (int r = 0; r < 2; r++) begin
      rd_row(r == 0 ? 9 : 10, row);
      for (int s = 0; s < SL; s++) begin
        k = keys[s*WORD_W +: WORD_W];
        exp = (k >= 10 && k <= 13) ? table_r[k - 10][s*WORD_W +: WORD_W] : '1;
        check(row[s*WORD_W +: WORD_W] == exp, $sformatf("subarray %0d result slot %0d (key %0d)", r, s, k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
