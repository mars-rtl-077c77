// tb_mars_arith_unit: self-checking test of the Arithmetic Unit with two small
// subarrays (16 rows of 16 sixteen-bit words).
// Two programs are loaded into the instruction buffer:
//  - quantization (entry 0): for every column of subarray 0 row 3,
//    q = clamp(((x - MEAN) * SCALE) >>> SHIFT, 0, LEVELS-1), written to
//    subarray 1 row 5; a counted loop built from the two successor fields;
//  - hashing (entry 20): h = ((x << 2) ^ (x >>> 1)) & 0x0FFF, with bit 15
//    set when x < 0 (a data-dependent branch), written to subarray 0 row 7.
// Results are compared with the same formulas evaluated in the testbench,
// and the quantization run time is checked against its instruction count:
// 9 + 7 * 16 clock edges from start to done.
module tb_mars_arith_unit;
  import mars_pkg::*;
  localparam int ROWS = 16, RB = 256, SL = RB / 16;
  localparam int MEAN = 300, SCALE = 77, SHIFT = 6, LEVELS = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                ib_we, start, busy, done;
  logic [AU_PC_W-1:0]  ib_addr, start_pc;
  au_instr_t           ib_data;
  logic [1:0]          a_req, a_we, rvalid;
  logic [3:0]          a_row;
  logic [RB-1:0]       a_wdata;
  logic [RB-1:0]       rdata [2];
  logic                t_req, t_we, t_sub;
  logic [3:0]          t_row;
  logic [RB-1:0]       t_wdata;
  int checks = 0, failures = 0;

  mars_arith_unit #(.ROWS(ROWS), .ROW_BITS(RB)) dut (
    .clk, .rst_n, .ib_we, .ib_addr, .ib_data, .start, .start_pc, .busy, .done,
    .sa_req(a_req), .sa_we(a_we), .sa_row(a_row), .sa_wdata(a_wdata), .sa_rdata(rdata), .sa_rvalid(rvalid)
  );
  for (genvar s = 0; s < 2; s++) begin : g_sa
    mars_subarray #(.ROWS(ROWS), .ROW_BITS(RB)) u_sa (
      .clk,
      .req  (busy ? a_req[s] : (t_req && t_sub == s)),
      .we   (busy ? a_we[s]  : t_we),
      .row  (busy ? a_row    : t_row),
      .wdata(busy ? a_wdata  : t_wdata),
      .rdata(rdata[s]), .rvalid(rvalid[s])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic au_instr_t I(au_op_e op, int rd, int ra, int rb, bit ui, int imm,
                                  int w, int sub, bit inc, int nt, int nf);
    au_instr_t x;
    x.op = op; x.rd = 3'(rd); x.ra = 3'(ra); x.rb = 3'(rb); x.use_imm = ui; x.imm = 16'(imm);
    x.w = 2'(w); x.sub = sub[0]; x.col_inc = inc; x.next_t = AU_PC_W'(nt); x.next_f = AU_PC_W'(nf);
    return x;
  endfunction

  task automatic load(input int a, input au_instr_t x);
    ib_we = 1; ib_addr = AU_PC_W'(a); ib_data = x;
    @(negedge clk);
    ib_we = 0;
  endtask

  task automatic wr_row(input int sub, input int r, input logic [RB-1:0] d);
    t_req = 1; t_we = 1; t_sub = sub[0]; t_row = 4'(r); t_wdata = d;
    @(negedge clk);
    t_req = 0; t_we = 0;
  endtask

  task automatic rd_row(input int sub, input int r, output logic [RB-1:0] d);
    t_req = 1; t_we = 0; t_sub = sub[0]; t_row = 4'(r);
    @(negedge clk);
    t_req = 0;
    @(negedge clk);
    d = rdata[sub];
  endtask

  task automatic run(input int pc, output int t);
    start = 1; start_pc = AU_PC_W'(pc);
    @(negedge clk);
    start = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
  endtask

  logic signed [15:0] x [SL];
  logic [RB-1:0] row, res;
  int t;

  initial begin
    ib_we = 0; ib_addr = 0; ib_data = '0; start = 0; start_pc = 0;
    t_req = 0; t_we = 0; t_sub = 0; t_row = 0; t_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // quantization program
    load(0,  I(AU_ADD,    1, 0, 0, 1, SL,     0, 0, 0, 1, 1));
    load(1,  I(AU_ADD,    3, 0, 0, 1, SCALE,  0, 0, 0, 2, 2));
    load(2,  I(AU_SETCOL, 0, 0, 0, 1, 0,      0, 0, 0, 3, 3));
    load(3,  I(AU_SETCOL, 0, 0, 0, 1, 0,      1, 0, 0, 4, 4));
    load(4,  I(AU_ACT,    0, 0, 0, 1, 3,      0, 0, 0, 5, 5));
    load(5,  I(AU_RDCOL,  2, 0, 0, 0, 0,      0, 0, 1, 6, 6));
    load(6,  I(AU_SUB,    2, 2, 0, 1, MEAN,   0, 0, 0, 7, 7));
    load(7,  I(AU_MUL,    2, 2, 3, 0, SHIFT,  0, 0, 0, 8, 8));
    load(8,  I(AU_MAX,    2, 2, 0, 1, 0,      0, 0, 0, 9, 9));
    load(9,  I(AU_MIN,    2, 2, 0, 1, LEVELS-1, 0, 0, 0, 10, 10));
    load(10, I(AU_WRCOL,  0, 2, 0, 0, 0,      1, 0, 1, 11, 11));
    load(11, I(AU_SUB,    1, 1, 0, 1, 1,      0, 0, 0, 5, 12));
    load(12, I(AU_WB,     0, 0, 0, 1, 5,      1, 1, 0, 13, 13));
    load(13, I(AU_HALT,   0, 0, 0, 0, 0,      0, 0, 0, 13, 13));
    // hashing program
    load(20, I(AU_ADD,    1, 0, 0, 1, SL,     0, 0, 0, 21, 21));
    load(21, I(AU_SETCOL, 0, 0, 0, 1, 0,      0, 0, 0, 22, 22));
    load(22, I(AU_SETCOL, 0, 0, 0, 1, 0,      2, 0, 0, 23, 23));
    load(23, I(AU_ACT,    0, 0, 0, 1, 3,      0, 0, 0, 24, 24));
    load(24, I(AU_RDCOL,  2, 0, 0, 0, 0,      0, 0, 1, 25, 25));
    load(25, I(AU_SHL,    4, 2, 0, 1, 2,      0, 0, 0, 26, 26));
    load(26, I(AU_SHRA,   5, 2, 0, 1, 1,      0, 0, 0, 27, 27));
    load(27, I(AU_XOR,    4, 4, 5, 0, 0,      0, 0, 0, 28, 28));
    load(28, I(AU_AND,    4, 4, 0, 1, 'h0FFF, 0, 0, 0, 29, 29));
    load(29, I(AU_CMPLT,  6, 2, 0, 1, 0,      0, 0, 0, 30, 31));
    load(30, I(AU_OR,     4, 4, 0, 1, 'h8000, 0, 0, 0, 31, 31));
    load(31, I(AU_WRCOL,  0, 4, 0, 0, 0,      2, 0, 1, 32, 32));
    load(32, I(AU_SUB,    1, 1, 0, 1, 1,      0, 0, 0, 24, 33));
    load(33, I(AU_WB,     0, 0, 0, 1, 7,      2, 0, 0, 34, 34));
    load(34, I(AU_HALT,   0, 0, 0, 0, 0,      0, 0, 0, 34, 34));

    for (int s = 0; s < SL; s++) begin
      x[s] = 16'($urandom_range(0, 1200)) - 16'sd500;
      row[s*16 +: 16] = x[s];
    end
    wr_row(0, 3, row);

    run(0, t);
    check(t == 9 + 7 * SL, $sformatf("quantization took %0d edges", t));
    rd_row(1, 5, res);
    for (int s = 0; s < SL; s++) begin
      logic signed [31:0] p;
      logic signed [15:0] d, q;
      d = x[s] - 16'sd300;
      p = d * 32'sd77;
      q = 16'(p >>> SHIFT);
      if (q < 0) q = 0;
      if (q > LEVELS - 1) q = LEVELS - 1;
      check(res[s*16 +: 16] == q, $sformatf("quant col %0d x=%0d got %0d exp %0d", s, x[s], res[s*16 +: 16], q));
    end

    run(20, t);
    rd_row(0, 7, res);
    for (int s = 0; s < SL; s++) begin
      logic [15:0] h;
      h = ((16'(x[s]) << 2) ^ 16'(x[s] >>> 1)) & 16'h0FFF;
      if (x[s] < 0) h = h | 16'h8000;
      check(res[s*16 +: 16] == h, $sformatf("hash col %0d got %h exp %h", s, res[s*16 +: 16], h));
    end
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
