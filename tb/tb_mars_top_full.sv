// tb_mars_top_full: one complete MARS operation on the design at its full
// size (256 subarray pairs with 256 Arithmetic Units and 512 Querying Units,
// 8 sort lanes, 256 rows of 16384 bits per subarray), no parameter changed.
// The run is kept short so that it simulates in minutes:
//   load    1024 database pages: rows 0..3 of subarray 0 of every pair; row 0
//           holds keys (slot s: 1 + s mod 3), rows 1..3 a lookup table
//           (table indices 1..3);
//   event   AU program: copy rows 0..3 into subarray 1 (ACT, WB);
//   hash, vote, bucket  AU programs that only return (HALT);
//   query   every Querying Unit looks the keys of row 0 up in rows 1..3 of
//           its subarray -> row 5 (all hits);
//   sort    lane b sorts the first bkt_len[b] 32-bit words of rows 1.. of
//           pair b into rows 10..: 100 anchors (merger bypass) for lane 0,
//           600 to 1000 anchors (five to eight merged runs) for the others;
//   chain   AU program: copy row 5 to row 20;
//   write   256 result pages, page k = row 20 of pair k.
// Checked: flash addresses, every written page against the lookup done here,
// the sorted rows of all eight lanes, the subarray-1 result rows of pairs 0
// and 255, the step order, the mode switches and the bypass count.
module tb_mars_top_full;
  import mars_pkg::*;
  localparam int NP = N_PAIRS, NL = N_CHANNELS, RB = ROW_BITS;
  localparam int SL = RB / WORD_W, EPR = RB / ELEM_W;
  localparam int DB_LPA = 64, DB_PAGES = 4 * NP, RES_LPA = 9000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid; mars_cmd_e cmd; mars_cfg_t cfg_in;
  logic accel_mode, step_evt, run_done, flush_req, flush_done, ftl_update;
  mars_state_e state;
  logic pba_we; logic [PBAI_W-1:0] pba_waddr; logic [PBA_W-1:0] pba_wdata;
  logic ib_we; logic [AU_PC_W-1:0] ib_addr; au_instr_t ib_data;
  logic fl_rd_valid, fl_rd_ready, fl_rd_data_valid, fl_wr_valid, fl_wr_ready;
  flash_addr_t fl_rd_addr, fl_wr_addr;
  logic [RB-1:0] fl_rd_data, fl_wr_data;
  logic [NL-1:0] lane_bypass, lane_overflow;
  int checks = 0, failures = 0;

  mars_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // database page k lands in pair k mod NP, row k div NP
  function automatic logic [15:0] db_word(input int pair, input int row, input int s);
    if (row == 0) return 16'(1 + s % 3);
    return 16'((pair * 7919 + row * 104729 + s * 31) % 65521);
  endfunction
  function automatic logic [RB-1:0] db_page(input int k);
    logic [RB-1:0] d;
    for (int s = 0; s < SL; s++) d[s*16 +: 16] = db_word(k % NP, k / NP, s);
    return d;
  endfunction

  logic [PBA_W-1:0] list [MAX_PBAS];
  int blen [NL] = '{100, 600, 700, 800, 900, 1000, 640, 777};

  // ---------------- flash model ----------------
  int rd_q [$];
  int cyc = 0, n_rd = 0, n_wr = 0, n_bypass = 0, n_on = 0, n_off = 0;
  logic accel_q = 1'b0;
  mars_state_e seq [$];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    accel_q <= accel_mode;
    if (accel_mode && !accel_q) n_on++;
    if (!accel_mode && accel_q) n_off++;
    n_bypass += $countones(lane_bypass);
    if (step_evt) seq.push_back(state);
    if (fl_rd_valid && fl_rd_ready) begin
      check(fl_rd_addr.lpa == LPA_W'(DB_LPA + n_rd) && fl_rd_addr.ch == CH_W'(n_rd % N_CHANNELS) &&
            fl_rd_addr.pba == list[0] && fl_rd_addr.page == PAGE_W'(n_rd / N_CHANNELS),
            $sformatf("flash read address %0d", n_rd));
      rd_q.push_back(n_rd);
      n_rd++;
    end
    if (fl_wr_valid && fl_wr_ready) begin
      logic [RB-1:0] exp;
      for (int s = 0; s < SL; s++) exp[s*16 +: 16] = db_word(n_wr, 1 + s % 3, s);
      check(fl_wr_addr.lpa == LPA_W'(RES_LPA + n_wr) && fl_wr_addr.ch == CH_W'(n_wr % N_CHANNELS) &&
            fl_wr_addr.pba == list[5 + n_wr / N_CHANNELS / PAGES_PER_BLOCK],
            $sformatf("flash write address %0d", n_wr));
      check(fl_wr_data == exp, $sformatf("result page %0d", n_wr));
      n_wr++;
    end
  end
  always @(negedge clk) begin
    fl_rd_ready = ($urandom_range(0, 3) != 0);
    fl_wr_ready = ($urandom_range(0, 3) != 0);
    fl_rd_data_valid = 0;
    if (rd_q.size() > 0 && $urandom_range(0, 1) == 1) begin
      fl_rd_data_valid = 1;
      fl_rd_data = db_page(rd_q.pop_front());
    end
  end

  // ---------------- DRAM rows seen from outside ----------------
  logic [RB-1:0] sorted [NL][2];
  logic [RB-1:0] sub1_row [2];
  logic snap = 1'b0;
  for (genvar b = 0; b < NL; b++) begin : g_peek
    always @(posedge snap)
      for (int r = 0; r < 2; r++) sorted[b][r] = dut.g_pair[b].u_pair.g_sub[0].u_sa.cells[10 + r];
  end
  always @(posedge snap) begin
    sub1_row[0] = dut.g_pair[0].u_pair.g_sub[1].u_sa.cells[5];
    sub1_row[1] = dut.g_pair[NP-1].u_pair.g_sub[1].u_sa.cells[5];
  end

  function automatic au_instr_t I(au_op_e op, int imm, int w, int sub, int nt);
    au_instr_t x = '0;
    x.op = op; x.use_imm = 1'b1; x.imm = 16'(imm); x.w = 2'(w); x.sub = sub[0];
    x.next_t = AU_PC_W'(nt); x.next_f = AU_PC_W'(nt);
    return x;
  endfunction
  task automatic load(input int a, input au_instr_t x);
    ib_we = 1; ib_addr = AU_PC_W'(a); ib_data = x;
    @(negedge clk);
    ib_we = 0;
  endtask

  task automatic do_cmd(input mars_cmd_e c);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NONE;
  endtask

  int t, e_bypass;
  logic [31:0] ref_a [$];

  initial begin
    cmd_valid = 0; cmd = CMD_NONE; cfg_in = '0; flush_done = 0;
    pba_we = 0; pba_waddr = 0; pba_wdata = 0; ib_we = 0; ib_addr = 0; ib_data = '0;
    fl_rd_ready = 0; fl_wr_ready = 0; fl_rd_data_valid = 0; fl_rd_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < MAX_PBAS; k++) begin
      list[k] = PBA_W'($urandom());
      pba_we = 1; pba_waddr = PBAI_W'(k); pba_wdata = list[k];
      @(negedge clk);
    end
    pba_we = 0;
    // programs: event at 0, the three one-instruction ones at 9, chain at 10
    for (int r = 0; r < 4; r++) begin
      load(2 * r,     I(AU_ACT, r, 0, 0, 2 * r + 1));
      load(2 * r + 1, I(AU_WB,  r, 0, 1, 2 * r + 2));
    end
    load(8,  I(AU_HALT, 0, 0, 0, 8));
    load(9,  I(AU_HALT, 0, 0, 0, 9));
    load(10, I(AU_ACT,  5, 1, 0, 11));
    load(11, I(AU_WB,  20, 1, 0, 12));
    load(12, I(AU_HALT, 0, 0, 0, 12));
    cfg_in.db_start_lpa = DB_LPA; cfg_in.db_pages = DB_PAGES; cfg_in.load_row = 0;
    cfg_in.au_pc[AUS_EVENT] = 0; cfg_in.au_pc[AUS_HASH] = 9; cfg_in.au_pc[AUS_VOTE] = 9;
    cfg_in.au_pc[AUS_BUCKET] = 9; cfg_in.au_pc[AUS_CHAIN] = 10;
    cfg_in.qu_key_row = 0; cfg_in.qu_dst_row = 5; cfg_in.qu_first_row = 1; cfg_in.qu_n_rows = 3;
    cfg_in.qu_key_base = 1;
    cfg_in.bkt_src_row = 1; cfg_in.bkt_dst_row = 10;
    for (int b = 0; b < NL; b++) cfg_in.bkt_len[b] = 16'(blen[b]);
    cfg_in.res_start_lpa = RES_LPA; cfg_in.res_list_base = 5; cfg_in.res_pages = NP; cfg_in.res_row = 20;
    do_cmd(CMD_MARS_INIT);
    repeat (3) @(negedge clk);
    check(flush_req, "metadata flush requested");
    flush_done = 1; @(negedge clk); flush_done = 0;
    t = 0;
    while (state != ST_RESULT && t < 200000) begin @(negedge clk); t++; end
    check(state == ST_RESULT, "run reached the result state");
    $display("computation done after %0d cycles", cyc);
    snap = 1; #1 snap = 0;
    e_bypass = 0;
    for (int b = 0; b < NL; b++) begin
      ref_a = {};
      for (int e = 0; e < blen[b]; e++)
        ref_a.push_back({db_word(b, 1 + e / EPR, 2 * (e % EPR) + 1), db_word(b, 1 + e / EPR, 2 * (e % EPR))});
      ref_a.sort();
      if (blen[b] <= SORT_N) e_bypass += blen[b];
      for (int e = 0; e < blen[b] && e < 2 * EPR; e++)
        check(sorted[b][e / EPR][(e % EPR)*32 +: 32] == ref_a[e], $sformatf("lane %0d sorted anchor %0d", b, e));
    end
    for (int k = 0; k < 2; k++) begin
      logic [RB-1:0] exp;
      for (int s = 0; s < SL; s++) exp[s*16 +: 16] = db_word(k == 0 ? 0 : NP - 1, 1 + s % 3, s);
      check(sub1_row[k] == exp, $sformatf("subarray 1 query result of pair %0d", k == 0 ? 0 : NP - 1));
    end
    do_cmd(CMD_MARS_WRITE);
    while (accel_mode && t < 200000) begin @(negedge clk); t++; end
    @(negedge clk);
    check(n_wr == NP, $sformatf("%0d result pages", n_wr));
    check(n_rd == DB_PAGES, $sformatf("%0d database pages", n_rd));
    check(seq.size() == 12 && seq[0] == ST_FLUSH && seq[4] == ST_QUERY && seq[7] == ST_SORT &&
          seq[11] == ST_DONE, "step order");
    check(n_on == 1 && n_off == 1, "mode switches");
    check(n_bypass == e_bypass, $sformatf("bypass %0d, expected %0d", n_bypass, e_bypass));
    $display("run finished after %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
