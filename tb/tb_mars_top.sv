// tb_mars_top: end-to-end test of the MARS datapath at reduced size: 8 subarray
// pairs (8 Arithmetic Units, 16 Querying Units), 8 sort lanes, 64 DRAM rows of
// 512 bits per subarray and two merger run buffers per lane.
// The testbench plays the host (MARS_Init, MARS_Write), the FTL firmware
// (flush handshake, PBA list, Arithmetic Unit programs) and the flash
// controllers (random acceptance, a few cycles of read latency, page store).
// One full run goes through every step with real data:
//   load    280 database pages land round robin in subarray 0 of the pairs:
//           a raw-signal row (row 0), a six-row lookup table (rows 2..7) and
//           pre-bucketed anchors (rows 17..34);
//   event   AU program: q = clamp(((x - MEAN) * SCALE) >>> SHIFT, 0, 7) -> row 12;
//   hash    AU program: h = (5q + 3) mod 8 -> key row 13 of both subarrays,
//           and the table copied to subarray 1;
//   query   every Querying Unit looks up the 32 keys of row 13 in rows 2..7
//           (keys 6 and 7 are not in the table and must miss) -> row 14;
//   vote    AU program: counts the hits of row 14 and compares the count with
//           the voting threshold -> row 15, words 0 and 1;
//   bucket  AU program: turns slot e of row 14 into anchor {value, e} (a miss
//           into the all-ones padding anchor) -> row 16, the first row of the
//           pair's bucket;
//   sort    lane b sorts bucket b (16 to 300 anchors) into rows 40..;
//   chain   AU program (loaded while the lanes sort): a reduced chaining
//           score over the first 16 sorted anchors -> word 0 of row 60;
//   write   MARS_Write sends row 60 of every pair to flash.
// Every intermediate row of every pair is compared with a reference model of
// the same arithmetic, and the written pages with the expected results.
// Mechanisms counted, each must occur: both mode switches, the metadata
// flush, every step, flash read and write stalls, sorter input stalls,
// Querying-Unit hits and misses, merger bypass and merger overflow (exact
// counts expected for the last two). The query step time is checked against
// n_rows + 5 plus the control unit's launch cycle.
module tb_mars_top;
  import mars_pkg::*;
  localparam int NP = 8, NL = 8, ROWS = 64, RB = 512, MR = 2;
  localparam int SL = RB / WORD_W, EPR = RB / ELEM_W;
  localparam int MEAN = 100, SCALE = 5, SHIFT = 6, TVOTE = 5;
  localparam int DB_LPA = 1000, DB_PAGES = 35 * NP, RES_LPA = 5000;
  localparam int SRC = 16, DST = 40, RES = 60, NQ = 6;
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

  mars_top #(.N_PAIRS_P(NP), .N_LANES(NL), .ROWS(ROWS), .ROW_BITS_P(RB), .MAX_RUNS(MR)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- DRAM contents seen from outside ----------------
  logic [RB-1:0] mem0 [NP][ROWS];
  logic [RB-1:0] mem1 [NP][ROWS];
  logic snap = 1'b0;
  for (genvar p = 0; p < NP; p++) begin : g_peek
    always @(posedge snap)
      for (int r = 0; r < ROWS; r++) begin
        mem0[p][r] = dut.g_pair[p].u_pair.g_sub[0].u_sa.cells[r];
        mem1[p][r] = dut.g_pair[p].u_pair.g_sub[1].u_sa.cells[r];
      end
  end

  // ---------------- database ----------------
  logic [RB-1:0] init_row [NP][35];
  int            blen [NL] = '{16, 300, 200, 100, 129, 256, 57, 17};
  logic [PBA_W-1:0] list [MAX_PBAS];

  function automatic logic [15:0] w16(input logic [RB-1:0] r, input int s);
    return r[s*16 +: 16];
  endfunction

  // ---------------- flash model ----------------
  logic [31:0] rd_q [$];
  int          rd_t [$];
  int          cyc = 0, n_rd = 0, n_wr = 0;
  logic [RB-1:0] written [NP];
  int n_rd_stall = 0, n_wr_stall = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (fl_rd_valid && !fl_rd_ready) n_rd_stall++;
    if (fl_wr_valid && !fl_wr_ready) n_wr_stall++;
    if (fl_rd_valid && fl_rd_ready) begin
      check(fl_rd_addr.lpa == LPA_W'(DB_LPA + n_rd) && fl_rd_addr.ch == CH_W'(n_rd % N_CHANNELS) &&
            fl_rd_addr.pba == list[n_rd / N_CHANNELS / PAGES_PER_BLOCK] &&
            fl_rd_addr.page == PAGE_W'((n_rd / N_CHANNELS) % PAGES_PER_BLOCK),
            $sformatf("flash read address %0d", n_rd));
      rd_q.push_back(fl_rd_addr.lpa);
      rd_t.push_back(cyc + $urandom_range(2, 5));
      n_rd++;
    end
    if (fl_wr_valid && fl_wr_ready) begin
      check(fl_wr_addr.lpa == LPA_W'(RES_LPA + n_wr) && fl_wr_addr.ch == CH_W'(n_wr % N_CHANNELS) &&
            fl_wr_addr.pba == list[10], $sformatf("flash write address %0d", n_wr));
      if (n_wr < NP) written[n_wr] = fl_wr_data;
      n_wr++;
    end
  end

  always @(negedge clk) begin
    int k;
    fl_rd_ready = ($urandom_range(0, 3) != 0);
    fl_wr_ready = ($urandom_range(0, 2) != 0);
    fl_rd_data_valid = 0;
    if (rd_q.size() > 0 && rd_t[0] <= cyc) begin
      k = rd_q.pop_front() - DB_LPA;
      void'(rd_t.pop_front());
      fl_rd_data_valid = 1;
      fl_rd_data = init_row[k % NP][k / NP];
    end
  end

  // ---------------- mechanism counters ----------------
  int n_accel_on = 0, n_accel_off = 0, n_flush = 0, n_bypass = 0, n_overflow = 0;
  int n_sort_stall = 0, n_ftl = 0;
  int bp_lane [NL] = '{default: 0};
  logic accel_q = 0;
  mars_state_e seq [$];
  int          seq_t [$];
  always @(posedge clk) if (rst_n) begin
    accel_q <= accel_mode;
    if (accel_mode && !accel_q) n_accel_on++;
    if (!accel_mode && accel_q) n_accel_off++;
    if (flush_req && flush_done) n_flush++;
    n_bypass   += $countones(lane_bypass);
    for (int b = 0; b < NL; b++) if (lane_bypass[b]) bp_lane[b]++;
    n_overflow += $countones(lane_overflow);
    if (dut.g_lane[1].u_lane.s_in_valid && !dut.g_lane[1].u_lane.s_in_ready) n_sort_stall++;
    if (ftl_update) n_ftl++;
    if (step_evt) begin seq.push_back(state); seq_t.push_back(cyc); end
  end

  // ---------------- Arithmetic Unit programs ----------------
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

  // Column pointers start at 0 and every loop below steps a pointer through
  // a whole row (32 words), so it is back at 0 for the next program.
  task automatic load_programs();
    // event (0): quantization of row 0 into row 12
    load(0,  I(AU_ADD,   1, 0, 0, 1, SL,    0, 0, 0, 1, 1));
    load(1,  I(AU_ADD,   3, 0, 0, 1, SCALE, 0, 0, 0, 2, 2));
    load(2,  I(AU_ACT,   0, 0, 0, 1, 0,     0, 0, 0, 3, 3));
    load(3,  I(AU_RDCOL, 2, 0, 0, 0, 0,     0, 0, 1, 4, 4));
    load(4,  I(AU_SUB,   2, 2, 0, 1, MEAN,  0, 0, 0, 5, 5));
    load(5,  I(AU_MUL,   2, 2, 3, 0, SHIFT, 0, 0, 0, 6, 6));
    load(6,  I(AU_MAX,   2, 2, 0, 1, 0,     0, 0, 0, 7, 7));
    load(7,  I(AU_MIN,   2, 2, 0, 1, 7,     0, 0, 0, 8, 8));
    load(8,  I(AU_WRCOL, 0, 2, 0, 0, 0,     1, 0, 1, 9, 9));
    load(9,  I(AU_SUB,   1, 1, 0, 1, 1,     0, 0, 0, 3, 10));
    load(10, I(AU_WB,    0, 0, 0, 1, 12,    1, 0, 0, 11, 11));
    load(11, I(AU_HALT,  0, 0, 0, 0, 0,     0, 0, 0, 11, 11));
    // hash (12): h = (5q + 3) & 7 into row 13 of both subarrays; copy table
    load(12, I(AU_ADD,   1, 0, 0, 1, SL,    0, 0, 0, 13, 13));
    load(13, I(AU_ACT,   0, 0, 0, 1, 12,    0, 0, 0, 14, 14));
    load(14, I(AU_RDCOL, 2, 0, 0, 0, 0,     0, 0, 1, 15, 15));
    load(15, I(AU_SHL,   4, 2, 0, 1, 2,     0, 0, 0, 16, 16));
    load(16, I(AU_ADD,   4, 4, 2, 0, 0,     0, 0, 0, 17, 17));
    load(17, I(AU_ADD,   4, 4, 0, 1, 3,     0, 0, 0, 18, 18));
    load(18, I(AU_AND,   4, 4, 0, 1, 7,     0, 0, 0, 19, 19));
    load(19, I(AU_WRCOL, 0, 4, 0, 0, 0,     1, 0, 1, 20, 20));
    load(20, I(AU_SUB,   1, 1, 0, 1, 1,     0, 0, 0, 14, 21));
    load(21, I(AU_WB,    0, 0, 0, 1, 13,    1, 0, 0, 22, 22));
    load(22, I(AU_WB,    0, 0, 0, 1, 13,    1, 1, 0, 23, 23));
    load(23, I(AU_ADD,   7, 0, 0, 1, 2,     0, 0, 0, 24, 24));
    load(24, I(AU_ACT,   0, 7, 0, 1, 0,     2, 0, 0, 25, 25));
    load(25, I(AU_WB,    0, 7, 0, 1, 0,     2, 1, 0, 26, 26));
    load(26, I(AU_ADD,   7, 7, 0, 1, 1,     0, 0, 0, 27, 27));
    load(27, I(AU_CMPLT, 6, 7, 0, 1, 2 + NQ, 0, 0, 0, 24, 28));
    load(28, I(AU_HALT,  0, 0, 0, 0, 0,     0, 0, 0, 28, 28));
    // vote (29): hits of row 14, threshold compare, into row 15
    load(29, I(AU_ADD,   1, 0, 0, 1, SL,    0, 0, 0, 30, 30));
    load(30, I(AU_ADD,   5, 0, 0, 1, 0,     0, 0, 0, 31, 31));
    load(31, I(AU_ACT,   0, 0, 0, 1, 14,    0, 0, 0, 32, 32));
    load(32, I(AU_RDCOL, 2, 0, 0, 0, 0,     0, 0, 1, 33, 33));
    load(33, I(AU_CMPEQ, 4, 2, 0, 1, 'hFFFF, 0, 0, 0, 35, 34));
    load(34, I(AU_ADD,   5, 5, 0, 1, 1,     0, 0, 0, 35, 35));
    load(35, I(AU_SUB,   1, 1, 0, 1, 1,     0, 0, 0, 32, 36));
    load(36, I(AU_CMPLT, 6, 5, 0, 1, TVOTE, 0, 0, 0, 37, 37));
    load(37, I(AU_SETCOL, 0, 0, 0, 1, 0,    2, 0, 0, 38, 38));
    load(38, I(AU_WRCOL, 0, 5, 0, 0, 0,     2, 0, 1, 39, 39));
    load(39, I(AU_WRCOL, 0, 6, 0, 0, 0,     2, 0, 1, 40, 40));
    load(40, I(AU_WB,    0, 0, 0, 1, 15,    2, 0, 0, 41, 41));
    load(41, I(AU_HALT,  0, 0, 0, 0, 0,     0, 0, 0, 41, 41));
    // bucket (42): anchors {value, slot} of row 14 into row 16
    load(42, I(AU_ADD,   1, 0, 0, 1, EPR,   0, 0, 0, 43, 43));
    load(43, I(AU_ADD,   3, 0, 0, 1, 0,     0, 0, 0, 44, 44));
    load(44, I(AU_ADD,   6, 0, 0, 1, 'hFFFF, 0, 0, 0, 45, 45));
    load(45, I(AU_ACT,   0, 0, 0, 1, 14,    0, 0, 0, 46, 46));
    load(46, I(AU_RDCOL, 2, 0, 0, 0, 0,     0, 0, 1, 47, 47));
    load(47, I(AU_CMPEQ, 4, 2, 0, 1, 'hFFFF, 0, 0, 0, 50, 48));
    load(48, I(AU_WRCOL, 0, 3, 0, 0, 0,     1, 0, 1, 49, 49));
    load(49, I(AU_WRCOL, 0, 2, 0, 0, 0,     1, 0, 1, 52, 52));
    load(50, I(AU_WRCOL, 0, 6, 0, 0, 0,     1, 0, 1, 51, 51));
    load(51, I(AU_WRCOL, 0, 6, 0, 0, 0,     1, 0, 1, 52, 52));
    load(52, I(AU_ADD,   3, 3, 0, 1, 1,     0, 0, 0, 53, 53));
    load(53, I(AU_SUB,   1, 1, 0, 1, 1,     0, 0, 0, 46, 54));
    load(54, I(AU_WB,    0, 0, 0, 1, SRC,   1, 0, 0, 55, 55));
    load(55, I(AU_HALT,  0, 0, 0, 0, 0,     0, 0, 0, 55, 55));
  endtask

  // chain (0, loaded during the sort step): over the first 16 sorted anchors,
  // count those that are not padding and whose low half exceeds the previous
  // anchor's low half (signed); score -> word 0 of row 60
  task automatic load_chain();
    load(0,  I(AU_SETCOL, 0, 0, 0, 1, 0,    0, 0, 0, 1, 1));
    load(1,  I(AU_ADD,   1, 0, 0, 1, EPR - 1, 0, 0, 0, 2, 2));
    load(2,  I(AU_ADD,   5, 0, 0, 1, 0,     0, 0, 0, 3, 3));
    load(3,  I(AU_ACT,   0, 0, 0, 1, DST,   0, 0, 0, 4, 4));
    load(4,  I(AU_RDCOL, 3, 0, 0, 0, 0,     0, 0, 1, 5, 5));
    load(5,  I(AU_RDCOL, 0, 0, 0, 0, 0,     0, 0, 1, 6, 6));
    load(6,  I(AU_RDCOL, 2, 0, 0, 0, 0,     0, 0, 1, 7, 7));
    load(7,  I(AU_RDCOL, 4, 0, 0, 0, 0,     0, 0, 1, 8, 8));
    load(8,  I(AU_CMPEQ, 6, 4, 0, 1, 'hFFFF, 0, 0, 0, 11, 9));
    load(9,  I(AU_CMPLT, 6, 3, 2, 0, 0,     0, 0, 0, 10, 11));
    load(10, I(AU_ADD,   5, 5, 0, 1, 1,     0, 0, 0, 11, 11));
    load(11, I(AU_ADD,   3, 2, 0, 1, 0,     0, 0, 0, 12, 12));
    load(12, I(AU_SUB,   1, 1, 0, 1, 1,     0, 0, 0, 6, 13));
    load(13, I(AU_SETCOL, 0, 0, 0, 1, 0,    1, 0, 0, 14, 14));
    load(14, I(AU_WRCOL, 0, 5, 0, 0, 0,     1, 0, 0, 15, 15));
    load(15, I(AU_WB,    0, 0, 0, 1, RES,   1, 0, 0, 16, 16));
    load(16, I(AU_HALT,  0, 0, 0, 0, 0,     0, 0, 0, 16, 16));
  endtask

  // ---------------- reference model ----------------
  logic [RB-1:0] e_q [NP], e_h [NP], e_res [NP], e_anch [NP], e_out [NP];
  logic [31:0]   e_sorted [NL][$];
  int            e_votes [NP], e_score [NP], e_hits = 0, e_miss = 0, e_bypass = 0, e_overflow = 0;

  task automatic reference();
    for (int p = 0; p < NP; p++) begin
      logic [31:0] b [$];
      e_votes[p] = 0;
      for (int s = 0; s < SL; s++) begin
        logic signed [15:0] x, d, q;
        logic signed [31:0] pr;
        logic [15:0] h, v;
        x  = w16(init_row[p][0], s);
        d  = x - 16'(MEAN);
        pr = d * 32'sd5;
        q  = 16'(pr >>> SHIFT);
        if (q < 0) q = 0;
        if (q > 7) q = 7;
        h  = ((q << 2) + q + 3) & 16'h7;
        v  = (h < NQ) ? w16(init_row[p][2 + h], s) : 16'hFFFF;
        e_q[p][s*16 +: 16] = q;
        e_h[p][s*16 +: 16] = h;
        e_res[p][s*16 +: 16] = v;
        if (v != 16'hFFFF) begin e_votes[p]++; e_hits++; end else e_miss++;
      end
      for (int e = 0; e < EPR; e++)
        e_anch[p][e*32 +: 32] = (w16(e_res[p], e) == 16'hFFFF) ? 32'hFFFF_FFFF : {w16(e_res[p], e), 16'(e)};
      if (p < NL) begin
        for (int e = 0; e < blen[p]; e++)
          b.push_back(e < EPR ? e_anch[p][e*32 +: 32] : init_row[p][17 + (e - EPR) / EPR][((e - EPR) % EPR)*32 +: 32]);
        // merger passes of MR runs of SORT_N anchors, each sorted on its own
        for (int lo = 0; lo < b.size(); lo += MR * SORT_N) begin
          logic [31:0] seg [$];
          for (int i = lo; i < b.size() && i < lo + MR * SORT_N; i++) seg.push_back(b[i]);
          seg.sort();
          foreach (seg[i]) e_sorted[p].push_back(seg[i]);
        end
        if (blen[p] <= SORT_N) e_bypass += blen[p];
        if (blen[p] > MR * SORT_N) e_overflow += (blen[p] - 1) / (MR * SORT_N);
        begin
          logic signed [15:0] prev, lo16, hi16;
          e_score[p] = 0;
          prev = e_sorted[p][0][15:0];
          for (int e = 1; e < EPR; e++) begin
            lo16 = e_sorted[p][e][15:0];
            hi16 = e_sorted[p][e][31:16];
            if (hi16 != 16'hFFFF && prev < lo16) e_score[p]++;
            prev = lo16;
          end
        end
        e_out[p] = e_anch[p];
        e_out[p][15:0] = 16'(e_score[p]);
      end
    end
  endtask

  task automatic do_cmd(input mars_cmd_e c);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NONE;
  endtask

  int t;
  logic [RB-1:0] row;

  initial begin
    cmd_valid = 0; cmd = CMD_NONE; cfg_in = '0; flush_done = 0;
    pba_we = 0; pba_waddr = 0; pba_wdata = 0; ib_we = 0; ib_addr = 0; ib_data = '0;
    fl_rd_ready = 0; fl_wr_ready = 0; fl_rd_data_valid = 0; fl_rd_data = '0;
    // database rows
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < 35; r++)
        for (int s = 0; s < SL; s++)
          init_row[p][r][s*16 +: 16] = (r == 0) ? 16'($urandom_range(60, 220)) : 16'($urandom_range(0, 16'hFFFE));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < MAX_PBAS; k++) begin
      list[k] = PBA_W'($urandom());
      pba_we = 1; pba_waddr = PBAI_W'(k); pba_wdata = list[k];
      @(negedge clk);
    end
    pba_we = 0;
    load_programs();
    reference();
    cfg_in.db_start_lpa = DB_LPA;  cfg_in.db_start_page = 0; cfg_in.db_list_base = 0;
    cfg_in.db_pages = DB_PAGES;    cfg_in.load_row = 0;
    cfg_in.au_pc[AUS_EVENT] = 0;   cfg_in.au_pc[AUS_HASH] = 12; cfg_in.au_pc[AUS_VOTE] = 29;
    cfg_in.au_pc[AUS_BUCKET] = 42; cfg_in.au_pc[AUS_CHAIN] = 0;
    cfg_in.qu_key_row = 13; cfg_in.qu_dst_row = 14; cfg_in.qu_first_row = 2;
    cfg_in.qu_n_rows = NQ;  cfg_in.qu_key_base = 0;
    cfg_in.bkt_src_row = SRC; cfg_in.bkt_dst_row = DST;
    for (int b = 0; b < NL; b++) cfg_in.bkt_len[b] = 16'(blen[b]);
    cfg_in.res_start_lpa = RES_LPA; cfg_in.res_list_base = 10; cfg_in.res_pages = NP; cfg_in.res_row = RES;
    check(!accel_mode, "conventional mode after reset");
    do_cmd(CMD_MARS_INIT);
    repeat (4) @(negedge clk);
    check(flush_req && state == ST_FLUSH, "metadata flush before loading");
    flush_done = 1; @(negedge clk); flush_done = 0;
    t = 0;
    while (state != ST_SORT && t < 20000) begin @(negedge clk); t++; end
    load_chain();
    while (state != ST_RESULT && t < 40000) begin @(negedge clk); t++; end
    check(state == ST_RESULT, "run reached the result state");
    snap = 1; #1 snap = 0;
    for (int p = 0; p < NP; p++) begin
      check(mem0[p][12] == e_q[p], $sformatf("pair %0d quantized row", p));
      check(mem0[p][13] == e_h[p] && mem1[p][13] == e_h[p], $sformatf("pair %0d key rows", p));
      check(mem0[p][14] == e_res[p], $sformatf("pair %0d query result, subarray 0", p));
      check(mem1[p][14] == e_res[p], $sformatf("pair %0d query result, subarray 1", p));
      check(w16(mem0[p][15], 0) == 16'(e_votes[p]) && w16(mem0[p][15], 1) == 16'(e_votes[p] < TVOTE),
            $sformatf("pair %0d votes", p));
      check(mem0[p][SRC] == e_anch[p], $sformatf("pair %0d anchors", p));
      if (p < NL) begin
        for (int e = 0; e < blen[p]; e++)
          check(mem0[p][DST + e / EPR][(e % EPR)*32 +: 32] == e_sorted[p][e],
                $sformatf("lane %0d sorted anchor %0d", p, e));
        check(mem0[p][RES] == e_out[p], $sformatf("pair %0d chaining result (score %0d)", p, e_score[p]));
      end
    end
    do_cmd(CMD_MARS_WRITE);
    while (accel_mode && t < 40000) begin @(negedge clk); t++; end
    @(negedge clk);
    check(n_wr == NP, $sformatf("%0d result pages written", n_wr));
    for (int p = 0; p < NP; p++) check(written[p] == e_out[p], $sformatf("result page %0d", p));
    check(n_rd == DB_PAGES, $sformatf("%0d database pages read", n_rd));
    // step order and the query step's time
    begin
      mars_state_e exp_seq [12] = '{ST_FLUSH, ST_LOAD, ST_EVENT, ST_HASH, ST_QUERY, ST_VOTE,
                                    ST_BUCKET, ST_SORT, ST_CHAIN, ST_RESULT, ST_WRITE, ST_DONE};
      check(seq.size() == 12, $sformatf("%0d step events", seq.size()));
      for (int k = 0; k < 12 && k < seq.size(); k++) check(seq[k] == exp_seq[k], $sformatf("step %0d", k));
      if (seq.size() >= 6) begin
        $display("query step: %0d cycles", seq_t[5] - seq_t[4]);
        check(seq_t[5] - seq_t[4] == NQ + 5 + 1, $sformatf("query step took %0d cycles", seq_t[5] - seq_t[4]));
      end
    end
    $display("mode switches on/off %0d/%0d, flush %0d, flash read/write stalls %0d/%0d, sorter stalls %0d",
             n_accel_on, n_accel_off, n_flush, n_rd_stall, n_wr_stall, n_sort_stall);
    $display("query hits %0d misses %0d, bypass %0d (exp %0d), overflow %0d (exp %0d), run %0d cycles",
             e_hits, e_miss, n_bypass, e_bypass, n_overflow, e_overflow, cyc);
    foreach (bp_lane[b]) $display("lane %0d bypass %0d", b, bp_lane[b]);
    check(n_accel_on == 1 && n_accel_off == 1, "mode switch into and out of accelerator mode");
    check(n_flush == 1, "metadata flush happened");
    check(n_ftl == 1, "FTL update happened");
    check(n_rd_stall > 0, "flash read stall happened");
    check(n_wr_stall > 0, "flash write stall happened");
    check(n_sort_stall > 0, "sorter input stall happened");
    check(e_hits > 0 && e_miss > 0, "query hits and misses happened");
    check(n_bypass == e_bypass && n_bypass > 0, "merger bypass count");
    check(n_overflow == e_overflow && n_overflow > 0, "merger overflow count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
