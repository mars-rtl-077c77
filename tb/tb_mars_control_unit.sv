// tb_mars_control_unit: self-checking test of the MARS Control Unit with four
// subarray pairs and 64-bit pages. The testbench plays the FTL firmware
// (flush handshake, PBA list), the flash controllers (random acceptance,
// three-cycle read latency), the DRAM row port and the compute units (each
// launch keeps its units busy for a random time).
// Checked: a MARS_Write in conventional mode is ignored; MARS_Init enters
// accelerator mode and holds in the flush until flush_done; page k of the
// database is read at its round-robin flash address and lands in pair k mod 4,
// row load_row + k div 4; the steps run in the paper's order with the right
// program entry points, each waiting for its units; the unit waits for
// MARS_Write; result page k is read from pair k mod 4, row res_row + k div 4
// and written to its flash address; the FTL update pulses and the unit is
// back in conventional mode. A full run is done twice.
module tb_mars_control_unit;
  import mars_pkg::*;
  localparam int NP = 4, RB = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid; mars_cmd_e cmd; mars_cfg_t cfg_in, cfg;
  logic accel_mode, step_evt, run_done, flush_req, flush_done, ftl_update;
  mars_state_e state_o;
  logic pba_we; logic [PBAI_W-1:0] pba_waddr; logic [PBA_W-1:0] pba_wdata;
  logic fl_rd_valid, fl_rd_ready, fl_rd_data_valid, fl_wr_valid, fl_wr_ready;
  flash_addr_t fl_rd_addr, fl_wr_addr;
  logic [RB-1:0] fl_rd_data, fl_wr_data;
  logic ext_req, ext_we, ext_rvalid;
  logic [1:0] ext_pair;
  logic [RA_W-1:0] ext_row;
  logic [RB-1:0] ext_wdata, ext_rdata;
  logic au_start, qu_start, lane_start, au_any_busy, qu_any_busy, lane_any_busy;
  logic [AU_PC_W-1:0] au_pc;
  int checks = 0, failures = 0;

  mars_control_unit #(.N_PAIRS_P(NP), .ROW_BITS_P(RB)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [RB-1:0] page_data(input logic [31:0] lpa);
    return {lpa ^ 32'h5a5a_0000, ~lpa};
  endfunction
  function automatic logic [RB-1:0] dram_data(input int pair, input int row);
    return {32'(pair) * 32'h1001, 32'(row) * 32'h77};
  endfunction

  logic [PBA_W-1:0] list [MAX_PBAS];

  // expected flash address of database / result page i (8 channels, 256 pages per block)
  function automatic flash_addr_t exp_addr(input int lpa0, input int pg0, input int base, input int i);
    flash_addr_t a;
    int stripe = pg0 + i / N_CHANNELS;
    a.lpa  = LPA_W'(lpa0 + i);
    a.ch   = CH_W'(i % N_CHANNELS);
    a.pba  = list[base + stripe / PAGES_PER_BLOCK];
    a.page = PAGE_W'(stripe % PAGES_PER_BLOCK);
    return a;
  endfunction

  // ---------------- flash model ----------------
  logic [31:0] rd_q [$];
  int          rd_lat [$];
  int          n_rd = 0, n_wr = 0, n_dram_wr = 0, n_dram_rd = 0;
  int          cyc = 0;
  logic        dram_rd_pend = 0;
  logic [1:0]  dram_rd_pair;
  logic [RA_W-1:0] dram_rd_row;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fl_rd_valid && fl_rd_ready) begin
      check(fl_rd_addr == exp_addr(cfg_in.db_start_lpa, cfg_in.db_start_page, cfg_in.db_list_base, n_rd),
            $sformatf("flash read address of page %0d", n_rd));
      rd_q.push_back(fl_rd_addr.lpa);
      rd_lat.push_back(cyc + 3);
      n_rd++;
    end
    if (fl_wr_valid && fl_wr_ready) begin
      check(fl_wr_addr == exp_addr(cfg_in.res_start_lpa, 0, cfg_in.res_list_base, n_wr),
            $sformatf("flash write address of page %0d", n_wr));
      check(fl_wr_data == dram_data(n_wr % NP, cfg_in.res_row + n_wr / NP),
            $sformatf("flash write data of page %0d", n_wr));
      n_wr++;
    end
    if (ext_req && ext_we) begin
      check(state_o == ST_LOAD, "DRAM write only while loading");
      check(ext_pair == 2'(n_dram_wr % NP) && ext_row == RA_W'(cfg_in.load_row + n_dram_wr / NP),
            $sformatf("placement of page %0d", n_dram_wr));
      check(ext_wdata == page_data(cfg_in.db_start_lpa + n_dram_wr), $sformatf("data of page %0d", n_dram_wr));
      n_dram_wr++;
    end
    ext_rvalid <= 1'b0;
    if (ext_req && !ext_we) begin
      ext_rvalid <= 1'b1;
      ext_rdata  <= dram_data(ext_pair, ext_row);
      n_dram_rd++;
    end
  end

  always @(negedge clk) begin
    fl_rd_ready = ($urandom_range(0, 3) != 0);
    fl_wr_ready = ($urandom_range(0, 3) != 0);
    fl_rd_data_valid = 0;
    if (rd_q.size() > 0 && rd_lat[0] <= cyc) begin
      fl_rd_data_valid = 1;
      fl_rd_data = page_data(rd_q.pop_front());
      void'(rd_lat.pop_front());
    end
  end

  // ---------------- compute-unit stubs ----------------
  int busy_left = 0;
  int launches = 0;
  mars_state_e launch_state [$];
  logic [AU_PC_W-1:0] launch_pc [$];
  always @(posedge clk) begin
    if (au_start || qu_start || lane_start) begin
      check($onehot({au_start, qu_start, lane_start}), "one kind of unit per launch");
      busy_left <= $urandom_range(1, 20);
      launches++;
      launch_state.push_back(state_o);
      launch_pc.push_back(au_pc);
    end else if (busy_left > 0) busy_left <= busy_left - 1;
    if (busy_left > 0) check(state_o == launch_state[$], "step waits for its units");
  end
  assign au_any_busy   = busy_left > 0 && state_o inside {ST_EVENT, ST_HASH, ST_VOTE, ST_BUCKET, ST_CHAIN};
  assign qu_any_busy   = busy_left > 0 && state_o == ST_QUERY;
  assign lane_any_busy = busy_left > 0 && state_o == ST_SORT;

  // ---------------- step sequence ----------------
  mars_state_e seq [$];
  always @(posedge clk) if (step_evt) seq.push_back(state_o);
  int n_ftl = 0;
  always @(posedge clk) if (ftl_update) n_ftl++;

  task automatic do_cmd(input mars_cmd_e c);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NONE;
  endtask

  task automatic one_run(input int db_pages, input int res_pages);
    int t;
    mars_state_e exp_seq [$];
    seq = {}; launch_state = {}; launch_pc = {};
    n_rd = 0; n_wr = 0; n_dram_wr = 0; n_dram_rd = 0; launches = 0;
    cfg_in = '0;
    cfg_in.db_start_lpa  = $urandom_range(0, 100000);
    cfg_in.db_start_page = PAGE_W'($urandom_range(250, 255));
    cfg_in.db_list_base  = PBAI_W'($urandom_range(0, 8));
    cfg_in.db_pages      = NPG_W'(db_pages);
    cfg_in.load_row      = RA_W'($urandom_range(0, 100));
    for (int k = 0; k < N_AU_STEPS; k++) cfg_in.au_pc[k] = AU_PC_W'($urandom_range(0, 63));
    cfg_in.res_start_lpa = $urandom_range(200000, 300000);
    cfg_in.res_list_base = PBAI_W'($urandom_range(20, 30));
    cfg_in.res_pages     = NPG_W'(res_pages);
    cfg_in.res_row       = RA_W'($urandom_range(120, 200));
    check(!accel_mode && state_o == ST_CONV, "starts in conventional mode");
    do_cmd(CMD_MARS_WRITE);
    repeat (3) @(negedge clk);
    check(state_o == ST_CONV, "MARS_Write ignored in conventional mode");
    do_cmd(CMD_MARS_INIT);
    check(accel_mode && flush_req, "flush requested on entering accelerator mode");
    repeat ($urandom_range(3, 10)) @(negedge clk);
    check(state_o == ST_FLUSH && !fl_rd_valid, "no page read before the flush is done");
    flush_done = 1; @(negedge clk); flush_done = 0;
    t = 0;
    while (state_o != ST_RESULT && t < 4000) begin @(negedge clk); t++; end
    check(state_o == ST_RESULT, "reached the result state");
    check(n_rd == db_pages && n_dram_wr == db_pages, $sformatf("pages loaded %0d/%0d", n_rd, n_dram_wr));
    repeat (5) @(negedge clk);
    check(state_o == ST_RESULT && accel_mode, "waits for MARS_Write");
    do_cmd(CMD_MARS_WRITE);
    t = 0;
    while (accel_mode && t < 4000) begin @(negedge clk); t++; end
    check(!accel_mode, "back in conventional mode");
    @(negedge clk);
    check(n_wr == res_pages && n_dram_rd == res_pages, $sformatf("result pages %0d", n_wr));
    check(n_ftl == 1, "FTL updated once");
    exp_seq = {ST_FLUSH, ST_LOAD, ST_EVENT, ST_HASH, ST_QUERY, ST_VOTE, ST_BUCKET, ST_SORT,
               ST_CHAIN, ST_RESULT, ST_WRITE, ST_DONE};
    check(seq.size() == exp_seq.size(), $sformatf("%0d steps", seq.size()));
    for (int k = 0; k < exp_seq.size() && k < seq.size(); k++)
      check(seq[k] == exp_seq[k], $sformatf("step %0d is %s", k, seq[k].name()));
    check(launches == 7, $sformatf("%0d unit launches", launches));
    for (int k = 0; k < launch_state.size(); k++) begin
      unique case (launch_state[k])
        ST_EVENT:  check(launch_pc[k] == cfg_in.au_pc[AUS_EVENT],  "event pc");
        ST_HASH:   check(launch_pc[k] == cfg_in.au_pc[AUS_HASH],   "hash pc");
        ST_VOTE:   check(launch_pc[k] == cfg_in.au_pc[AUS_VOTE],   "vote pc");
        ST_BUCKET: check(launch_pc[k] == cfg_in.au_pc[AUS_BUCKET], "bucket pc");
        ST_CHAIN:  check(launch_pc[k] == cfg_in.au_pc[AUS_CHAIN],  "chain pc");
        default: ;
      endcase
    end
    n_ftl = 0;
  endtask

  initial begin
    cmd_valid = 0; cmd = CMD_NONE; cfg_in = '0; flush_done = 0;
    pba_we = 0; pba_waddr = 0; pba_wdata = 0;
    fl_rd_ready = 0; fl_wr_ready = 0; fl_rd_data_valid = 0; fl_rd_data = 0;
    ext_rdata = 0; ext_rvalid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < MAX_PBAS; k++) begin
      list[k] = PBA_W'($urandom());
      pba_we = 1; pba_waddr = PBAI_W'(k); pba_wdata = list[k];
      @(negedge clk);
    end
    pba_we = 0;
    one_run(45, 11);
    one_run(9, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
