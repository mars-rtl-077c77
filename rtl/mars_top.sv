// mars_top: MARS-enabled SSD datapath for raw-signal read mapping inside the
// storage device.
//
// Contents:
//   mars_control_unit  the FSM in the SSD controller that switches between
//                      conventional and accelerator mode and runs the steps
//                      (event detection, seeding, chaining) in order;
//   N_LANES sort lanes one Sorter/Merger pair per flash controller, lane b
//                      sorts the bucket held in pair b;
//   N_PAIRS PIM pairs  SSD-internal DRAM: two subarrays each, with one
//                      Arithmetic Unit per pair and one Querying Unit per
//                      subarray (256 AUs and 512 QUs by default).
// Parts the SSD already has are outside: the FTL firmware cores (command,
// flush and FTL-update handshakes, PBA list, AU instruction buffers), the
// flash controllers with the NAND chips (page read and write streams), the
// NVMe/PCIe front end (decoded command port) and the DRAM chip periphery,
// which here is a plain row port per subarray pair.
// Subarray 0 of each pair has one external row port; the control unit drives
// it while loading pages and writing results, lane b drives pair b's while it
// sorts. The instruction buffers of all Arithmetic Units are written together
// and all units of one kind are started together, as the data is spread evenly
// over the DRAM.
module mars_top
  import mars_pkg::*;
#(
  parameter int unsigned N_PAIRS_P = N_PAIRS,
  parameter int unsigned N_LANES   = N_CHANNELS,
  parameter int unsigned ROWS      = DRAM_ROWS,
  parameter int unsigned ROW_BITS_P = ROW_BITS,
  parameter int unsigned MAX_RUNS  = 8,
  localparam int unsigned PAIR_W   = $clog2(N_PAIRS_P),
  localparam int unsigned RAW      = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // NVMe commands
  input  logic                  cmd_valid,
  input  mars_cmd_e             cmd,
  input  mars_cfg_t             cfg_in,
  output logic                  accel_mode,
  output mars_state_e           state,
  output logic                  step_evt,
  output logic                  run_done,
  // FTL firmware
  output logic                  flush_req,
  input  logic                  flush_done,
  output logic                  ftl_update,
  input  logic                  pba_we,
  input  logic [PBAI_W-1:0]     pba_waddr,
  input  logic [PBA_W-1:0]      pba_wdata,
  input  logic                  ib_we,
  input  logic [AU_PC_W-1:0]    ib_addr,
  input  au_instr_t             ib_data,
  // flash controllers
  output logic                  fl_rd_valid,
  input  logic                  fl_rd_ready,
  output flash_addr_t           fl_rd_addr,
  input  logic                  fl_rd_data_valid,
  input  logic [ROW_BITS_P-1:0] fl_rd_data,
  output logic                  fl_wr_valid,
  input  logic                  fl_wr_ready,
  output flash_addr_t           fl_wr_addr,
  output logic [ROW_BITS_P-1:0] fl_wr_data,
  // sort-lane events
  output logic [N_LANES-1:0]    lane_bypass,
  output logic [N_LANES-1:0]    lane_overflow
);
  mars_cfg_t             cfg;
  logic                  c_req, c_we, c_rvalid;
  logic [PAIR_W-1:0]     c_pair;
  logic [RA_W-1:0]       c_row;
  logic [ROW_BITS_P-1:0] c_wdata, c_rdata;
  logic                  au_start, qu_start, lane_start;
  logic [AU_PC_W-1:0]    au_pc;
  logic [N_PAIRS_P-1:0]  au_busy, qu_busy, p_rvalid;
  logic [N_LANES-1:0]    lane_busy;
  logic [ROW_BITS_P-1:0] p_rdata [N_PAIRS_P];

  mars_control_unit #(.N_PAIRS_P(N_PAIRS_P), .ROW_BITS_P(ROW_BITS_P)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cfg_in, .accel_mode, .state_o(state), .step_evt, .run_done,
    .flush_req, .flush_done, .ftl_update, .pba_we, .pba_waddr, .pba_wdata,
    .fl_rd_valid, .fl_rd_ready, .fl_rd_addr, .fl_rd_data_valid, .fl_rd_data,
    .fl_wr_valid, .fl_wr_ready, .fl_wr_addr, .fl_wr_data,
    .ext_req(c_req), .ext_we(c_we), .ext_pair(c_pair), .ext_row(c_row), .ext_wdata(c_wdata),
    .ext_rdata(c_rdata), .ext_rvalid(c_rvalid),
    .au_start, .au_pc, .au_any_busy(|au_busy),
    .qu_start, .qu_any_busy(|qu_busy),
    .lane_start, .lane_any_busy(|lane_busy),
    .cfg
  );

  assign c_rdata  = p_rdata[c_pair];
  assign c_rvalid = p_rvalid[c_pair];

  // sort lanes
  logic [N_LANES-1:0]    l_req, l_we;
  logic [RAW-1:0]        l_row   [N_LANES];
  logic [ROW_BITS_P-1:0] l_wdata [N_LANES];

  for (genvar b = 0; b < N_LANES; b++) begin : g_lane
    mars_sort_lane #(.ROWS(ROWS), .ROW_BITS(ROW_BITS_P), .MAX_RUNS(MAX_RUNS)) u_lane (
      .clk, .rst_n, .start(lane_start),
      .src_row(cfg.bkt_src_row), .dst_row(cfg.bkt_dst_row), .n_elems(cfg.bkt_len[b]),
      .busy(lane_busy[b]), .done(),
      .bypass_evt(lane_bypass[b]), .overflow_evt(lane_overflow[b]),
      .sa_req(l_req[b]), .sa_we(l_we[b]), .sa_row(l_row[b]), .sa_wdata(l_wdata[b]),
      .sa_rdata(p_rdata[b]), .sa_rvalid(p_rvalid[b])
    );
  end

  // SSD-internal DRAM
  for (genvar p = 0; p < N_PAIRS_P; p++) begin : g_pair
    logic                  e_req, e_we;
    logic [RAW-1:0]        e_row;
    logic [ROW_BITS_P-1:0] e_wdata;
    always_comb begin
      e_req = 1'b0; e_we = 1'b0; e_row = c_row; e_wdata = c_wdata;
      if (c_req && c_pair == PAIR_W'(p)) begin
        e_req = 1'b1; e_we = c_we;
      end else if (p < N_LANES) begin
        e_req = l_req[p % N_LANES]; e_we = l_we[p % N_LANES];
        e_row = l_row[p % N_LANES]; e_wdata = l_wdata[p % N_LANES];
      end
    end

    mars_pim_pair #(.ROWS(ROWS), .ROW_BITS(ROW_BITS_P)) u_pair (
      .clk, .rst_n, .ib_we, .ib_addr, .ib_data,
      .au_start, .au_pc, .au_busy(au_busy[p]),
      .qu_start, .qu_key_row(cfg.qu_key_row), .qu_dst_row(cfg.qu_dst_row),
      .qu_first_row(cfg.qu_first_row), .qu_n_rows(cfg.qu_n_rows), .qu_key_base(cfg.qu_key_base),
      .qu_busy(qu_busy[p]),
      .ext_req(e_req), .ext_we(e_we), .ext_row(e_row), .ext_wdata(e_wdata),
      .ext_rdata(p_rdata[p]), .ext_rvalid(p_rvalid[p])
    );
  end
endmodule
