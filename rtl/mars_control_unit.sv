// mars_control_unit: the MARS Control Unit, a finite-state machine in the SSD
// controller that runs the whole raw-signal read-mapping pipeline without the
// host.
//
// Modes. After reset the SSD is in conventional mode (ST_CONV). The NVMe
// command MARS_Init latches the run configuration (cfg) and switches to
// accelerator mode: the conventional-mode metadata is flushed first
// (flush_req until flush_done from the FTL firmware).
// Steps, each started as soon as the previous one has finished:
//   ST_LOAD    the accelerator-mode L2P (mars_l2p) issues the database page
//              reads round robin over the channels; returned page k is written
//              to pair (k mod N_PAIRS), subarray 0, row load_row + k div N_PAIRS;
//   ST_EVENT   Arithmetic Units run signal-to-event conversion and quantization,
//   ST_HASH    hash-value generation and the frequency filter,
//   ST_QUERY   Querying Units look the hash values up in the in-DRAM table,
//   ST_VOTE    Arithmetic Units run the seed-and-vote filter,
//   ST_BUCKET  and bucketize the anchors,
//   ST_SORT    the sort lanes sort and merge bucket b (pair b, rows bkt_src_row..)
//              into rows bkt_dst_row.., all lanes in parallel,
//   ST_CHAIN   Arithmetic Units run the dynamic-programming part of chaining;
//   ST_RESULT  results wait in DRAM for the host's MARS_Write;
//   ST_WRITE   result pages are read from DRAM (page k from pair k mod N_PAIRS,
//              row res_row + k div N_PAIRS) and written to flash out of place;
//   ST_DONE    ftl_update pulses (both FTLs take the new pages) and the SSD
//              returns to conventional mode.
// Arithmetic-Unit steps broadcast start with the step's program entry point
// (cfg.au_pc) and end when no unit is busy. step_evt pulses on every step
// start so that a testbench can follow the sequence.
// The step order, the two modes, the flush and the two commands follow the
// paper; the DRAM placement rules, the configuration record and the
// handshakes are this design's choices.
module mars_control_unit
  import mars_pkg::*;
#(
  parameter int unsigned N_PAIRS_P = N_PAIRS,
  parameter int unsigned ROW_BITS_P = ROW_BITS,
  localparam int unsigned PAIR_W   = $clog2(N_PAIRS_P)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host commands
  input  logic                  cmd_valid,
  input  mars_cmd_e             cmd,
  input  mars_cfg_t             cfg_in,
  output logic                  accel_mode,
  output mars_state_e           state_o,
  output logic                  step_evt,
  output logic                  run_done,
  // FTL firmware
  output logic                  flush_req,
  input  logic                  flush_done,
  output logic                  ftl_update,
  input  logic                  pba_we,
  input  logic [PBAI_W-1:0]     pba_waddr,
  input  logic [PBA_W-1:0]      pba_wdata,
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
  // DRAM row port (to one subarray 0 of a pair)
  output logic                  ext_req,
  output logic                  ext_we,
  output logic [PAIR_W-1:0]     ext_pair,
  output logic [RA_W-1:0]       ext_row,
  output logic [ROW_BITS_P-1:0] ext_wdata,
  input  logic [ROW_BITS_P-1:0] ext_rdata,
  input  logic                  ext_rvalid,
  // compute units
  output logic                  au_start,
  output logic [AU_PC_W-1:0]    au_pc,
  input  logic                  au_any_busy,
  output logic                  qu_start,
  input  logic                  qu_any_busy,
  output logic                  lane_start,
  input  logic                  lane_any_busy,
  output mars_cfg_t             cfg
);
  mars_state_e      state;
  logic [1:0]       phase;      // 0 launch, 1 settle, 2 wait
  logic [NPG_W-1:0] pg_cnt;     // pages written to DRAM / read from DRAM
  logic             wr_hold;    // result page held for the flash write
  logic             rd_pend;
  logic [ROW_BITS_P-1:0] wr_buf;

  // accelerator-mode L2P, shared by the load and write steps
  logic        l2p_start, l2p_busy, l2p_done;
  logic        l2p_valid, l2p_ready;
  flash_addr_t l2p_addr;
  logic        l2p_is_write;

  mars_l2p u_l2p (
    .clk, .rst_n,
    .pba_we, .pba_waddr, .pba_wdata,
    .start(l2p_start),
    .start_lpa (l2p_is_write ? cfg.res_start_lpa : cfg.db_start_lpa),
    .start_page(l2p_is_write ? '0 : cfg.db_start_page),
    .list_base (l2p_is_write ? cfg.res_list_base : cfg.db_list_base),
    .n_pages   (l2p_is_write ? cfg.res_pages : cfg.db_pages),
    .busy(l2p_busy), .done(l2p_done),
    .req_valid(l2p_valid), .req_ready(l2p_ready), .req_addr(l2p_addr)
  );

  assign l2p_is_write = (state == ST_WRITE);
  assign l2p_start    = (state == ST_LOAD || state == ST_WRITE) && phase == 2'd0;

  // load: L2P requests go to the flash controllers
  assign fl_rd_valid = (state == ST_LOAD) && l2p_valid;
  assign fl_rd_addr  = l2p_addr;
  // write: L2P addresses pair with the held result page
  assign fl_wr_valid = (state == ST_WRITE) && wr_hold && l2p_valid;
  assign fl_wr_addr  = l2p_addr;
  assign fl_wr_data  = wr_buf;
  assign l2p_ready   = (state == ST_LOAD) ? fl_rd_ready : (wr_hold && fl_wr_ready);

  // DRAM port: page placement
  logic [NPG_W-1:0] slot;
  assign slot      = pg_cnt / NPG_W'(N_PAIRS_P);
  assign ext_pair  = PAIR_W'(pg_cnt % NPG_W'(N_PAIRS_P));
  assign ext_row   = (state == ST_LOAD) ? cfg.load_row + RA_W'(slot) : cfg.res_row + RA_W'(slot);
  assign ext_wdata = fl_rd_data;
  assign ext_we    = (state == ST_LOAD);
  assign ext_req   = ((state == ST_LOAD) && fl_rd_data_valid) ||
                     ((state == ST_WRITE) && phase == 2'd2 && !wr_hold && !rd_pend && pg_cnt < cfg.res_pages);

  // compute launches
  assign au_start   = phase == 2'd0 && (state == ST_EVENT || state == ST_HASH || state == ST_VOTE ||
                                        state == ST_BUCKET || state == ST_CHAIN);
  always_comb begin
    unique case (state)
      ST_HASH:   au_pc = cfg.au_pc[AUS_HASH];
      ST_VOTE:   au_pc = cfg.au_pc[AUS_VOTE];
      ST_BUCKET: au_pc = cfg.au_pc[AUS_BUCKET];
      ST_CHAIN:  au_pc = cfg.au_pc[AUS_CHAIN];
      default:   au_pc = cfg.au_pc[AUS_EVENT];
    endcase
  end
  assign qu_start   = phase == 2'd0 && state == ST_QUERY;
  assign lane_start = phase == 2'd0 && state == ST_SORT;

  assign accel_mode = (state != ST_CONV);
  assign state_o    = state;
  assign flush_req  = (state == ST_FLUSH);

  logic units_busy;
  always_comb begin
    unique case (state)
      ST_QUERY: units_busy = qu_any_busy;
      ST_SORT:  units_busy = lane_any_busy;
      default:  units_busy = au_any_busy;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= ST_CONV;
      phase      <= '0;
      pg_cnt     <= '0;
      wr_hold    <= 1'b0;
      rd_pend    <= 1'b0;
      cfg        <= '0;
      step_evt   <= 1'b0;
      ftl_update <= 1'b0;
      run_done   <= 1'b0;
    end else begin
      step_evt   <= 1'b0;
      ftl_update <= 1'b0;
      run_done   <= 1'b0;
      unique case (state)
        ST_CONV: if (cmd_valid && cmd == CMD_MARS_INIT) begin
          cfg      <= cfg_in;
          state    <= ST_FLUSH;
          step_evt <= 1'b1;
        end
        ST_FLUSH: if (flush_done) begin
          state    <= ST_LOAD;
          phase    <= '0;
          pg_cnt   <= '0;
          step_evt <= 1'b1;
        end
        ST_LOAD: begin
          if (phase == 2'd0) phase <= 2'd2;
          if (fl_rd_data_valid) pg_cnt <= pg_cnt + 1'b1;
          if (phase == 2'd2 && (pg_cnt == cfg.db_pages ||
                                (fl_rd_data_valid && pg_cnt + 1'b1 == cfg.db_pages))) begin
            state    <= ST_EVENT;
            phase    <= '0;
            step_evt <= 1'b1;
          end
        end
        ST_EVENT, ST_HASH, ST_QUERY, ST_VOTE, ST_BUCKET, ST_SORT, ST_CHAIN: begin
          if (phase == 2'd0) phase <= 2'd1;
          else if (phase == 2'd1) phase <= 2'd2;
          else if (!units_busy) begin
            phase    <= '0;
            step_evt <= 1'b1;
            unique case (state)
              ST_EVENT:  state <= ST_HASH;
              ST_HASH:   state <= ST_QUERY;
              ST_QUERY:  state <= ST_VOTE;
              ST_VOTE:   state <= ST_BUCKET;
              ST_BUCKET: state <= ST_SORT;
              ST_SORT:   state <= ST_CHAIN;
              default:   state <= ST_RESULT;
            endcase
          end
        end
        ST_RESULT: if (cmd_valid && cmd == CMD_MARS_WRITE) begin
          state    <= ST_WRITE;
          phase    <= '0;
          pg_cnt   <= '0;
          wr_hold  <= 1'b0;
          rd_pend  <= 1'b0;
          step_evt <= 1'b1;
        end
        ST_WRITE: begin
          if (phase == 2'd0) phase <= 2'd2;
          if (ext_req) rd_pend <= 1'b1;
          if (rd_pend && ext_rvalid) begin
            wr_buf  <= ext_rdata;
            wr_hold <= 1'b1;
            rd_pend <= 1'b0;
          end
          if (fl_wr_valid && fl_wr_ready) begin
            wr_hold <= 1'b0;
            pg_cnt  <= pg_cnt + 1'b1;
          end
          if (phase == 2'd2 && !wr_hold && !rd_pend && pg_cnt == cfg.res_pages) begin
            state    <= ST_DONE;
            step_evt <= 1'b1;
          end
        end
        ST_DONE: begin
          ftl_update <= 1'b1;
          run_done   <= 1'b1;
          state      <= ST_CONV;
        end
        default: state <= ST_CONV;
      endcase
    end
  end

  a_load_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                 fl_rd_data_valid |-> state == ST_LOAD);
endmodule
