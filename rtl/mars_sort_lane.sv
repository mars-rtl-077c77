// mars_sort_lane: one Sorter/Merger pair of the SSD controller together with
// the row streaming that moves its bucket between SSD-internal DRAM and the
// two units (one lane per flash controller, eight in all).
//
// After start, the lane reads the bucket's n_elems anchors from consecutive
// DRAM rows beginning at src_row (ROW_BITS/W anchors per row, slot 0 first),
// feeds them to the Sorter Unit, passes the Sorter's runs to the Merger Unit
// (which bypasses single-run buckets) and packs the sorted output back into
// consecutive rows beginning at dst_row. The slots after the last anchor of a
// partly filled last row are written as all ones, the same padding value the
// Sorter uses. done pulses once the last row is written.
// The lane has one row port; a pending write has priority over the next read.
// Timing: roughly one anchor per cycle plus 29 cycles per 128-anchor
// subsequence, two cycles per row read and one per row write.
// Which rows hold a bucket is decided by the control unit; row packing and the
// port arbitration are this design's choices.
module mars_sort_lane #(
  parameter int unsigned ROWS     = mars_pkg::DRAM_ROWS,
  parameter int unsigned ROW_BITS = mars_pkg::ROW_BITS,
  parameter int unsigned W        = mars_pkg::ELEM_W,
  parameter int unsigned N        = mars_pkg::SORT_N,
  parameter int unsigned MAX_RUNS = 8,
  parameter int unsigned LEN_W    = 16,
  localparam int unsigned EPR     = ROW_BITS / W,
  localparam int unsigned POS_W   = $clog2(EPR),
  localparam int unsigned RA_W    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [RA_W-1:0]     src_row,
  input  logic [RA_W-1:0]     dst_row,
  input  logic [LEN_W-1:0]    n_elems,     // >= 1
  output logic                busy,
  output logic                done,
  output logic                bypass_evt,   // one-cycle pulse per bypassed anchor
  output logic                overflow_evt, // merger run buffers overflowed
  // DRAM row port
  output logic                sa_req,
  output logic                sa_we,
  output logic [RA_W-1:0]     sa_row,
  output logic [ROW_BITS-1:0] sa_wdata,
  input  logic [ROW_BITS-1:0] sa_rdata,
  input  logic                sa_rvalid
);
  logic              active;
  logic [RA_W-1:0]   src_q, dst_q, rd_rows, wr_rows;
  logic [LEN_W-1:0]  n_q, sent;
  logic [W-1:0]      rd_buf [EPR];
  logic [W-1:0]      wr_buf [EPR];
  logic [POS_W-1:0]  rd_pos, wr_pos;
  logic              rd_have, rd_pend, wr_pend, wr_final;

  // sorter <-> merger <-> packer
  logic         s_in_valid, s_in_ready, s_in_last;
  logic         s_out_valid, s_out_ready, s_run_last, s_bucket_last, s_single;
  logic [W-1:0] s_out_data;
  logic         m_out_valid, m_out_ready, m_out_last;
  logic [W-1:0] m_out_data;

  assign s_in_valid = active && rd_have && (sent < n_q);
  assign s_in_last  = (sent == n_q - 1'b1);

  mars_sorter #(.N(N), .W(W)) u_sorter (
    .clk, .rst_n,
    .in_valid(s_in_valid), .in_ready(s_in_ready), .in_data(rd_buf[rd_pos]), .in_last(s_in_last),
    .out_valid(s_out_valid), .out_ready(s_out_ready), .out_data(s_out_data),
    .out_run_last(s_run_last), .out_bucket_last(s_bucket_last), .out_single(s_single)
  );

  mars_merger #(.N(N), .W(W), .MAX_RUNS(MAX_RUNS)) u_merger (
    .clk, .rst_n,
    .in_valid(s_out_valid), .in_ready(s_out_ready), .in_data(s_out_data),
    .in_run_last(s_run_last), .in_bucket_last(s_bucket_last), .in_single(s_single),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out_data), .out_last(m_out_last),
    .bypass(bypass_evt), .overflow(overflow_evt)
  );

  assign m_out_ready = active && !wr_pend;

  logic issue_wr, issue_rd;
  assign issue_wr = active && wr_pend;
  assign issue_rd = active && !wr_pend && !rd_have && !rd_pend && (sent < n_q);

  always_comb begin
    sa_req = issue_wr || issue_rd;
    sa_we  = issue_wr;
    sa_row = issue_wr ? dst_q + wr_rows : src_q + rd_rows;
    for (int e = 0; e < EPR; e++) sa_wdata[e*W +: W] = wr_buf[e];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active   <= 1'b0;
      done     <= 1'b0;
      src_q    <= '0;
      dst_q    <= '0;
      n_q      <= '0;
      sent     <= '0;
      rd_rows  <= '0;
      wr_rows  <= '0;
      rd_pos   <= '0;
      wr_pos   <= '0;
      rd_have  <= 1'b0;
      rd_pend  <= 1'b0;
      wr_pend  <= 1'b0;
      wr_final <= 1'b0;
      wr_buf   <= '{default: '1};
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active   <= 1'b1;
          src_q    <= src_row;
          dst_q    <= dst_row;
          n_q      <= n_elems;
          sent     <= '0;
          rd_rows  <= '0;
          wr_rows  <= '0;
          rd_pos   <= '0;
          wr_pos   <= '0;
          rd_have  <= 1'b0;
          rd_pend  <= 1'b0;
          wr_pend  <= 1'b0;
          wr_final <= 1'b0;
        end
      end else begin
        // row reader
        if (issue_rd) begin
          rd_pend <= 1'b1;
          rd_rows <= rd_rows + 1'b1;
        end
        if (rd_pend && sa_rvalid) begin
          for (int e = 0; e < EPR; e++) rd_buf[e] <= sa_rdata[e*W +: W];
          rd_pend <= 1'b0;
          rd_have <= 1'b1;
          rd_pos  <= '0;
        end
        if (s_in_valid && s_in_ready) begin
          sent   <= sent + 1'b1;
          rd_pos <= rd_pos + 1'b1;
          if (rd_pos == POS_W'(EPR - 1)) rd_have <= 1'b0;
        end
        // row packer
        if (m_out_valid && m_out_ready) begin
          wr_buf[wr_pos] <= m_out_data;
          wr_pos <= wr_pos + 1'b1;
          if (m_out_last || wr_pos == POS_W'(EPR - 1)) begin
            wr_pend  <= 1'b1;
            wr_final <= m_out_last;
          end
        end
        if (issue_wr) begin
          wr_pend <= 1'b0;
          wr_pos  <= '0;
          wr_rows <= wr_rows + 1'b1;
          wr_buf  <= '{default: '1};
          if (wr_final) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
        end
      end
    end
  end

  assign busy = active;

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !active);
endmodule
