// mars_query_unit: hash-table Querying Unit placed in one DRAM subarray
// (Processing-Using-DRAM, pLUTo-style lookup).
//
// The lookup table is stored one entry per subarray row: row (first_row + i)
// holds the value of table index (key_base + i) in every word slot. A query
// works on a full row of SLOTS keys at once, in the four steps of the paper:
//   1 key loading      - the key row is activated and latched as the source
//                        row buffer;
//   2 row sweeping     - rows first_row .. first_row+n_rows-1 are activated
//                        one after another; the match logic compares the index
//                        of the activated row with every key and raises that
//                        slot's matchline on equality;
//   3 selective copy   - gated sense amplifiers copy only the matched slots of
//                        the activated row into the output row buffer;
//   4 result assembly  - after the sweep the output row buffer holds the
//                        looked-up value of every key and is written back to
//                        dst_row.
// Slots whose key matches no swept row keep the MISS value (all ones): this and
// the key_base offset, which lets a table larger than one subarray be split over
// several subarrays or loaded in parts, are this design's choices.
// Timing: done is high n_rows + 5 clock edges after the edge that samples
// start (one row activation per cycle, pipelined with the compare). The unit owns the subarray port while busy.
module mars_query_unit #(
  parameter int unsigned ROWS     = mars_pkg::DRAM_ROWS,
  parameter int unsigned ROW_BITS = mars_pkg::ROW_BITS,
  parameter int unsigned WORD_W   = mars_pkg::WORD_W,
  localparam int unsigned SLOTS   = ROW_BITS / WORD_W,
  localparam int unsigned RA_W    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic [RA_W-1:0]     key_row,
  input  logic [RA_W-1:0]     dst_row,
  input  logic [RA_W-1:0]     first_row,
  input  logic [RA_W:0]       n_rows,     // 1 .. ROWS
  input  logic [WORD_W-1:0]   key_base,
  output logic                busy,
  output logic                done,       // one-cycle pulse
  // subarray row port
  output logic                sa_req,
  output logic                sa_we,
  output logic [RA_W-1:0]     sa_row,
  output logic [ROW_BITS-1:0] sa_wdata,
  input  logic [ROW_BITS-1:0] sa_rdata,
  input  logic                sa_rvalid
);
  localparam logic [WORD_W-1:0] MISS = '1;

  typedef enum logic [2:0] {Q_IDLE, Q_KEYREQ, Q_KEYWAIT, Q_SWEEP, Q_DRAIN, Q_WRITE} q_state_e;
  q_state_e state;

  logic [WORD_W-1:0] src_buf [SLOTS];   // source row buffer (keys)
  logic [WORD_W-1:0] out_buf [SLOTS];   // output row buffer (results)
  logic [RA_W:0]     issued;            // rows activated so far
  logic [RA_W:0]     cnt_rows;
  logic [RA_W-1:0]   first_q, dst_q;
  logic [WORD_W-1:0] base_q;
  logic [WORD_W-1:0] cur_idx;           // table index of the row now in the row buffer
  logic [SLOTS-1:0]  matchline;
  logic [RA_W-1:0]   key_row_r;

  // match logic: compare the activated row's table index with every key
  always_comb begin
    for (int s = 0; s < SLOTS; s++) matchline[s] = (src_buf[s] == cur_idx);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= Q_IDLE;
      issued   <= '0;
      cnt_rows <= '0;
      first_q  <= '0;
      dst_q    <= '0;
      base_q   <= '0;
      cur_idx  <= '0;
      key_row_r <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        Q_IDLE: if (start) begin
          first_q  <= first_row;
          dst_q    <= dst_row;
          base_q   <= key_base;
          cnt_rows <= n_rows;
          key_row_r <= key_row;
          state    <= Q_KEYREQ;
        end
        Q_KEYREQ: state <= Q_KEYWAIT;
        Q_KEYWAIT: if (sa_rvalid) begin
          for (int s = 0; s < SLOTS; s++) begin
            src_buf[s] <= sa_rdata[s*WORD_W +: WORD_W];
            out_buf[s] <= MISS;
          end
          issued  <= '0;
          cur_idx <= base_q;
          state   <= Q_SWEEP;
        end
        Q_SWEEP, Q_DRAIN: begin
          if (state == Q_SWEEP) begin
            issued <= issued + 1'b1;
            if (issued + 1'b1 == cnt_rows) state <= Q_DRAIN;
          end
          if (sa_rvalid) begin
            // gated sense amplifiers: copy only the matched slots
            for (int s = 0; s < SLOTS; s++)
              if (matchline[s]) out_buf[s] <= sa_rdata[s*WORD_W +: WORD_W];
            cur_idx <= cur_idx + 1'b1;
            if (state == Q_DRAIN) state <= Q_WRITE;
          end
        end
        Q_WRITE: begin
          done  <= 1'b1;
          state <= Q_IDLE;
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

  assign busy = (state != Q_IDLE);

  always_comb begin
    sa_req   = 1'b0;
    sa_we    = 1'b0;
    sa_row   = '0;
    for (int s = 0; s < SLOTS; s++) sa_wdata[s*WORD_W +: WORD_W] = out_buf[s];
    unique case (state)
      Q_KEYREQ: begin sa_req = 1'b1; sa_row = key_row_r; end
      Q_SWEEP:  begin sa_req = 1'b1; sa_row = first_q + issued[RA_W-1:0]; end
      Q_WRITE:  begin sa_req = 1'b1; sa_we = 1'b1; sa_row = dst_q; end
      default: ;
    endcase
  end

  a_nrows_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                    (state == Q_IDLE && start) |-> (n_rows != 0));
endmodule
