// mars_merger: Merger Unit of one Sorter/Merger pair in the SSD controller.
//
// It takes the sorted subsequences (runs) that the Sorter Unit produces for one
// bucket and emits the bucket as one sorted sequence. Runs are written into
// MAX_RUNS local run buffers of N elements each as they arrive; once the
// bucket's last run is in, a one-pass merge emits one element per cycle: a
// comparator tree picks the smallest head among the runs that still hold
// elements, with no feedback and no intermediate buffering.
// A bucket that fits in one run (in_single) bypasses the run buffers and
// streams straight through. If a bucket has more than MAX_RUNS runs the local
// buffers overflow: the runs held so far are merged and emitted as one
// intermediate sorted segment (out_last low, overflow pulses), then collection
// continues. Combining such segments is left to a second pass through DRAM,
// which the controller is meant to perform and which this design does not
// contain.
// Interface: valid/ready streams; out_last marks the last element of the
// bucket. Timing: after the last run arrives, the merge starts in the next
// cycle and emits one element per cycle while out_ready is high.
// The paper specifies a bitonic merger in streaming one-pass form, throughput
// matched to the sorter; the min-of-heads tree, MAX_RUNS and the overflow
// handling are this design's choices.
module mars_merger #(
  parameter int unsigned N        = mars_pkg::SORT_N,
  parameter int unsigned W        = mars_pkg::ELEM_W,
  parameter int unsigned MAX_RUNS = 8,
  localparam int unsigned IDX_W   = $clog2(N) + 1,
  localparam int unsigned R_W     = $clog2(MAX_RUNS),
  localparam int unsigned TOT_W   = $clog2(N * MAX_RUNS) + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  input  logic         in_run_last,
  input  logic         in_bucket_last,
  input  logic         in_single,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         out_last,
  output logic         bypass,     // one pulse per anchor sent through the bypass
  output logic         overflow    // one-cycle pulse: run buffers were full
);
  typedef enum logic [1:0] {M_COLLECT, M_MERGE} m_state_e;
  m_state_e state;

  logic [W-1:0]     runs [MAX_RUNS][N];
  logic [IDX_W-1:0] len  [MAX_RUNS];
  logic [IDX_W-1:0] head [MAX_RUNS];
  logic [R_W-1:0]   wr_run;
  logic [IDX_W-1:0] wr_idx;
  logic [R_W:0]     n_runs;
  logic [TOT_W-1:0] remaining;
  logic             final_seg;    // segment being merged ends the bucket

  // selection of the smallest head
  logic [R_W-1:0]   sel;
  logic             any;
  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int r = 0; r < MAX_RUNS; r++) begin
      if ((R_W+1)'(r) < n_runs && head[r] < len[r]) begin
        if (!any || runs[r][head[r][IDX_W-2:0]] < runs[sel][head[sel][IDX_W-2:0]]) sel = R_W'(r);
        any = 1'b1;
      end
    end
  end

  logic pass;  // single-run bucket streams through
  assign pass     = (state == M_COLLECT) && in_valid && in_single;
  assign bypass   = pass && out_ready;
  assign in_ready = (state == M_COLLECT) && (in_single ? out_ready : 1'b1);

  always_comb begin
    if (pass) begin
      out_valid = 1'b1;
      out_data  = in_data;
      out_last  = in_bucket_last;
    end else begin
      out_valid = (state == M_MERGE) && any;
      out_data  = runs[sel][head[sel][IDX_W-2:0]];
      out_last  = (state == M_MERGE) && final_seg && (remaining == TOT_W'(1));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= M_COLLECT;
      wr_run    <= '0;
      wr_idx    <= '0;
      n_runs    <= '0;
      remaining <= '0;
      final_seg <= 1'b0;
      overflow  <= 1'b0;
      for (int r = 0; r < MAX_RUNS; r++) begin
        len[r]  <= '0;
        head[r] <= '0;
      end
    end else begin
      overflow <= 1'b0;
      unique case (state)
        M_COLLECT: if (in_valid && !in_single) begin
          runs[wr_run][wr_idx[IDX_W-2:0]] <= in_data;
          wr_idx    <= wr_idx + 1'b1;
          remaining <= remaining + 1'b1;
          if (in_run_last) begin
            len[wr_run]  <= wr_idx + 1'b1;
            head[wr_run] <= '0;
            n_runs       <= n_runs + 1'b1;
            wr_idx       <= '0;
            wr_run       <= wr_run + 1'b1;
            if (in_bucket_last || wr_run == R_W'(MAX_RUNS - 1)) begin
              final_seg <= in_bucket_last;
              overflow  <= !in_bucket_last;
              state     <= M_MERGE;
            end
          end
        end
        M_MERGE: begin
          if (any && out_ready) begin
            head[sel] <= head[sel] + 1'b1;
            remaining <= remaining - 1'b1;
          end
          if (!any || (out_ready && remaining == TOT_W'(1))) begin
            n_runs <= '0;
            wr_run <= '0;
            state  <= M_COLLECT;
          end
        end
        default: state <= M_COLLECT;
      endcase
    end
  end
endmodule
