// mars_sorter: Sorter Unit of one Sorter/Merger pair in the SSD controller.
//
// It receives the anchors of one bucket as a stream (in_last marks the last
// anchor of the bucket), cuts the stream into subsequences of at most N
// elements and sorts each subsequence in ascending order with a bitonic
// sorting network. The network is folded: N/2 compare-and-swap units apply one
// bitonic stage per cycle, log2(N)*(log2(N)+1)/2 stages in all (28 for N=128).
// A short last subsequence is padded with all-ones words, which sort to the end
// and are not emitted.
// Output: the sorted subsequences one after another, one element per cycle
// with valid/ready; out_run_last marks the end of a subsequence,
// out_bucket_last the end of the bucket and out_single that the bucket fits
// in a single subsequence (the Merger can then be bypassed).
// Timing: a subsequence of n elements takes n fill cycles, 28 sort cycles and
// one transfer cycle; the sorted buffer drains while the next subsequence is
// filled. The 128-element limit and the bitonic method follow the paper; the
// folded network, padding and stream interface are this design's choices.
module mars_sorter #(
  parameter int unsigned N      = mars_pkg::SORT_N,
  parameter int unsigned W      = mars_pkg::ELEM_W,
  localparam int unsigned LOGN  = $clog2(N),
  localparam int unsigned CNT_W = LOGN + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  input  logic         in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         out_run_last,
  output logic         out_bucket_last,
  output logic         out_single
);
  typedef enum logic [1:0] {S_FILL, S_SORT, S_MOVE} s_state_e;
  s_state_e state;

  logic [W-1:0]        buf_q [N];   // fill / sort buffer
  logic [W-1:0]        nxt   [N];   // one bitonic stage applied to buf_q
  logic [CNT_W-1:0]    fill_cnt;
  logic                fill_last;   // subsequence ends the bucket
  logic                first_run;   // subsequence is the bucket's first
  logic [$clog2(LOGN+1)-1:0] sk, sj; // stage: k = 2^sk, j = 2^sj

  logic [W-1:0]        obuf [N];    // drain buffer
  logic [CNT_W-1:0]    o_cnt, o_idx;
  logic                o_full, o_last, o_single;

  // one stage of the bitonic network with k = 2^sk, j = 2^sj
  always_comb begin
    for (int i = 0; i < N; i++) nxt[i] = buf_q[i];
    for (int i = 0; i < N; i++) begin
      int l;
      logic asc;
      l   = i ^ (1 << sj);
      asc = ((i & (1 << sk)) == 0);
      if (l > i) begin
        if (asc ? (buf_q[i] > buf_q[l]) : (buf_q[i] < buf_q[l])) begin
          nxt[i] = buf_q[l];
          nxt[l] = buf_q[i];
        end
      end
    end
  end

  assign in_ready = (state == S_FILL);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_FILL;
      fill_cnt  <= '0;
      fill_last <= 1'b0;
      first_run <= 1'b1;
      sk        <= '0;
      sj        <= '0;
      o_full    <= 1'b0;
      o_cnt     <= '0;
      o_idx     <= '0;
      o_last    <= 1'b0;
      o_single  <= 1'b0;
    end else begin
      // drain side
      if (o_full && out_ready) begin
        o_idx <= o_idx + 1'b1;
        if (o_idx + 1'b1 == o_cnt) o_full <= 1'b0;
      end
      unique case (state)
        S_FILL: if (in_valid) begin
          buf_q[fill_cnt[LOGN-1:0]] <= in_data;
          fill_cnt <= fill_cnt + 1'b1;
          if (in_last || fill_cnt + 1'b1 == CNT_W'(N)) begin
            fill_last <= in_last;
            // pad the rest with the largest value
            for (int i = 0; i < N; i++)
              if (i > int'(fill_cnt)) buf_q[i] <= '1;
            sk    <= 1;
            sj    <= 0;
            state <= S_SORT;
          end
        end
        S_SORT: begin
          for (int i = 0; i < N; i++) buf_q[i] <= nxt[i];
          if (sj == 0) begin
            if (sk == LOGN) state <= S_MOVE;
            else begin
              sk <= sk + 1'b1;
              sj <= sk;      // next k: j starts at k/2 = 2^sk
            end
          end else sj <= sj - 1'b1;
        end
        S_MOVE: if (!o_full || (out_ready && o_idx + 1'b1 == o_cnt)) begin
          for (int i = 0; i < N; i++) obuf[i] <= buf_q[i];
          o_cnt     <= fill_cnt;
          o_idx     <= '0;
          o_full    <= 1'b1;
          o_last    <= fill_last;
          o_single  <= first_run && fill_last;
          first_run <= fill_last;
          fill_cnt  <= '0;
          state     <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end

  assign out_valid       = o_full;
  assign out_data        = obuf[o_idx[LOGN-1:0]];
  assign out_run_last    = o_full && (o_idx + 1'b1 == o_cnt);
  assign out_bucket_last = out_run_last && o_last;
  assign out_single      = o_single;
endmodule
