// tb_mars_sort_lane: self-checking test of one Sorter/Merger lane on a DRAM
// subarray model (32 rows of 256 bits = 8 anchors per row, sorter width 8,
// four merger run buffers). Three buckets are placed in DRAM and sorted in
// place of a destination area:
//   5 anchors   one sorter run, must take the merger bypass;
//   20 anchors  three runs, merged normally;
//   40 anchors  five runs, more than the run buffers hold: the first 32
//               anchors come out sorted as one segment and the overflow
//               event fires, the last 8 form a second sorted segment.
// The destination rows are compared with a reference sort done here, the tail
// of a partly filled last row must hold the all-ones padding, the rows after
// the bucket must be untouched, and each bucket must finish within a
// cycle bound derived from the lane's one-anchor-per-cycle rate.
module tb_mars_sort_lane;
  localparam int ROWS = 32, RB = 256, W = 32, N = 8, MR = 4, EPR = RB / W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start, busy, done, bypass_evt, overflow_evt;
  logic [4:0]    src_row, dst_row;
  logic [15:0]   n_elems;
  logic          l_req, l_we, sa_rvalid;
  logic [4:0]    l_row;
  logic [RB-1:0] l_wdata, sa_rdata;
  logic          t_req, t_we;
  logic [4:0]    t_row;
  logic [RB-1:0] t_wdata;
  logic          use_tb;
  int checks = 0, failures = 0;
  int n_bypass = 0, n_overflow = 0;

  mars_sort_lane #(.ROWS(ROWS), .ROW_BITS(RB), .W(W), .N(N), .MAX_RUNS(MR)) dut (
    .clk, .rst_n, .start, .src_row, .dst_row, .n_elems, .busy, .done,
    .bypass_evt, .overflow_evt,
    .sa_req(l_req), .sa_we(l_we), .sa_row(l_row), .sa_wdata(l_wdata),
    .sa_rdata, .sa_rvalid
  );

  mars_subarray #(.ROWS(ROWS), .ROW_BITS(RB)) u_mem (
    .clk, .req(use_tb ? t_req : l_req), .we(use_tb ? t_we : l_we),
    .row(use_tb ? t_row : l_row), .wdata(use_tb ? t_wdata : l_wdata),
    .rdata(sa_rdata), .rvalid(sa_rvalid)
  );

  always @(posedge clk) begin
    if (bypass_evt) n_bypass++;
    if (overflow_evt) n_overflow++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_row(input int r, input logic [RB-1:0] d);
    t_req = 1; t_we = 1; t_row = 5'(r); t_wdata = d;
    @(negedge clk);
    t_req = 0; t_we = 0;
  endtask

  task automatic rd_row(input int r, output logic [RB-1:0] d);
    t_req = 1; t_we = 0; t_row = 5'(r);
    @(negedge clk);
    t_req = 0;
    d = sa_rdata;
  endtask

  // sort a[lo..hi) ascending
  function automatic void sort_seg(ref logic [W-1:0] a [], input int lo, input int hi);
    for (int i = lo + 1; i < hi; i++)
      for (int j = i; j > lo && a[j-1] > a[j]; j--) begin
        logic [W-1:0] t = a[j]; a[j] = a[j-1]; a[j-1] = t;
      end
  endfunction

  task automatic run_bucket(input int n, input int src, input int dst,
                            input int exp_bypass, input int exp_overflow);
    logic [W-1:0]  a [];
    logic [RB-1:0] row;
    logic [RB-1:0] guard;
    int nrows = (n + EPR - 1) / EPR;
    int cyc = 0, b0, o0, bound;
    a = new[n];
    use_tb = 1;
    for (int i = 0; i < n; i++) a[i] = W'($urandom_range(0, 1000000));
    for (int r = 0; r < nrows; r++) begin
      row = '0;
      for (int e = 0; e < EPR; e++) if (r * EPR + e < n) row[e*W +: W] = a[r*EPR + e];
      wr_row(src + r, row);
    end
    guard = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
    for (int r = 0; r < nrows + 1; r++) wr_row(dst + r, guard);
    use_tb = 0;
    b0 = n_bypass; o0 = n_overflow;
    start = 1; src_row = 5'(src); dst_row = 5'(dst); n_elems = 16'(n);
    @(negedge clk);
    start = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    // reference: runs of MR*N sorted separately (a segment per merger pass)
    for (int lo = 0; lo < n; lo += MR * N) sort_seg(a, lo, (lo + MR * N < n) ? lo + MR * N : n);
    bound = 2 * n + 40 * ((n + N - 1) / N) + 4 * nrows + 20;
    check(cyc <= bound, $sformatf("bucket of %0d took %0d cycles (bound %0d)", n, cyc, bound));
    $display("bucket %0d anchors: %0d cycles", n, cyc);
    check(n_bypass - b0 == exp_bypass, $sformatf("bypass events %0d", n_bypass - b0));
    check(n_overflow - o0 == exp_overflow, $sformatf("overflow events %0d", n_overflow - o0));
    use_tb = 1;
    for (int r = 0; r < nrows; r++) begin
      rd_row(dst + r, row);
      for (int e = 0; e < EPR; e++)
        if (r * EPR + e < n)
          check(row[e*W +: W] == a[r*EPR + e], $sformatf("n=%0d anchor %0d", n, r*EPR + e));
        else
          check(row[e*W +: W] == '1, "tail of last row padded");
    end
    rd_row(dst + nrows, row);
    check(row == guard, "row after the bucket untouched");
    use_tb = 0;
  endtask

  initial begin
    start = 0; src_row = 0; dst_row = 0; n_elems = 0; use_tb = 1;
    t_req = 0; t_we = 0; t_row = 0; t_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_bucket(5, 0, 16, 5, 0);
    run_bucket(20, 2, 16, 0, 0);
    run_bucket(40, 8, 20, 0, 1);
    run_bucket(29, 0, 24, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
