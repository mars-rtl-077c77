// tb_mars_merger: self-checking test of the Merger Unit (N=8, MAX_RUNS=4).
// Buckets are driven as sorted runs: a single-run bucket (must bypass), a
// three-run bucket (one merged sequence) and a six-run bucket (overflow: the
// first four runs come out as one sorted segment, the last two as the final
// sorted segment). The expected output is computed by sorting each segment's
// elements in the testbench. The merge must emit one element per cycle while
// out_ready is high; back-pressure is applied at random in the second half.
module tb_mars_merger;
  localparam int N = 8, R = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, in_run_last, in_bucket_last, in_single;
  logic [31:0] in_data;
  logic        out_valid, out_ready, out_last, bypass, overflow;
  logic [31:0] out_data;
  int checks = 0, failures = 0;
  int n_bypass = 0, n_overflow = 0, n_last = 0;
  bit rand_ready = 0;

  mars_merger #(.N(N), .W(32), .MAX_RUNS(R)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] exp_q[$];
  bit          exp_last[$];

  always @(posedge clk) if (rst_n) begin
    if (bypass) n_bypass++;
    if (overflow) n_overflow++;
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        check(out_data == exp_q[0], $sformatf("data %0d exp %0d", out_data, exp_q[0]));
        check(out_last == exp_last[0], "last flag");
        if (out_last) n_last++;
        void'(exp_q.pop_front()); void'(exp_last.pop_front());
      end
    end
    out_ready <= rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  // drive one bucket of nruns runs with the given lengths
  task automatic bucket(input int nruns, input int lens[]);
    logic [31:0] seg[$];
    for (int r = 0; r < nruns; r++) begin
      logic [31:0] run[$];
      for (int i = 0; i < lens[r]; i++) run.push_back($urandom_range(0, 99));
      run.sort();
      foreach (run[i]) begin
        seg.push_back(run[i]);
        in_valid <= 1; in_data <= run[i];
        in_run_last <= (i == lens[r] - 1);
        in_bucket_last <= (i == lens[r] - 1) && (r == nruns - 1);
        in_single <= (nruns == 1);
        if (nruns == 1) begin
          exp_q.push_back(run[i]);
          exp_last.push_back(i == lens[r] - 1);
        end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      if (nruns > 1 && ((r % R) == R - 1 || r == nruns - 1)) begin
        seg.sort();
        foreach (seg[i]) begin
          exp_q.push_back(seg[i]);
          exp_last.push_back(r == nruns - 1 && i == seg.size() - 1);
        end
        seg = {};
      end
    end
    in_valid <= 0;
  endtask

  int t0;
  initial begin
    in_valid = 0; in_data = 0; in_run_last = 0; in_bucket_last = 0; in_single = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    bucket(1, '{5});
    while (exp_q.size() != 0) @(posedge clk);
    // three runs, full-rate output: 8+8+3 elements in 19 consecutive cycles
    bucket(3, '{8, 8, 3});
    t0 = 0;
    while (exp_q.size() != 0) begin @(posedge clk); t0++; end
    check(t0 == 20, $sformatf("merge of 19 elements took %0d cycles", t0));
    rand_ready = 1;
    bucket(6, '{8, 1, 8, 4, 8, 2});
    while (exp_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
    check(n_bypass == 5, $sformatf("bypass count %0d", n_bypass));
    check(n_overflow == 1, $sformatf("overflow count %0d", n_overflow));
    check(n_last == 3, $sformatf("bucket ends %0d", n_last));
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
