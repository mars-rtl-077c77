// tb_mars_sorter: self-checking test of the Sorter Unit.
// Streams buckets of several lengths (1, 5, 128, 129, 300 anchors, random
// values with repeats) and checks that the output is the bucket cut into
// 128-element subsequences, each sorted ascending, with correct run/bucket
// flags and the single-run flag. It also checks the sort latency: the first
// sorted element appears 29 cycles after the last element of a subsequence
// is accepted (28 bitonic stages + one transfer cycle). Output back-pressure
// is applied at random.
module tb_mars_sorter;
  localparam int N = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, in_last;
  logic [31:0] in_data;
  logic        out_valid, out_ready, out_run_last, out_bucket_last, out_single;
  logic [31:0] out_data;
  int checks = 0, failures = 0;

  mars_sorter #(.N(N), .W(32)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] exp_q[$];       // expected output order
  bit          exp_rl[$], exp_bl[$], exp_sg[$];
  int          cycle = 0;
  int          lens[5] = '{1, 5, 128, 129, 300};
  int          last_acc_cycle = -1;
  int          lat_seen = 0;
  bit          was_valid = 0;

  always @(negedge clk) cycle++;

  // latency monitor: sampled at clock edges. A subsequence's last element is
  // accepted at edge E0; 28 stage edges and one transfer edge follow, so
  // out_valid is first sampled high at edge E0+30. Measured only when the
  // drain buffer was empty at E0.
  int acc_in_chunk = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !was_valid && last_acc_cycle >= 0) begin
      check(cycle - last_acc_cycle == 30, $sformatf("latency %0d", cycle - last_acc_cycle));
      lat_seen++;
      last_acc_cycle = -1;
    end
    was_valid = out_valid;
    if (in_valid && in_ready) begin
      acc_in_chunk++;
      if (in_last || acc_in_chunk == N) begin
        if (!out_valid) last_acc_cycle = cycle;
        acc_in_chunk = 0;
      end
    end
  end

  // output checker
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        check(out_data == exp_q[0], $sformatf("data %h exp %h", out_data, exp_q[0]));
        check(out_run_last == exp_rl[0] && out_bucket_last == exp_bl[0] && out_single == exp_sg[0],
              "flags");
        void'(exp_q.pop_front()); void'(exp_rl.pop_front());
        void'(exp_bl.pop_front()); void'(exp_sg.pop_front());
      end
    end
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  task automatic send_bucket(input int n);
    logic [31:0] chunk[$];
    int runs = (n + N - 1) / N;
    for (int i = 0; i < n; i++) begin
      logic [31:0] v = $urandom_range(0, 50) * 1000 + $urandom_range(0, 3);
      chunk.push_back(v);
      in_valid <= 1'b1; in_data <= v; in_last <= (i == n - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (chunk.size() == N || i == n - 1) begin
        chunk.sort();
        foreach (chunk[k]) begin
          exp_q.push_back(chunk[k]);
          exp_rl.push_back(k == chunk.size() - 1);
          exp_bl.push_back(k == chunk.size() - 1 && i == n - 1);
          exp_sg.push_back(runs == 1);
        end
        chunk = {};
      end
    end
    in_valid <= 1'b0;
  endtask

  initial begin
    in_valid = 0; in_data = 0; in_last = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int b = 0; b < 5; b++) begin
      send_bucket(lens[b]);
      while (exp_q.size() != 0) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    check(lat_seen >= 5, "latency measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
