// tb_mars_l2p: self-checking test of the accelerator-mode L2P mapping with 4
// channels and 4 pages per block. Loads a PBA list, runs a database of 37
// pages that starts at page offset 2 of list entry 3, and checks every page
// request (LPA, channel, PBA, page) against the round-robin formula, with
// random back-pressure; then checks one request per cycle without
// back-pressure and the done pulse.
module tb_mars_l2p;
  import mars_pkg::*;
  localparam int NCH = 4, PPB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               pba_we, start, busy, done, req_valid, req_ready;
  logic [PBAI_W-1:0]  pba_waddr, list_base;
  logic [PBA_W-1:0]   pba_wdata;
  logic [LPA_W-1:0]   start_lpa;
  logic [PAGE_W-1:0]  start_page;
  logic [NPG_W-1:0]   n_pages;
  flash_addr_t        req_addr;
  logic [PBA_W-1:0]   list [MAX_PBAS];
  int checks = 0, failures = 0;

  mars_l2p #(.N_CH(NCH), .PPB(PPB)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int lpa0, input int pg0, input int base, input int n, input bit bp);
    int i = 0, cyc = 0, done_seen = 0;
    start = 1; start_lpa = lpa0; start_page = PAGE_W'(pg0); list_base = PBAI_W'(base); n_pages = NPG_W'(n);
    @(negedge clk);
    start = 0;
    while (i < n && cyc < 1000) begin
      req_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (req_valid && req_ready) begin
        int stripe = pg0 + i / NCH;
        check(req_addr.lpa == LPA_W'(lpa0 + i), "lpa");
        check(req_addr.ch == CH_W'(i % NCH), $sformatf("ch of page %0d", i));
        check(req_addr.pba == list[base + stripe / PPB], $sformatf("pba of page %0d", i));
        check(req_addr.page == PAGE_W'(stripe % PPB), $sformatf("page of page %0d", i));
        i++;
      end
      @(negedge clk);
      cyc++;
      if (done) done_seen++;
    end
    check(!req_valid, "no request after the last page");
    if (!bp) check(cyc == n, $sformatf("%0d pages took %0d cycles", n, cyc));
    check(done_seen == 1 || (done_seen == 0 && done), "done pulse");
    req_ready = 0;
    @(negedge clk);
  endtask

  initial begin
    pba_we = 0; pba_waddr = 0; pba_wdata = 0; start = 0; start_lpa = 0; start_page = 0;
    list_base = 0; n_pages = 0; req_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < MAX_PBAS; k++) begin
      list[k] = PBA_W'($urandom_range(0, 60000));
      pba_we = 1; pba_waddr = PBAI_W'(k); pba_wdata = list[k];
      @(negedge clk);
    end
    pba_we = 0;
    run(1000, 2, 3, 37, 1);
    run(5, 0, 10, 16, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
