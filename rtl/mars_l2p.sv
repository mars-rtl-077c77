// mars_l2p: accelerator-mode logical-to-physical mapping of MARS.
//
// In accelerator mode the genomic data is laid out log-structured and read
// sequentially, round robin over the flash channels, so the full page-level
// L2P table is replaced by three items: the starting LPA with the page offset
// of its PPA, the database size in pages, and a list of physical block
// addresses (PBAs). Logical page i of a run is found at
//   channel = i mod N_CH,
//   stripe  = start_page + i div N_CH,
//   PBA     = pba_list[list_base + stripe div PAGES_PER_BLOCK],
//   page    = stripe mod PAGES_PER_BLOCK,
// i.e. the same block number on every channel. start begins a run of n_pages
// requests, issued one per cycle on a valid/ready stream; done pulses after
// the last one. The PBA list is written by firmware through pba_we.
// The three stored items and the round-robin order follow the paper; the
// address arithmetic above, the block count per stripe and the list size are
// this design's choices.
module mars_l2p
  import mars_pkg::*;
#(
  parameter int unsigned N_CH = N_CHANNELS,
  parameter int unsigned PPB  = PAGES_PER_BLOCK
) (
  input  logic               clk,
  input  logic               rst_n,
  // PBA list
  input  logic               pba_we,
  input  logic [PBAI_W-1:0]  pba_waddr,
  input  logic [PBA_W-1:0]   pba_wdata,
  // run
  input  logic               start,
  input  logic [LPA_W-1:0]   start_lpa,
  input  logic [PAGE_W-1:0]  start_page,
  input  logic [PBAI_W-1:0]  list_base,
  input  logic [NPG_W-1:0]   n_pages,
  output logic               busy,
  output logic               done,
  // page requests
  output logic               req_valid,
  input  logic               req_ready,
  output flash_addr_t        req_addr
);
  logic [PBA_W-1:0]   pba_list [MAX_PBAS];
  logic [NPG_W-1:0]   left;
  logic [LPA_W-1:0]   lpa;
  logic [CH_W-1:0]    ch;
  logic [PAGE_W-1:0]  page;
  logic [PBAI_W-1:0]  blk;

  always_ff @(posedge clk) if (pba_we) pba_list[pba_waddr] <= pba_wdata;

  assign req_valid     = (left != '0);
  assign req_addr.lpa  = lpa;
  assign req_addr.ch   = ch;
  assign req_addr.pba  = pba_list[blk];
  assign req_addr.page = page;
  assign busy          = req_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      left <= '0;
      lpa  <= '0;
      ch   <= '0;
      page <= '0;
      blk  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        left <= n_pages;
        lpa  <= start_lpa;
        ch   <= '0;
        page <= start_page;
        blk  <= list_base;
        done <= (n_pages == '0);
      end else if (req_valid && req_ready) begin
        left <= left - 1'b1;
        lpa  <= lpa + 1'b1;
        if (left == NPG_W'(1)) done <= 1'b1;
        if (ch == CH_W'(N_CH - 1)) begin
          ch <= '0;
          if (page == PAGE_W'(PPB - 1)) begin
            page <= '0;
            blk  <= blk + 1'b1;
          end else page <= page + 1'b1;
        end else ch <= ch + 1'b1;
      end
    end
  end
endmodule
