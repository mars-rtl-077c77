// mars_pim_pair: two SSD-internal DRAM subarrays with their compute units -
// one Querying Unit in each subarray and one Arithmetic Unit shared by the
// pair at the edge of their peripheral logic.
//
// Each subarray has a single row port. It is granted with fixed priority to
// the external row port (controller or sort lane, subarray 0 only), then the
// subarray's Querying Unit, then the Arithmetic Unit. The control unit runs
// one pipeline step at a time, so only one requester is active in normal
// operation; an assertion checks that. Both Querying Units receive the same
// query command. Row read data of a subarray goes to every unit; each unit
// only takes it while it waits for its own request.
// The placement (one AU per two subarrays, one QU per subarray) follows the
// paper; the port sharing is this design's choice.
module mars_pim_pair
  import mars_pkg::*;
#(
  parameter int unsigned ROWS     = DRAM_ROWS,
  parameter int unsigned ROW_BITS = mars_pkg::ROW_BITS,
  localparam int unsigned RA_W    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // Arithmetic Unit
  input  logic                ib_we,
  input  logic [AU_PC_W-1:0]  ib_addr,
  input  au_instr_t           ib_data,
  input  logic                au_start,
  input  logic [AU_PC_W-1:0]  au_pc,
  output logic                au_busy,
  // Querying Units
  input  logic                qu_start,
  input  logic [RA_W-1:0]     qu_key_row,
  input  logic [RA_W-1:0]     qu_dst_row,
  input  logic [RA_W-1:0]     qu_first_row,
  input  logic [RA_W:0]       qu_n_rows,
  input  logic [WORD_W-1:0]   qu_key_base,
  output logic                qu_busy,
  // external row port to subarray 0
  input  logic                ext_req,
  input  logic                ext_we,
  input  logic [RA_W-1:0]     ext_row,
  input  logic [ROW_BITS-1:0] ext_wdata,
  output logic [ROW_BITS-1:0] ext_rdata,
  output logic                ext_rvalid
);
  // subarray side
  logic [1:0]          s_req, s_we, s_rvalid;
  logic [RA_W-1:0]     s_row   [2];
  logic [ROW_BITS-1:0] s_wdata [2];
  logic [ROW_BITS-1:0] s_rdata [2];
  // Arithmetic Unit side
  logic [1:0]          a_req, a_we;
  logic [RA_W-1:0]     a_row;
  logic [ROW_BITS-1:0] a_wdata;
  // Querying Unit side
  logic [1:0]          q_req, q_we, q_busy;
  logic [RA_W-1:0]     q_row   [2];
  logic [ROW_BITS-1:0] q_wdata [2];

  mars_arith_unit #(.ROWS(ROWS), .ROW_BITS(ROW_BITS)) u_au (
    .clk, .rst_n, .ib_we, .ib_addr, .ib_data,
    .start(au_start), .start_pc(au_pc), .busy(au_busy), .done(),
    .sa_req(a_req), .sa_we(a_we), .sa_row(a_row), .sa_wdata(a_wdata),
    .sa_rdata(s_rdata), .sa_rvalid(s_rvalid)
  );

  for (genvar s = 0; s < 2; s++) begin : g_sub
    mars_query_unit #(.ROWS(ROWS), .ROW_BITS(ROW_BITS)) u_qu (
      .clk, .rst_n, .start(qu_start),
      .key_row(qu_key_row), .dst_row(qu_dst_row), .first_row(qu_first_row),
      .n_rows(qu_n_rows), .key_base(qu_key_base),
      .busy(q_busy[s]), .done(),
      .sa_req(q_req[s]), .sa_we(q_we[s]), .sa_row(q_row[s]), .sa_wdata(q_wdata[s]),
      .sa_rdata(s_rdata[s]), .sa_rvalid(s_rvalid[s])
    );

    logic e_req;
    assign e_req = (s == 0) ? ext_req : 1'b0;

    always_comb begin
      if (e_req) begin
        s_req[s] = 1'b1;  s_we[s] = ext_we;   s_row[s] = ext_row;  s_wdata[s] = ext_wdata;
      end else if (q_req[s]) begin
        s_req[s] = 1'b1;  s_we[s] = q_we[s];  s_row[s] = q_row[s]; s_wdata[s] = q_wdata[s];
      end else begin
        s_req[s] = a_req[s]; s_we[s] = a_we[s]; s_row[s] = a_row;  s_wdata[s] = a_wdata;
      end
    end

    mars_subarray #(.ROWS(ROWS), .ROW_BITS(ROW_BITS)) u_sa (
      .clk, .req(s_req[s]), .we(s_we[s]), .row(s_row[s]), .wdata(s_wdata[s]),
      .rdata(s_rdata[s]), .rvalid(s_rvalid[s])
    );

    a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                  $onehot0({e_req, q_req[s], a_req[s]}));
  end

  assign qu_busy    = |q_busy;
  assign ext_rdata  = s_rdata[0];
  assign ext_rvalid = s_rvalid[0];
endmodule
