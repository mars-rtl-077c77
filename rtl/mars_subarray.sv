// mars_subarray: behavioural model of one SSD-internal LPDDR4 DRAM subarray.
//
// A real subarray is an analog array of one-transistor cells with sense
// amplifiers; this model keeps only its logic function so that the
// processing-in-memory units around it can be simulated. It holds ROWS rows of
// ROW_BITS bits (256 rows of 2048 bytes in the evaluated configuration). A
// request with we=0 activates a row: one cycle later its contents appear in
// the local row buffer (rdata) with rvalid high. A request with we=1 writes
// wdata into the row (write-back of a full row buffer). One request per cycle.
// There is no refresh, no bank timing and no partial-row write: column access
// is done by the units that own the row buffer. Geometry follows the paper;
// the one-cycle activation is this model's simplification.
module mars_subarray #(
  parameter int unsigned ROWS     = mars_pkg::DRAM_ROWS,
  parameter int unsigned ROW_BITS = mars_pkg::ROW_BITS,
  localparam int unsigned RA_W    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                req,
  input  logic                we,
  input  logic [RA_W-1:0]     row,
  input  logic [ROW_BITS-1:0] wdata,
  output logic [ROW_BITS-1:0] rdata,
  output logic                rvalid
);
  logic [ROW_BITS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    rvalid <= req && !we;
    if (req && we) cells[row] <= wdata;
    if (req && !we) rdata <= cells[row];
  end
endmodule
