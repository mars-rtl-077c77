// mars_arith_unit: Arithmetic Unit placed at the edge of a pair of
// SSD-internal DRAM subarrays (Processing-Near-DRAM, FULCRUM-style).
//
// Parts, as in the paper's block diagram:
//   ALU                      one WORD_W-bit word per cycle: add, subtract,
//                            fixed-point multiply, bitwise ops, shifts,
//                            min/max and compares;
//   registers                AU_NREGS words, r0 reads as zero;
//   instruction buffer       AU_IB_DEPTH pre-decoded instructions, written
//                            through ib_we/ib_addr/ib_data; each instruction
//                            carries its operands and both possible successors
//                            (next_t, next_f);
//   column-selection latches AU_NLATCH row-wide rows of latches. ACT copies an
//                            activated subarray row into one latch row, RDCOL
//                            and WRCOL access one column word at the column
//                            pointer col[w] (optionally advancing it), WB
//                            writes a latch row back into a subarray row;
//   control unit             picks the next instruction from the flag of the
//                            current one (flag = result != 0) and drives the
//                            row address of ACT/WB.
// A program is started with start/start_pc and runs until HALT, which raises
// done for one cycle. Every instruction takes one cycle, ACT two (activation
// then latch). The instruction format, r0 = 0, MUL = (a*reg[rb]) >>> imm[3:0]
// and the flag rule are this design's choices; the paper gives the parts and
// that the next instruction depends on the previous outcome.
module mars_arith_unit
  import mars_pkg::*;
#(
  parameter int unsigned ROWS     = DRAM_ROWS,
  parameter int unsigned ROW_BITS = mars_pkg::ROW_BITS,
  localparam int unsigned SLOTS   = ROW_BITS / WORD_W,
  localparam int unsigned COL_W   = $clog2(SLOTS),
  localparam int unsigned RA_W    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction buffer programming
  input  logic                ib_we,
  input  logic [AU_PC_W-1:0]  ib_addr,
  input  au_instr_t           ib_data,
  // run control
  input  logic                start,
  input  logic [AU_PC_W-1:0]  start_pc,
  output logic                busy,
  output logic                done,
  // row ports of the two subarrays
  output logic [1:0]          sa_req,
  output logic [1:0]          sa_we,
  output logic [RA_W-1:0]     sa_row,
  output logic [ROW_BITS-1:0] sa_wdata,
  input  logic [ROW_BITS-1:0] sa_rdata [2],
  input  logic [1:0]          sa_rvalid
);
  typedef enum logic [1:0] {A_IDLE, A_EXEC, A_ACTWAIT} a_state_e;
  a_state_e state;

  au_instr_t           ib [AU_IB_DEPTH];
  logic [WORD_W-1:0]   regs [AU_NREGS];
  logic [WORD_W-1:0]   latch [AU_NLATCH][SLOTS];
  logic [COL_W-1:0]    col [AU_NLATCH];
  logic [AU_PC_W-1:0]  pc;

  au_instr_t           ins;
  logic [WORD_W-1:0]   a, b, res;
  logic signed [2*WORD_W-1:0] prod;
  logic                flag;
  logic [WORD_W-1:0]   addr_sum;

  always_ff @(posedge clk) if (ib_we) ib[ib_addr] <= ib_data;

  assign ins      = ib[pc];
  assign a        = (ins.ra == 3'd0) ? '0 : regs[ins.ra];
  assign b        = ins.use_imm ? ins.imm : ((ins.rb == 3'd0) ? '0 : regs[ins.rb]);
  assign addr_sum = a + b;
  assign prod     = $signed(a) * $signed((ins.rb == 3'd0) ? '0 : regs[ins.rb]);

  // ALU
  always_comb begin
    unique case (ins.op)
      AU_ADD:   res = a + b;
      AU_SUB:   res = a - b;
      AU_MUL:   res = WORD_W'(prod >>> ins.imm[3:0]);
      AU_AND:   res = a & b;
      AU_OR:    res = a | b;
      AU_XOR:   res = a ^ b;
      AU_SHL:   res = a << b[3:0];
      AU_SHRA:  res = WORD_W'($signed(a) >>> b[3:0]);
      AU_MIN:   res = ($signed(a) < $signed(b)) ? a : b;
      AU_MAX:   res = ($signed(a) > $signed(b)) ? a : b;
      AU_CMPLT: res = WORD_W'($signed(a) < $signed(b));
      AU_CMPEQ: res = WORD_W'(a == b);
      AU_RDCOL: res = latch[ins.w][col[ins.w]];
      AU_WRCOL: res = a;
      default:  res = '0;
    endcase
  end
  assign flag = (res != '0);

  // control unit
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= A_IDLE;
      pc    <= '0;
      done  <= 1'b0;
      for (int r = 0; r < AU_NREGS; r++) regs[r] <= '0;
      for (int w = 0; w < AU_NLATCH; w++) col[w] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        A_IDLE: if (start) begin
          pc    <= start_pc;
          state <= A_EXEC;
        end
        A_EXEC: begin
          unique case (ins.op)
            AU_HALT: begin
              done  <= 1'b1;
              state <= A_IDLE;
            end
            AU_ACT: state <= A_ACTWAIT;
            AU_WB, AU_NOP: pc <= ins.next_t;
            AU_SETCOL: begin
              col[ins.w] <= COL_W'(addr_sum);
              pc <= ins.next_t;
            end
            AU_WRCOL: begin
              latch[ins.w][col[ins.w]] <= a;
              if (ins.col_inc) col[ins.w] <= col[ins.w] + 1'b1;
              pc <= flag ? ins.next_t : ins.next_f;
            end
            default: begin  // ALU ops and RDCOL
              if (ins.rd != 3'd0) regs[ins.rd] <= res;
              if (ins.op == AU_RDCOL && ins.col_inc) col[ins.w] <= col[ins.w] + 1'b1;
              pc <= flag ? ins.next_t : ins.next_f;
            end
          endcase
        end
        A_ACTWAIT: if (sa_rvalid[ins.sub]) begin
          for (int s = 0; s < SLOTS; s++) latch[ins.w][s] <= sa_rdata[ins.sub][s*WORD_W +: WORD_W];
          pc    <= ins.next_t;
          state <= A_EXEC;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  assign busy = (state != A_IDLE);

  // subarray requests
  always_comb begin
    sa_req = '0;
    sa_we  = '0;
    sa_row = RA_W'(addr_sum);
    for (int s = 0; s < SLOTS; s++) sa_wdata[s*WORD_W +: WORD_W] = latch[ins.w][s];
    if (state == A_EXEC && (ins.op == AU_ACT || ins.op == AU_WB)) begin
      sa_req[ins.sub] = 1'b1;
      sa_we[ins.sub]  = (ins.op == AU_WB);
    end
  end

  a_no_prog_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(ib_we && busy));
endmodule
