// hs_decode: decode-stage extension for the HardScope instructions.
//
// Recognises the six instructions in the instruction word, forms their
// operands from the two register values the core reads (after its own
// forwarding) and the S-type 12-bit signed immediate, and hands one
// operation per cycle to the SRS controller:
//   sbent, sbxit          no operands
//   sradd  r1, imm(r2)    base = x[rs1],       limit = x[rs2] + imm
//   srdda  imm(r1), r2    base = x[rs1] + imm, limit = x[rs2]
//   srdlg  imm(r1)        address = x[rs1] + imm (base = limit = address);
//                         with rs1 = x0 the immediate is an absolute address
//   srdsub r1, imm(r2)    base = x[rs1],       limit = x[rs2] + imm
// Stalls (hs_stall, to the core's decode stage):
//   - an sbent or sbxit directly after an srdlg or srdsub waits one cycle;
//     this fixed stall is decided here without feedback from the unit;
//   - any HardScope instruction waits while the controller's op_ready is
//     low (a context switch during a background frame transfer).
// Timing: combinational from instr to op/stall; one state bit remembers
// whether the last instruction that left decode was srdlg or srdsub.
// instr_valid means an instruction is in decode and leaves it at the clock
// edge unless hs_stall holds it.
// From the published design: S-type encoding, operand order of each
// instruction, the one-cycle delegation stall, the busy stall. Opcode and
// funct3 values are this design's own (see hs_pkg).
module hs_decode
  import hs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  input  logic [31:0] instr,
  input  addr_t       rs1_val,
  input  addr_t       rs2_val,
  input  logic        unit_ready,
  output logic        is_hs,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic        op_valid,
  output hs_op_t      op,
  output addr_t       op_base,
  output addr_t       op_limit,
  output logic        hs_stall
);

  logic [2:0] funct3;
  addr_t      imm;
  logic       prev_dlg;      // last instruction leaving decode was srdlg/srdsub
  logic       dlg_stall;

  assign funct3 = instr[14:12];
  assign rs1    = instr[19:15];
  assign rs2    = instr[24:20];
  assign imm    = {{(XLEN-12){instr[31]}}, instr[31:25], instr[11:7]};

  always_comb begin
    op = HS_NONE;
    if (instr[6:0] == HS_OPCODE) begin
      unique case (funct3)
        HS_F3_SBENT:  op = HS_SBENT;
        HS_F3_SBXIT:  op = HS_SBXIT;
        HS_F3_SRADD:  op = HS_SRADD;
        HS_F3_SRDDA:  op = HS_SRDDA;
        HS_F3_SRDLG:  op = HS_SRDLG;
        HS_F3_SRDSUB: op = HS_SRDSUB;
        default:      op = HS_NONE;
      endcase
    end
    is_hs = instr_valid && (op != HS_NONE);

    unique case (op)
      HS_SRDDA: begin op_base = rs1_val + imm; op_limit = rs2_val;       end
      HS_SRDLG: begin op_base = rs1_val + imm; op_limit = rs1_val + imm; end
      default:  begin op_base = rs1_val;       op_limit = rs2_val + imm; end
    endcase

    dlg_stall = is_hs && prev_dlg && (op == HS_SBENT || op == HS_SBXIT);
    op_valid  = is_hs && !dlg_stall;
    hs_stall  = is_hs && (dlg_stall || !unit_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_dlg <= 1'b0;
    end else if (instr_valid) begin
      if (dlg_stall)      prev_dlg <= 1'b0;   // stall served
      else if (!hs_stall) prev_dlg <= is_hs && (op == HS_SRDLG || op == HS_SRDSUB);
    end
  end

endmodule
