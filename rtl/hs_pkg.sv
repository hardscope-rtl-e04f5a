// hs_pkg: types and constants shared by the HardScope run-time scope
// enforcement unit.
//
// A storage-region entry is a pair of 32-bit byte addresses (base, limit),
// both inclusive, describing one memory area an execution context may touch.
// The six HardScope instructions (sbent, sbxit, sradd, srdda, srdlg, srdsub)
// are carried in the RISC-V S-type format; the major opcode and the funct3
// numbering below are this design's own choice, as no binary encoding is
// published for them. The fault causes are likewise this design's own: the
// published design only says that an unmatched load or store raises a
// hardware fault.
package hs_pkg;

  localparam int unsigned XLEN = 32;
  typedef logic [XLEN-1:0] addr_t;

  // One storage-region entry: base and limit, both inclusive.
  typedef struct packed {
    addr_t base;
    addr_t limit;
  } srs_entry_t;

  // Operation handed from the decode stage to the SRS controller.
  typedef enum logic [2:0] {
    HS_NONE   = 3'd0,
    HS_SBENT  = 3'd1,  // scope block enter: push a frame
    HS_SBXIT  = 3'd2,  // scope block exit: pop a frame
    HS_SRADD  = 3'd3,  // add entry: base = r1, limit = r2 + imm
    HS_SRDDA  = 3'd4,  // add entry: base = r1 + imm, limit = r2
    HS_SRDLG  = 3'd5,  // delegate the entry holding address r1 + imm
    HS_SRDSUB = 3'd6   // delegate sub-region base = r1, limit = r2 + imm
  } hs_op_t;

  // Why the unit raised a fault.
  typedef enum logic [2:0] {
    HS_FAULT_NONE       = 3'd0,
    HS_FAULT_ACCESS     = 3'd1,  // load/store outside every active entry
    HS_FAULT_BANK_FULL  = 3'd2,  // no free entry left in the target bank
    HS_FAULT_STACK_FULL = 3'd3,  // sbent with protected memory full
    HS_FAULT_STACK_EMPTY= 3'd4   // sbxit with no frame on the stack
  } hs_fault_t;

  // Load/store access size, coded like RISC-V funct3[1:0].
  typedef enum logic [1:0] {
    LSU_BYTE = 2'b00,
    LSU_HALF = 2'b01,
    LSU_WORD = 2'b10
  } lsu_size_t;

  // Instruction encoding (S-type): custom-0 major opcode, funct3 selects.
  localparam logic [6:0] HS_OPCODE      = 7'b0001011;
  localparam logic [2:0] HS_F3_SBENT    = 3'b000;
  localparam logic [2:0] HS_F3_SBXIT    = 3'b001;
  localparam logic [2:0] HS_F3_SRADD    = 3'b010;
  localparam logic [2:0] HS_F3_SRDDA    = 3'b011;
  localparam logic [2:0] HS_F3_SRDLG    = 3'b100;
  localparam logic [2:0] HS_F3_SRDSUB   = 3'b101;

  // Build an S-type HardScope instruction word (used by software models
  // and testbenches).
  function automatic logic [31:0] hs_encode(logic [2:0] f3, logic [4:0] rs1,
                                            logic [4:0] rs2, logic [11:0] imm);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], HS_OPCODE};
  endfunction

endpackage
