// hardscope_top: the HardScope run-time scope enforcement unit as it
// attaches to a small in-order RISC-V core.
//
// HardScope keeps, in hardware, a stack of rule frames (the Storage Region
// Stack, SRS), one per live execution context such as a function call.
// Each frame lists the memory areas that context may access. Compiler-
// inserted instructions push a frame (sbent), pop it (sbxit), add areas to
// it (sradd, srdda) and hand areas on to the next context (srdlg, srdsub).
// Every load and store is checked against the frame of the running
// context, so data-oriented attacks that reach variables out of scope fault.
//
// Blocks: hs_decode (decode-stage extension, stalls), srs_controller (SRS
// controller with active, spare and cache banks and protected SRS memory)
// and hs_lsu_guard (load/store interception). The core itself is outside:
// its decode stage supplies the instruction word and the two register
// values; its memory stage supplies load/store requests and receives
// mem_req (request forwarded to memory) or access_fault.
//
// Timing: a HardScope instruction executes at the clock edge of the cycle
// it is presented, unless hs_stall holds it in decode. A load/store check
// is combinational. Frame transfers between cache and SRS memory run in
// the background and only stall a later context switch.
// Sizes default to the published configuration: 16 entries per bank and
// 16 frames of protected memory. Folding decode and execute into one cycle
// is a simplification of this design; the core's pipeline is not modelled.
module hardscope_top
  import hs_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16,
  parameter int unsigned N_FRAMES  = 16,
  localparam int unsigned CW = $clog2(N_ENTRIES + 1),
  localparam int unsigned DW = $clog2(N_FRAMES + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  // decode stage of the core
  input  logic          instr_valid,
  input  logic [31:0]   instr,
  input  addr_t         rs1_val,
  input  addr_t         rs2_val,
  output logic [4:0]    rs1,
  output logic [4:0]    rs2,
  output logic          is_hs,
  output logic          hs_stall,
  // memory stage of the core
  input  logic          lsu_req,
  input  addr_t         lsu_addr,
  input  lsu_size_t     lsu_size,
  output logic          mem_req,
  output logic          access_fault,
  // faults raised by HardScope instructions
  output logic          op_fault,
  output hs_fault_t     op_fault_cause,
  // status
  output logic          enabled,
  output logic [DW-1:0] depth,
  output logic          xfer_busy,
  output logic [CW-1:0] active_cnt,
  output logic [CW-1:0] spare_cnt,
  output logic [CW-1:0] cache_cnt
);

  logic   op_valid, op_ready;
  hs_op_t op;
  addr_t  op_base, op_limit;
  logic   chk_valid, chk_hit;
  addr_t  chk_lo, chk_hi;
  logic   wb_busy, fill_busy;

  hs_decode u_decode (
    .clk, .rst_n,
    .instr_valid, .instr, .rs1_val, .rs2_val,
    .unit_ready(op_ready),
    .is_hs, .rs1, .rs2,
    .op_valid, .op, .op_base, .op_limit, .hs_stall
  );

  srs_controller #(.N_ENTRIES(N_ENTRIES), .N_FRAMES(N_FRAMES)) u_ctrl (
    .clk, .rst_n,
    .op_valid, .op, .op_base, .op_limit,
    .op_ready, .op_fault, .op_fault_cause,
    .chk_valid, .chk_lo, .chk_hi, .chk_hit,
    .enabled, .depth, .wb_busy, .fill_busy,
    .active_cnt, .spare_cnt, .cache_cnt
  );

  hs_lsu_guard u_guard (
    .lsu_req, .lsu_addr, .lsu_size, .enabled,
    .chk_valid, .chk_lo, .chk_hi, .chk_hit,
    .mem_req, .access_fault
  );

  assign xfer_busy = wb_busy || fill_busy;

endmodule
