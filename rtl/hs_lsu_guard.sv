// hs_lsu_guard: intercepts the core's load/store requests in the memory
// access stage and lets through only those that lie inside an active
// storage-region entry.
//
// The request address and size (byte, half-word, word) become a byte
// range [lo, hi] = [addr, addr + bytes - 1], which goes to the SRS
// controller's comparators; the returned chk_hit says whether an active
// entry contains the whole range. The request is forwarded (mem_req) when
// it matches or when enforcement is off (empty SRS); otherwise it is
// blocked and access_fault is raised in the same cycle. A range that wraps
// past the top of the address space never matches.
// Timing: purely combinational, so a checked access costs no extra cycle.
// From the published design: range from address and size, subset check
// against all active entries, fault on mismatch, no added latency. This
// design's own: treating a wrapping range as a fault, and the fault as a
// same-cycle pulse.
module hs_lsu_guard
  import hs_pkg::*;
(
  input  logic      lsu_req,
  input  addr_t     lsu_addr,
  input  lsu_size_t lsu_size,
  input  logic      enabled,
  output logic      chk_valid,
  output addr_t     chk_lo,
  output addr_t     chk_hi,
  input  logic      chk_hit,
  output logic      mem_req,
  output logic      access_fault
);

  logic [XLEN:0] hi_ext;
  logic          wraps;

  always_comb begin
    unique case (lsu_size)
      LSU_BYTE: hi_ext = {1'b0, lsu_addr};
      LSU_HALF: hi_ext = {1'b0, lsu_addr} + (XLEN+1)'(1);
      default:  hi_ext = {1'b0, lsu_addr} + (XLEN+1)'(3);
    endcase
    wraps     = hi_ext[XLEN];
    chk_valid = lsu_req;
    chk_lo    = lsu_addr;
    chk_hi    = hi_ext[XLEN-1:0];
    mem_req      = lsu_req && (!enabled || (chk_hit && !wraps));
    access_fault = lsu_req && enabled && !(chk_hit && !wraps);
  end

endmodule
