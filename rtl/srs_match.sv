// srs_match: the parallel comparators wired to a register bank.
//
// Every valid slot i (i < cnt) compares the requested byte range [lo, hi]
// with its entry: the slot matches when base <= lo and hi <= limit, i.e.
// the request lies wholly inside the entry. All slots compare in the same
// cycle. `hit` says whether any slot matched and `idx` names the highest
// matching slot, which is the most recently added entry; that is the one
// srdlg must delegate when several entries match.
// Purely combinational: the result is ready in the cycle of the request,
// so checking a load or store costs no extra cycle.
// The subset rule and the parallel compare follow the published design;
// the "highest slot is most recent" convention comes from srs_bank.
module srs_match
  import hs_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16,
  localparam int unsigned CW = $clog2(N_ENTRIES + 1),
  localparam int unsigned IW = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1
) (
  input  srs_entry_t [N_ENTRIES-1:0] entries,
  input  logic [CW-1:0]              cnt,
  input  addr_t                      lo,
  input  addr_t                      hi,
  output logic                       hit,
  output logic [IW-1:0]              idx,
  output logic [N_ENTRIES-1:0]       slot_hit
);

  always_comb begin
    for (int unsigned i = 0; i < N_ENTRIES; i++) begin
      slot_hit[i] = (i < 32'(cnt)) &&
                    (entries[i].base <= lo) && (hi <= entries[i].limit);
    end
  end

  // Priority encoder: the highest matching slot wins.
  always_comb begin
    hit = 1'b0;
    idx = '0;
    for (int unsigned i = 0; i < N_ENTRIES; i++) begin
      if (slot_hit[i]) begin
        hit = 1'b1;
        idx = IW'(i);
      end
    end
  end

endmodule
