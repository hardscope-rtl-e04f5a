// srs_bank: one register bank of storage-region entries.
//
// The HardScope unit holds three of these: the active bank (entries of the
// running execution context, checked on every load and store), the spare
// bank (entries delegated to the next context) and the cache bank (a copy of
// the topmost frame of the in-memory stack). A bank keeps its entries in
// slots 0..cnt-1 in the order they were added, so a higher slot is a more
// recently added entry.
//
// Interface, all acting at the rising clock edge:
//   load  - replace the whole bank with load_entries / load_cnt (one cycle,
//           used for the bank-to-bank copies of sbent and sbxit)
//   clr   - empty the bank
//   push  - append push_entry; ignored when the bank is full (the
//           controller reports that case)
// Priority is load, then clr, then push. The outputs are the registers
// themselves, so every slot can be wired to its own comparator.
// Bank size follows the published 16-entry configuration; the priority
// order and the reset to an empty bank are this design's choices.
module srs_bank
  import hs_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16,
  localparam int unsigned CW = $clog2(N_ENTRIES + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  srs_entry_t [N_ENTRIES-1:0]   load_entries,
  input  logic [CW-1:0]                load_cnt,
  input  logic                         clr,
  input  logic                         push,
  input  srs_entry_t                   push_entry,
  output srs_entry_t [N_ENTRIES-1:0]   entries,
  output logic [CW-1:0]                cnt,
  output logic                         full
);

  assign full = (cnt == CW'(N_ENTRIES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      entries <= '0;
      cnt     <= '0;
    end else if (load) begin
      entries <= load_entries;
      cnt     <= load_cnt;
    end else if (clr) begin
      cnt     <= '0;
    end else if (push && !full) begin
      entries[cnt] <= push_entry;
      cnt          <= cnt + 1'b1;
    end
  end

  a_load_cnt: assert property (@(posedge clk) disable iff (!rst_n)
                               load |-> load_cnt <= CW'(N_ENTRIES));

endmodule
