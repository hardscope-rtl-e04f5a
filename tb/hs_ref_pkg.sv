// hs_ref_pkg: reference model of the HardScope Storage Region Stack for
// the testbenches.
//
// The model keeps the logical state only: a list of active entries, a list
// of delegated (spare) entries and a stack of saved frames, each a plain
// queue. It does not model the three physical banks or the memory layout.
// Timing is modelled by two counters: after an sbent the saved frame takes
// one cycle per entry to reach memory, after an sbxit the new top frame
// takes one cycle per entry to come back. A context switch that arrives
// while a transfer is running is held, except an sbent during a refill,
// which abandons the refill.
// Per cycle the testbench asks ready()/check() first, then calls tick()
// and exec() for what was accepted in that cycle.
package hs_ref_pkg;
  import hs_pkg::*;

  class srs_model;
    int unsigned n_entries;
    int unsigned n_frames;
    srs_entry_t  active[$];
    srs_entry_t  spare[$];
    srs_entry_t  frames[64][$];
    int unsigned nframes;
    bit          enabled;
    int unsigned wb_left;
    int unsigned fill_left;
    bit          merge_overflow;   // last sbxit dropped delegated entries

    function new(int unsigned n_entries, int unsigned n_frames);
      this.n_entries = n_entries;
      this.n_frames  = n_frames;
      reset();
    endfunction

    function void reset();
      active.delete();
      spare.delete();
      for (int i = 0; i < 64; i++) frames[i].delete();
      nframes   = 0;
      enabled   = 0;
      wb_left   = 0;
      fill_left = 0;
    endfunction

    function int unsigned depth();
      return enabled ? nframes + 1 : 0;
    endfunction

    function bit busy();
      return (wb_left != 0) || (fill_left != 0);
    endfunction

    function bit ready(hs_op_t op);
      if (op == HS_SBENT) return wb_left == 0;
      if (op == HS_SBXIT) return wb_left == 0 && fill_left == 0;
      return 1;
    endfunction

    // Most recent active entry that contains [lo, hi]; -1 if none.
    function int find(addr_t lo, addr_t hi);
      int r = -1;
      foreach (active[i])
        if (active[i].base <= lo && hi <= active[i].limit) r = i;
      return r;
    endfunction

    // Is a load/store of [lo, lo+bytes-1] allowed?
    function bit access_ok(addr_t lo, int unsigned bytes);
      longint unsigned hi = longint'(lo) + bytes - 1;
      if (!enabled) return 1;
      if (hi > 64'hFFFF_FFFF) return 0;
      return find(lo, addr_t'(hi)) >= 0;
    endfunction

    function void tick();
      if (wb_left   != 0) wb_left--;
      if (fill_left != 0) fill_left--;
    endfunction

    // Execute one accepted operation; returns the fault it raises.
    function hs_fault_t exec(hs_op_t op, addr_t b, addr_t l);
      int m;
      srs_entry_t e;
      merge_overflow = 0;
      e.base  = b;
      e.limit = l;
      case (op)
        HS_SBENT: begin
          if (depth() == n_frames + 1) return HS_FAULT_STACK_FULL;
          if (enabled) begin
            frames[nframes] = active;
            nframes++;
            wb_left = active.size();
          end
          fill_left = 0;
          enabled   = 1;
          active    = spare;
          spare.delete();
        end
        HS_SBXIT: begin
          if (!enabled) return HS_FAULT_STACK_EMPTY;
          if (nframes == 0) begin
            enabled = 0;
            active.delete();
            spare.delete();
          end else begin
            nframes--;
            active = frames[nframes];
            foreach (spare[i]) active.push_back(spare[i]);
            spare.delete();
            if (active.size() > n_entries) begin
              merge_overflow = 1;
              while (active.size() > n_entries) void'(active.pop_back());
            end
            fill_left = (nframes > 0) ? frames[nframes-1].size() : 0;
            if (merge_overflow) return HS_FAULT_BANK_FULL;
          end
        end
        HS_SRADD, HS_SRDDA: begin
          if (enabled) begin
            if (active.size() == n_entries) return HS_FAULT_BANK_FULL;
            active.push_back(e);
          end
        end
        HS_SRDLG, HS_SRDSUB: begin
          m = find(b, l);
          if (m >= 0) begin
            if (spare.size() == n_entries) return HS_FAULT_BANK_FULL;
            if (op == HS_SRDLG) spare.push_back(active[m]);
            else                spare.push_back(e);
          end
        end
        default: ;
      endcase
      return HS_FAULT_NONE;
    endfunction
  endclass

endpackage
