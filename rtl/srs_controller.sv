// srs_controller: the SRS controller of the HardScope unit, together with
// the three register banks and the protected SRS memory it manages.
//
// The Storage Region Stack (SRS) holds one frame of storage-region entries
// per live execution context. The frame of the running context sits in the
// active bank, the frame of its caller is mirrored in the cache bank, and
// all older frames live in protected memory (srs_mem). Entries delegated to
// the next context collect in the spare bank. Two physical banks swap the
// active and spare roles (`sel`), so a context switch is a one-cycle swap:
//
//   sbent  cache <- active (one cycle); spare becomes active; the old
//          active bank is emptied and becomes the spare. The cache is then
//          written to memory in the background, one entry per cycle.
//   sbxit  new active <- cache entries followed by the spare (delegated)
//          entries, in one cycle; the old active bank is emptied and becomes
//          the spare. The cache is then refilled from the new top frame in
//          memory in the background, one entry per cycle.
//   sradd / srdda   append an entry to the active bank.
//   srdlg  if an active entry holds the address, copy the most recently
//          added such entry to the spare bank.
//   srdsub if an active entry contains [base, limit], append that
//          sub-region to the spare bank.
//
// Stalls (op_ready = 0): a context switch waits while the cache is being
// written to memory; sbxit also waits while the cache is being refilled. An
// sbent during a refill does not wait: the partial cache is discarded and
// overwritten with the active bank. A background transfer of a frame with n
// entries keeps the port busy for the n cycles after the switch.
// Enforcement is on while the stack is non-empty (`enabled`): the first
// sbent turns it on and the sbxit that empties the stack turns it off.
//
// Load/store checks share the comparators with srdlg/srdsub (the decode
// stage issues one instruction at a time): chk_hit is the raw match of
// [chk_lo, chk_hi] against the active bank, combinational.
//
// Interface: op_* carry one decoded HardScope instruction per cycle; it is
// executed at the clock edge when op_valid && op_ready. op_fault reports,
// in that same cycle, a request that could not be carried out: a full bank
// or a full or empty stack. A refused sradd, srdda, srdlg, srdsub or sbent
// changes nothing; an sbxit whose caller and delegated entries together
// exceed the bank still switches and drops the delegated entries that do
// not fit.
//
// From the published design: the three banks and their roles, the one-cycle
// swaps, the background transfers of at most N cycles, when they stall,
// the discarding of a partial cache on sbent, lax delegation (no match, no
// delegation, no fault), the 16 x 16 sizes. This design's own choices: the
// order of entries after sbxit (caller entries first, delegated entries
// after them, so delegated ones count as most recent), the fault causes,
// ignoring sradd/srdda while enforcement is off, and dropping delegated
// entries when the last frame exits.
module srs_controller
  import hs_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16,
  parameter int unsigned N_FRAMES  = 16,
  localparam int unsigned CW = $clog2(N_ENTRIES + 1),
  localparam int unsigned DW = $clog2(N_FRAMES + 2),
  localparam int unsigned AW = $clog2(N_ENTRIES * N_FRAMES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // decoded HardScope instruction
  input  logic          op_valid,
  input  hs_op_t        op,
  input  addr_t         op_base,
  input  addr_t         op_limit,
  output logic          op_ready,
  output logic          op_fault,
  output hs_fault_t     op_fault_cause,
  // load/store range check
  input  logic          chk_valid,
  input  addr_t         chk_lo,
  input  addr_t         chk_hi,
  output logic          chk_hit,
  // status
  output logic          enabled,
  output logic [DW-1:0] depth,
  output logic          wb_busy,
  output logic          fill_busy,
  output logic [CW-1:0] active_cnt,
  output logic [CW-1:0] spare_cnt,
  output logic [CW-1:0] cache_cnt
);

  localparam int unsigned IW = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1;
  localparam int unsigned FW = (N_FRAMES > 1) ? $clog2(N_FRAMES) : 1;

  // ---------------------------------------------------------------- banks
  logic                       sel;          // physical bank holding the active frame
  logic [1:0]                 b_load, b_clr, b_push;
  srs_entry_t [N_ENTRIES-1:0] b_entries [2];
  logic [CW-1:0]              b_cnt [2];
  logic [1:0]                 b_full;
  srs_entry_t [N_ENTRIES-1:0] merged;
  logic [CW-1:0]              merged_cnt;
  srs_entry_t                 push_entry;

  logic                       c_load, c_clr, c_push;
  srs_entry_t [N_ENTRIES-1:0] c_entries;
  logic                       c_full;     // cache never receives more than a bank holds

  srs_entry_t                 mem_rdata;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    srs_bank #(.N_ENTRIES(N_ENTRIES)) u_bank (
      .clk, .rst_n,
      .load(b_load[b]), .load_entries(merged), .load_cnt(merged_cnt),
      .clr(b_clr[b]), .push(b_push[b]), .push_entry(push_entry),
      .entries(b_entries[b]), .cnt(b_cnt[b]), .full(b_full[b])
    );
  end

  srs_entry_t [N_ENTRIES-1:0] act_entries, spr_entries;
  logic act_full, spr_full;
  assign act_entries = b_entries[sel];
  assign spr_entries = b_entries[~sel];
  assign active_cnt  = b_cnt[sel];
  assign spare_cnt   = b_cnt[~sel];
  assign act_full    = b_full[sel];
  assign spr_full    = b_full[~sel];

  srs_bank #(.N_ENTRIES(N_ENTRIES)) u_cache (
    .clk, .rst_n,
    .load(c_load), .load_entries(act_entries), .load_cnt(active_cnt),
    .clr(c_clr), .push(c_push), .push_entry(mem_rdata),
    .entries(c_entries), .cnt(cache_cnt), .full(c_full)
  );

  // ------------------------------------------------------ shared compare
  logic          dlg_op;
  addr_t         m_lo, m_hi;
  logic          m_hit;
  logic [IW-1:0] m_idx;
  logic [N_ENTRIES-1:0] m_slots;          // per-slot result, not needed here

  assign dlg_op = op_valid && (op == HS_SRDLG || op == HS_SRDSUB);
  assign m_lo   = dlg_op ? op_base  : chk_lo;
  assign m_hi   = dlg_op ? op_limit : chk_hi;

  srs_match #(.N_ENTRIES(N_ENTRIES)) u_match (
    .entries(act_entries), .cnt(active_cnt), .lo(m_lo), .hi(m_hi),
    .hit(m_hit), .idx(m_idx), .slot_hit(m_slots)
  );
  assign chk_hit = m_hit;

  // ------------------------------------------------------- stack state
  logic [CW-1:0] frame_cnt [N_FRAMES];   // entry count of each memory frame
  logic [FW-1:0] wb_frame, fill_frame;
  logic [CW-1:0] wb_idx, wb_cnt, fill_next, fill_cnt;

  assign enabled = (depth != '0);

  // sbxit: caller entries from the cache first, delegated entries after.
  always_comb begin
    merged = '0;
    for (int unsigned i = 0; i < N_ENTRIES; i++) begin
      if (i < 32'(cache_cnt))
        merged[i] = c_entries[i];
      else if (i - 32'(cache_cnt) < N_ENTRIES)
        merged[i] = spr_entries[i - 32'(cache_cnt)];
    end
    if (32'(cache_cnt) + 32'(spare_cnt) > N_ENTRIES) merged_cnt = CW'(N_ENTRIES);
    else                                              merged_cnt = cache_cnt + spare_cnt;
  end

  logic accept, do_sbent, do_sbxit;
  logic mem_en, mem_we;
  logic [AW-1:0] mem_addr;
  srs_entry_t    mem_wdata;
  logic          fill_start;
  logic [FW-1:0] fill_start_frame;

  // Which frame the new top of memory is after an sbxit at depth d >= 3.
  assign fill_start_frame = FW'(32'(depth) - 3);

  always_comb begin
    op_ready = 1'b1;
    if (op == HS_SBENT) op_ready = !wb_busy;
    if (op == HS_SBXIT) op_ready = !wb_busy && !fill_busy;
    accept = op_valid && op_ready;

    op_fault       = 1'b0;
    op_fault_cause = HS_FAULT_NONE;
    do_sbent = 1'b0;
    do_sbxit = 1'b0;
    b_load = '0; b_clr = '0; b_push = '0;
    c_load = 1'b0; c_clr = 1'b0; c_push = 1'b0;
    push_entry = '{base: op_base, limit: op_limit};
    fill_start = 1'b0;

    if (accept) begin
      unique case (op)
        HS_SBENT: begin
          if (32'(depth) == N_FRAMES + 1) begin
            op_fault = 1'b1; op_fault_cause = HS_FAULT_STACK_FULL;
          end else begin
            do_sbent = 1'b1;
            b_clr[sel] = 1'b1;            // old active becomes the empty spare
            if (depth != '0) c_load = 1'b1; // caller frame -> cache (6)
          end
        end
        HS_SBXIT: begin
          if (depth == '0) begin
            op_fault = 1'b1; op_fault_cause = HS_FAULT_STACK_EMPTY;
          end else begin
            do_sbxit = 1'b1;
            b_clr[sel] = 1'b1;            // discard the exiting frame
            c_clr      = 1'b1;
            if (depth == DW'(1)) begin
              b_clr[~sel] = 1'b1;         // stack empties: enforcement off
            end else begin
              b_load[~sel] = 1'b1;        // cache + delegated -> new active (8)
              if (32'(cache_cnt) + 32'(spare_cnt) > N_ENTRIES) begin
                op_fault = 1'b1; op_fault_cause = HS_FAULT_BANK_FULL;
              end
              if (32'(depth) >= 3 && frame_cnt[fill_start_frame] != '0)
                fill_start = 1'b1;        // refill cache from memory (9)
            end
          end
        end
        HS_SRADD, HS_SRDDA: begin
          if (depth != '0) begin
            if (act_full) begin
              op_fault = 1'b1; op_fault_cause = HS_FAULT_BANK_FULL;
            end else begin
              b_push[sel] = 1'b1;
            end
          end
        end
        HS_SRDLG, HS_SRDSUB: begin
          if (m_hit) begin
            if (spr_full) begin
              op_fault = 1'b1; op_fault_cause = HS_FAULT_BANK_FULL;
            end else begin
              b_push[~sel] = 1'b1;        // delegate to the spare bank (10)
              if (op == HS_SRDLG) push_entry = act_entries[m_idx];
            end
          end
        end
        default: ;
      endcase
    end

    // Refill capture: the word read in the previous cycle enters the cache,
    // unless an sbent overwrites the cache in this cycle.
    if (fill_busy && !c_load && !c_clr) c_push = 1'b1;

    // Memory port: write-back, refill, or the first read of a refill.
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = c_entries[wb_idx[IW-1:0]];
    if (wb_busy) begin
      mem_en   = 1'b1;
      mem_we   = 1'b1;
      mem_addr = AW'(32'(wb_frame) * N_ENTRIES + 32'(wb_idx));
    end else if (fill_start) begin
      mem_en   = 1'b1;
      mem_addr = AW'(32'(fill_start_frame) * N_ENTRIES);
    end else if (fill_busy && !do_sbent && fill_next < fill_cnt) begin
      mem_en   = 1'b1;
      mem_addr = AW'(32'(fill_frame) * N_ENTRIES + 32'(fill_next));
    end
  end

  srs_mem #(.N_ENTRIES(N_ENTRIES), .N_FRAMES(N_FRAMES)) u_mem (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel        <= 1'b0;
      depth      <= '0;
      wb_busy    <= 1'b0;
      wb_idx     <= '0;
      wb_cnt     <= '0;
      wb_frame   <= '0;
      fill_busy  <= 1'b0;
      fill_next  <= '0;
      fill_cnt   <= '0;
      fill_frame <= '0;
      for (int unsigned f = 0; f < N_FRAMES; f++) frame_cnt[f] <= '0;
    end else begin
      // background write-back of the cache (7)
      if (wb_busy) begin
        wb_idx <= wb_idx + 1'b1;
        if (wb_idx + 1'b1 == wb_cnt) wb_busy <= 1'b0;
      end
      // background refill of the cache (9)
      if (fill_busy) begin
        if (fill_next < fill_cnt) fill_next <= fill_next + 1'b1;
        else                      fill_busy <= 1'b0;
      end

      if (do_sbent) begin
        sel   <= ~sel;
        depth <= depth + 1'b1;
        fill_busy <= 1'b0;                // a partial refill is discarded
        if (depth != '0) begin
          frame_cnt[FW'(32'(depth) - 1)] <= active_cnt;
          wb_frame <= FW'(32'(depth) - 1);
          wb_cnt   <= active_cnt;
          wb_idx   <= '0;
          wb_busy  <= (active_cnt != '0);
        end
      end

      if (do_sbxit) begin
        depth <= depth - 1'b1;
        if (depth != DW'(1)) sel <= ~sel;
        if (fill_start) begin
          fill_busy  <= 1'b1;
          fill_frame <= fill_start_frame;
          fill_cnt   <= frame_cnt[fill_start_frame];
          fill_next  <= CW'(1);
        end
      end
    end
  end

  // Rules of the interface and of the internal transfers.
  a_one_user: assert property (@(posedge clk) disable iff (!rst_n)
      !(dlg_op && chk_valid))
    else $error("load/store check and delegation in the same cycle");
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
      !(wb_busy && fill_busy));
  a_depth: assert property (@(posedge clk) disable iff (!rst_n)
      32'(depth) <= N_FRAMES + 1);

endmodule
