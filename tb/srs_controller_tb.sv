// srs_controller_tb: random streams of HardScope operations and load/store
// checks on a small controller (4 entries per bank, 4 memory frames), so
// that full banks, a full stack and every stall case occur often. Every
// cycle the ready/stall decision, the fault, the check result, the depth,
// the bank counts and the transfer-busy flag are compared with the
// reference model in hs_ref_pkg. Directed timing checks then confirm that
// sbent and sbxit execute in one cycle and that a frame of n entries keeps
// the next context switch waiting for exactly n cycles.
module srs_controller_tb;
  import hs_pkg::*;
  import hs_ref_pkg::*;
  localparam int unsigned N = 4;
  localparam int unsigned F = 4;
  localparam int unsigned CW = $clog2(N + 1);
  localparam int unsigned DW = $clog2(F + 2);

  logic clk = 0, rst_n = 0;
  logic op_valid, op_ready, op_fault, chk_valid, chk_hit, enabled, wb_busy, fill_busy;
  hs_op_t op;
  hs_fault_t op_fault_cause;
  addr_t op_base, op_limit, chk_lo, chk_hi;
  logic [DW-1:0] depth;
  logic [CW-1:0] active_cnt, spare_cnt, cache_cnt;
  int checks = 0, failures = 0;

  srs_controller #(.N_ENTRIES(N), .N_FRAMES(F)) dut (.*);

  always #5 clk = ~clk;

  srs_model m;
  // coverage counters
  int n_wb_stall = 0, n_fill_stall = 0, n_discard = 0, n_dlg = 0, n_dlg_miss = 0;
  int n_sub = 0, n_bank_full = 0, n_stack_full = 0, n_stack_empty = 0, n_merge_ovf = 0;
  int n_chk_hit = 0, n_chk_miss = 0, n_disable = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%t %s: dut %0d model %0d", $time, what, got, exp);
    end
  endtask

  // one cycle: drive, compare, update the model, clock
  task automatic cycle(bit v, hs_op_t o, addr_t b, addr_t l, bit cv, addr_t clo, addr_t chi);
    bit rdy, acc;
    hs_fault_t f;
    op_valid = v; op = o; op_base = b; op_limit = l;
    chk_valid = cv; chk_lo = clo; chk_hi = chi;
    #1;
    rdy = m.ready(o);
    expect_eq("op_ready", op_ready, rdy);
    expect_eq("depth", depth, m.depth());
    expect_eq("active_cnt", active_cnt, m.active.size());
    expect_eq("spare_cnt", spare_cnt, m.spare.size());
    expect_eq("xfer busy", wb_busy || fill_busy, m.busy());
    if (cv) begin
      expect_eq("chk_hit", chk_hit, m.find(clo, chi) >= 0);
      if (m.find(clo, chi) >= 0) n_chk_hit++; else n_chk_miss++;
    end
    acc = v && rdy;
    if (v && !rdy) begin
      if (m.wb_left != 0) n_wb_stall++; else n_fill_stall++;
    end
    if (acc && o == HS_SBENT && m.fill_left != 0) n_discard++;
    if (acc && o == HS_SRDLG) begin if (m.find(b, l) >= 0) n_dlg++; else n_dlg_miss++; end
    if (acc && o == HS_SRDSUB && m.find(b, l) >= 0) n_sub++;
    if (acc && o == HS_SBXIT && m.depth() == 1) n_disable++;
    m.tick();
    f = acc ? m.exec(o, b, l) : HS_FAULT_NONE;
    if (f == HS_FAULT_BANK_FULL) n_bank_full++;
    if (f == HS_FAULT_STACK_FULL) n_stack_full++;
    if (f == HS_FAULT_STACK_EMPTY) n_stack_empty++;
    if (m.merge_overflow) n_merge_ovf++;
    expect_eq("op_fault", op_fault, f != HS_FAULT_NONE);
    expect_eq("op_fault_cause", op_fault_cause, f);
    @(posedge clk);
    #1;
  endtask

  function automatic hs_op_t pick(int bias_push);
    int r = $urandom_range(0, 99);
    if (r < bias_push) return HS_SBENT;
    if (r < 30) return HS_SBXIT;
    if (r < 55) return HS_SRADD;
    if (r < 65) return HS_SRDDA;
    if (r < 82) return HS_SRDLG;
    return HS_SRDSUB;
  endfunction

  initial begin
    addr_t b, l;
    m = new(N, F);
    op_valid = 0; op = HS_NONE; op_base = '0; op_limit = '0;
    chk_valid = 0; chk_lo = '0; chk_hi = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int phase = 0; phase < 40; phase++) begin
      int bias;
      bias = (phase % 2 == 0) ? 25 : 8;        // deepen, then unwind
      for (int t = 0; t < 500; t++) begin
        hs_op_t o;
        o = pick(bias);
        b = $urandom_range(0, 63);
        l = b + $urandom_range(0, 12);
        if (o == HS_SRDLG) l = b;
        if (o == HS_SRDSUB && m.active.size() > 0 && $urandom_range(0, 1)) begin
          int k;
          k = $urandom_range(0, m.active.size() - 1);
          b = m.active[k].base + $urandom_range(0, 2);
          l = m.active[k].limit - $urandom_range(0, 2);
        end
        if ($urandom_range(0, 2) == 0) begin
          addr_t lo;
          lo = $urandom_range(0, 70);
          cycle(0, HS_NONE, '0, '0, 1, lo, lo + $urandom_range(0, 3));
        end else if ($urandom_range(0, 3) == 0) begin
          cycle(0, HS_NONE, '0, '0, 0, '0, '0);
        end else begin
          // hold a stalled operation until it is accepted
          while (!m.ready(o)) cycle(1, o, b, l, 0, '0, '0);
          cycle(1, o, b, l, 0, '0, '0);
        end
      end
    end

    // directed timing: unwind fully, then build frames with known sizes
    while (m.depth() != 0) begin
      while (!m.ready(HS_SBXIT)) cycle(1, HS_SBXIT, '0, '0, 0, '0, '0);
      cycle(1, HS_SBXIT, '0, '0, 0, '0, '0);
    end
    repeat (6) cycle(0, HS_NONE, '0, '0, 0, '0, '0);
    cycle(1, HS_SBENT, '0, '0, 0, '0, '0);                 // enable, depth 1
    for (int i = 0; i < 3; i++) cycle(1, HS_SRADD, 32'h100 + 16 * i, 32'h10F + 16 * i, 0, '0, '0);
    begin
      int stall_cycles;
      stall_cycles = 0;
      cycle(1, HS_SBENT, '0, '0, 0, '0, '0);               // saves 3 entries
      while (!op_ready || op != HS_SBENT) begin
        op_valid = 1; op = HS_SBENT; #1;
        if (op_ready) break;
        stall_cycles++;
        cycle(1, HS_SBENT, '0, '0, 0, '0, '0);
      end
      expect_eq("sbent write-back stall cycles", stall_cycles, 3);
    end
    cycle(1, HS_SBENT, '0, '0, 0, '0, '0);                 // depth 3, frame 1 empty
    cycle(1, HS_SRADD, 32'h200, 32'h2FF, 0, '0, '0);
    cycle(1, HS_SBXIT, '0, '0, 0, '0, '0);                 // depth 2, refill frame 0 (3 entries)
    begin
      int stall_cycles;
      stall_cycles = 0;
      op_valid = 1; op = HS_SBXIT; #1;
      while (!op_ready) begin
        stall_cycles++;
        cycle(1, HS_SBXIT, '0, '0, 0, '0, '0);
        op_valid = 1; op = HS_SBXIT; #1;
      end
      expect_eq("sbxit refill stall cycles", stall_cycles, 3);
      cycle(1, HS_SBXIT, '0, '0, 0, '0, '0);               // back to depth 1
      expect_eq("restored entries", active_cnt, 3);
    end
    cycle(1, HS_SBXIT, '0, '0, 0, '0, '0);                 // disable

    checks++;
    if (n_wb_stall == 0 || n_fill_stall == 0 || n_discard == 0 || n_dlg == 0 ||
        n_dlg_miss == 0 || n_sub == 0 || n_bank_full == 0 || n_stack_full == 0 ||
        n_stack_empty == 0 || n_merge_ovf == 0 || n_chk_hit == 0 || n_chk_miss == 0 ||
        n_disable == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("wb_stall=%0d fill_stall=%0d discard=%0d dlg=%0d dlg_miss=%0d sub=%0d bank_full=%0d stack_full=%0d stack_empty=%0d merge_ovf=%0d hit=%0d miss=%0d disable=%0d",
             n_wb_stall, n_fill_stall, n_discard, n_dlg, n_dlg_miss, n_sub, n_bank_full,
             n_stack_full, n_stack_empty, n_merge_ovf, n_chk_hit, n_chk_miss, n_disable);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
