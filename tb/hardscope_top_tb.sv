// hardscope_top_tb: end-to-end test of the HardScope unit at its default
// size (16 entries per bank, 16 frames of protected memory).
//
// The bench plays the core: it issues encoded HardScope instructions with
// register values chosen so that each instruction form (register plus
// immediate on either operand, absolute srdlg through x0) yields an
// intended base and limit, and it issues byte, half-word and word loads
// and stores. A stalled instruction is held in decode until accepted.
// Phases alternate between deepening the call stack, unwinding it and
// filling frames, so the stack and the banks reach their limits. Each
// cycle the stall, faults, forwarded requests, depth, bank counts and the
// transfer-busy flag are compared with the reference model (hs_ref_pkg),
// which also tracks the decode-stage delegation stall.
// Every mechanism is counted and a mechanism that never happened is a
// failure: enable and disable of enforcement, sbent write-back stall,
// sbxit refill stall, sbent discarding a refill, delegation-then-switch
// stall, srdlg and srdsub with and without a match, permitted and faulting
// loads/stores, accesses with enforcement off, full bank, full stack,
// empty stack, and delegated entries dropped on sbxit.
module hardscope_top_tb;
  import hs_pkg::*;
  import hs_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned F = 16;

  logic clk = 0, rst_n = 0;
  logic instr_valid, is_hs, hs_stall, lsu_req, mem_req, access_fault, op_fault;
  logic enabled, xfer_busy;
  logic [31:0] instr;
  addr_t rs1_val, rs2_val, lsu_addr;
  logic [4:0] rs1, rs2;
  lsu_size_t lsu_size;
  hs_fault_t op_fault_cause;
  logic [4:0] depth;
  logic [4:0] active_cnt, spare_cnt, cache_cnt;
  int checks = 0, failures = 0;

  hardscope_top dut (.*);

  always #5 clk = ~clk;

  srs_model m;
  bit prev_dlg;
  int n_enable = 0, n_disable = 0, n_wb_stall = 0, n_fill_stall = 0, n_discard = 0;
  int n_dlg_stall = 0, n_dlg_hit = 0, n_dlg_miss = 0, n_sub_hit = 0, n_sub_miss = 0;
  int n_acc_ok = 0, n_acc_fault = 0, n_acc_off = 0, n_bank_full = 0, n_stack_full = 0;
  int n_stack_empty = 0, n_merge_ovf = 0, n_cycles = 0;

  initial begin
    repeat (400000) @(posedge clk);
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

  function automatic logic [2:0] f3_of(hs_op_t o);
    case (o)
      HS_SBENT: return HS_F3_SBENT;
      HS_SBXIT: return HS_F3_SBXIT;
      HS_SRADD: return HS_F3_SRADD;
      HS_SRDDA: return HS_F3_SRDDA;
      HS_SRDLG: return HS_F3_SRDLG;
      default:  return HS_F3_SRDSUB;
    endcase
  endfunction

  // Present one instruction (or idle / load-store) for one cycle.
  // Returns 1 when a presented instruction was accepted.
  task automatic cycle(input bit iv, input hs_op_t o, input addr_t b, input addr_t l,
                       input bit lv, input addr_t la, input lsu_size_t ls, output bit accepted);
    bit dstall, rdy, stall;
    int unsigned bytes;
    hs_fault_t f;
    logic [11:0] imm;
    logic [4:0] r1, r2;
    imm = 12'($signed($urandom_range(0, 80)) - 40);
    r1 = 5'($urandom_range(1, 31));
    r2 = 5'($urandom_range(1, 31));
    case (o)
      HS_SRADD, HS_SRDSUB: begin rs1_val = b; rs2_val = l - {{20{imm[11]}}, imm}; end
      HS_SRDDA: begin rs1_val = b - {{20{imm[11]}}, imm}; rs2_val = l; end
      HS_SRDLG: begin
        if (b < 2048 && $urandom_range(0, 1)) begin
          r1 = 5'd0; imm = 12'(b); rs1_val = '0;       // absolute form: srdlg imm
        end else begin
          rs1_val = b - {{20{imm[11]}}, imm};
        end
        rs2_val = $urandom;
      end
      default: begin rs1_val = $urandom; rs2_val = $urandom; end
    endcase
    instr = hs_encode(f3_of(o), r1, r2, imm);
    instr_valid = iv;
    lsu_req = lv; lsu_addr = la; lsu_size = ls;
    #1;
    dstall = iv && prev_dlg && (o == HS_SBENT || o == HS_SBXIT);
    rdy = m.ready(o);
    stall = iv && (dstall || !rdy);
    accepted = iv && !stall;
    expect_eq("is_hs", is_hs, iv);
    expect_eq("hs_stall", hs_stall, stall);
    expect_eq("depth", depth, m.depth());
    expect_eq("enabled", enabled, m.enabled);
    expect_eq("active_cnt", active_cnt, m.active.size());
    expect_eq("spare_cnt", spare_cnt, m.spare.size());
    expect_eq("xfer_busy", xfer_busy, m.busy());
    if (iv) begin
      expect_eq("rs1", rs1, r1);
      expect_eq("rs2", rs2, r2);
    end
    if (lv) begin
      bit ok;
      bytes = (ls == LSU_BYTE) ? 1 : (ls == LSU_HALF) ? 2 : 4;
      ok = m.access_ok(la, bytes);
      expect_eq("mem_req", mem_req, ok);
      expect_eq("access_fault", access_fault, !ok);
      if (!m.enabled) n_acc_off++;
      else if (ok) n_acc_ok++;
      else n_acc_fault++;
    end else begin
      expect_eq("mem_req idle", mem_req, 0);
      expect_eq("access_fault idle", access_fault, 0);
    end
    if (dstall) n_dlg_stall++;
    else if (iv && !rdy) begin
      if (m.wb_left != 0) n_wb_stall++; else n_fill_stall++;
    end
    if (accepted) begin
      if (o == HS_SBENT && m.fill_left != 0) n_discard++;
      if (o == HS_SBENT && m.depth() == 0) n_enable++;
      if (o == HS_SBXIT && m.depth() == 1) n_disable++;
      if (o == HS_SRDLG)  begin if (m.find(b, b) >= 0) n_dlg_hit++; else n_dlg_miss++; end
      if (o == HS_SRDSUB) begin if (m.find(b, l) >= 0) n_sub_hit++; else n_sub_miss++; end
    end
    m.tick();
    f = accepted ? m.exec(o, b, (o == HS_SRDLG) ? b : l) : HS_FAULT_NONE;
    if (f == HS_FAULT_BANK_FULL) n_bank_full++;
    if (f == HS_FAULT_STACK_FULL) n_stack_full++;
    if (f == HS_FAULT_STACK_EMPTY) n_stack_empty++;
    if (accepted && m.merge_overflow) n_merge_ovf++;
    expect_eq("op_fault", op_fault, f != HS_FAULT_NONE);
    expect_eq("op_fault_cause", op_fault_cause, f);
    if (iv) begin
      if (dstall) prev_dlg = 0;
      else if (!stall) prev_dlg = (o == HS_SRDLG || o == HS_SRDSUB);
    end
    n_cycles++;
    @(posedge clk);
    #1;
  endtask

  task automatic issue(hs_op_t o, addr_t b, addr_t l);
    bit acc;
    acc = 0;
    while (!acc) cycle(1, o, b, l, 0, '0, LSU_WORD, acc);
  endtask

  task automatic idle_or_access();
    bit acc;
    if ($urandom_range(0, 3) == 0) begin
      cycle(0, HS_NONE, '0, '0, 0, '0, LSU_WORD, acc);
    end else begin
      addr_t a;
      a = $urandom_range(0, 300);
      if (m.active.size() > 0 && $urandom_range(0, 1)) begin
        int k;
        k = $urandom_range(0, m.active.size() - 1);
        a = m.active[k].limit - 2 + $urandom_range(0, 4);
      end
      if ($urandom_range(0, 40) == 0) a = 32'hFFFF_FFFE;
      cycle(0, HS_NONE, '0, '0, 1, a, lsu_size_t'($urandom_range(0, 2)), acc);
    end
  endtask

  initial begin
    m = new(N, F);
    prev_dlg = 0;
    instr_valid = 0; instr = '0; rs1_val = '0; rs2_val = '0;
    lsu_req = 0; lsu_addr = '0; lsu_size = LSU_WORD;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int phase = 0; phase < 30; phase++) begin
      int p_ent, p_xit, p_add;
      case (phase % 3)
        0: begin p_ent = 30; p_xit = 5;  p_add = 30; end  // deepen
        1: begin p_ent = 5;  p_xit = 30; p_add = 30; end  // unwind
        default: begin p_ent = 8; p_xit = 8; p_add = 70; end  // fill frames
      endcase
      for (int t = 0; t < 700; t++) begin
        int r;
        addr_t b, l;
        r = $urandom_range(0, 99);
        b = $urandom_range(0, 255);
        l = b + $urandom_range(0, 24);
        if ($urandom_range(0, 2) == 0) idle_or_access();
        else if (r < p_ent) issue(HS_SBENT, '0, '0);
        else if (r < p_ent + p_xit) issue(HS_SBXIT, '0, '0);
        else if (r < p_ent + p_xit + p_add) issue($urandom_range(0, 1) ? HS_SRADD : HS_SRDDA, b, l);
        else begin
          if (m.active.size() > 0 && $urandom_range(0, 2) != 0) begin
            int k;
            k = $urandom_range(0, m.active.size() - 1);
            b = m.active[k].base + $urandom_range(0, 3);
            l = m.active[k].limit - $urandom_range(0, 3);
          end
          if ($urandom_range(0, 1)) issue(HS_SRDLG, b, b);
          else issue(HS_SRDSUB, b, l);
          // often switch context straight after a delegation
          if ($urandom_range(0, 1)) issue($urandom_range(0, 1) ? HS_SBENT : HS_SBXIT, '0, '0);
        end
      end
    end
    // unwind everything: enforcement must end switched off
    while (m.depth() != 0) issue(HS_SBXIT, '0, '0);
    repeat (20) idle_or_access();
    expect_eq("final depth", depth, 0);

    $display("cycles=%0d enable=%0d disable=%0d wb_stall=%0d fill_stall=%0d discard=%0d dlg_stall=%0d",
             n_cycles, n_enable, n_disable, n_wb_stall, n_fill_stall, n_discard, n_dlg_stall);
    $display("srdlg hit/miss=%0d/%0d srdsub hit/miss=%0d/%0d access ok/fault/off=%0d/%0d/%0d",
             n_dlg_hit, n_dlg_miss, n_sub_hit, n_sub_miss, n_acc_ok, n_acc_fault, n_acc_off);
    $display("bank_full=%0d stack_full=%0d stack_empty=%0d merge_overflow=%0d",
             n_bank_full, n_stack_full, n_stack_empty, n_merge_ovf);
    begin
      int cov[18];
      cov = '{n_enable, n_disable, n_wb_stall, n_fill_stall, n_discard, n_dlg_stall,
              n_dlg_hit, n_dlg_miss, n_sub_hit, n_sub_miss, n_acc_ok, n_acc_fault,
              n_acc_off, n_bank_full, n_stack_full, n_stack_empty, n_merge_ovf, n_cycles};
      foreach (cov[i]) begin
        checks++;
        if (cov[i] == 0) begin
          failures++;
          $display("mechanism %0d never happened", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
