// hardscope_sweep_tb: runs the whole HardScope unit at the bank sizes of
// the published area sweep (8, 32, 64 and 128 entries per frame, with 16
// frames of protected memory; 16 entries is covered by the default-size
// benches). The sweep itself was a synthesis measurement; this bench only
// shows that every size point is a working unit, since the comparator
// array, the bank counters and the frame transfers all scale with
// N_ENTRIES.
//
// Each size point has its own instance and program, run in parallel:
//   1. fill the active bank with N disjoint 16-byte regions, check that
//      one more sradd faults with BANK_FULL;
//   2. probe every region through the load/store check: an aligned word at
//      its start and end passes, a word crossing its limit and a byte in
//      the gap after it fault, so every one of the N comparators is seen
//      to both hit and miss;
//   3. delegate all N regions with srdlg, check that one more faults;
//   4. sbent: the callee sees exactly the N delegated regions, the caller's
//      frame goes to the cache, and the background write-back keeps the
//      unit busy for N cycles;
//   5. sbxit after the write-back: the caller's N regions are back at once;
//   6. sbent followed directly by sbxit: the sbxit stalls until the
//      N-cycle write-back ends;
//   7. the last sbxit turns enforcement off.
// Expected values follow from N alone and are worked out here. The size
// points are the published sweep; the program, the region layout and the
// 16 frames per point are this bench's own choices.
module hardscope_sweep_tb;
  import hs_pkg::*;

  localparam int NP = 4;
  localparam int SIZES [NP] = '{8, 32, 64, 128};
  localparam addr_t BASE = 32'h0001_0000;

  logic clk = 0, rst_n = 0;
  int   pt_checks   [NP];
  int   pt_failures [NP];
  logic pt_done     [NP];

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  for (genvar p = 0; p < NP; p++) begin : g_pt
    localparam int N  = SIZES[p];
    localparam int CW = $clog2(N + 1);
    localparam int DW = $clog2(16 + 2);

    logic          instr_valid, is_hs, hs_stall, lsu_req, mem_req, access_fault;
    logic          op_fault, enabled, xfer_busy;
    logic [31:0]   instr;
    addr_t         rs1_val, rs2_val, lsu_addr;
    logic [4:0]    rs1, rs2;
    lsu_size_t     lsu_size;
    hs_fault_t     op_fault_cause;
    logic [DW-1:0] depth;
    logic [CW-1:0] active_cnt, spare_cnt, cache_cnt;
    int            stall_cycles;

    hardscope_top #(.N_ENTRIES(N), .N_FRAMES(16)) dut (.*);

    task automatic expect_eq(string what, longint got, longint exp);
      pt_checks[p]++;
      if (got != exp) begin
        pt_failures[p]++;
        $display("%t N=%0d %s: got %0d expected %0d", $time, N, what, got, exp);
      end
    endtask

    // Issue one instruction, wait out any stall, check its fault result.
    task automatic hs(logic [2:0] f3, addr_t r1v, addr_t r2v, int imm,
                      hs_fault_t exp_fault);
      instr = hs_encode(f3, 5'd10, 5'd11, 12'(imm));
      rs1_val = r1v; rs2_val = r2v;
      instr_valid = 1;
      #1;
      stall_cycles = 0;
      while (hs_stall) begin
        stall_cycles++;
        @(posedge clk); #1;
      end
      expect_eq("op_fault", op_fault, exp_fault != HS_FAULT_NONE);
      if (exp_fault != HS_FAULT_NONE)
        expect_eq("fault cause", op_fault_cause, exp_fault);
      @(posedge clk); #1;
      instr_valid = 0;
    endtask

    task automatic access(string what, addr_t a, int bytes, bit allowed);
      lsu_req = 1; lsu_addr = a;
      lsu_size = (bytes == 1) ? LSU_BYTE : (bytes == 2) ? LSU_HALF : LSU_WORD;
      #1;
      expect_eq({what, " forwarded"}, mem_req, allowed);
      expect_eq({what, " fault"}, access_fault, !allowed);
      @(posedge clk); #1;
      lsu_req = 0;
    endtask

    // Region k is [BASE + 32k, BASE + 32k + 15].
    function automatic addr_t reg_lo(int k);
      return BASE + addr_t'(32 * k);
    endfunction

    task automatic probe_all(string what);
      for (int k = 0; k < N; k++) begin
        access({what, " start"},  reg_lo(k),      4, 1);
        access({what, " end"},    reg_lo(k) + 12, 4, 1);
        access({what, " cross"},  reg_lo(k) + 13, 4, 0);
        access({what, " gap"},    reg_lo(k) + 16, 1, 0);
      end
    endtask

    // Cycles the background transfer stays busy after the current edge.
    task automatic busy_cycles(output int n);
      n = 0;
      while (xfer_busy) begin
        n++;
        @(posedge clk); #1;
      end
    endtask

    initial begin
      int n;
      pt_checks[p] = 0; pt_failures[p] = 0; pt_done[p] = 0;
      instr_valid = 0; instr = '0; rs1_val = '0; rs2_val = '0;
      lsu_req = 0; lsu_addr = '0; lsu_size = LSU_WORD;
      wait (rst_n);
      @(posedge clk); #1;

      // 1. fill the active bank
      hs(HS_F3_SBENT, 0, 0, 0, HS_FAULT_NONE);
      for (int k = 0; k < N; k++)
        hs(HS_F3_SRADD, reg_lo(k), reg_lo(k), 15, HS_FAULT_NONE);
      expect_eq("active full", active_cnt, N);
      hs(HS_F3_SRADD, reg_lo(N), reg_lo(N), 15, HS_FAULT_BANK_FULL);
      expect_eq("active unchanged", active_cnt, N);

      // 2. every comparator hits and misses
      probe_all("own");

      // 3. delegate everything, then one too many
      for (int k = 0; k < N; k++)
        hs(HS_F3_SRDLG, reg_lo(k), 0, 4, HS_FAULT_NONE);
      expect_eq("spare full", spare_cnt, N);
      hs(HS_F3_SRDLG, reg_lo(0), 0, 0, HS_FAULT_BANK_FULL);

      // 4. enter the callee; the caller's frame drains to memory
      hs(HS_F3_SBENT, 0, 0, 0, HS_FAULT_NONE);
      expect_eq("depth 2", depth, 2);
      expect_eq("callee entries", active_cnt, N);
      expect_eq("caller in cache", cache_cnt, N);
      expect_eq("spare cleared", spare_cnt, 0);
      busy_cycles(n);
      // busy in the N cycles that follow the sbent edge
      expect_eq("write-back cycles", n, N);
      probe_all("delegated");

      // 5. back in the caller
      hs(HS_F3_SBXIT, 0, 0, 0, HS_FAULT_NONE);
      expect_eq("no stall after drain", stall_cycles, 0);
      expect_eq("depth 1", depth, 1);
      expect_eq("caller restored", active_cnt, N);
      probe_all("restored");

      // 6. sbent then sbxit back to back: sbxit waits for the write-back
      hs(HS_F3_SBENT, 0, 0, 0, HS_FAULT_NONE);
      expect_eq("empty callee", active_cnt, 0);
      access("empty callee", reg_lo(0), 4, 0);
      hs(HS_F3_SBXIT, 0, 0, 0, HS_FAULT_NONE);
      // write-back busy in cycles 1..N after sbent; the access used
      // cycle 1, so sbxit (presented in cycle 2) waits through cycle N
      expect_eq("sbxit stall", stall_cycles, N - 1);
      expect_eq("caller back", active_cnt, N);
      access("caller back", reg_lo(N - 1), 4, 1);

      // 7. leave main
      busy_cycles(n);
      hs(HS_F3_SBXIT, 0, 0, 0, HS_FAULT_NONE);
      expect_eq("depth 0", depth, 0);
      expect_eq("disabled", enabled, 0);
      access("after disable", BASE - 4, 4, 1);

      $display("N=%0d checks=%0d failures=%0d", N, pt_checks[p], pt_failures[p]);
      pt_done[p] = 1;
    end
  end

  initial begin
    int checks, failures;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // wait until every size point has finished
    forever begin
      int n_done;
      @(posedge clk);
      n_done = 0;
      for (int p = 0; p < NP; p++) n_done += int'(pt_done[p]);
      if (n_done == NP) break;
    end
    checks = 0; failures = 0;
    for (int p = 0; p < NP; p++) begin
      checks += pt_checks[p];
      failures += pt_failures[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
