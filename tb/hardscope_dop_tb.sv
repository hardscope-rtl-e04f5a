// hardscope_dop_tb: runs short instrumented programs through the HardScope
// unit at its default size and checks which memory accesses are allowed.
//
// 1. Delegation attack: function A owns x and y and delegates them to a
//    copy routine C, which may then read x and write y. Function B owns
//    i and j; with its pointers corrupted to point at x and y, its srdlg
//    finds no matching entry, so C, called from B, faults on x and y.
// 2. memcpy call: the caller delegates a global destination buffer with
//    srdlg and a 1024-byte source sub-region of its stack frame with
//    srdsub; the callee may copy but faults one byte past the destination
//    and one byte below the source.
// 3. Returned object: a callee creates an entry for a new object and
//    delegates it back with srdlg before sbxit; the caller can then use the
//    object but not the callee's stack frame.
// 4. Return-state protection: prologue and epilogue share a context that
//    covers the saved return address; the function body runs in its own
//    context and faults when it writes the return address.
// 5. Loop context: a loop body that receives only `name` cannot overflow
//    into the neighbouring `password` array.
// 6. Call chains 7 and 11 deep with 1 to 16 entries per frame: after the
//    chain unwinds, every frame's entries are in force again, and the
//    background frame transfers caused the expected stalls only.
module hardscope_dop_tb;
  import hs_pkg::*;

  logic clk = 0, rst_n = 0;
  logic instr_valid, is_hs, hs_stall, lsu_req, mem_req, access_fault, op_fault;
  logic enabled, xfer_busy;
  logic [31:0] instr;
  addr_t rs1_val, rs2_val, lsu_addr;
  logic [4:0] rs1, rs2;
  lsu_size_t lsu_size;
  hs_fault_t op_fault_cause;
  logic [4:0] depth, active_cnt, spare_cnt, cache_cnt;
  int checks = 0, failures = 0;
  int stall_cycles = 0;

  hardscope_top dut (.*);

  always #5 clk = ~clk;

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
      $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // Issue one HardScope instruction word with the two register values;
  // wait while decode is stalled.
  task automatic hs(logic [2:0] f3, addr_t r1v, addr_t r2v, int imm);
    instr = hs_encode(f3, 5'd10, 5'd11, 12'(imm));
    rs1_val = r1v; rs2_val = r2v;
    instr_valid = 1;
    #1;
    while (hs_stall) begin
      stall_cycles++;
      @(posedge clk); #1;
    end
    expect_eq("no instruction fault", op_fault, 0);
    @(posedge clk); #1;
    instr_valid = 0;
  endtask

  task automatic sbent(); hs(HS_F3_SBENT, 0, 0, 0); endtask
  task automatic sbxit(); hs(HS_F3_SBXIT, 0, 0, 0); endtask
  // sradd r1, imm(r2): [r1, r2+imm]
  task automatic sradd(addr_t r1v, addr_t r2v, int imm); hs(HS_F3_SRADD, r1v, r2v, imm); endtask
  // srdda imm(r1), r2: [r1+imm, r2]
  task automatic srdda(addr_t r1v, addr_t r2v, int imm); hs(HS_F3_SRDDA, r1v, r2v, imm); endtask
  // srdlg imm(r1)
  task automatic srdlg(addr_t r1v, int imm); hs(HS_F3_SRDLG, r1v, 0, imm); endtask
  // srdsub r1, imm(r2)
  task automatic srdsub(addr_t r1v, addr_t r2v, int imm); hs(HS_F3_SRDSUB, r1v, r2v, imm); endtask

  // A load or store of `bytes` at addr; checks whether it goes through.
  task automatic access(string what, addr_t a, int bytes, bit allowed);
    lsu_req = 1; lsu_addr = a;
    lsu_size = (bytes == 1) ? LSU_BYTE : (bytes == 2) ? LSU_HALF : LSU_WORD;
    #1;
    expect_eq({what, " forwarded"}, mem_req, allowed);
    expect_eq({what, " fault"}, access_fault, !allowed);
    @(posedge clk); #1;
    lsu_req = 0;
  endtask

  localparam addr_t X = 32'h0000_1000, Y = 32'h0000_1004;
  localparam addr_t I = 32'h0000_2000, J = 32'h0000_2004;

  initial begin
    instr_valid = 0; instr = '0; rs1_val = '0; rs2_val = '0;
    lsu_req = 0; lsu_addr = '0; lsu_size = LSU_WORD;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;

    // ---------------------------------------------------------------- 1
    access("before enable", X, 4, 1);        // enforcement off at start
    sbent();                                 // main enables HardScope
    expect_eq("enabled", enabled, 1);
    sbent();                                 // call A
    sradd(X, X, 3);                          // A uses x
    sradd(Y, Y, 3);                          //   and y
    srdlg(X, 0);                             // delegate ptr_x
    srdlg(Y, 0);                             // delegate ptr_y
    sbent();                                 // call C
    expect_eq("C received x, y", active_cnt, 2);
    access("C reads x", X, 4, 1);
    access("C writes y", Y, 4, 1);
    access("C reads i", I, 4, 0);
    sbxit();
    sbxit();                                 // A returns
    sbent();                                 // call B
    sradd(I, I, 3);
    sradd(J, J, 3);
    srdlg(X, 0);                             // corrupted ptr_i -> x
    srdlg(Y, 0);                             // corrupted ptr_j -> y
    expect_eq("nothing delegated from B", spare_cnt, 0);
    sbent();                                 // call C
    access("C via B reads x", X, 4, 0);
    access("C via B writes y", Y, 4, 0);
    sbxit();
    access("B reads i", I, 4, 1);
    sbxit();

    // ---------------------------------------------------------------- 2
    begin
      addr_t sp, s0, dest, src;
      sp = 32'h0000_8000; s0 = sp; dest = 32'h0000_3000;
      srdda(sp, sp, -1072);                  // caller stack frame [sp-1072, sp]
      sradd(dest, dest, 255);                // global 256-byte destination buffer
      src = s0 - 1060;
      srdlg(dest, 0);                        // srdlg a0
      srdsub(src, src, 1024);                // srdsub a1, 1024(a1)
      sbent();                               // jal memcpy
      access("memcpy writes dest[0]", dest, 4, 1);
      access("memcpy writes dest[252]", dest + 252, 4, 1);
      access("memcpy writes past dest", dest + 256, 1, 0);
      access("memcpy reads src[0]", src, 4, 1);
      access("memcpy reads src[1020]", src + 1020, 4, 1);
      access("memcpy reads below src", src - 1, 1, 0);
      access("memcpy reads caller frame", sp - 1072, 4, 0);
      sbxit();
    end

    // ---------------------------------------------------------------- 3
    begin
      addr_t obj;
      obj = 32'h0000_5000;
      sbent();                               // call an allocator wrapper
      srdda(32'h7000, 32'h7000, -32);        // its own stack frame
      sradd(obj, obj, 63);                   // the new object
      srdlg(obj, 0);                         // delegate the returned object
      sbxit();                               // back to the caller
      access("caller uses returned object", obj + 60, 4, 1);
      access("caller cannot use callee frame", 32'h7000 - 16, 4, 0);
    end

    // ---------------------------------------------------------------- 4
    begin
      addr_t sp;
      sp = 32'h0000_9000;
      sbent();                               // call f
      srdda(sp, sp, -8);                     // prologue: return state entry
      sp = sp - 32;
      access("prologue stores ra", sp + 24, 4, 1);
      sbent();                               // enter body context
      sradd(sp, sp, 23);                     // body locals [sp, sp+23]
      access("body uses locals", sp + 8, 4, 1);
      access("body overwrites ra", sp + 24, 4, 0);
      sbxit();                               // exit into epilogue context
      access("epilogue loads ra", sp + 24, 4, 1);
      sbxit();
    end

    // ---------------------------------------------------------------- 5
    begin
      addr_t name, password;
      name = 32'h0000_4000; password = name + 40;
      sradd(name, name, 39);                 // static char name[40]
      sradd(password, password, 15);         // static char password[16]
      srdlg(name, 0);                        // loop body gets only name
      sbent();
      access("loop writes name[39]", name + 39, 1, 1);
      access("loop overflows into password", name + 40, 1, 0);
      sbxit();
      access("function reads password", password, 4, 1);
    end
    sbxit();                                 // main exits
    expect_eq("disabled at end", enabled, 0);

    // ---------------------------------------------------------------- 6
    foreach (chain_depth[c]) begin
      int d;
      d = chain_depth[c];
      sbent();
      for (int f = 0; f < d; f++) begin
        int n;
        n = 1 + (f * 5) % 16;                // 1..16 entries per frame
        for (int e = 0; e < n; e++)
          sradd(32'h10_0000 * (f + 1) + 32'h100 * e, 32'h10_0000 * (f + 1) + 32'h100 * e, 15);
        access("frame entry in force", 32'h10_0000 * (f + 1) + 32'h100 * (n - 1), 4, 1);
        if (f != d - 1) sbent();
      end
      expect_eq("chain depth", depth, d);
      for (int f = d - 1; f >= 0; f--) begin
        int n;
        n = 1 + (f * 5) % 16;
        expect_eq("restored frame size", active_cnt, n);
        access("restored first entry", 32'h10_0000 * (f + 1), 4, 1);
        access("restored last entry", 32'h10_0000 * (f + 1) + 32'h100 * (n - 1) + 12, 4, 1);
        access("other frame denied", 32'h10_0000 * (f + 2), 4, 0);
        sbxit();
      end
      expect_eq("chain unwound", enabled, 0);
    end
    checks++;
    if (stall_cycles == 0) begin
      failures++;
      $display("no frame-transfer stall seen");
    end
    $display("decode stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int chain_depth[2] = '{7, 11};
endmodule
