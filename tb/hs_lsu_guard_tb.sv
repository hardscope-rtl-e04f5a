// hs_lsu_guard_tb: drives load/store requests of each size, including
// ranges that wrap past the top of memory; the testbench plays the
// comparator side from its own list of entries and checks the range sent
// out, the forwarding decision and the fault, with enforcement on and off.
module hs_lsu_guard_tb;
  import hs_pkg::*;

  logic lsu_req, enabled, chk_valid, chk_hit, mem_req, access_fault;
  addr_t lsu_addr, chk_lo, chk_hi;
  lsu_size_t lsu_size;
  int checks = 0, failures = 0;
  int n_ok = 0, n_fault = 0, n_wrap = 0, n_off = 0;
  srs_entry_t ents [4];

  hs_lsu_guard dut (.*);

  // comparator stand-in: any entry containing the range sent out
  always_comb begin
    chk_hit = 1'b0;
    foreach (ents[i]) if (ents[i].base <= chk_lo && chk_hi <= ents[i].limit) chk_hit = 1'b1;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ents[0] = '{base: 32'h1000, limit: 32'h100F};
    ents[1] = '{base: 32'h2001, limit: 32'h2002};
    ents[2] = '{base: 32'hFFFF_FFF0, limit: 32'hFFFF_FFFF};
    ents[3] = '{base: 32'h0, limit: 32'h3};
    for (int t = 0; t < 20000; t++) begin
      int unsigned bytes;
      longint unsigned hi;
      bit ok;
      lsu_req  = ($urandom_range(0, 7) != 0);
      enabled  = ($urandom_range(0, 7) != 0);
      lsu_size = lsu_size_t'($urandom_range(0, 2));
      case ($urandom_range(0, 3))
        0: lsu_addr = 32'h1000 + $urandom_range(0, 20) - 3;
        1: lsu_addr = 32'h2000 + $urandom_range(0, 4);
        2: lsu_addr = 32'hFFFF_FFF0 + $urandom_range(0, 15);
        default: lsu_addr = $urandom_range(0, 6);
      endcase
      bytes = (lsu_size == LSU_BYTE) ? 1 : (lsu_size == LSU_HALF) ? 2 : 4;
      hi = longint'(lsu_addr) + bytes - 1;
      ok = 0;
      if (hi <= 64'hFFFF_FFFF)
        foreach (ents[i]) if (ents[i].base <= lsu_addr && hi <= longint'(ents[i].limit)) ok = 1;
      if (hi > 64'hFFFF_FFFF) n_wrap++;
      #1;
      checks++;
      if (chk_valid != lsu_req || chk_lo != lsu_addr || chk_hi != addr_t'(hi)) begin
        failures++;
        $display("range mismatch addr=%h size=%0d", lsu_addr, lsu_size);
      end
      checks++;
      if (mem_req != (lsu_req && (!enabled || ok)) ||
          access_fault != (lsu_req && enabled && !ok)) begin
        failures++;
        $display("decision mismatch addr=%h size=%0d en=%0b", lsu_addr, lsu_size, enabled);
      end
      if (lsu_req && !enabled) n_off++;
      if (lsu_req && enabled && ok) n_ok++;
      if (lsu_req && enabled && !ok) n_fault++;
      #1;
    end
    checks++;
    if (n_ok == 0 || n_fault == 0 || n_wrap == 0 || n_off == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
