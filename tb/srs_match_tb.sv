// srs_match_tb: random banks and request ranges, plus directed cases with
// several matching slots; hit and the index of the highest matching valid
// slot are compared with a direct computation.
module srs_match_tb;
  import hs_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned CW = $clog2(N + 1);
  localparam int unsigned IW = $clog2(N);

  srs_entry_t [N-1:0] entries;
  logic [CW-1:0] cnt;
  addr_t lo, hi;
  logic hit;
  logic [IW-1:0] idx;
  logic [N-1:0] slot_hit;
  int checks = 0, failures = 0;
  int n_multi = 0, n_hit = 0, n_miss = 0;

  srs_match #(.N_ENTRIES(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    int exp_idx = -1, nm = 0;
    #1;
    for (int i = 0; i < int'(cnt); i++)
      if (entries[i].base <= lo && hi <= entries[i].limit) begin
        exp_idx = i;
        nm++;
      end
    if (nm > 1) n_multi++;
    if (exp_idx >= 0) n_hit++; else n_miss++;
    checks++;
    if (hit != (exp_idx >= 0) || (hit && int'(idx) != exp_idx)) begin
      failures++;
      $display("mismatch lo=%h hi=%h: dut hit=%0b idx=%0d exp %0d", lo, hi, hit, idx, exp_idx);
    end
  endtask

  initial begin
    // directed: nested entries, the newest inner one must win
    entries = '0;
    entries[0] = '{base: 32'h100, limit: 32'h1FF};
    entries[1] = '{base: 32'h120, limit: 32'h13F};
    entries[2] = '{base: 32'h300, limit: 32'h303};
    entries[3] = '{base: 32'h100, limit: 32'h1FF};   // beyond cnt
    cnt = 3;
    lo = 32'h130; hi = 32'h133; check_one();            // slots 0 and 1
    lo = 32'h13E; hi = 32'h141; check_one();            // straddles: slot 0
    lo = 32'h302; hi = 32'h305; check_one();            // crosses the limit
    lo = 32'h0FF; hi = 32'h100; check_one();            // crosses the base
    cnt = 4;
    lo = 32'h130; hi = 32'h130; check_one();            // slot 3 now valid
    cnt = 0;
    check_one();                                        // empty bank
    for (int t = 0; t < 20000; t++) begin
      cnt = CW'($urandom_range(0, N));
      for (int i = 0; i < N; i++) begin
        entries[i].base  = $urandom_range(0, 200);
        entries[i].limit = entries[i].base + $urandom_range(0, 60);
      end
      lo = $urandom_range(0, 260);
      hi = lo + $urandom_range(0, 3);
      check_one();
    end
    checks++;
    if (n_multi == 0 || n_hit == 0 || n_miss == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
