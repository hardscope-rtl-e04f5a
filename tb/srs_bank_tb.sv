// srs_bank_tb: random load / clear / push sequences on one bank, compared
// every cycle with a queue model (load beats clear beats push, push into a
// full bank is ignored, entries stay in the order they were added).
module srs_bank_tb;
  import hs_pkg::*;
  localparam int unsigned N = 4;
  localparam int unsigned CW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  logic load, clr, push;
  srs_entry_t [N-1:0] load_entries, entries;
  logic [CW-1:0] load_cnt, cnt;
  srs_entry_t push_entry;
  logic full;
  int checks = 0, failures = 0;
  srs_entry_t q[$];
  int n_load = 0, n_push_full = 0;

  srs_bank #(.N_ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (32'(cnt) != q.size() || full != (q.size() == N)) begin
      failures++;
      $display("cnt mismatch: dut %0d model %0d", cnt, q.size());
    end
    foreach (q[i]) begin
      checks++;
      if (entries[i] != q[i]) begin
        failures++;
        $display("slot %0d mismatch", i);
      end
    end
  endtask

  initial begin
    load = 0; clr = 0; push = 0; load_entries = '0; load_cnt = '0; push_entry = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int cyc = 0; cyc < 5000; cyc++) begin
      load = ($urandom_range(0, 9) == 0);
      clr  = ($urandom_range(0, 7) == 0);
      push = ($urandom_range(0, 2) != 0);
      for (int i = 0; i < N; i++) load_entries[i] = {$urandom, $urandom};
      load_cnt   = CW'($urandom_range(0, N));
      push_entry = {$urandom, $urandom};
      @(posedge clk);
      if (load) begin
        q.delete();
        for (int i = 0; i < int'(load_cnt); i++) q.push_back(load_entries[i]);
        n_load++;
      end else if (clr) begin
        q.delete();
      end else if (push) begin
        if (q.size() < N) q.push_back(push_entry);
        else n_push_full++;
      end
      @(negedge clk);
      compare();
    end
    checks++;
    if (n_load == 0 || n_push_full == 0) begin
      failures++;
      $display("coverage hole: loads %0d full pushes %0d", n_load, n_push_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
