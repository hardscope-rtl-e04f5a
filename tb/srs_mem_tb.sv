// srs_mem_tb: fills the protected memory at its default size with random
// entries, then reads every word back in random order and checks the data
// and the one-cycle read latency; also checks that a cycle with en low
// keeps rdata.
module srs_mem_tb;
  import hs_pkg::*;
  localparam int unsigned DEPTH = 16 * 16;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  logic en, we;
  logic [AW-1:0] addr;
  srs_entry_t wdata, rdata;
  srs_entry_t ref_mem [DEPTH];
  int checks = 0, failures = 0;

  srs_mem dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      en = 1; we = 1; addr = AW'(a);
      wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 2 * DEPTH; t++) begin
      int a = $urandom_range(0, DEPTH - 1);
      en = 1; addr = AW'(a);
      @(negedge clk);
      checks++;
      if (rdata != ref_mem[a]) begin
        failures++;
        $display("read %0d mismatch", a);
      end
      // idle cycle: output must hold
      en = 0; addr = AW'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      checks++;
      if (rdata != ref_mem[a]) begin
        failures++;
        $display("rdata did not hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
