// hs_decode_tb: random instruction words (HardScope and others) with random
// register values; checks the decoded operation, the operand arithmetic of
// each instruction form against the S-type immediate, and the two stall
// rules: one cycle for an sbent/sbxit right after srdlg/srdsub, and
// holding while the unit is not ready.
module hs_decode_tb;
  import hs_pkg::*;

  logic clk = 0, rst_n = 0;
  logic instr_valid, unit_ready, is_hs, op_valid, hs_stall;
  logic [31:0] instr;
  addr_t rs1_val, rs2_val, op_base, op_limit;
  logic [4:0] rs1, rs2;
  hs_op_t op;
  int checks = 0, failures = 0;
  int n_dlg_stall = 0, n_busy_stall = 0, n_ops[8];

  hs_decode dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%t %s: dut %0h exp %0h (instr %h)", $time, what, got, exp, instr);
    end
  endtask

  initial begin
    bit prev_dlg;
    prev_dlg = 0;
    foreach (n_ops[i]) n_ops[i] = 0;
    instr_valid = 0; instr = '0; rs1_val = '0; rs2_val = '0; unit_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 30000; t++) begin
      logic [2:0] f3;
      logic [11:0] imm12;
      addr_t simm;
      hs_op_t eop;
      bit hs, dstall, stall;
      f3    = 3'($urandom_range(0, 7));
      imm12 = 12'($urandom);
      instr = hs_encode(f3, 5'($urandom), 5'($urandom), imm12);
      if ($urandom_range(0, 5) == 0) instr[6:0] = 7'b0100011;   // an ordinary store
      instr_valid = ($urandom_range(0, 7) != 0);
      unit_ready  = ($urandom_range(0, 4) != 0);
      rs1_val = $urandom;
      rs2_val = $urandom;
      simm = {{20{imm12[11]}}, imm12};
      eop = HS_NONE;
      if (instr[6:0] == 7'b0001011)
        case (f3)
          3'd0: eop = HS_SBENT;  3'd1: eop = HS_SBXIT;
          3'd2: eop = HS_SRADD;  3'd3: eop = HS_SRDDA;
          3'd4: eop = HS_SRDLG;  3'd5: eop = HS_SRDSUB;
          default: eop = HS_NONE;
        endcase
      hs = instr_valid && eop != HS_NONE;
      dstall = hs && prev_dlg && (eop == HS_SBENT || eop == HS_SBXIT);
      stall  = hs && (dstall || !unit_ready);
      #1;
      expect_eq("op", op, eop);
      expect_eq("is_hs", is_hs, hs);
      expect_eq("rs1", rs1, instr[19:15]);
      expect_eq("rs2", rs2, instr[24:20]);
      expect_eq("op_valid", op_valid, hs && !dstall);
      expect_eq("hs_stall", hs_stall, stall);
      case (eop)
        HS_SRADD, HS_SRDSUB: begin
          expect_eq("base", op_base, rs1_val);
          expect_eq("limit", op_limit, addr_t'(rs2_val + simm));
        end
        HS_SRDDA: begin
          expect_eq("base", op_base, addr_t'(rs1_val + simm));
          expect_eq("limit", op_limit, rs2_val);
        end
        HS_SRDLG: begin
          expect_eq("base", op_base, addr_t'(rs1_val + simm));
          expect_eq("limit", op_limit, addr_t'(rs1_val + simm));
        end
        default: ;
      endcase
      if (dstall) n_dlg_stall++;
      else if (stall) n_busy_stall++;
      if (hs && !stall) n_ops[eop]++;
      if (instr_valid) begin
        if (dstall) prev_dlg = 0;
        else if (!stall) prev_dlg = hs && (eop == HS_SRDLG || eop == HS_SRDSUB);
      end
      @(negedge clk);
    end
    checks++;
    if (n_dlg_stall == 0 || n_busy_stall == 0) begin
      failures++;
      $display("coverage hole");
    end
    for (int i = 1; i <= 6; i++) begin
      checks++;
      if (n_ops[i] == 0) begin failures++; $display("op %0d never issued", i); end
    end
    $display("dlg stalls %0d busy stalls %0d", n_dlg_stall, n_busy_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
