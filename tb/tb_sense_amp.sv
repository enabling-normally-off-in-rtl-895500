// tb_sense_amp -- self-checking test of the configurable sense amplifier.
//
// For every pair of cell values (QB1, QB2) the bit-line level of an X(N)OR
// access is applied and the output is compared with QB1 ^ QB2 (XOR2) and its
// inverse (XNOR2); for both cell values the level of a memory read is
// applied and the output is compared with the stored bit. The RBL levels are
// the nominal ones (ground, VDD/2, VDD, 10% VDD) plus a sweep that checks the
// comparator thresholds sit between them. Purely combinational: each check
// waits 1 ns.
module tb_sense_amp;
  import mesram_pkg::*;
  rbl_t    rbl;
  sa_cfg_t cfg;
  logic    out, mem;
  int checks = 0, failures = 0;

  sense_amp dut (.rbl, .cfg, .out, .mem);

  task automatic check(input logic exp, input string what);
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: rbl=%0d cfg=%b out=%b exp=%b", what, rbl, cfg, out, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // X(N)OR: RBL precharged to VDD/2, MR1 to VDD, MR2 to ground.
    for (int v = 0; v < 4; v++) begin
      logic qb1, qb2;
      {qb1, qb2} = 2'(v);
      rbl = (qb1 && !qb2) ? 8'd255 : (!qb1 && qb2) ? 8'd0 : 8'd128;
      cfg = '{en2: 1, en1: 1, s1: 0, s0: 0}; #1; check(qb1 ^ qb2, "xor2");
      cfg = '{en2: 1, en1: 1, s1: 0, s0: 1}; #1; check(!(qb1 ^ qb2), "xnor2");
    end
    // Memory read: RBL precharged to VDD, discharged to 10% when QB = 1.
    for (int s0 = 0; s0 < 2; s0++) begin
      cfg = '{en2: 0, en1: 1, s1: 1, s0: 1'(s0)};
      rbl = 8'd255; #1; check(1'b0, "read qb=0");
      rbl = 8'd26;  #1; check(1'b1, "read qb=1");
    end
    // Threshold sweep: levels near each nominal value decode the same way.
    for (int d = -20; d <= 20; d += 5) begin
      cfg = '{en2: 1, en1: 1, s1: 0, s0: 0};
      rbl = 8'(128 + d); #1; check(1'b0, "xor mid band");
      rbl = 8'(d < 0 ? 255 + d : 255 - d); #1; check(1'b1, "xor high band");
      rbl = 8'(d < 0 ? -d : d); #1; check(1'b1, "xor low band");
      cfg = '{en2: 0, en1: 1, s1: 1, s0: 0};
      rbl = 8'(d < 0 ? 26 - d/2 : 26 + d/2); #1; check(1'b1, "read low band");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
