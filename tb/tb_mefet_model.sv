// tb_mefet_model -- checks the two-state MEFET model: Vnst (g_pos = 0) with
// the gate enabled gives R_on, Vpst gives R_off, the state holds when the
// gate is released, a pulse shorter than the switching time does nothing,
// and the new state appears only after switching (20 ps) plus read-out
// (200 ps). Resistances must be 1.05 kOhm and 63.4 MOhm.
module tb_mefet_model;
  timeunit 1ps;
  timeprecision 1ps;
  logic g_en = 0, g_pos = 0, r_on;
  logic [31:0] r_ohm;
  int checks = 0, failures = 0;

  mefet_model dut (.g_en, .g_pos, .r_on, .r_ohm);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++; $display("FAIL %s at %0t: got %0d exp %0d", what, $time, got, exp);
    end
  endtask

  initial begin
    #300;
    chk(r_on, 0, "initial R_off"); chk(r_ohm, 63_400_000, "R_off value");
    g_pos = 0; g_en = 1; #100; g_en = 0;       // Vnst
    #50;  chk(r_on, 0, "not yet visible");     // 150 ps after the start
    #100; chk(r_on, 1, "R_on after delay");    // 250 ps
    chk(r_ohm, 1050, "R_on value");
    #500; chk(r_on, 1, "non-volatile hold");
    g_pos = 1; g_en = 1; #10; g_en = 0;        // too short to switch
    #400; chk(r_on, 1, "short pulse ignored");
    g_pos = 1; g_en = 1; #100; g_en = 0;       // Vpst
    #300; chk(r_on, 0, "R_off after Vpst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
