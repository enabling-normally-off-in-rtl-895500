// tb_me_sram_cell -- drives one ME-SRAM bit-cell through the sequence hold,
// write, read, store, power off, power on, restore (100 ps per phase), for
// both data values, and checks the Q/QB nodes, the read bit-line pull-down
// and the MEFET state after every phase. Also checks that the MEFET state
// is not visible before its switching plus read-out delay, and that a write
// without the equalising PSE pulse does not flip the cell.
module tb_me_sram_cell;
  timeunit 1ps;
  timeprecision 1ps;

  logic pwr = 1, pse = 1, spl = 1, spr = 1, rwl = 1, str = 0, rstr = 0;
  logic q, qb, rbl_pull, mefet_r_on;
  int checks = 0, failures = 0;

  me_sram_cell dut (.pwr, .pse, .spl, .spr, .rwl, .str, .rstr, .q, .qb,
                    .rbl_pull, .mefet_r_on);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++; $display("FAIL %s at %0t: got %b exp %b", what, $time, got, exp);
    end
  endtask

  task automatic hold();  pse = 1; spl = 1; spr = 1; rwl = 1; str = 0; rstr = 0; endtask

  // Write data bit d (stored on QB): equalise, then SPL = d, SPR = ~d.
  task automatic write_bit(input logic d);
    pse = 0; spl = 0; spr = 0; #40;
    pse = 1; spl = d; spr = !d; #60;
    hold();
  endtask

  task automatic cycle(input logic d);
    write_bit(d);                           // write
    chk(qb, d, "write qb"); chk(q, !d, "write q");
    rwl = 0; #50; chk(rbl_pull, d, "read pulls RBL"); #50; hold();   // read
    str = 1; #100; str = 0;                 // store
    #250; chk(mefet_r_on, d, "MEFET state after store");
    pwr = 0; pse = 0; spl = 0; spr = 0; rwl = 0; #100;   // power off
    chk(q, 0, "off q"); chk(qb, 0, "off qb"); chk(mefet_r_on, d, "MEFET keeps state");
    pwr = 1; hold(); #100;                  // power on
    pse = 0; spl = 0; spr = 0; rstr = 1; #100;  // restore
    hold(); #100;
    chk(qb, d, "restored qb"); chk(q, !d, "restored q");
  endtask

  initial begin
    #100;
    hold();
    write_bit(1'b0);                        // initial hold state Q = 1
    chk(q, 1, "init q");
    cycle(1'b1);                            // Q = 0 written, as in the paper's trace
    cycle(1'b0);
    // Store delay: the new state must not be seen before switch + read-out.
    write_bit(1'b1);
    str = 1; #100; str = 0;
    chk(mefet_r_on, 0, "old state still seen");
    #200;
    chk(mefet_r_on, 1, "new state after delay");
    // A write without the PSE equalisation leaves the cell unchanged.
    spl = 0; spr = 1; #50; hold(); #50;
    chk(qb, 1, "no write without equalise");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
