// tb_mesram_matrix -- self-checking test of the mesram_matrix block at its default
// size. A shadow model holds every word as (select, row, column group);
// random writes are followed by reads that must return the written word one
// cycle later from the right sub-array/matrix, XOR/XNOR of two rows in the
// same sub-array, and a store / power-off / power-on / restore sequence that
// must bring back the stored words in every part of the block.
module tb_mesram_matrix;
  import mesram_pkg::*;
  localparam int NSEL = 2, ROWS = 256, CM = 4, IOW = 64;

  logic clk = 0, rst_n = 0;
  op_t op = OP_NOP;
  sa_cfg_t sa_cfg = SA_OFF;
  logic [1:0] a_sel = 0;
  logic a_sub;
  logic [7:0] row_a = 0, row_b = 1;
  logic [1:0] cgrp = 0;
  logic [IOW-1:0] wdata = 0, rdata;
  logic powered;
  int checks = 0, failures = 0;
  logic [IOW-1:0] shadow [NSEL][ROWS][CM];
  logic [IOW-1:0] shadow_nv [NSEL][ROWS][CM];

  assign a_sub = a_sel[0];
  mesram_matrix dut (.clk, .rst_n, .op, .sa_cfg, .sub(a_sub), .row_a, .row_b, .cgrp,
                 .wdata, .rdata, .powered);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input op_t o, input sa_cfg_t c, input int s, input int ra,
                       input int rb, input int g, input logic [IOW-1:0] d);
    @(negedge clk);
    op = o; sa_cfg = c; a_sel = 2'(s); row_a = 8'(ra); row_b = 8'(rb);
    cgrp = 2'(g); wdata = d;
    @(negedge clk);
    op = OP_NOP; sa_cfg = SA_OFF;
  endtask

  task automatic check(input logic [IOW-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSEL; s++)
      for (int r = 0; r < 32; r++)
        for (int g = 0; g < CM; g++) begin
          shadow[s][r][g] = {$urandom, $urandom};
          issue(OP_WRITE, SA_OFF, s, r, r, g, shadow[s][r][g]);
        end
    for (int k = 0; k < 100; k++) begin
      int s, r, g;
      s = $urandom_range(NSEL-1); r = $urandom_range(31); g = $urandom_range(CM-1);
      issue(OP_READ, SA_MEMORY, s, r, r, g, '0);
      check(shadow[s][r][g], "read");
    end
    for (int k = 0; k < 40; k++) begin
      int s, ra, rb, g;
      s = $urandom_range(NSEL-1); ra = $urandom_range(15); rb = 16 + $urandom_range(15);
      g = $urandom_range(CM-1);
      issue(k[0] ? OP_XNOR : OP_XOR, k[0] ? SA_XNOR2 : SA_XOR2, s, ra, rb, g, '0);
      check(k[0] ? ~(shadow[s][ra][g] ^ shadow[s][rb][g])
                 : (shadow[s][ra][g] ^ shadow[s][rb][g]), "xor/xnor");
    end
    issue(OP_STORE, SA_OFF, 0, 0, 0, 0, '0);
    shadow_nv = shadow;
    issue(OP_WRITE, SA_OFF, NSEL-1, 4, 4, 2, ~shadow[NSEL-1][4][2]);
    issue(OP_READ, SA_MEMORY, NSEL-1, 4, 4, 2, '0);
    check(~shadow[NSEL-1][4][2], "overwrite");
    issue(OP_PWR_OFF, SA_OFF, 0, 0, 0, 0, '0);
    checks++;
    if (powered) begin failures++; $display("FAIL still powered"); end
    issue(OP_PWR_ON, SA_OFF, 0, 0, 0, 0, '0);
    issue(OP_READ, SA_MEMORY, 1, 3, 3, 1, '0);
    check('0, "volatile data lost");
    issue(OP_RESTORE, SA_OFF, 0, 0, 0, 0, '0);
    for (int s = 0; s < NSEL; s++)
      for (int r = 0; r < 32; r += 3)
        for (int g = 0; g < CM; g++) begin
          issue(OP_READ, SA_MEMORY, s, r, r, g, '0);
          check(shadow_nv[s][r][g], "restored");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
