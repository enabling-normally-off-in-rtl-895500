// tb_mesram_subarray -- self-checking test of one 8KB sub-array (256 x 256).
//
// A shadow copy of the cell contents (data bits and MEFET states) is kept in
// the testbench. Random writes of 64-bit words fill the array; reads compare
// the selected IO word and the full row of SA outputs; XOR and XNOR of random
// row pairs compare all 256 bit-lines with the shadow rows. Then the
// checkpoint sequence is run: store, overwrite some rows, power off, check
// the volatile data is gone, power on, restore, and check every row holds the
// stored (not the overwritten) data. Results must appear exactly one cycle
// after the operation, which is the single-cycle X(N)OR of the design.
module tb_mesram_subarray;
  import mesram_pkg::*;
  localparam int ROWS = 256, COLS = 256, CM = 4, IOW = COLS / CM;

  logic clk = 0, rst_n = 0;
  op_t op = OP_NOP;
  sa_cfg_t sa_cfg = SA_OFF;
  logic [7:0] row_a = 0, row_b = 1;
  logic [1:0] cgrp = 0;
  logic [IOW-1:0] wdata = 0, rdata;
  logic [COLS-1:0] sa_out;
  logic powered;
  int checks = 0, failures = 0, cycles = 0;

  logic [COLS-1:0] shadow [ROWS];
  logic [COLS-1:0] shadow_nv [ROWS];

  mesram_subarray dut (.clk, .rst_n, .op, .sa_cfg, .row_a, .row_b, .cgrp,
                       .wdata, .sa_out, .rdata, .powered);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [IOW-1:0] word_of(input logic [COLS-1:0] r,
                                             input int g);
    for (int i = 0; i < IOW; i++) word_of[i] = r[i*CM + g];
  endfunction

  task automatic issue(input op_t o, input sa_cfg_t c, input int ra,
                       input int rb, input int g, input logic [IOW-1:0] d);
    @(negedge clk);
    op = o; sa_cfg = c; row_a = 8'(ra); row_b = 8'(rb); cgrp = 2'(g); wdata = d;
    @(negedge clk);
    op = OP_NOP; sa_cfg = SA_OFF;
  endtask

  task automatic expect_eq(input logic [COLS-1:0] got, input logic [COLS-1:0] exp,
                           input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic do_write(input int r, input int g, input logic [IOW-1:0] d);
    issue(OP_WRITE, SA_OFF, r, r, g, d);
    for (int i = 0; i < IOW; i++) shadow[r][i*CM + g] = d[i];
  endtask

  task automatic do_read(input int r, input int g);
    issue(OP_READ, SA_MEMORY, r, r, g, '0);
    expect_eq(sa_out, shadow[r], "read row");
    expect_eq(COLS'(rdata), COLS'(word_of(shadow[r], g)), "read word");
  endtask

  task automatic do_xor(input int ra, input int rb, input logic xnor_op);
    issue(xnor_op ? OP_XNOR : OP_XOR, xnor_op ? SA_XNOR2 : SA_XOR2, ra, rb, 0, '0);
    expect_eq(sa_out, xnor_op ? ~(shadow[ra] ^ shadow[rb]) : (shadow[ra] ^ shadow[rb]),
              xnor_op ? "xnor row" : "xor row");
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Fill the whole array.
    for (int r = 0; r < ROWS; r++)
      for (int g = 0; g < CM; g++)
        do_write(r, g, {$urandom, $urandom});
    for (int k = 0; k < 64; k++) do_read($urandom_range(ROWS-1), $urandom_range(CM-1));
    // Latency: the result is registered at the first edge after issue.
    @(negedge clk);
    op = OP_XOR; sa_cfg = SA_XOR2; row_a = 8'd3; row_b = 8'd200;
    t0 = cycles;
    @(posedge clk); #1;
    op = OP_NOP;
    checks++;
    if (cycles - t0 != 1 || sa_out !== (shadow[3] ^ shadow[200])) begin
      failures++; $display("FAIL single-cycle XOR");
    end
    for (int k = 0; k < 64; k++) begin
      int ra, rb;
      ra = $urandom_range(ROWS-1);
      rb = (ra + 1 + $urandom_range(ROWS-2)) % ROWS;
      do_xor(ra, rb, k[0]);
    end
    // Checkpoint: store, overwrite, power off / on, restore.
    issue(OP_STORE, SA_OFF, 0, 0, 0, '0);
    for (int r = 0; r < ROWS; r++) shadow_nv[r] = shadow[r];
    for (int k = 0; k < 16; k++) do_write(k * 7, k % CM, {$urandom, $urandom});
    do_read(7, 1);
    issue(OP_PWR_OFF, SA_OFF, 0, 0, 0, '0);
    checks++;
    if (powered !== 1'b0) begin failures++; $display("FAIL not power-gated"); end
    issue(OP_PWR_ON, SA_OFF, 0, 0, 0, '0);
    for (int r = 0; r < ROWS; r++) shadow[r] = '0;
    do_read(5, 0);                       // volatile data is gone
    issue(OP_RESTORE, SA_OFF, 0, 0, 0, '0);
    for (int r = 0; r < ROWS; r++) shadow[r] = shadow_nv[r];
    for (int r = 0; r < ROWS; r++) do_read(r, r % CM);
    do_xor(10, 11, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
