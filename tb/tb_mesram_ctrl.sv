// tb_mesram_ctrl -- checks the command decoder and timing control: the array
// operation and SA bits {En2,En1,S1,S0} issued for every command, the bank
// index way*4+bank, the one-cycle rvalid / acc_valid, the two-cycle SLEEP
// (store then power-off broadcast), the stall and automatic wake-up
// (power-on then restore broadcast) when a command arrives while asleep,
// and the event counters.
module tb_mesram_ctrl;
  import mesram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = CMD_NOP;
  logic [4:0] way = 0;
  logic [1:0] bank = 0;
  op_t op;
  logic bcast, use_tbuf, rvalid, acc_valid, asleep;
  logic [6:0] bank_idx;
  sa_cfg_t sa_cfg;
  logic [15:0] n_store, n_sleep, n_wake, n_stall;
  int checks = 0, failures = 0;

  mesram_ctrl dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .way, .bank, .op,
                   .bcast, .bank_idx, .sa_cfg, .use_tbuf, .rvalid, .acc_valid,
                   .asleep, .n_store, .n_sleep, .n_wake, .n_stall);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
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

  // Present a command in this cycle and check the decode before the edge.
  task automatic present(input cmd_t c, input op_t exp_op, input logic [3:0] exp_sa,
                         input logic exp_bcast);
    @(negedge clk);
    cmd_valid = 1; cmd = c; #1;
    chk(cmd_ready, 1, "ready");
    chk(op, exp_op, "op");
    chk(sa_cfg, exp_sa, "sa bits");
    chk(bcast, exp_bcast, "bcast");
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 20; w += 7)
      for (int b = 0; b < 4; b++) begin
        way = 5'(w); bank = 2'(b); #1;
        chk(bank_idx, w * 4 + b, "bank index");
      end
    present(CMD_READ,  OP_READ,  4'b0110, 0);
    chk(rvalid, 1, "rvalid one cycle after read");
    present(CMD_XOR,   OP_XOR,   4'b1100, 0);
    present(CMD_XNOR,  OP_XNOR,  4'b1101, 0);
    chk(acc_valid, 0, "no acc for plain xnor");
    present(CMD_XNOR_ACC, OP_XNOR, 4'b1101, 0);
    chk(acc_valid, 1, "acc after xnor_acc");
    present(CMD_WRITE, OP_WRITE, 4'b0000, 0);
    chk(rvalid, 0, "no rvalid after write");
    @(negedge clk); cmd_valid = 1; cmd = CMD_TWRITE; #1;
    chk(use_tbuf, 1, "twrite uses transpose buffer");
    @(negedge clk); cmd_valid = 0;
    present(CMD_STORE, OP_STORE, 4'b0000, 1);
    chk(n_store, 1, "store counted");
    // SLEEP: store broadcast now, power-off broadcast next cycle.
    present(CMD_SLEEP, OP_STORE, 4'b0000, 1);
    chk(op, OP_PWR_OFF, "power-off follows store"); chk(bcast, 1, "off bcast");
    chk(cmd_ready, 0, "busy while powering off");
    @(negedge clk);
    chk(asleep, 1, "asleep");
    // A read while asleep: stalled, banks woken and restored, then served.
    cmd_valid = 1; cmd = CMD_READ; #1;
    chk(cmd_ready, 0, "stall while asleep");
    chk(op, OP_PWR_ON, "power-on first");
    @(negedge clk); #1;
    chk(cmd_ready, 0, "stall during restore");
    chk(op, OP_RESTORE, "restore second"); chk(bcast, 1, "restore bcast");
    @(negedge clk); #1;
    chk(cmd_ready, 1, "served after restore"); chk(op, OP_READ, "read issued");
    @(negedge clk); cmd_valid = 0;
    chk(n_sleep, 1, "sleep counted"); chk(n_wake, 1, "wake counted");
    chk(n_stall, 2, "two stalled cycles");
    chk(n_store, 2, "second store");
    // Explicit WAKE is taken in the cycle it powers the banks up.
    present(CMD_SLEEP, OP_STORE, 4'b0000, 1);
    @(negedge clk);
    cmd_valid = 1; cmd = CMD_WAKE; #1;
    chk(cmd_ready, 1, "wake taken"); chk(op, OP_PWR_ON, "wake powers up");
    @(negedge clk); cmd_valid = 0; #1;
    chk(op, OP_RESTORE, "wake restores");
    @(negedge clk);
    chk(asleep, 0, "awake"); chk(n_wake, 2, "second wake");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
