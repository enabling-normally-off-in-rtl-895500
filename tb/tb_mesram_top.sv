// tb_mesram_top -- end-to-end test of the ME-SRAM slice.
//
// The slice is built at a reduced size: 1 way x 2 banks, 32 rows
// per sub-array, full 256 bit-lines and 64-bit IO. The test
//   1. writes random words all over the slice and reads them back,
//   2. runs XOR and XNOR between rows of one sub-array in several banks,
//   3. fills the transpose buffer and writes its columns into the array,
//   4. runs a small binarised dot product: XNOR_ACC of an activation row with
//      weight rows, checking the DPU popcount, sign and quantised outputs,
//   5. checkpoints (STORE), overwrites, sleeps (SLEEP), and sends a READ
//      while asleep: the read must stall, wake the slice, and return the
//      data written before the SLEEP; then an explicit WAKE cycle.
// Every mechanism (read, write, XOR, XNOR, accumulate, transpose write,
// store, sleep, auto-wake stall, explicit wake) is counted and must occur.
module tb_mesram_top;
  import mesram_pkg::*;
  localparam int NW = 1, NBW = 2, ROWS = 32, IOW = 64;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = CMD_NOP;
  addr_t addr = '0;
  logic [7:0] row_b = 0;
  logic [IOW-1:0] wdata = 0, rdata;
  logic rvalid;
  logic tb_wr_en = 0;
  logic [5:0] tb_wr_row = 0;
  logic [IOW-1:0] tb_wr_data = 0;
  logic dpu_clr = 0;
  logic signed [15:0] bn_gamma = 16'sh0100, bn_beta = 0;
  logic [23:0] dpu_ones, dpu_bits;
  logic dpu_act_bin;
  logic [7:0] dpu_act_q;
  logic asleep, banks_powered;
  logic [15:0] n_store, n_sleep, n_wake, n_stall;
  int checks = 0, failures = 0;

  typedef enum int {M_READ, M_WRITE, M_XOR, M_XNOR, M_ACC, M_TWRITE, M_STORE,
                    M_SLEEP, M_STALL, M_WAKE, M_N} mech_t;
  int seen [M_N];

  logic [IOW-1:0] shadow [addr_t];

  mesram_top #(.N_WAYS(NW), .N_BANK_WAY(NBW), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++; $display("FAIL %s at %0t: got %h exp %h", what, $time, got, exp);
    end
  endtask

  // Issue one command; wait until it is taken; return the result word if any.
  task automatic send(input cmd_t c, input addr_t a, input int rb,
                      input logic [IOW-1:0] d, output logic [IOW-1:0] res);
    @(negedge clk);
    cmd_valid = 1; cmd = c; addr = a; row_b = 8'(rb); wdata = d;
    #1;
    while (!cmd_ready) begin
      seen[M_STALL]++;
      @(negedge clk); #1;
    end
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
    if (c inside {CMD_READ, CMD_XOR, CMD_XNOR, CMD_XNOR_ACC}) begin
      checks++;
      if (!rvalid) begin failures++; $display("FAIL rvalid missing"); end
    end
    res = rdata;
  endtask

  function automatic addr_t rand_addr(input int row);
    addr_t a;
    a.way  = 5'($urandom_range(NW-1));
    a.bank = 2'($urandom_range(NBW-1));
    a.mat  = 1'($urandom_range(1));
    a.sub  = 1'($urandom_range(1));
    a.row  = 8'(row);
    a.cgrp = 2'($urandom_range(3));
    return a;
  endfunction

  task automatic wr(input addr_t a, input logic [IOW-1:0] d);
    logic [IOW-1:0] unused;
    send(CMD_WRITE, a, 0, d, unused);
    shadow[a] = d; seen[M_WRITE]++;
  endtask

  task automatic rd_check(input addr_t a, input string what);
    logic [IOW-1:0] r;
    send(CMD_READ, a, 0, '0, r);
    chk(r, shadow.exists(a) ? shadow[a] : '0, what); seen[M_READ]++;
  endtask

  initial begin
    logic [IOW-1:0] r, act, exp_w;
    addr_t a, b2;
    int n1;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. memory mode
    for (int k = 0; k < 200; k++) wr(rand_addr($urandom_range(ROWS-1)), {$urandom, $urandom});
    foreach (shadow[x]) rd_check(x, "read back");

    // 2. computing mode: rows 0..3 vs 4..7 of one sub-array
    for (int k = 0; k < 24; k++) begin
      a = rand_addr($urandom_range(3));
      b2 = a; b2.row = 8'(4 + $urandom_range(3));
      wr(a, {$urandom, $urandom}); wr(b2, {$urandom, $urandom});
      send(k[0] ? CMD_XNOR : CMD_XOR, a, b2.row, '0, r);
      chk(r, k[0] ? ~(shadow[a] ^ shadow[b2]) : (shadow[a] ^ shadow[b2]), "x(n)or");
      seen[k[0] ? M_XNOR : M_XOR]++;
    end

    // 3. transpose buffer: 64 words in, columns written to rows 8..15
    begin
      logic [IOW-1:0] trows [64];
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        trows[i] = {$urandom, $urandom};
        tb_wr_en = 1; tb_wr_row = 6'(i); tb_wr_data = trows[i];
      end
      @(negedge clk); tb_wr_en = 0;
      for (int j = 0; j < 8; j++) begin
        a = rand_addr(8 + j);
        send(CMD_TWRITE, a, j * 5, '0, r);
        for (int i = 0; i < 64; i++) exp_w[i] = trows[i][j * 5];
        shadow[a] = exp_w; seen[M_TWRITE]++;
        rd_check(a, "transposed column");
      end
    end

    // 4. binarised dot product: activation row 16 against weight rows 17..20
    a = rand_addr(16); a.cgrp = 2'd1;
    act = {$urandom, $urandom};
    wr(a, act);
    @(negedge clk); dpu_clr = 1; bn_gamma = 16'sh0100; bn_beta = 16'sh0400;
    @(negedge clk); dpu_clr = 0;
    n1 = 0;
    for (int k = 0; k < 4; k++) begin
      b2 = a; b2.row = 8'(17 + k);
      exp_w = {$urandom, $urandom};
      if (k == 0) exp_w = act;          // guarantees a positive result
      wr(b2, exp_w);
      send(CMD_XNOR_ACC, a, b2.row, '0, r);
      chk(r, ~(act ^ exp_w), "xnor_acc word");
      n1 += $countones(~(act ^ exp_w));
      seen[M_ACC]++;
    end
    @(negedge clk);
    chk(dpu_ones, n1, "dpu popcount"); chk(dpu_bits, 256, "dpu bits");
    begin
      longint d, y, q;
      d = 2 * n1 - 256;
      y = 256 * d + 16'sh0400;
      q = (y < 0) ? 0 : ((y >>> 8) > 255 ? 255 : (y >>> 8));
      chk(dpu_act_bin, y >= 0, "dpu sign"); chk(dpu_act_q, q, "dpu quant");
    end

    // 5. checkpointing
    send(CMD_STORE, '0, 0, '0, r); seen[M_STORE]++;
    a = rand_addr(30);
    wr(a, 64'h0123_4567_89ab_cdef);     // after STORE: still saved by SLEEP
    send(CMD_SLEEP, '0, 0, '0, r); seen[M_SLEEP]++;
    @(negedge clk);
    chk(asleep, 1, "asleep"); chk(banks_powered, 0, "banks gated");
    rd_check(a, "read after auto wake");  // stalls, wakes, restores
    chk(banks_powered, 1, "banks powered again");
    foreach (shadow[x]) rd_check(x, "all data after sleep");
    send(CMD_SLEEP, '0, 0, '0, r); seen[M_SLEEP]++;
    send(CMD_WAKE, '0, 0, '0, r); seen[M_WAKE]++;
    @(negedge clk);
    rd_check(a, "read after explicit wake");
    chk(n_sleep, 2, "sleep count"); chk(n_wake, 2, "wake count");
    chk(n_store, 3, "store count");

    for (int m = 0; m < M_N; m++) begin
      checks++;
      if (seen[m] == 0) begin
        failures++; $display("FAIL mechanism %s never happened", mech_t'(m));
      end
    end
    $display("mechanisms: read=%0d write=%0d xor=%0d xnor=%0d acc=%0d twrite=%0d store=%0d sleep=%0d stall=%0d wake=%0d",
             seen[M_READ], seen[M_WRITE], seen[M_XOR], seen[M_XNOR], seen[M_ACC],
             seen[M_TWRITE], seen[M_STORE], seen[M_SLEEP], seen[M_STALL], seen[M_WAKE]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
