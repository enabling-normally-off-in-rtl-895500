// tb_mesram_dpu -- accumulates random XNOR words and checks the popcount sum,
// the bit count, the bipolar dot product, the batch-norm result, the sign
// activation and the saturating quantised ReLU against values worked out
// here from the words themselves. Covers a positive and a negative BN
// result and a saturated one; also checks clr and the one-cycle update.
module tb_mesram_dpu;
  logic clk = 0, rst_n = 0, clr = 0, acc_valid = 0;
  logic [63:0] xnor_word = 0;
  logic signed [15:0] gamma = 16'sh0100, beta = 0;
  logic [23:0] ones, bits;
  logic signed [24:0] dot;
  logic signed [40:0] bn_y;
  logic act_bin;
  logic [7:0] act_q;
  int checks = 0, failures = 0;

  mesram_dpu dut (.clk, .rst_n, .clr, .acc_valid, .xnor_word, .gamma, .beta,
                  .ones, .bits, .dot, .bn_y, .act_bin, .act_q);
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
      failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run(input int nwords, input int density, input int g, input int b);
    longint n1 = 0, nb = 0, d, y, q;
    @(negedge clk); clr = 1; gamma = 16'(g); beta = 16'(b);
    @(negedge clk); clr = 0;
    chk(ones, 0, "clr");
    for (int k = 0; k < nwords; k++) begin
      logic [63:0] w;
      for (int i = 0; i < 64; i++) begin
        w[i] = ($urandom_range(99) < density);
        n1 += w[i];
      end
      nb += 64;
      xnor_word = w; acc_valid = 1;
      @(negedge clk);
      chk(ones, n1, "one-cycle update");
    end
    acc_valid = 0;
    @(negedge clk);
    d = 2 * n1 - nb;
    y = longint'(g) * d + b;
    chk(ones, n1, "ones"); chk(bits, nb, "bits"); chk(dot, d, "dot");
    chk(bn_y, y, "bn");
    chk(act_bin, (y >= 0), "sign");
    q = (y < 0) ? 0 : ((y >>> 8) > 255 ? 255 : (y >>> 8));
    chk(act_q, q, "quant relu");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(9, 70, 16'sh0080, 16'sh0100);    // positive, in range
    run(9, 30, 16'sh0100, -16'sh0200);   // negative
    run(20, 95, 16'sh0400, 16'sh0000);   // saturated
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
