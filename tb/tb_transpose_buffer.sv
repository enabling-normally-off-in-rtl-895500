// tb_transpose_buffer -- fills the 64 x 64 buffer with random rows and checks
// that every column read returns, in bit i, bit `col` of row i. Also checks
// that a row rewrite changes exactly the expected column bits.
module tb_transpose_buffer;
  localparam int N = 64;
  logic clk = 0, wr_en = 0;
  logic [5:0] wr_row = 0, rd_col = 0;
  logic [N-1:0] wr_data = 0, rd_data;
  logic [N-1:0] rows [N];
  int checks = 0, failures = 0;

  transpose_buffer #(.N(N)) dut (.clk, .wr_en, .wr_row, .wr_data, .rd_col, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int c = 0; c < N; c++) begin
      logic [N-1:0] exp;
      for (int i = 0; i < N; i++) exp[i] = rows[i][c];
      rd_col = 6'(c); #1;
      checks++;
      if (rd_data !== exp) begin
        failures++; $display("FAIL col %0d: %h vs %h", c, rd_data, exp);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      rows[r] = {$urandom, $urandom};
      wr_en = 1; wr_row = 6'(r); wr_data = rows[r];
    end
    @(negedge clk); wr_en = 0;
    check_all();
    @(negedge clk);
    rows[17] = ~rows[17];
    wr_en = 1; wr_row = 6'd17; wr_data = rows[17];
    @(negedge clk); wr_en = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
