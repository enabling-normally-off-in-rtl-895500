// mesram_dpu -- digital processing unit next to the banks.
//
// Finishes a binarised multiply-accumulate from in-array XNOR results:
// every acc_valid word is popcounted and added up (the "addition" that
// pairs with XNOR in a binary MAC), together with the number of bits seen.
// The bipolar dot product is dot = 2*ones - bits. Batch normalisation is
// y = gamma * dot + beta with gamma and beta signed 8.8 fixed point, giving y
// in 8.8 as well. Two activations are offered: the sign of y (the
// binarised activation of a BNN) and ReLU(y) quantised to QBITS unsigned bits
// (integer part of y, saturated). clr starts a new output.
//
// Timing: acc, bits and everything derived from them are registered one
// cycle after acc_valid; the BN/activation outputs are combinational from
// those registers.
//
// The paper names quantisation, activation and batch-norm units and says a
// MAC is done by XNOR and addition; the arithmetic formats and the bipolar
// mapping are this design's choices.
module mesram_dpu #(
  parameter int unsigned W     = 64,
  parameter int unsigned ACC_W = 24,
  parameter int unsigned QBITS = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    acc_valid,
  input  logic [W-1:0]            xnor_word,
  input  logic signed [15:0]      gamma,     // 8.8
  input  logic signed [15:0]      beta,      // 8.8
  output logic [ACC_W-1:0]        ones,
  output logic [ACC_W-1:0]        bits,
  output logic signed [ACC_W:0]   dot,
  output logic signed [ACC_W+16:0] bn_y,     // 8.8
  output logic                    act_bin,   // 1 = +1, 0 = -1
  output logic [QBITS-1:0]        act_q
);
  logic [$clog2(W+1)-1:0] pc;

  always_comb begin
    pc = '0;
    for (int i = 0; i < W; i++) pc = pc + ($clog2(W+1))'(xnor_word[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ones <= '0;
      bits <= '0;
    end else if (clr) begin
      ones <= '0;
      bits <= '0;
    end else if (acc_valid) begin
      ones <= ones + ACC_W'(pc);
      bits <= bits + ACC_W'(W);
    end
  end

  logic signed [ACC_W+16:0] y_int;
  always_comb begin
    dot     = $signed({1'b0, ones} <<< 1) - $signed({1'b0, bits});
    bn_y    = (ACC_W+17)'(gamma) * (ACC_W+17)'(dot) + (ACC_W+17)'(beta);
    act_bin = !bn_y[ACC_W+16];
    y_int   = bn_y >>> 8;
    if (bn_y[ACC_W+16])                          act_q = '0;
    else if (y_int > (ACC_W+17)'(2**QBITS - 1))  act_q = '1;
    else                                         act_q = y_int[QBITS-1:0];
  end
endmodule
