// transpose_buffer -- N x N bit transpose buffer between the bus and banks.
//
// Bit-line computing needs the bits of one operand word spread down a
// bit-line (one bit per row) rather than across a row. The buffer takes N
// words of N bits row by row from the bus (wr_en, wr_row, wr_data) and
// hands out column rd_col as an N-bit word: bit i of rd_data is bit rd_col
// of row i. Writes take effect at the clock edge; the read port is
// combinational.
//
// Only the block's name and its place between the bus fabric and the banks
// come from the paper; the size (N = the 64-bit IO word) and the ports are
// this design's choices.
module transpose_buffer #(
  parameter int unsigned N  = 64,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_row,
  input  logic [N-1:0]  wr_data,
  input  logic [AW-1:0] rd_col,
  output logic [N-1:0]  rd_data
);
  logic [N-1:0] buf_q [N];

  always_ff @(posedge clk)
    if (wr_en) buf_q[wr_row] <= wr_data;

  always_comb
    for (int i = 0; i < N; i++) rd_data[i] = buf_q[i][rd_col];
endmodule
