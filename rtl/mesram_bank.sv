// mesram_bank -- one 32KB ME-SRAM bank of the slice.
//
// Two 16KB memory matrices. A row access goes to the matrix named by `mat`;
// checkpoint and power operations go to both. The read word of the accessed
// matrix is selected with a registered select, so rdata is valid the cycle
// after a READ, XOR or XNOR, as in the matrix.
//
// The 32KB = 2 x 16KB composition is the paper's; the select logic is this
// design's.
module mesram_bank
  import mesram_pkg::*;
#(
  parameter int unsigned ROWS      = SUB_ROWS,
  parameter int unsigned COLS      = SUB_COLS,
  parameter int unsigned COL_MUX_N = COL_MUX,
  localparam int unsigned IOW      = COLS / COL_MUX_N,
  localparam int unsigned RW       = $clog2(ROWS),
  localparam int unsigned CW       = (COL_MUX_N > 1) ? $clog2(COL_MUX_N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  op_t            op,
  input  sa_cfg_t        sa_cfg,
  input  logic           mat,
  input  logic           sub,
  input  logic [RW-1:0]  row_a,
  input  logic [RW-1:0]  row_b,
  input  logic [CW-1:0]  cgrp,
  input  logic [IOW-1:0] wdata,
  output logic [IOW-1:0] rdata,
  output logic           powered
);
  op_t            mat_op [MAT_PER_BANK];
  logic [IOW-1:0] mat_rd [MAT_PER_BANK];
  logic [MAT_PER_BANK-1:0] mat_pwr;
  logic           mat_q;

  always_comb begin
    for (int m = 0; m < MAT_PER_BANK; m++)
      mat_op[m] = ((op inside {OP_STORE, OP_RESTORE, OP_PWR_OFF, OP_PWR_ON})
                   || (int'(mat) == m)) ? op : OP_NOP;
  end

  for (genvar m = 0; m < MAT_PER_BANK; m++) begin : g_mat
    mesram_matrix #(.ROWS(ROWS), .COLS(COLS), .COL_MUX_N(COL_MUX_N)) u_mat (
      .clk, .rst_n,
      .op      (mat_op[m]),
      .sa_cfg, .sub, .row_a, .row_b, .cgrp, .wdata,
      .rdata   (mat_rd[m]),
      .powered (mat_pwr[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    mat_q <= 1'b0;
    else if (op inside {OP_READ, OP_XOR, OP_XNOR}) mat_q <= mat;
  end

  assign rdata   = mat_rd[mat_q];
  assign powered = &mat_pwr;
endmodule
