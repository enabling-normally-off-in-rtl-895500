// mesram_matrix -- one 16KB ME-SRAM memory matrix.
//
// Two 8KB computational sub-arrays share a global decoder and a 2:1 mux onto
// the matrix IO. The decoder sends a row access (read, write, X(N)OR) to the
// sub-array named by `sub` and a NOP to the other; checkpoint and power
// operations (store, restore, power off/on) go to both. Each sub-array's
// 4:1 column mux already narrows its 256 bit-lines to the 64-bit IO word;
// the 2:1 mux here picks the sub-array that was accessed.
//
// Timing: one operation per clock; rdata is valid the cycle after a READ,
// XOR or XNOR (the sub-array's SA register), the 2:1 select is registered
// alongside it. The two operands of an X(N)OR are rows of the same
// sub-array, as in-array computing requires.
//
// The 16KB = 2 x 8KB split and the muxes follow the paper's matrix drawing;
// the address split and the broadcast of checkpoint operations are this
// design's choices.
module mesram_matrix
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
  input  logic           sub,     // sub-array select
  input  logic [RW-1:0]  row_a,
  input  logic [RW-1:0]  row_b,
  input  logic [CW-1:0]  cgrp,
  input  logic [IOW-1:0] wdata,
  output logic [IOW-1:0] rdata,
  output logic           powered
);
  op_t            sub_op  [SUB_PER_MAT];
  logic [IOW-1:0] sub_rd  [SUB_PER_MAT];
  logic [SUB_PER_MAT-1:0] sub_pwr;
  logic           sub_q;

  function automatic logic is_global(input op_t o);
    return o inside {OP_STORE, OP_RESTORE, OP_PWR_OFF, OP_PWR_ON};
  endfunction

  // Global decoder.
  always_comb begin
    for (int s = 0; s < SUB_PER_MAT; s++)
      sub_op[s] = (is_global(op) || (int'(sub) == s)) ? op : OP_NOP;
  end

  for (genvar s = 0; s < SUB_PER_MAT; s++) begin : g_sub
    logic [COLS-1:0] unused_sa;
    mesram_subarray #(.ROWS(ROWS), .COLS(COLS), .COL_MUX_N(COL_MUX_N)) u_sub (
      .clk, .rst_n,
      .op      (sub_op[s]),
      .sa_cfg,
      .row_a, .row_b, .cgrp, .wdata,
      .sa_out  (unused_sa),
      .rdata   (sub_rd[s]),
      .powered (sub_pwr[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    sub_q <= 1'b0;
    else if (op inside {OP_READ, OP_XOR, OP_XNOR}) sub_q <= sub;
  end

  assign rdata   = sub_rd[sub_q];   // Mux 2:1
  assign powered = &sub_pwr;
endmodule
