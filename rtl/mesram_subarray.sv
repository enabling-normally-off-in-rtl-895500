// mesram_subarray -- one 8KB computational ME-SRAM sub-array.
//
// ROWS x COLS non-volatile bit-cells (256 x 256 by default). Each cell has a
// volatile SRAM part (its data bit is the QB node) and a MEFET backup; the
// two are the arrays qb_mem and nv_mem. Every bit-line has its own read
// bit-line (RBL) and configurable sense amplifier, so one operation acts on
// all COLS bit-lines at once:
//
//   OP_READ     RBL precharged to VDD, row_a's read word line grounded; the
//               SAs (memory configuration) sense the whole row.
//   OP_WRITE    row_a is equalised (PSE pulse) and the IO word is driven on
//               SPL/SPR of the bit-lines of column group cgrp.
//   OP_XOR/XNOR rows row_a (RWL tied to VDD) and row_b (RWL tied to ground)
//               are activated together on an RBL precharged to VDD/2; the
//               resulting divider level is decoded by every SA in one cycle.
//   OP_STORE    STR high: every cell copies its state into its MEFET.
//   OP_RESTORE  RSTR high: every cell re-resolves from its MEFET.
//   OP_PWR_OFF  power gating; the volatile state is lost (reads as 0).
//   OP_PWR_ON   power returns; cells hold no data until a restore.
//
// Timing: one operation per clock. SA outputs (sa_out) and the column-muxed
// IO word (rdata) are registered and valid the cycle after a READ, XOR or
// XNOR. The SA configuration bits come from the controller (sa_cfg).
//
// The operations, single-cycle X(N)OR, the RBL levels and the SA come from
// the paper. The interleaved column mux (IO bit i is bit-line
// i*COL_MUX+cgrp), keeping unselected columns of a written row, and
// checkpointing the whole sub-array at once are this design's choices.
module mesram_subarray
  import mesram_pkg::*;
#(
  parameter int unsigned ROWS    = SUB_ROWS,
  parameter int unsigned COLS    = SUB_COLS,
  parameter int unsigned COL_MUX_N = COL_MUX,
  localparam int unsigned IOW    = COLS / COL_MUX_N,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned CW     = (COL_MUX_N > 1) ? $clog2(COL_MUX_N) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  op_t             op,
  input  sa_cfg_t         sa_cfg,
  input  logic [RW-1:0]   row_a,
  input  logic [RW-1:0]   row_b,
  input  logic [CW-1:0]   cgrp,
  input  logic [IOW-1:0]  wdata,
  output logic [COLS-1:0] sa_out,
  output logic [IOW-1:0]  rdata,
  output logic            powered
);
  logic [COLS-1:0] qb_mem [ROWS];   // volatile data bit (QB node)
  logic [COLS-1:0] nv_mem [ROWS];   // MEFET state, 1 = R_on

  rbl_t            rbl [COLS];
  logic [COLS-1:0] sa_bits;
  logic [CW-1:0]   cgrp_q;
  logic [COLS-1:0] qb_a, qb_b;      // QB nodes of the two activated rows

  // Bit-line level of every column for the current operation.
  assign qb_a = qb_mem[row_a];
  assign qb_b = qb_mem[row_b];
  for (genvar c = 0; c < COLS; c++) begin : g_sa
    logic unused_mem;
    assign rbl[c] = rbl_level(op, qb_a[c], qb_b[c]);
    sense_amp u_sa (
      .rbl (rbl[c]),
      .cfg (sa_cfg),
      .out (sa_bits[c]),
      .mem (unused_mem)
    );
  end

  // Written row: the bit-lines of column group cgrp take the IO word (SPL =
  // data, SPR = ~data); the others keep their value.
  logic [COLS-1:0] wr_row;
  for (genvar c = 0; c < COLS; c++) begin : g_wr
    assign wr_row[c] = (c % COL_MUX_N == int'(cgrp)) ? wdata[c / COL_MUX_N]
                                                     : qb_a[c];
  end

  // Cell array: write, checkpoint and power.
  always_ff @(posedge clk) begin
    if (powered) begin
      unique case (op)
        OP_WRITE:   qb_mem[row_a] <= wr_row;
        OP_STORE:   for (int r = 0; r < ROWS; r++) nv_mem[r] <= qb_mem[r];
        OP_RESTORE: for (int r = 0; r < ROWS; r++) qb_mem[r] <= nv_mem[r];
        OP_PWR_OFF: for (int r = 0; r < ROWS; r++) qb_mem[r] <= '0;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      powered <= 1'b1;
      sa_out  <= '0;
      cgrp_q  <= '0;
    end else begin
      if (op == OP_PWR_OFF) powered <= 1'b0;
      if (op == OP_PWR_ON)  powered <= 1'b1;
      if (powered && (op == OP_READ || op == OP_XOR || op == OP_XNOR)) begin
        sa_out <= sa_bits;
        cgrp_q <= cgrp;
      end
    end
  end

  // Column mux (4:1 by default) onto the IO word.
  for (genvar i = 0; i < IOW; i++) begin : g_cmux
    logic [COL_MUX_N-1:0] grp;
    assign grp      = sa_out[i*COL_MUX_N +: COL_MUX_N];
    assign rdata[i] = grp[cgrp_q];
  end

  // The two operands of an X(N)OR are two different rows of one column;
  // only power-up is meaningful while power-gated.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (op == OP_XOR || op == OP_XNOR)
        assert (row_a != row_b) else $error("X(N)OR needs two distinct rows");
      if (!powered)
        assert (op == OP_NOP || op == OP_PWR_ON)
          else $error("operation %0d issued while power-gated", op);
    end
  end
endmodule
