// mesram_top -- 2.5MB normally-off ME-SRAM cache slice with in-situ X(N)OR.
//
// NUM_WAYS x BANKS_PER_WAY banks of 32KB (20 x 4 = 80 banks, 2.5MB) share
// one controller, a transpose buffer on the bus side and a digital
// processing unit (popcount / batch-norm / activation / quantisation) for
// binarised neural-network layers.
//
// Host port: cmd_valid/cmd_ready handshake with a command (mesram_pkg::cmd_t),
// a word address (mesram_pkg::addr_t: way, bank, matrix, sub-array, row,
// column group), a second row row_b for X(N)OR (also the transpose-buffer
// column for TWRITE) and a 64-bit write word. Read and X(N)OR results come
// back on rdata with rvalid, one cycle after the command is taken. XNOR_ACC
// results are also accumulated by the DPU. The transpose buffer is filled
// through its own port (tb_wr_*), standing in for the sensor / bus fabric,
// which are outside this design.
//
// Checkpointing: SLEEP backs every cell up into its MEFET and power-gates
// every bank; the next command (or WAKE) powers the banks up and restores
// them before it runs. Power-state and event counters are brought out for
// observation.
//
// The organisation (banks, ways, matrices, sub-arrays, control unit,
// transpose buffer, processing unit) follows the paper's slice drawing;
// the host port, address map and bank select are this design's choices.
module mesram_top
  import mesram_pkg::*;
#(
  parameter int unsigned N_WAYS      = NUM_WAYS,
  parameter int unsigned N_BANK_WAY  = BANKS_PER_WAY,
  parameter int unsigned ROWS        = SUB_ROWS,
  parameter int unsigned COLS        = SUB_COLS,
  parameter int unsigned COL_MUX_N   = COL_MUX,
  localparam int unsigned NUM_BANKS  = N_WAYS * N_BANK_WAY,
  localparam int unsigned BW         = $clog2(NUM_BANKS),
  localparam int unsigned IOW        = COLS / COL_MUX_N,
  localparam int unsigned RW         = $clog2(ROWS),
  localparam int unsigned CW         = (COL_MUX_N > 1) ? $clog2(COL_MUX_N) : 1,
  localparam int unsigned TAW        = $clog2(IOW)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host command port
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  input  addr_t              addr,
  input  logic [ROW_W-1:0]   row_b,
  input  logic [IOW-1:0]     wdata,
  output logic [IOW-1:0]     rdata,
  output logic               rvalid,
  // transpose buffer fill port (bus fabric side)
  input  logic               tb_wr_en,
  input  logic [TAW-1:0]     tb_wr_row,
  input  logic [IOW-1:0]     tb_wr_data,
  // digital processing unit
  input  logic               dpu_clr,
  input  logic signed [15:0] bn_gamma,
  input  logic signed [15:0] bn_beta,
  output logic [23:0]        dpu_ones,
  output logic [23:0]        dpu_bits,
  output logic               dpu_act_bin,
  output logic [7:0]         dpu_act_q,
  // status
  output logic               asleep,
  output logic               banks_powered,
  output logic [15:0]        n_store,
  output logic [15:0]        n_sleep,
  output logic [15:0]        n_wake,
  output logic [15:0]        n_stall
);
  op_t           op;
  logic          bcast, use_tbuf, acc_valid;
  logic [BW-1:0] bank_idx, bank_q;
  sa_cfg_t       sa_cfg;

  mesram_ctrl #(.NUM_BANKS(NUM_BANKS)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .way (addr.way), .bank (addr.bank),
    .op, .bcast, .bank_idx, .sa_cfg, .use_tbuf,
    .rvalid, .acc_valid, .asleep,
    .n_store, .n_sleep, .n_wake, .n_stall
  );

  // Transpose buffer: TWRITE stores column row_b of it as the write word.
  logic [IOW-1:0] tb_col, bank_wdata;
  transpose_buffer #(.N(IOW)) u_tbuf (
    .clk,
    .wr_en   (tb_wr_en),
    .wr_row  (tb_wr_row),
    .wr_data (tb_wr_data),
    .rd_col  (row_b[TAW-1:0]),
    .rd_data (tb_col)
  );
  assign bank_wdata = use_tbuf ? tb_col : wdata;

  logic [IOW-1:0]       bank_rd [NUM_BANKS];
  logic [NUM_BANKS-1:0] bank_pwr;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    op_t bop;
    assign bop = (bcast || int'(bank_idx) == b) ? op : OP_NOP;
    mesram_bank #(.ROWS(ROWS), .COLS(COLS), .COL_MUX_N(COL_MUX_N)) u_bank (
      .clk, .rst_n,
      .op      (bop),
      .sa_cfg,
      .mat     (addr.mat),
      .sub     (addr.sub),
      .row_a   (addr.row[RW-1:0]),
      .row_b   (row_b[RW-1:0]),
      .cgrp    (addr.cgrp[CW-1:0]),
      .wdata   (bank_wdata),
      .rdata   (bank_rd[b]),
      .powered (bank_pwr[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    bank_q <= '0;
    else if (op inside {OP_READ, OP_XOR, OP_XNOR}) bank_q <= bank_idx;
  end
  assign rdata         = bank_rd[bank_q];
  assign banks_powered = &bank_pwr;

  logic signed [24:0] unused_dot;
  logic signed [40:0] unused_bn;
  mesram_dpu #(.W(IOW), .ACC_W(24), .QBITS(8)) u_dpu (
    .clk, .rst_n,
    .clr       (dpu_clr),
    .acc_valid (acc_valid),
    .xnor_word (rdata),
    .gamma     (bn_gamma),
    .beta      (bn_beta),
    .ones      (dpu_ones),
    .bits      (dpu_bits),
    .dot       (unused_dot),
    .bn_y      (unused_bn),
    .act_bin   (dpu_act_bin),
    .act_q     (dpu_act_q)
  );
endmodule
