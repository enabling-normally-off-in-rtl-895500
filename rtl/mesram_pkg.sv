// mesram_pkg -- types and constants shared by the ME-SRAM slice.
//
// The slice geometry follows the published organisation: a 2.5MB slice of
// 80 banks (20 ways x 4 banks), each bank two 16KB matrices, each matrix two
// 8KB computational sub-arrays of 256 rows x 256 bit-lines. The 64-bit IO
// word (256 bit-lines through a 4:1 column mux) is this design's reading of
// the "Mux 4:1" drawn next to each sub-array.
//
// Read bit-line (RBL) voltages are represented as an 8-bit fraction of VDD
// (255 = VDD, 128 = VDD/2, 0 = ground); the comparator reference levels are
// this design's choice, ordered Vref1 < Vref3 < Vref2 as the paper requires.
//
// The stored data bit of a cell is its QB node: a write drives SPL = data,
// and SPL = 1 discharges Q.
package mesram_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned SUB_ROWS      = 256;  // rows per 8KB sub-array
  localparam int unsigned SUB_COLS      = 256;  // bit-lines per sub-array
  localparam int unsigned COL_MUX       = 4;    // Mux 4:1 in front of the IO
  localparam int unsigned IO_W          = SUB_COLS / COL_MUX;  // 64-bit word
  localparam int unsigned ROW_W         = $clog2(SUB_ROWS);
  localparam int unsigned CGRP_W        = $clog2(COL_MUX);
  localparam int unsigned SUB_PER_MAT   = 2;    // two 8KB sub-arrays / 16KB
  localparam int unsigned MAT_PER_BANK  = 2;    // two 16KB matrices / 32KB
  localparam int unsigned NUM_WAYS      = 20;
  localparam int unsigned BANKS_PER_WAY = 4;    // 80 banks / 20 ways

  // ------------------------------------------------------------ RBL levels
  typedef logic [7:0] rbl_t;
  localparam rbl_t RBL_VDD  = 8'd255;
  localparam rbl_t RBL_HALF = 8'd128;
  localparam rbl_t RBL_GND  = 8'd0;
  // A read senses once the RBL has fallen to 10% of its precharge level.
  localparam rbl_t RBL_READ_LOW = 8'd26;

  localparam rbl_t VREF1 = 8'd64;   // VDD/4   (X(N)OR, low side)
  localparam rbl_t VREF3 = 8'd128;  // VDD/2   (memory read)
  localparam rbl_t VREF2 = 8'd192;  // 3VDD/4  (X(N)OR, high side)

  // --------------------------------------------- sense amplifier control
  // Bit order as printed in the SA configuration table: En2 En1 S1 S0.
  typedef struct packed {
    logic en2;
    logic en1;
    logic s1;
    logic s0;
  } sa_cfg_t;

  localparam sa_cfg_t SA_MEMORY = '{en2: 1'b0, en1: 1'b1, s1: 1'b1, s0: 1'b0};
  localparam sa_cfg_t SA_XOR2   = '{en2: 1'b1, en1: 1'b1, s1: 1'b0, s0: 1'b0};
  localparam sa_cfg_t SA_XNOR2  = '{en2: 1'b1, en1: 1'b1, s1: 1'b0, s0: 1'b1};
  localparam sa_cfg_t SA_OFF    = '{en2: 1'b0, en1: 1'b0, s1: 1'b0, s0: 1'b0};

  // ------------------------------------------------------ array operations
  // One operation per clock cycle is applied to a sub-array.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_READ     = 4'd1,  // RBL precharged to VDD, RWL of one row to ground
    OP_WRITE    = 4'd2,  // PSE pulse, SPL = data, SPR = ~data
    OP_XOR      = 4'd3,  // RBL precharged to VDD/2, RWL1 = VDD, RWL2 = 0
    OP_XNOR     = 4'd4,
    OP_STORE    = 4'd5,  // STR: back up every cell into its MEFET
    OP_RESTORE  = 4'd6,  // RSTR: race of MEFET branch against Rref
    OP_PWR_OFF  = 4'd7,  // power gating: volatile nodes collapse
    OP_PWR_ON   = 4'd8
  } op_t;

  // ------------------------------------------------------- host commands
  typedef enum logic [3:0] {
    CMD_NOP      = 4'd0,
    CMD_READ     = 4'd1,
    CMD_WRITE    = 4'd2,
    CMD_XOR      = 4'd3,
    CMD_XNOR     = 4'd4,
    CMD_STORE    = 4'd5,  // checkpoint every bank, stay powered
    CMD_SLEEP    = 4'd6,  // checkpoint, then power-gate every bank
    CMD_WAKE     = 4'd7,  // power up, then restore every bank
    CMD_TWRITE   = 4'd8,  // write one column of the transpose buffer
    CMD_XNOR_ACC = 4'd9   // XNOR, result also accumulated by the DPU
  } cmd_t;

  // Word address of the slice: way, bank in way, matrix, sub-array, row,
  // column group.
  typedef struct packed {
    logic [4:0]        way;
    logic [1:0]        bank;
    logic              mat;
    logic              sub;
    logic [ROW_W-1:0]  row;
    logic [CGRP_W-1:0] cgrp;
  } addr_t;

  // RBL level reached on one bit-line for a given operation.
  //   read : precharge VDD; a cell with QB=1 discharges it (to 10%).
  //   X(N)OR: precharge VDD/2; MR1 ties RBL to VDD when QB1=1, MR2 to ground
  //          when QB2=1; both on divide back to VDD/2, both off leave it.
  function automatic rbl_t rbl_level(input op_t op, input logic qb1,
                                     input logic qb2);
    unique case (op)
      OP_READ: return qb1 ? RBL_READ_LOW : RBL_VDD;
      OP_XOR, OP_XNOR: begin
        unique case ({qb1, qb2})
          2'b10:   return RBL_VDD;
          2'b01:   return RBL_GND;
          default: return RBL_HALF;
        endcase
      end
      default: return RBL_VDD;
    endcase
  endfunction

endpackage
