// mesram_ctrl -- shared digital control unit of the ME-SRAM slice.
//
// Command decoder and timing control. The host presents one command at a
// time with a valid/ready handshake (a command is taken in a cycle where
// cmd_valid and cmd_ready are both high). The controller turns it into an
// array operation for one bank (or for every bank, bcast) together with the
// sense-amplifier configuration bits {En2, En1, S1, S0}:
//
//   READ        OP_READ,  SA = memory  (0 1 1 x)
//   XOR / XNOR  OP_XOR / OP_XNOR, SA = XOR2 (1 1 0 0) / XNOR2 (1 1 0 1)
//   XNOR_ACC    as XNOR; the result word is also handed to the DPU
//   WRITE       OP_WRITE with the host word
//   TWRITE      OP_WRITE with column `row_b` of the transpose buffer
//   STORE       OP_STORE to every bank (checkpoint, stay powered)
//   SLEEP       OP_STORE then OP_PWR_OFF to every bank (2 cycles)
//   WAKE        OP_PWR_ON then OP_RESTORE to every bank (2 cycles)
//
// Normally-off operation: while the slice is power-gated, any command other
// than SLEEP first triggers the wake-up sequence; the command is stalled
// (cmd_ready low) until the data is restored and is then executed. A SLEEP
// while asleep is taken and ignored.
//
// Timing: the array operation is issued combinationally in the cycle the
// command is taken; read data (rvalid) follows one cycle later. Counters
// report how many checkpoints, power-downs and wake-ups happened.
//
// The command set, the SA bits and the store-before-power-off /
// restore-after-power-on order follow the paper; the handshake, the
// auto-wake and the counters are this design's choices.
module mesram_ctrl
  import mesram_pkg::*;
#(
  parameter int unsigned NUM_BANKS = NUM_WAYS * BANKS_PER_WAY,
  localparam int unsigned BW       = $clog2(NUM_BANKS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host command port
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  input  logic [4:0]        way,
  input  logic [1:0]        bank,
  // array side
  output op_t               op,
  output logic              bcast,
  output logic [BW-1:0]     bank_idx,
  output sa_cfg_t           sa_cfg,
  output logic              use_tbuf,     // write data from transpose buffer
  output logic              rvalid,       // result word valid this cycle
  output logic              acc_valid,    // result word goes to the DPU
  output logic              asleep,
  output logic [15:0]       n_store,
  output logic [15:0]       n_sleep,
  output logic [15:0]       n_wake,
  output logic [15:0]       n_stall
);
  typedef enum logic [1:0] {S_ACTIVE, S_OFF_PEND, S_OFF, S_RESTORE} state_t;
  state_t state, state_n;

  logic take;
  logic rd_issue, acc_issue;

  always_comb begin
    state_n   = state;
    op        = OP_NOP;
    bcast     = 1'b0;
    sa_cfg    = SA_OFF;
    use_tbuf  = 1'b0;
    cmd_ready = 1'b0;
    rd_issue  = 1'b0;
    acc_issue = 1'b0;
    unique case (state)
      S_ACTIVE: begin
        cmd_ready = 1'b1;
        if (cmd_valid) begin
          unique case (cmd)
            CMD_READ:     begin op = OP_READ;  sa_cfg = SA_MEMORY; rd_issue = 1'b1; end
            CMD_XOR:      begin op = OP_XOR;   sa_cfg = SA_XOR2;   rd_issue = 1'b1; end
            CMD_XNOR:     begin op = OP_XNOR;  sa_cfg = SA_XNOR2;  rd_issue = 1'b1; end
            CMD_XNOR_ACC: begin op = OP_XNOR;  sa_cfg = SA_XNOR2;  rd_issue = 1'b1;
                                acc_issue = 1'b1; end
            CMD_WRITE:    op = OP_WRITE;
            CMD_TWRITE:   begin op = OP_WRITE; use_tbuf = 1'b1; end
            CMD_STORE:    begin op = OP_STORE; bcast = 1'b1; end
            CMD_SLEEP:    begin op = OP_STORE; bcast = 1'b1; state_n = S_OFF_PEND; end
            default:      ;                    // NOP, WAKE while awake
          endcase
        end
      end
      S_OFF_PEND: begin
        op = OP_PWR_OFF; bcast = 1'b1; state_n = S_OFF;
      end
      S_OFF: begin
        if (cmd_valid) begin
          if (cmd == CMD_SLEEP || cmd == CMD_NOP) begin
            cmd_ready = 1'b1;
          end else begin
            op = OP_PWR_ON; bcast = 1'b1; state_n = S_RESTORE;
            cmd_ready = (cmd == CMD_WAKE);
          end
        end
      end
      S_RESTORE: begin
        op = OP_RESTORE; bcast = 1'b1; state_n = S_ACTIVE;
      end
      default: state_n = S_ACTIVE;
    endcase
  end

  assign take     = cmd_valid && cmd_ready;
  assign bank_idx = BW'(int'(way) * BANKS_PER_WAY + int'(bank));
  assign asleep   = (state == S_OFF) || (state == S_OFF_PEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_ACTIVE;
      rvalid    <= 1'b0;
      acc_valid <= 1'b0;
      n_store   <= '0;
      n_sleep   <= '0;
      n_wake    <= '0;
      n_stall   <= '0;
    end else begin
      state     <= state_n;
      rvalid    <= rd_issue;
      acc_valid <= acc_issue;
      if (op == OP_STORE)             n_store <= n_store + 16'd1;
      if (op == OP_PWR_OFF)           n_sleep <= n_sleep + 16'd1;
      if (op == OP_RESTORE)           n_wake  <= n_wake + 16'd1;
      if (cmd_valid && !cmd_ready)    n_stall <= n_stall + 16'd1;
    end
  end

  // A bank-addressed command must name an existing bank.
  always_ff @(posedge clk) begin
    if (rst_n && take && !bcast && op != OP_NOP)
      assert (int'(bank_idx) < NUM_BANKS && int'(bank) < BANKS_PER_WAY)
        else $error("address outside the slice");
  end
endmodule
