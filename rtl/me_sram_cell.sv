// me_sram_cell -- behavioural model (not synthesizable logic) of one
// non-volatile ME-SRAM bit-cell: an 8T SRAM cell (M1-M7 and read transistor
// MR) plus a backup branch of one MEFET and five transistors (M8-M12).
//
// Inputs are the cell's control lines, taken at logic level:
//   pwr   supply (0 = power-gated)
//   pse   M7 gate, active low: equalises Q and QB to VDD/2
//   spl, spr  sources of the left / right pull-downs (M5 / M6 gates)
//   rwl   read word line (ground = read)
//   str   store: M12 passes Vpst (Q = 1) or Vnst (QB = 1) to the MEFET
//   rstr  restore: M8 / M9 connect Q to the MEFET and QB to Rref
// Outputs: the nodes q and qb, rbl_pull (MR conducts onto a grounded RWL,
// i.e. the cell discharges the read bit-line) and the MEFET state.
//
// Operations, as signalled by the paper's memory-mode table:
//   hold     pse = spl = spr = 1, str = rstr = 0
//   write    pse low with spl = spr = 0 equalises; then spl = data,
//            spr = ~data: spl = 1 pulls Q low, so the stored bit is QB
//   read     rwl = 0; rbl_pull = QB
//   store    str = 1; the MEFET becomes R_off if Q = 1, R_on if Q = 0
//   restore  spl = spr = 0, rstr = 1: the MEFET branch races Rref =
//            (R_on + R_off)/2; Q falls first when the MEFET is R_on
//   power-off  Q = QB = 0; the MEFET keeps its state
// Resolution is immediate except the restore race, which settles
// T_RESTORE_PS after it starts (0.05 ns in the paper's table), and the MEFET
// delays. Which edge inside a phase causes what is this model's reading.
module me_sram_cell #(
  parameter int  T_RESTORE_PS = 50,
  parameter int unsigned R_ON_OHM  = 1050,
  parameter int unsigned R_OFF_OHM = 63_400_000
) (
  input  logic pwr,
  input  logic pse,
  input  logic spl,
  input  logic spr,
  input  logic rwl,
  input  logic str,
  input  logic rstr,
  output logic q,
  output logic qb,
  output logic rbl_pull,
  output logic mefet_r_on
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint R_REF = (longint'(R_ON_OHM) + longint'(R_OFF_OHM)) / 2;

  logic [31:0] r_me;
  logic        eq;          // nodes equalised, waiting to be resolved

  initial begin
    q  = 1'b0;
    qb = 1'b0;
    eq = 1'b0;
  end

  mefet_model #(.R_ON_OHM(R_ON_OHM), .R_OFF_OHM(R_OFF_OHM)) u_mefet (
    .g_en  (pwr && str),
    .g_pos (q),
    .r_on  (mefet_r_on),
    .r_ohm (r_me)
  );

  always @(pwr or pse or spl or spr or rstr) begin
    if (!pwr) begin
      q = 1'b0; qb = 1'b0; eq = 1'b0;
    end else if (!spl && !spr && rstr) begin
      // Restore race: the lower-resistance branch discharges its node first.
      #(T_RESTORE_PS);
      if (pwr && rstr) begin
        q  = !(longint'(r_me) < R_REF);
        qb = (longint'(r_me) < R_REF);
        eq = 1'b0;
      end
    end else if (!pse && !spl && !spr) begin
      eq = 1'b1;            // M7 on, both pull-downs off: Q = QB = VDD/2
    end else if (pse && eq && (spl != spr)) begin
      q  = !spl;            // spl = 1 discharges Q
      qb = spl;
      eq = 1'b0;
    end
  end

  assign rbl_pull = pwr && qb && !rwl;
endmodule
