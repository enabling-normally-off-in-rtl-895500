// mefet_model -- behavioural model (not synthesizable logic) of the
// magneto-electric FET used as the non-volatile element of an ME-SRAM cell.
//
// The device is analog: a voltage of about +-100 mV across the chromia
// (magneto-electric) gate layer sets the spin polarisation of the WSe2
// channel, which leaves the channel in a low (R_on) or high (R_off)
// resistance state that survives power-off. This model keeps only that
// two-state behaviour, with the device numbers the paper reports:
//
//   g_en  high: the write transistor (M12, driven by STR) passes the write
//         voltage to the gate. g_pos = 1 means Vpst (chosen when Q = 1),
//         which switches the device to R_off; g_pos = 0 means Vnst (chosen
//         when QB = 1), which switches it to R_on. Switching completes
//         T_SWITCH_PS after the voltage is applied (the paper gives
//         "< 20 ps").
//   r_on / r_ohm: the resistance state as a bit and in whole ohms, seen T_READ_PS
//         (the model's fixed 200 ps read-out delay) after the switch.
//
// The device starts in R_off, an assumption; the LLG dynamics, thermal noise
// and current-voltage curves of the paper's compact model are not modelled.
module mefet_model #(
  parameter int unsigned R_ON_OHM  = 1050,       // 1.05 kOhm
  parameter int unsigned R_OFF_OHM = 63_400_000, // 63.4 MOhm
  parameter int  T_SWITCH_PS = 20,
  parameter int  T_READ_PS   = 200
) (
  input  logic g_en,
  input  logic g_pos,
  output logic r_on,
  output logic [31:0] r_ohm
);
  timeunit 1ps;
  timeprecision 1ps;

  logic state;          // 1 = R_on

  initial state = 1'b0;

  always begin
    wait (g_en);
    #(T_SWITCH_PS);
    if (g_en) state = !g_pos;
    @(g_en or g_pos);
  end

  assign #(T_READ_PS) r_on = state;
  assign r_ohm = r_on ? R_ON_OHM : R_OFF_OHM;
endmodule
