// sense_amp -- configurable bit-line sense amplifier of one bit-line.
//
// Two comparators look at the read bit-line (RBL): SA1 (enable En2) compares
// RBL against Vref2, SA2 (enable En1) compares RBL against Vref1 or Vref3,
// chosen by S1, and its output is inverted to give "Mem". An OR of SA1 and
// Mem is the XOR of the two activated cells (the RBL left its VDD/2
// precharge in either direction); its inverse is XNOR. An output mux on
// S1,S0 picks Mem (memory read), XOR2 or XNOR2:
//
//   En2 En1 S1 S0 | Out
//    0   1   1  x | Memory
//    1   1   0  0 | XOR2
//    1   1   0  1 | XNOR2
//
// The gate structure and the table follow the paper's SA drawing. The
// comparators are analog there; here RBL is an 8-bit fraction of VDD and
// each comparator a digital greater-than. The reference levels, the
// S1 -> Vref3 mapping (memory) and "a disabled comparator outputs 0" are this
// design's choices. Purely combinational.
module sense_amp
  import mesram_pkg::*;
#(
  parameter rbl_t P_VREF1 = VREF1,
  parameter rbl_t P_VREF2 = VREF2,
  parameter rbl_t P_VREF3 = VREF3
) (
  input  rbl_t    rbl,   // RBL voltage, fraction of VDD
  input  sa_cfg_t cfg,   // {En2, En1, S1, S0}
  output logic    out,
  output logic    mem    // SA2 output after its inverter
);
  logic sa1, sa2, or_out;
  rbl_t vref_sa2;

  always_comb begin
    vref_sa2 = cfg.s1 ? P_VREF3 : P_VREF1;
    sa1      = cfg.en2 && (rbl > P_VREF2);
    sa2      = cfg.en1 && (rbl > vref_sa2);
    mem      = cfg.en1 && !sa2;
    or_out   = sa1 || mem;
    if (cfg.s1)      out = mem;
    else if (cfg.s0) out = !or_out;   // XNOR2
    else             out = or_out;    // XOR2
  end
endmodule
