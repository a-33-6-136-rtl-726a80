// sense_amp: behavioural model of one column's sense amplifier (analog part).
//
// The sense amplifier compares the two read bitlines of a column. Its
// non-inverting input is RBLR and its inverting input RBLL, so its output
// V_ON is high when V_RBLR > V_RBLL, i.e. when the differential bitline
// voltage V_RBLR - V_RBLL (MAC result plus ADC ramp) is positive. It is
// strobed once per ramp step; outside a strobe the output is low.
//
// Bitline voltages are given as integers in units of one bitcell-cycle
// discharge step above the bottom of the usable swing (precharge = the top
// of the range), as produced by the cim_array model. The strobe timing and
// the tie rule (equal voltages give 0) are this model's choices.
module sense_amp
  import nlim_pkg::*;
(
  input  logic            en,
  input  logic [BL_W-1:0] v_rbll,
  input  logic [BL_W-1:0] v_rblr,
  output logic            von
);

  always_comb von = en && (v_rblr > v_rbll);

endmodule
