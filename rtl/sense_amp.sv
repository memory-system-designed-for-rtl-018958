// sense_amp: behavioural model of one sense amplifier (voltage comparator) of
// the analog-to-stochastic converter. It is an analog circuit; this file models
// only its decision, not its electrical behaviour.
//
// out = en && (vin_p >= vin_m). A reference above the input gives a low output,
// so an input exactly at the reference reads as 1. A disabled amplifier (en=0)
// draws no power in silicon and drives 0 here. The model is ideal and
// unclocked: no offset, noise or resolution time. Voltages are sc_pkg::vcode_t
// fractions of VDD. The comparison rule and the enable follow the original
// circuit description; the 0 output when disabled and the ideal behaviour are
// this model's choices.
module sense_amp
  import sc_pkg::*;
(
  input  logic   en,     // enable; low powers the amplifier down
  input  vcode_t vin_p,  // analog input
  input  vcode_t vin_m,  // reference voltage VREF_i
  output logic   out     // 1 when enabled and vin_p >= vin_m
);

  always_comb out = en && (vin_p >= vin_m);

endmodule
