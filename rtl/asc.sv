// asc: behavioural model of the analog-to-stochastic converter (ASC).
//
// Converts an analog voltage into a K-bit thermometer-coded stochastic number
// y[K-1:0]: y[i] is 1 when vin >= VREF_i, with VREF_i = (i+1)/(K+1)*VDD, so a
// voltage in the band [VREF_{k-1}, VREF_k) yields k ones from bit 0 upward
// (for K=3: 000, 001, 011, 111). The references come from a capacitor voltage
// divider, modelled as exact constants; the sense amplifiers are sense_amp
// models, so the whole block is a behavioural model of a mixed-signal circuit.
//
// Power gating chain (as in the published structure): amplifier 0 is always
// enabled; amplifier i>0 is enabled only by y[i-1], and a 2:1 MUX selected by
// y[i-1] passes either its output or ground to y[i]. Once one bit is 0 every
// bit above it is forced to 0 and its amplifier stays off, which saves power
// for the many CNN values near zero. sa_en reports which amplifiers were
// powered for the present conversion.
//
// Timing: combinational from vin to y and sa_en (ideal amplifiers). The
// general VREF formula and the MUX select being y[i-1] extend the 3-bit
// example of the original description to K bits.
module asc
  import sc_pkg::*;
#(
  parameter int unsigned K = M_DEF   // code length = number of amplifiers
) (
  input  vcode_t       vin,    // analog input, fraction of VDD
  output logic [K-1:0] y,      // thermometer code
  output logic [K-1:0] sa_en   // amplifier enables (1 = powered)
);

  for (genvar i = 0; i < K; i++) begin : g_bit
    localparam vcode_t VREF = vref_code(i, K);
    logic en_i;    // amplifier enable
    logic sa_i;    // amplifier output
    logic y_i;     // MUX output

    if (i == 0) begin : g_first
      assign en_i = 1'b1;            // SA0 enable tied to VDD
      assign y_i  = sa_i;
    end else begin : g_chain
      assign en_i = g_bit[i-1].y_i;  // enabled by the bit below
      // MUX: select = y[i-1]; 1 -> amplifier output, 0 -> ground.
      assign y_i  = g_bit[i-1].y_i ? sa_i : 1'b0;
    end

    sense_amp u_sa (
      .en   (en_i),
      .vin_p(vin),
      .vin_m(VREF),
      .out  (sa_i)
    );

    assign y[i]     = y_i;
    assign sa_en[i] = en_i;
  end

endmodule
