// sc_pkg: constants and types shared by the stochastic-computing memory system.
//
// Analog voltages (sensor output, capacitor-array tail voltages, SA references)
// are carried through the digital model as unsigned fixed-point fractions of
// the supply: a vcode_t value v stands for v / 2**VFRAC * VDD, so 2**VFRAC is
// exactly VDD. This representation is a modelling choice of this design; the
// silicon carries these as real voltages.
//
// The main configuration (M = 15-bit thermometer-coded stochastic numbers,
// N = 300 products per MAC) is the 15-bit, 300-input system whose results the
// design was characterised with. The memory depth is this design's choice.
package sc_pkg;

  // Stochastic number length in bits (thermometer code, 4-bit precision).
  localparam int unsigned M_DEF = 15;
  // Number of IN/W pairs accumulated by one MAC operation.
  localparam int unsigned N_DEF = 300;
  // Rows in each stochastic memory (one row = one N-element operand vector).
  localparam int unsigned ROWS_DEF = 16;

  // Fixed-point voltage representation.
  localparam int unsigned VFRAC = 20;
  localparam int unsigned VW    = VFRAC + 1;
  typedef logic [VW-1:0] vcode_t;
  localparam vcode_t VDD_CODE = vcode_t'(1) << VFRAC;

  // Request opcodes of the controller.
  typedef enum logic {
    OP_CONVERT = 1'b0,   // digitise the sensor voltage into one memory element
    OP_MAC     = 1'b1    // signed MAC of an input row with a weight row
  } op_e;

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,     // accept a request; a conversion completes here
    ST_EVAL  = 2'd1,     // EN=1, S1 on: charge division onto the tail caps
    ST_SHARE = 2'd2,     // S2 on: charge sharing between the tail caps
    ST_CONV  = 2'd3      // ASC converts the MAC voltage, result is stored
  } state_e;

  // Reference voltage code of comparator i in a K-level thermometer ASC:
  // VREF_i = (i+1)/(K+1) * VDD, truncated to the fixed-point grid.
  function automatic vcode_t vref_code(input int unsigned i, input int unsigned k);
    longint unsigned num;
    num = (longint'(i) + 1) << VFRAC;
    return vcode_t'(num / (longint'(k) + 1));
  endfunction

endpackage
