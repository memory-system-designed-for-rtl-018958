// sc_cap_array: behavioural model of the capacitor arrays, switches S1/S2 and
// the two tail capacitors of the mixed-signal stochastic MAC module. The
// silicon is an analog switched-capacitor circuit; this file models its charge
// arithmetic exactly and reports the tail voltages as sc_pkg::vcode_t.
//
// Structure: m*N unit capacitors C_U on the positive side, each driven by one
// bit of dp, share a node with a grounded tail capacitor C_U (voltage VP) when
// S1 is on; the negative side does the same with dn onto VN. Phases:
//   S1 on, S2 off : VP = n_p/(mN+1) VDD,  VN = n_dn/(mN+1) VDD  (voltage division)
//   S2 on, S1 off : VP = VN = (VP + VN)/2                        (charge sharing)
//   both off      : both tails hold their charge
// where n_p and n_dn are the numbers of ones in dp and dn. After both phases
// VP = VN = (mN + n_p - n_n) / (2(mN+1)) VDD, a signed MAC result around VDD/2.
//
// Timing: switch states are sampled at each rising clock edge and the outputs
// change right after it. Charges are kept as integers in units of
// C_U*VDD/(2(mN+1)), so sharing is exact; only the output codes are truncated.
// rst_n low discharges both tails. S1 and S2 must never be on together.
module sc_cap_array
  import sc_pkg::*;
#(
  parameter int unsigned N = 300,
  parameter int unsigned M = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N*M-1:0] dp,   // positive-array drives
  input  logic [N*M-1:0] dn,   // negative-array drives
  input  logic         s1,     // connect arrays to the tail capacitors
  input  logic         s2,     // short the two tail capacitors together
  output vcode_t       vp,     // VP
  output vcode_t       vn      // VN
);

  localparam int unsigned NC = N * M;             // unit caps per side
  localparam int unsigned QW = $clog2(2 * NC + 1) + 1;
  localparam longint unsigned DEN = 2 * (longint'(NC) + 1);

  // Tail charge in half units: q = 2 * (number of unit caps at VDD) after S1.
  logic [QW-1:0] qp, qn;

  // Twice the number of ones of a drive vector (unit capacitors at VDD).
  function automatic logic [QW-1:0] ones2(input logic [NC-1:0] v);
    return QW'($countones(v) * 2);
  endfunction

  function automatic vcode_t to_v(input logic [QW-1:0] q);
    longint unsigned num;
    num = longint'(q) << VFRAC;
    return vcode_t'(num / DEN);
  endfunction

  // Charge after sharing: the mean of the two tails (the sum is always even).
  logic [QW-1:0] qavg;
  always_comb qavg = QW'(({1'b0, qp} + {1'b0, qn}) >> 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qp <= '0;
      qn <= '0;
    end else if (s1 && !s2) begin
      qp <= ones2(dp);
      qn <= ones2(dn);
    end else if (s2 && !s1) begin
      qp <= qavg;
      qn <= qavg;
    end
  end

  assign vp = to_v(qp);
  assign vn = to_v(qn);

  a_switch_excl: assert property (@(posedge clk) disable iff (!rst_n) !(s1 && s2));

endmodule
