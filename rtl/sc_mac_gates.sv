// sc_mac_gates: digital gate arrays of the mixed-signal stochastic MAC module.
//
// For each of the N input/weight pairs and each of the M bit positions j the
// bitwise product IN_i[j] & W_i[j] is a stochastic multiplication. The product
// is steered by the weight's sign bit SIGN_i (1 = positive weight):
//   dp[i][j] = EN & IN_i[j] & W_i[j] &  SIGN_i   drives the upper capacitor,
//   dn[i][j] = EN & ~(IN_i[j] & W_i[j] & ~SIGN_i) drives the lower capacitor.
// The upper array thus has n_p capacitors at VDD and the lower array has
// m*N - n_n, which are the counts the two charge-division equations need
// (VP = n_p/(mN+1) VDD, VN = (mN-n_n)/(mN+1) VDD). With EN low every drive is
// 0 (the arrays are idle). The AND products, the sign steering and the EN
// gating follow the published circuit; the idle level and the exact logic of
// the lower array (derived from the VN equation) are this design's reading.
//
// Purely combinational, one generate slice per pair. Ports are packed [N-1:0][M-1:0] arrays.
module sc_mac_gates #(
  parameter int unsigned N = 300,
  parameter int unsigned M = 15
) (
  input  logic [N-1:0][M-1:0] in_x,   // IN_i[j]
  input  logic [N-1:0][M-1:0] w_x,    // W_i[j] (magnitude bits)
  input  logic [N-1:0]        sign,   // SIGN_i, 1 = positive
  input  logic                en,     // EN, high while computing
  output logic [N-1:0][M-1:0] dp,     // upper (positive) capacitor drives
  output logic [N-1:0][M-1:0] dn      // lower (negative) capacitor drives
);

  for (genvar i = 0; i < int'(N); i++) begin : g_pair
    logic [M-1:0] prod;                       // IN_i & W_i, bitwise
    assign prod  = in_x[i] & w_x[i];
    assign dp[i] = {M{en &  sign[i]}} & prod;
    assign dn[i] = {M{en}} & ~(prod & {M{~sign[i]}});
  end

endmodule
