// sc_mac: mixed-signal stochastic-computing MAC module (behavioural model,
// because its capacitor arrays are analog; its gate arrays are real logic).
//
// Computes one signed dot product of N input/weight pairs. Inputs and weight
// magnitudes are M-bit stochastic numbers; each weight carries a sign bit
// (1 = positive) at bit M of its element. The gate arrays (sc_mac_gates)
// multiply bitwise with ANDs and steer each product to the positive or the
// negative capacitor array; the capacitor model (sc_cap_array) accumulates
// them by charge division (phase S1) and combines the two sides by charge
// sharing (phase S2). Afterwards
//   VP = VN = (M*N + n_p - n_n) / (2(M*N+1)) * VDD,
// n_p / n_n being the number of ones among the positive / negative products.
//
// Timing: drive en and s1 together for one clock, then s2 for one clock; vp/vn
// hold the result from the edge that ends the s2 cycle until the next s1
// cycle. The element layout {SIGN, W[M-1:0]} is this design's choice.
module sc_mac
  import sc_pkg::*;
#(
  parameter int unsigned N = 300,
  parameter int unsigned M = 15
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0][M-1:0] in_row,  // IN_1..IN_N
  input  logic [N-1:0][M:0]   w_row,   // {SIGN_i, W_i}
  input  logic                en,      // EN
  input  logic                s1,      // switch S1
  input  logic                s2,      // switch S2
  output vcode_t              vp,      // VP
  output vcode_t              vn       // VN
);

  logic [N-1:0][M-1:0] w_mag, dp, dn;
  logic [N-1:0]        sign;

  for (genvar i = 0; i < int'(N); i++) begin : g_split
    assign w_mag[i] = w_row[i][M-1:0];
    assign sign[i]  = w_row[i][M];
  end

  sc_mac_gates #(.N(N), .M(M)) u_gates (
    .in_x(in_row), .w_x(w_mag), .sign(sign), .en(en), .dp(dp), .dn(dn)
  );

  sc_cap_array #(.N(N), .M(M)) u_caps (
    .clk(clk), .rst_n(rst_n), .dp(dp), .dn(dn), .s1(s1), .s2(s2), .vp(vp), .vn(vn)
  );

endmodule
