// sc_mem_system: memory system for a stochastic-computing MAC engine (top).
//
// Dataflow: an analog sensor voltage is digitised directly into a thermometer
// coded stochastic number by the ASC (no ADC, no binary-to-stochastic
// converter) and stored in the activation SRAM. A MAC operation reads a row of
// N stochastic inputs and a row of N signed stochastic weights, the
// mixed-signal MAC module turns their signed dot product into one analog
// voltage, and that voltage goes back through the same ASC into the activation
// SRAM (no stochastic-to-binary counter). Weights are written by the host
// through the wt_* port, already in stochastic form with the sign at bit M.
//
// Interface: requests on req_* (see sc_ctrl); every code the ASC stores is
// also reported on res_* in the cycle it is written: res_code is the code,
// res_v the voltage converted, res_sa_en the sense amplifiers that were
// powered, res_is_mac whether it was a MAC result. sensor_v is an analog
// voltage given as an sc_pkg::vcode_t fraction of VDD.
//
// Timing: a conversion takes 1 clock, a MAC 4 clocks (10 MHz output rate at a
// 40 MHz clock). Weight writes are independent of the controller and take
// effect at the clock edge. The sizes default to the 15-bit, 300-input
// configuration; the memory depth ROWS is this design's choice.
module sc_mem_system
  import sc_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned M    = M_DEF,
  parameter int unsigned ROWS = ROWS_DEF,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // analog sensor input
  input  vcode_t        sensor_v,
  // operation requests
  input  logic          req_valid,
  output logic          req_ready,
  input  op_e           req_op,
  input  logic [RW-1:0] req_dst_row,
  input  logic [CW-1:0] req_dst_col,
  input  logic [RW-1:0] req_in_row,
  input  logic [RW-1:0] req_w_row,
  // weight memory write port
  input  logic          wt_we,
  input  logic [RW-1:0] wt_row,
  input  logic [CW-1:0] wt_col,
  input  logic [M:0]    wt_data,     // {SIGN, W[M-1:0]}
  // stored results
  output logic          res_valid,
  output logic          res_is_mac,
  output logic [M-1:0]  res_code,
  output vcode_t        res_v,
  output logic [M-1:0]  res_sa_en,
  output state_e        state
);

  logic          rd_en, wr_en, mac_en, s1, s2, asc_sel;
  logic [RW-1:0] rd_in_row, rd_w_row, wr_row;
  logic [CW-1:0] wr_col;
  logic [N-1:0][M-1:0] in_row;
  logic [N-1:0][M:0]   w_row;
  vcode_t        vp, vn, asc_v;
  logic [M-1:0]  code, sa_en;

  sc_ctrl #(.ROWS(ROWS), .COLS(N)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_dst_row, .req_dst_col, .req_in_row, .req_w_row,
    .rd_en, .rd_in_row, .rd_w_row,
    .wr_en, .wr_row, .wr_col,
    .mac_en, .s1, .s2, .asc_sel, .state
  );

  // Activation memory: ASC codes in, MAC input rows out.
  sc_sram #(.ROWS(ROWS), .COLS(N), .EW(M)) u_act_mem (
    .clk, .we(wr_en), .wrow(wr_row), .wcol(wr_col), .wdata(code),
    .re(rd_en), .rrow(rd_in_row), .rdata(in_row)
  );

  // Weight memory: host writes, MAC weight rows out.
  sc_sram #(.ROWS(ROWS), .COLS(N), .EW(M+1)) u_wt_mem (
    .clk, .we(wt_we), .wrow(wt_row), .wcol(wt_col), .wdata(wt_data),
    .re(rd_en), .rrow(rd_w_row), .rdata(w_row)
  );

  sc_mac #(.N(N), .M(M)) u_mac (
    .clk, .rst_n, .in_row, .w_row, .en(mac_en), .s1, .s2, .vp, .vn
  );

  // ASC input: sensor voltage or the shared MAC voltage (VP = VN after S2).
  assign asc_v = asc_sel ? vp : sensor_v;

  asc #(.K(M)) u_asc (
    .vin(asc_v), .y(code), .sa_en(sa_en)
  );

  assign res_valid  = wr_en;
  assign res_is_mac = asc_sel;
  assign res_code   = code;
  assign res_v      = asc_v;
  assign res_sa_en  = sa_en;

  // After charge sharing both tail voltages are equal.
  a_shared: assert property (@(posedge clk) disable iff (!rst_n) asc_sel |-> vp == vn);

endmodule
