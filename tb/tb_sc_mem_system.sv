// tb_sc_mem_system: end-to-end test of the memory system at its default size
// (N=300 inputs of 15-bit stochastic numbers, 16-row memories).
//
// 1. Loads two weight rows with random signed thermometer codes.
// 2. Converts 600 sensor voltages into activation rows 0 and 1, many of them
//    low so that the converter powers down its upper amplifiers, checking
//    every stored code against the band the voltage falls in.
// 3. Runs 300 MACs of row 0 with weight row 0 into row 2, checking each
//    result voltage against (mN + n_p - n_n)/(2(mN+1)) VDD, each code, the
//    4-cycle latency, and that back-to-back requests stall.
// 4. Runs MACs whose inputs are row 2, i.e. earlier MAC results brought back
//    through the converter (the layer-to-layer loop), and one MAC of row 1.
// Counts each mechanism (conversion, amplifier power-down, positive and
// negative MAC results, request stall, MAC-on-MAC-results) and fails if one
// never happened.
module tb_sc_mem_system;
  timeunit 1ns;
  timeprecision 100ps;
  import sc_pkg::*;
  localparam int N = N_DEF, M = M_DEF, ROWS = ROWS_DEF, NC = N * M;
  localparam int unsigned FS = 1 << VFRAC;

  int checks = 0, failures = 0;
  int n_conv = 0, n_gated = 0, n_mac = 0, n_pos = 0, n_neg = 0, n_stall = 0, n_loop = 0;

  logic clk = 0, rst_n = 0;
  vcode_t sensor_v, res_v;
  logic req_valid, req_ready, wt_we, res_valid, res_is_mac;
  op_e  req_op;
  logic [3:0] req_dst_row, req_in_row, req_w_row, wt_row;
  logic [8:0] req_dst_col, wt_col;
  logic [M:0] wt_data;
  logic [M-1:0] res_code, res_sa_en;
  state_e state;

  sc_mem_system dut (.*);

  always #12.5 clk = ~clk;   // 40 MHz

  // Reference contents: number of ones of each thermometer code, and signs.
  int act_k [ROWS][N];
  int wt_k  [ROWS][N];
  bit wt_s  [ROWS][N];

  function automatic logic [M-1:0] therm(input int unsigned k);
    return M'((32'd1 << k) - 1);
  endfunction

  // Number of ones the converter must output for voltage code v.
  function automatic int level(input longint v);
    longint k = (v * (M + 1)) / FS;
    return (k > M) ? M : int'(k);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(input int row, input int col, input vcode_t v);
    @(negedge clk);
    sensor_v = v; req_valid = 1; req_op = OP_CONVERT;
    req_dst_row = 4'(row); req_dst_col = 9'(col);
    #1;
    checks++;
    if (!(req_ready && res_valid && !res_is_mac && res_code === therm(level(v)))) begin
      failures++;
      $display("FAIL convert v=%0d code=%b exp=%b", v, res_code, therm(level(v)));
    end
    if (res_sa_en != '1) n_gated++;
    act_k[row][col] = level(v);
    n_conv++;
    @(posedge clk); #1 req_valid = 0;
  endtask

  // One MAC; the next request (a conversion) is held during the busy cycles.
  task automatic mac(input int irow, input int wrow, input int drow, input int dcol);
    int np = 0, nn = 0, lat = 0;
    longint vexp;
    for (int i = 0; i < N; i++) begin
      int p = (act_k[irow][i] < wt_k[wrow][i]) ? act_k[irow][i] : wt_k[wrow][i];
      if (wt_s[wrow][i]) np += p; else nn += p;
    end
    vexp = ((longint'(NC + np - nn)) << VFRAC) / (2 * (NC + 1));
    @(negedge clk);
    req_valid = 1; req_op = OP_MAC;
    req_in_row = 4'(irow); req_w_row = 4'(wrow); req_dst_row = 4'(drow); req_dst_col = 9'(dcol);
    #1;
    checks++;
    if (!req_ready) begin failures++; $display("FAIL MAC not accepted"); end
    @(posedge clk);
    // keep a conversion request waiting behind the MAC
    #1 req_op = OP_CONVERT; req_dst_row = 4'(ROWS - 1); req_dst_col = 9'(N - 1); sensor_v = '0;
    do begin
      @(negedge clk); lat++;
      if (req_valid && !req_ready) n_stall++;
    end while (!res_valid && lat < 10);
    checks++;
    if (lat != 3 || !res_is_mac) begin failures++; $display("FAIL MAC latency %0d", lat); end
    checks++;
    if (res_v !== vcode_t'(vexp) || res_code !== therm(level(vexp))) begin
      failures++;
      $display("FAIL MAC v=%0d exp %0d code=%b exp %b (np=%0d nn=%0d)", res_v, vexp, res_code,
               therm(level(vexp)), np, nn);
    end
    if (np > nn) n_pos++; else if (nn > np) n_neg++;
    act_k[drow][dcol] = level(vexp);
    n_mac++;
    @(negedge clk); #1;                 // IDLE again: the waiting conversion is taken
    checks++;
    if (!(req_ready && res_valid && !res_is_mac && res_code === '0)) begin
      failures++;
      $display("FAIL waiting conversion not accepted after MAC");
    end
    act_k[ROWS - 1][N - 1] = 0;
    @(posedge clk); #1 req_valid = 0;
  endtask

  initial begin
    sensor_v = '0; req_valid = 0; req_op = OP_CONVERT;
    req_dst_row = 0; req_dst_col = 0; req_in_row = 0; req_w_row = 0;
    wt_we = 0; wt_row = 0; wt_col = 0; wt_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. weights: row 0 balanced signs, row 1 mostly negative
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < N; i++) begin
        automatic int k = $urandom_range(0, M);
        automatic bit s = (r == 0) ? 1'($urandom) : ($urandom_range(0, 9) == 0);
        @(negedge clk);
        wt_we = 1; wt_row = 4'(r); wt_col = 9'(i); wt_data = {s, therm(k)};
        wt_k[r][i] = k; wt_s[r][i] = s;
      end
    @(negedge clk); wt_we = 0;

    // 2. sensor conversions; values concentrated near zero
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < N; i++) begin
        automatic int unsigned v = ($urandom_range(0, 2) == 0) ? $urandom_range(0, FS)
                                                               : $urandom_range(0, FS / 8);
        convert(r, i, vcode_t'(v));
      end

    // 3. first layer: row 0 x weights 0 -> row 2 (all columns)
    for (int c = 0; c < N; c++) mac(0, c % 2, 2, c);
    // 4. second layer on MAC results, and row 1 x mostly-negative weights
    for (int c = 0; c < 8; c++) begin mac(2, 0, 3, c); n_loop++; end
    mac(1, 1, 4, 0);
    mac(2, 1, 4, 1); n_loop++;

    $display("mechanisms: conversions=%0d amp_power_down=%0d macs=%0d pos=%0d neg=%0d stalls=%0d mac_on_mac=%0d",
             n_conv, n_gated, n_mac, n_pos, n_neg, n_stall, n_loop);
    if (n_conv == 0)  begin failures++; $display("FAIL no conversion"); end
    if (n_gated == 0) begin failures++; $display("FAIL no amplifier power-down"); end
    if (n_mac == 0)   begin failures++; $display("FAIL no MAC"); end
    if (n_pos == 0)   begin failures++; $display("FAIL no positive MAC result"); end
    if (n_neg == 0)   begin failures++; $display("FAIL no negative MAC result"); end
    if (n_stall == 0) begin failures++; $display("FAIL no stalled request"); end
    if (n_loop == 0)  begin failures++; $display("FAIL no MAC on MAC results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
