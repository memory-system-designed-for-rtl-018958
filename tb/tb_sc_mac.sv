// tb_sc_mac: self-checking test of the whole MAC module at its default size
// (N=300 pairs of 15-bit stochastic numbers). Random thermometer-coded inputs
// and weights with random signs; after one EN+S1 cycle and one S2 cycle the
// output must be VP = VN = (mN + n_p - n_n)/(2(mN+1)) VDD, where n_p and n_n
// are worked out here from the operands. Also checks the pure S1 values
// VP = n_p/(mN+1) VDD and VN = (mN - n_n)/(mN+1) VDD.
module tb_sc_mac;
  import sc_pkg::*;
  localparam int N = 300, M = 15, NC = N * M;
  int checks = 0, failures = 0;
  int pos_seen = 0, neg_seen = 0;
  logic clk = 0, rst_n = 0, en = 0, s1 = 0, s2 = 0;
  logic [N-1:0][M-1:0] in_row;
  logic [N-1:0][M:0]   w_row;
  vcode_t vp, vn;

  sc_mac dut (.*);

  always #5 clk = ~clk;

  function automatic vcode_t volt(input longint num, input longint den);
    return vcode_t'((num << VFRAC) / den);
  endfunction

  function automatic logic [M-1:0] therm(input int unsigned k);
    return M'((32'd1 << k) - 1);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_row = '0; w_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int np = 0, nn = 0;
      automatic int bias = $urandom_range(0, 2);     // 0: mixed, 1: mostly +, 2: mostly -
      for (int i = 0; i < N; i++) begin
        automatic int a = $urandom_range(0, M), b = $urandom_range(0, M);
        automatic logic sg = (bias == 0) ? 1'($urandom) : (bias == 1) ? ($urandom_range(0, 9) != 0)
                                                             : ($urandom_range(0, 9) == 0);
        in_row[i] = therm(a);
        w_row[i]  = {sg, therm(b)};
        // Thermometer codes: a AND b has min(a,b) ones.
        if (sg) np += (a < b) ? a : b; else nn += (a < b) ? a : b;
      end
      if (np > nn) pos_seen++; else if (nn > np) neg_seen++;
      en = 1; s1 = 1; @(negedge clk); en = 0; s1 = 0;
      checks++;
      if (vp !== volt(np, NC + 1) || vn !== volt(NC - nn, NC + 1)) begin
        failures++;
        $display("FAIL S1 t=%0d vp=%0d exp %0d vn=%0d exp %0d", t, vp, volt(np, NC + 1), vn, volt(NC - nn, NC + 1));
      end
      s2 = 1; @(negedge clk); s2 = 0;
      checks++;
      if (vp !== volt(NC + np - nn, 2 * (NC + 1)) || vn !== vp) begin
        failures++;
        $display("FAIL S2 t=%0d vp=%0d vn=%0d exp %0d", t, vp, vn, volt(NC + np - nn, 2 * (NC + 1)));
      end
    end
    if (pos_seen == 0 || neg_seen == 0) begin
      failures++;
      $display("FAIL sign coverage pos=%0d neg=%0d", pos_seen, neg_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
