// tb_sc_mac_gates: self-checking test of the MAC gate arrays. For random
// inputs, weights, signs and EN it checks every drive bit and the two counts
// the capacitor arrays need: ones(dp) = n_p and ones(dn) = m*N - n_n, with
// n_p / n_n the number of products IN&W under positive / negative weights
// (all-zero drives when EN is low).
module tb_sc_mac_gates;
  localparam int N = 6, M = 5;
  int checks = 0, failures = 0;
  logic [N-1:0][M-1:0] in_x, w_x, dp, dn;
  logic [N-1:0] sign;
  logic en;

  sc_mac_gates #(.N(N), .M(M)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      int np, nn, odp, odn;
      in_x = {N{M'($urandom)}} ^ (N*M)'({$urandom, $urandom});
      w_x  = (N*M)'({$urandom, $urandom});
      sign = N'($urandom);
      en   = (k % 7 != 0);
      #1;
      np = 0; nn = 0; odp = 0; odn = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++) begin
          if (in_x[i][j] && w_x[i][j]) begin
            if (sign[i]) np++; else nn++;
          end
          odp += int'(dp[i][j]);
          odn += int'(dn[i][j]);
          checks++;
          if (dp[i][j] !== (en && in_x[i][j] && w_x[i][j] && sign[i]) ||
              dn[i][j] !== (en && !(in_x[i][j] && w_x[i][j] && !sign[i]))) begin
            failures++;
            $display("FAIL bit i=%0d j=%0d", i, j);
          end
        end
      checks++;
      if (en ? (odp != np || odn != M * N - nn) : (odp != 0 || odn != 0)) begin
        failures++;
        $display("FAIL counts en=%0b dp=%0d np=%0d dn=%0d mN-nn=%0d", en, odp, np, odn, M * N - nn);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
