// tb_sc_cap_array: self-checking test of the capacitor-array model.
// Random drives; after an S1 cycle VP = n_p/(mN+1) VDD and VN = n_dn/(mN+1)
// VDD; after an S2 cycle both equal (n_p + n_dn)/(2(mN+1)) VDD; with both
// switches off the values hold even when the drives change. Expected values
// are the closed-form equations in the fixed-point grid (truncated).
module tb_sc_cap_array;
  import sc_pkg::*;
  localparam int N = 4, M = 3, NC = N * M;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, s1 = 0, s2 = 0;
  logic [NC-1:0] dp, dn;
  vcode_t vp, vn;

  sc_cap_array #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  function automatic vcode_t volt(input longint num, input longint den);
    return vcode_t'((num << VFRAC) / den);
  endfunction

  task automatic expect2(input vcode_t ep, input vcode_t en_, input string what);
    checks++;
    if (vp !== ep || vn !== en_) begin
      failures++;
      $display("FAIL %s: vp=%0d exp %0d vn=%0d exp %0d", what, vp, ep, vn, en_);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dp = '0; dn = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect2('0, '0, "reset");
    for (int k = 0; k < 200; k++) begin
      int np, ndn;
      vcode_t shared;
      dp = NC'($urandom); dn = NC'($urandom);
      if (k == 0) begin dp = '1; dn = '0; end        // full scale one side
      np = $countones(dp); ndn = $countones(dn);
      s1 = 1; @(negedge clk); s1 = 0;
      expect2(volt(np, NC + 1), volt(ndn, NC + 1), "S1 division");
      dp = ~dp;                                        // must not matter now
      @(negedge clk);
      expect2(volt(np, NC + 1), volt(ndn, NC + 1), "hold");
      s2 = 1; @(negedge clk); s2 = 0;
      shared = volt(np + ndn, 2 * (NC + 1));
      expect2(shared, shared, "S2 sharing");
      @(negedge clk);
      expect2(shared, shared, "hold after share");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
