// tb_sense_amp: self-checking test of the sense amplifier model. Drives the
// equality boundary, both sides of it, and random voltages with the enable on
// and off; expects out = 1 only when enabled and the input is at or above the
// reference.
module tb_sense_amp;
  import sc_pkg::*;
  int checks = 0, failures = 0;
  logic en, out;
  vcode_t vp, vm;

  sense_amp dut (.en(en), .vin_p(vp), .vin_m(vm), .out(out));

  task automatic check(input logic exp, input string what);
    #1;
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: en=%0b vin=%0d vref=%0d out=%0b exp=%0b", what, en, vp, vm, out, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; vm = vcode_t'(1 << 19);
    vp = vm;          check(1'b1, "equal");
    vp = vm - 1;      check(1'b0, "just below");
    vp = vm + 1;      check(1'b1, "just above");
    en = 0; vp = vm + 5; check(1'b0, "disabled");
    for (int k = 0; k < 200; k++) begin
      logic exp;
      en = 1'($urandom);
      vp = vcode_t'($urandom_range(0, 1 << 20));
      vm = vcode_t'($urandom_range(0, 1 << 20));
      if (!en) exp = 1'b0;
      else if (int'(vp) - int'(vm) >= 0) exp = 1'b1;
      else exp = 1'b0;
      check(exp, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
