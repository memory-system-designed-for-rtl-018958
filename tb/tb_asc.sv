// tb_asc: self-checking test of the analog-to-stochastic converter.
// Part 1 (K=3) checks the four bands of the 3-bit thermometer table
// (0..VDD/4 -> 000, VDD/4..VDD/2 -> 001, VDD/2..3VDD/4 -> 011, above -> 111)
// and that amplifiers above the first 0 output stay disabled.
// Part 2 (K=15, the default) checks random voltages and every band edge:
// the expected number of ones is floor(vin*(K+1)/VDD) capped at K, and the
// amplifiers powered are those up to one above the top 1.
module tb_asc;
  import sc_pkg::*;
  int checks = 0, failures = 0;
  int gated = 0;
  vcode_t v3, v15;
  logic [2:0]  y3, en3;
  logic [14:0] y15, en15;

  asc #(.K(3)) dut3  (.vin(v3),  .y(y3),  .sa_en(en3));
  asc          dut15 (.vin(v15), .y(y15), .sa_en(en15));

  localparam int unsigned FS = 1 << VFRAC;

  task automatic chk3(input int unsigned v, input logic [2:0] yexp, input logic [2:0] enexp);
    v3 = vcode_t'(v); #1;
    checks++;
    if (y3 !== yexp || en3 !== enexp) begin
      failures++;
      $display("FAIL K=3 vin=%0d y=%b exp=%b en=%b exp=%b", v, y3, yexp, en3, enexp);
    end
  endtask

  task automatic chk15(input int unsigned v);
    int unsigned k, ke;
    logic [14:0] yexp, enexp;
    v15 = vcode_t'(v); #1;
    k = (v * 16) / FS;              // bands of width VDD/16
    if (k > 15) k = 15;
    ke = (k + 1 > 15) ? 15 : k + 1;
    yexp  = 15'((32'd1 << k) - 1);
    enexp = 15'((32'd1 << ke) - 1);
    checks++;
    if (en15 != 15'h7fff) gated++;
    if (y15 !== yexp || en15 !== enexp) begin
      failures++;
      $display("FAIL K=15 vin=%0d y=%b exp=%b en=%b exp=%b", v, y15, yexp, en15, enexp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Band table of the 3-bit example.
    chk3(FS / 8,         3'b000, 3'b001);
    chk3(3 * FS / 8,     3'b001, 3'b011);
    chk3(5 * FS / 8,     3'b011, 3'b111);
    chk3(7 * FS / 8,     3'b111, 3'b111);
    chk3(0,              3'b000, 3'b001);
    chk3(FS,             3'b111, 3'b111);
    chk3(FS / 4,         3'b001, 3'b011);   // at VREF0 reads as 1
    chk3(FS / 4 - 1,     3'b000, 3'b001);
    chk3(3 * FS / 4,     3'b111, 3'b111);
    chk3(3 * FS / 4 - 1, 3'b011, 3'b111);
    // 15-bit: every edge and random values.
    for (int unsigned b = 1; b <= 15; b++) begin
      chk15(b * FS / 16);
      chk15(b * FS / 16 - 1);
    end
    for (int k = 0; k < 500; k++) chk15($urandom_range(0, FS));
    if (gated == 0) begin
      failures++;
      $display("FAIL amplifier gating never seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
