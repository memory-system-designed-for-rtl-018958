// tb_sc_ctrl: self-checking test of the sequencer. Issues random conversion
// and MAC requests with random gaps and checks, cycle by cycle, the control
// outputs against the expected schedule: a conversion writes in its accept
// cycle; a MAC reads in its accept cycle, then EN+S1, then S2, then writes
// with the ASC on the MAC output (4 cycles, ready low for the last 3).
module tb_sc_ctrl;
  import sc_pkg::*;
  localparam int ROWS = 16, COLS = 300;
  int checks = 0, failures = 0, n_conv = 0, n_mac = 0, n_stall = 0;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rd_en, wr_en, mac_en, s1, s2, asc_sel;
  op_e  req_op;
  logic [3:0] req_dst_row, req_in_row, req_w_row, rd_in_row, rd_w_row, wr_row;
  logic [8:0] req_dst_col, wr_col;
  state_e state;

  sc_ctrl #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  // expected outputs: {ready, rd_en, wr_en, mac_en, s1, s2, asc_sel}
  task automatic expect_ctl(input logic [6:0] e, input string what);
    checks++;
    if ({req_ready, rd_en, wr_en, mac_en, s1, s2, asc_sel} !== e) begin
      failures++;
      $display("FAIL %s: got %b exp %b", what, {req_ready, rd_en, wr_en, mac_en, s1, s2, asc_sel}, e);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_op = OP_CONVERT;
    req_dst_row = 0; req_dst_col = 0; req_in_row = 0; req_w_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      automatic logic [3:0] dr = 4'($urandom), ir = 4'($urandom), wr = 4'($urandom);
      automatic logic [8:0] dc = 9'($urandom_range(0, COLS - 1));
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin           // idle gap
        req_valid = 0; #1;
        expect_ctl(7'b1000000, "idle");
        continue;
      end
      req_valid = 1; req_dst_row = dr; req_dst_col = dc; req_in_row = ir; req_w_row = wr;
      req_op = ($urandom_range(0, 1) == 1) ? OP_MAC : OP_CONVERT;
      #1;
      if (req_op == OP_CONVERT) begin
        expect_ctl(7'b1010000, "convert");
        checks++;
        if (wr_row !== dr || wr_col !== dc) begin failures++; $display("FAIL conv address"); end
        n_conv++;
      end else begin
        expect_ctl(7'b1100000, "mac accept");
        checks++;
        if (rd_in_row !== ir || rd_w_row !== wr) begin failures++; $display("FAIL read rows"); end
        @(negedge clk);
        // Hold a new request during the busy cycles: it must wait.
        req_op = OP_CONVERT; req_dst_row = ~dr; req_dst_col = 9'd1; #1;
        if (req_valid && !req_ready) n_stall++;
        expect_ctl(7'b0001100, "eval");
        @(negedge clk); #1;
        expect_ctl(7'b0000010, "share");
        @(negedge clk); #1;
        expect_ctl(7'b0010001, "convert MAC result");
        checks++;
        if (wr_row !== dr || wr_col !== dc) begin failures++; $display("FAIL mac dst address"); end
        @(negedge clk); #1;
        expect_ctl(7'b1010000, "waiting request accepted");
        n_conv++; n_mac++;
      end
    end
    @(negedge clk); req_valid = 0;
    if (n_conv == 0 || n_mac == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL coverage conv=%0d mac=%0d stall=%0d", n_conv, n_mac, n_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
