// tb_sc_sram: self-checking test of the stochastic SRAM. Random element writes
// and row reads against a reference array; checks the one-cycle read latency,
// that rdata holds between reads, and that a read and a write of the same row
// in one cycle return the old contents.
module tb_sc_sram;
  localparam int ROWS = 4, COLS = 7, EW = 15;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we, re;
  logic [1:0] wrow, rrow;
  logic [2:0] wcol;
  logic [EW-1:0] wdata;
  logic [COLS-1:0][EW-1:0] rdata, model [ROWS], expq;

  sc_sram #(.ROWS(ROWS), .COLS(COLS), .EW(EW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; wrow = 0; rrow = 0; wcol = 0; wdata = 0;
    // Fill everything first.
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        we = 1; wrow = 2'(r); wcol = 3'(c); wdata = EW'($urandom);
        model[r][c] = wdata;
      end
    @(negedge clk); we = 0;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      we = 1'($urandom); re = (k == 0) ? 1'b1 : 1'($urandom);
      wrow = 2'($urandom); wcol = 3'($urandom_range(0, COLS - 1)); wdata = EW'($urandom);
      rrow = 2'($urandom);
      if (re) expq = model[rrow];          // a read returns the row before this write
      @(posedge clk); #1;
      if (we) model[wrow][wcol] = wdata;
      checks++;                            // without a read, rdata must hold
      if (rdata !== expq) begin
        failures++;
        $display("FAIL k=%0d re=%0b row %0d: %h exp %h", k, re, rrow, rdata, expq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
