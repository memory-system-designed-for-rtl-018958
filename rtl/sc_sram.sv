// sc_sram: digital memory holding stochastic (thermometer-coded) numbers.
//
// The array is ROWS rows of COLS elements of EW bits, built as COLS column
// banks of ROWS x EW bits. One row holds the N
// operands of one MAC operation, so the MAC module can read all of them at once,
// while the converter fills the memory one element at a time. Since stochastic
// codes are ordinary digital bits, this is a plain synchronous SRAM array, and
// the same memory could hold binary data.
//
// Write port: when we is high at a rising clock edge, element wcol of row wrow
// takes wdata. Read port: when re is high at a rising edge, rdata takes the
// whole row rrow and holds it until the next read (one cycle latency). A read
// and a write of the same row in one cycle return the old contents. Reset does
// not clear the array (SRAM behaviour). The organisation (row = one operand
// vector, element writes, one-cycle read) and the depth are this design's
// choices; the published description specifies only a standard SRAM that
// stores stochastic codes.
module sc_sram #(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 300,
  parameter int unsigned EW   = 15,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [RW-1:0]            wrow,
  input  logic [CW-1:0]            wcol,
  input  logic [EW-1:0]            wdata,
  input  logic                     re,
  input  logic [RW-1:0]            rrow,
  output logic [COLS-1:0][EW-1:0]  rdata
);

  // One bank per column: each is a ROWS x EW array with one write and one
  // read port, so the row read gives all COLS elements in parallel.
  for (genvar c = 0; c < int'(COLS); c++) begin : g_col
    logic [EW-1:0] mem [ROWS];
    always_ff @(posedge clk) begin
      if (we && int'(wcol) == c) mem[wrow] <= wdata;
      if (re) rdata[c] <= mem[rrow];
    end
  end

  // Addresses must be in range when used.
  a_wr_range: assert property (@(posedge clk) we |-> (int'(wrow) < ROWS) && (int'(wcol) < COLS));
  a_rd_range: assert property (@(posedge clk) re |-> (int'(rrow) < ROWS));

endmodule
