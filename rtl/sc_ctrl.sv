// sc_ctrl: operation sequencer of the stochastic-computing memory system.
//
// Two kinds of request arrive on a valid/ready handshake (req_valid/req_ready;
// the request fields must stay stable while req_valid waits for req_ready):
//   OP_CONVERT : the ASC digitises the sensor voltage and the code is written
//                to element (req_dst_col) of activation row req_dst_row.
//                Completes in the cycle it is accepted.
//   OP_MAC     : input row req_in_row and weight row req_w_row are read, the
//                MAC module evaluates them (EN and S1, then S2), the ASC
//                converts the MAC voltage and the code is written to
//                (req_dst_row, req_dst_col), so a layer's outputs become the
//                next layer's stochastic inputs without any binary conversion.
//
// MAC timing (one state per clock):
//   IDLE  accept, issue both memory reads
//   EVAL  rows valid; EN=1, S1 on (charge division)
//   SHARE S2 on (charge sharing)
//   CONV  asc_sel=1, ASC code written, res_valid=1; back to IDLE
// A MAC occupies 4 clocks, so a 40 MHz clock gives the 10 MHz output rate the
// design was characterised at. The phase order (S1 then S2, EN high while
// computing) and the loop of the MAC output back through the ASC into memory
// follow the published structure; the request interface, the states and the
// clock ratio are this design's choices.
module sc_ctrl
  import sc_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF,
  parameter int unsigned COLS = N_DEF,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // request
  input  logic          req_valid,
  output logic          req_ready,
  input  op_e           req_op,
  input  logic [RW-1:0] req_dst_row,
  input  logic [CW-1:0] req_dst_col,
  input  logic [RW-1:0] req_in_row,
  input  logic [RW-1:0] req_w_row,
  // memory reads (both memories are read together)
  output logic          rd_en,
  output logic [RW-1:0] rd_in_row,
  output logic [RW-1:0] rd_w_row,
  // activation memory write of the ASC code
  output logic          wr_en,
  output logic [RW-1:0] wr_row,
  output logic [CW-1:0] wr_col,
  // MAC module and ASC input select
  output logic          mac_en,
  output logic          s1,
  output logic          s2,
  output logic          asc_sel,   // 0: sensor voltage, 1: MAC output
  output state_e        state
);

  state_e        st, st_nx;
  logic [RW-1:0] dst_row_q;
  logic [CW-1:0] dst_col_q;

  assign state = st;

  always_comb begin
    st_nx     = st;
    req_ready = (st == ST_IDLE);
    rd_en     = 1'b0;
    rd_in_row = req_in_row;
    rd_w_row  = req_w_row;
    wr_en     = 1'b0;
    wr_row    = req_dst_row;
    wr_col    = req_dst_col;
    mac_en    = 1'b0;
    s1        = 1'b0;
    s2        = 1'b0;
    asc_sel   = 1'b0;
    unique case (st)
      ST_IDLE: begin
        if (req_valid) begin
          if (req_op == OP_CONVERT) begin
            wr_en = 1'b1;
          end else begin
            rd_en = 1'b1;
            st_nx = ST_EVAL;
          end
        end
      end
      ST_EVAL: begin
        mac_en = 1'b1;
        s1     = 1'b1;
        st_nx  = ST_SHARE;
      end
      ST_SHARE: begin
        s2    = 1'b1;
        st_nx = ST_CONV;
      end
      ST_CONV: begin
        asc_sel = 1'b1;
        wr_en   = 1'b1;
        wr_row  = dst_row_q;
        wr_col  = dst_col_q;
        st_nx   = ST_IDLE;
      end
      default: st_nx = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= ST_IDLE;
      dst_row_q <= '0;
      dst_col_q <= '0;
    end else begin
      st <= st_nx;
      if (st == ST_IDLE && req_valid && req_op == OP_MAC) begin
        dst_row_q <= req_dst_row;
        dst_col_q <= req_dst_col;
      end
    end
  end

  // Handshake rule: a waiting request stays valid and unchanged.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req_op) && $stable(req_dst_row)
                               && $stable(req_dst_col) && $stable(req_in_row) && $stable(req_w_row));
  // S1 and S2 are never closed together.
  a_switch_excl: assert property (@(posedge clk) disable iff (!rst_n) !(s1 && s2));

endmodule
