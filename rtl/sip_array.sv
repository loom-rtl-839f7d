// sip_array: the ROWS x COLS grid of serial inner-product units.
//
// SIP(r,c) sits in row r (one filter in a convolutional layer) and column c
// (one window in a convolutional layer). All SIPs of a row share the row's
// 16-bit weight bus w_bus[r]; all SIPs of a column share the column's 16-bit
// activation bus a_bus[c] and the column's control word ctl[c]. Within a row
// each SIP's i_nbout is the OR of its left neighbour (column c-1); column 0
// sees zero. This chain carries the cascade reduction and the pooling max.
// Results of all SIPs leave on 'out' towards ABout.
//
// The grid, the shared buses and the daisy chain follow the paper; per-column
// control words are this design's way of driving both layer types.
module sip_array
  import loom_pkg::*;
#(
  parameter int ROWS_P  = ROWS,
  parameter int COLS_P  = COLS,
  parameter int LANES_P = LANES,
  parameter int OR_W_P  = OR_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [LANES_P-1:0]       w_bus [ROWS_P],
  input  logic [LANES_P-1:0]       a_bus [COLS_P],
  input  col_ctl_t                 ctl   [COLS_P],
  input  logic                     pool,
  input  logic [3:0]               prec,
  output logic signed [OR_W_P-1:0] out   [ROWS_P][COLS_P]
);
  logic signed [OR_W_P-1:0] nb [ROWS_P][COLS_P];

  for (genvar r = 0; r < ROWS_P; r++) begin : g_row
    for (genvar c = 0; c < COLS_P; c++) begin : g_col
      logic signed [OR_W_P-1:0] left;
      if (c == 0) begin : g_end
        assign left = '0;
      end else begin : g_chain
        assign left = nb[r][c-1];
      end
      sip #(.LANES_P(LANES_P), .OR_W_P(OR_W_P)) u_sip (
        .clk      (clk),
        .rst_n    (rst_n),
        .en       (en),
        .w_bits   (w_bus[r]),
        .wr_load  (ctl[c].wr_load),
        .a_bits   (a_bus[c]),
        .ac1_first(ctl[c].ac1_first),
        .ac1_last (ctl[c].ac1_last),
        .op       (ctl[c].op),
        .neg      (ctl[c].neg),
        .cas_add  (ctl[c].cas_add),
        .pool     (pool),
        .prec     (prec),
        .i_nbout  (left),
        .o_nbout  (nb[r][c]),
        .o_out    (out[r][c])
      );
    end
  end
endmodule
