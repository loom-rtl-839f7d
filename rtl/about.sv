// about: output activation buffer of the Loom tile.
//
// 'cap' copies the results of all ROWS x COLS SIPs in one cycle (only while
// not busy). The buffer then offers them RD at a time on a valid/ready port:
// word w holds column w / (ROWS/RD), rows (w % (ROWS/RD))*RD .. +RD-1. After
// the last word is taken the buffer is free again. While it drains, the SIP
// array can already compute the next tile.
//
// The paper names ABout and says it buffers output activations for a short
// time; the single-cycle capture, the RD-wide drain and the word order are
// this design's own.
module about
  import loom_pkg::*;
#(
  parameter int ROWS_P = ROWS,
  parameter int COLS_P = COLS,
  parameter int RD     = 16,
  parameter int OR_W_P = OR_W,
  localparam int WORDS = ROWS_P * COLS_P / RD,
  localparam int IDX_W = $clog2(WORDS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cap,
  input  logic signed [OR_W_P-1:0] sip_out [ROWS_P][COLS_P],
  output logic                     busy,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [IDX_W-1:0]         rd_index,
  output logic signed [OR_W_P-1:0] rd_data [RD]
);
  localparam int GPC = ROWS_P / RD;  // words per column

  logic signed [OR_W_P-1:0] buf_q [ROWS_P][COLS_P];
  logic                     busy_q;
  logic [IDX_W-1:0]         idx_q;

  assign busy     = busy_q;
  assign rd_valid = busy_q;
  assign rd_index = idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      idx_q  <= '0;
    end else if (cap && !busy_q) begin
      busy_q <= 1'b1;
      idx_q  <= '0;
    end else if (busy_q && rd_ready) begin
      if (int'(idx_q) == WORDS - 1) busy_q <= 1'b0;
      idx_q <= idx_q + 1'b1;
    end
  end

  // Data storage has no reset: it is written before it is read.
  always_ff @(posedge clk) begin
    if (cap && !busy_q) buf_q <= sip_out;
  end

  always_comb begin
    for (int j = 0; j < RD; j++)
      rd_data[j] = buf_q[(int'(idx_q) % GPC) * RD + j][int'(idx_q) / GPC];
  end
endmodule
