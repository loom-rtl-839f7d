// transposer: rotates output activations into bit planes.
//
// Takes N activations of PBASE bits and, one cycle later, presents PBASE
// planes of N bits: out_planes[b][j] is bit b of activation j. This is the
// layout in which the activation memory stores values bit-interleaved, so a
// later layer can read only the planes its precision needs. Registered, no
// back-pressure (one word per cycle in, one out). The paper names the
// transposer and its purpose; the size and the single register stage are
// this design's.
module transposer
  import loom_pkg::*;
#(
  parameter int N       = 16,
  parameter int PBASE_P = PBASE,
  parameter int IDX_W   = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [IDX_W-1:0]   in_index,
  input  logic [PBASE_P-1:0] in_act [N],
  output logic               out_valid,
  output logic [IDX_W-1:0]   out_index,
  output logic [N-1:0]       out_planes [PBASE_P]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_index <= '0;
      for (int b = 0; b < PBASE_P; b++) out_planes[b] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_index <= in_index;
        for (int b = 0; b < PBASE_P; b++)
          for (int j = 0; j < N; j++)
            out_planes[b][j] <= in_act[j][b];
      end
    end
  end
endmodule
