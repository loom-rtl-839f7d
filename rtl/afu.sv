// afu: activation function unit at the output of ABout.
//
// For each of N results: ReLU (negative values become 0), arithmetic right
// shift by 'shift' to return to the activations' fixed-point position, and
// saturation to an unsigned 16-bit activation. Combinational.
// The paper places a non-linear activation unit after ABout without naming
// the function; ReLU, the shift and the saturation are this design's choice.
module afu
  import loom_pkg::*;
#(
  parameter int N       = 16,
  parameter int OR_W_P  = OR_W,
  parameter int PBASE_P = PBASE
) (
  input  logic signed [OR_W_P-1:0] in  [N],
  input  logic [5:0]               shift,
  output logic [PBASE_P-1:0]       out [N]
);
  localparam logic [OR_W_P-1:0] MAXV = OR_W_P'((64'd1 << PBASE_P) - 1);
  logic signed [OR_W_P-1:0] sh [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      sh[i] = in[i] >>> shift;
      if (sh[i] < 0)                         out[i] = '0;
      else if ($unsigned(sh[i]) > MAXV)      out[i] = '1;
      else                                   out[i] = sh[i][PBASE_P-1:0];
    end
  end
endmodule
