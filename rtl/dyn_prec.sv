// dyn_prec: run-time activation precision detector.
//
// For a group of N activations processed together, one OR tree per bit
// position reduces the group to a PBASE-bit vector that has a 1 wherever any
// activation has a 1. A leading-one detector turns the vector into the number
// of bits needed: position of the highest 1 plus one. A group of zeros needs
// one bit (this design's choice: a group always takes at least one cycle).
// The OR trees and the leading-one detector follow the paper; the
// zero-group rule is this design's. Purely combinational.
module dyn_prec #(
  parameter int N       = 256,
  parameter int PBASE_P = 16,
  parameter int PW_W_P  = $clog2(PBASE_P + 1)
) (
  input  logic [PBASE_P-1:0] act [N],
  output logic [PBASE_P-1:0] ones,   // per bit position OR
  output logic [PW_W_P-1:0]  prec    // 1..PBASE_P
);
  always_comb begin
    ones = '0;
    for (int i = 0; i < N; i++) ones |= act[i];
  end

  always_comb begin
    prec = PW_W_P'(1);
    for (int b = 0; b < PBASE_P; b++)
      if (ones[b]) prec = PW_W_P'(b + 1);
  end
endmodule
