// sip: Loom serial inner-product unit.
//
// Each cycle the SIP ANDs 16 one-bit weights held in its weight registers (WR)
// with 16 one-bit activations and adds the 16 products in a popcount tree.
// AC1 accumulates the tree output over the activation bits, most significant
// bit first: acc1 <= (acc1 << 1) + sum. When a group's last activation bit has
// been added, AC2 folds AC1 into the output register (OR) in the next cycle,
// subtracting it when the group belongs to the weight's sign bit (weights are
// two's complement, activations unsigned). A cascade step instead adds the
// left neighbour's OR (i_nbout) into OR, which reduces partial outputs along
// a row. The result leaves through a max comparator (pooling with the
// neighbour) and a left shifter by 'prec'.
//
// Interface: w_bits/wr_load from the row weight bus, a_bits from the column
// activation bus, control from the controller. Timing: WR is loaded at the
// clock edge and the value being loaded is already used in the same cycle;
// OR is updated one cycle after ac1_last. en=0 freezes the unit.
//
// From the paper: WR, AND gates, adder tree, AC1 with "<<1", cascade mux,
// negation on the weight MSB, AC2 with "<<1", max, "<< prec". This design's
// own: MSB-first bit order for both operands, the LOAD/SHIFT_ADD/ADD choice
// of AC2 (so outputs can span many sets of 16 inputs), widths and the pool
// select.
module sip
  import loom_pkg::*;
#(
  parameter int LANES_P = LANES,
  parameter int PBASE_P = PBASE,
  parameter int OR_W_P  = OR_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [LANES_P-1:0]       w_bits,
  input  logic                     wr_load,
  input  logic [LANES_P-1:0]       a_bits,
  input  logic                     ac1_first,
  input  logic                     ac1_last,
  input  ac2_op_e                  op,
  input  logic                     neg,
  input  logic                     cas_add,
  input  logic                     pool,
  input  logic [3:0]               prec,
  input  logic signed [OR_W_P-1:0] i_nbout,
  output logic signed [OR_W_P-1:0] o_nbout,
  output logic signed [OR_W_P-1:0] o_out
);

  localparam int SUM_W = $clog2(LANES_P + 1);
  localparam int AC1_W = SUM_W + PBASE_P;

  logic [LANES_P-1:0] wr_q, w_eff;
  logic [SUM_W-1:0]   tree_sum;
  logic [AC1_W-1:0]   acc1_q;
  logic               ac2_pend_q;
  ac2_op_e            ac2_op_q;
  logic               ac2_neg_q;
  logic signed [OR_W_P-1:0] or_q, x, cas_in, or_next;

  // Weight registers; the bit being loaded is bypassed to the AND gates.
  assign w_eff = wr_load ? w_bits : wr_q;

  // 16 AND gates and the 16-input 1-bit adder tree.
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < LANES_P; i++)
      tree_sum += SUM_W'(w_eff[i] & a_bits[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q       <= '0;
      acc1_q     <= '0;
      ac2_pend_q <= 1'b0;
      ac2_op_q   <= AC2_NONE;
      ac2_neg_q  <= 1'b0;
    end else if (en) begin
      if (wr_load) wr_q <= w_bits;
      // AC1: shift-accumulate, most significant activation bit first.
      if (ac1_first) acc1_q <= AC1_W'(tree_sum);
      else           acc1_q <= (acc1_q << 1) + AC1_W'(tree_sum);
      // Hand-off stage between AC1 and AC2.
      ac2_pend_q <= ac1_last && (op != AC2_NONE);
      ac2_op_q   <= op;
      ac2_neg_q  <= neg;
    end
  end

  // Cascade mux, then the negation block.
  assign cas_in = cas_add ? i_nbout : OR_W_P'($signed({1'b0, acc1_q}));
  assign x      = (ac2_neg_q && !cas_add) ? -cas_in : cas_in;

  // AC2: the "MSB" mux chooses between no previous value, OR and OR << 1.
  always_comb begin
    or_next = or_q;
    if (cas_add) or_next = or_q + x;
    else if (ac2_pend_q) begin
      unique case (ac2_op_q)
        AC2_LOAD:      or_next = x;
        AC2_SHIFT_ADD: or_next = (or_q <<< 1) + x;
        AC2_ADD:       or_next = or_q + x;
        default:       or_next = or_q;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  or_q <= '0;
    else if (en) or_q <= or_next;
  end

  assign o_nbout = or_q;

  // Max comparator for pooling, output mux and the "<< prec" shifter.
  logic signed [OR_W_P-1:0] sel;
  assign sel   = (pool && (i_nbout > or_q)) ? i_nbout : or_q;
  assign o_out = sel <<< prec;

endmodule
