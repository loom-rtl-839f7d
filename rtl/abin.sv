// abin: input activation buffer of the Loom tile.
//
// Holds three banks of COLS x LANES activations (256 by default):
//   shadow   - being filled by the activation memory, one bit plane
//              (bit wr_plane of all 256 activations, 256 bits) per cycle,
//              most convenient when activations are stored bit-interleaved;
//   current  - the group the SIP columns are processing;
//   previous - the group before, still read by fully-connected-layer columns
//              that lag column 0 by up to COLS-1 cycles.
// wr_last marks the shadow complete ('full', already in the cycle of the
// last plane, so that plane can be swapped in directly). 'swap' moves shadow to current
// and current to previous, clears the shadow and flips the generation tag.
// Each column c reads, from the bank whose tag matches col_tag[c], the
// activations in slot col_slot[c] at bit col_bit[c]: 16 bits, one per lane.
// The shadow's run-time precision (dyn_prec) is offered to the controller.
//
// Timing: writes and swaps act at the clock edge; reads are combinational.
// The bank structure and the bit-plane write port are this design's own; the
// paper gives ABin's role, the 256 one-bit activation lanes of its figure and
// the per-group precision detection.
module abin
  import loom_pkg::*;
#(
  parameter int COLS_P  = COLS,
  parameter int LANES_P = LANES,
  parameter int PBASE_P = PBASE
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // fill port
  input  logic                        wr_valid,
  output logic                        wr_ready,
  input  logic [$clog2(PBASE_P)-1:0]  wr_plane,
  input  logic [COLS_P*LANES_P-1:0]   wr_bits,
  input  logic                        wr_last,
  // controller
  input  logic                        swap,
  output logic                        full,
  output logic [$clog2(PBASE_P+1)-1:0] shadow_prec,
  output logic                        cur_tag,
  // column read ports
  input  logic [$clog2(COLS_P)-1:0]   col_slot [COLS_P],
  input  logic [$clog2(PBASE_P)-1:0]  col_bit  [COLS_P],
  input  logic                        col_tag  [COLS_P],
  output logic [LANES_P-1:0]          a_bus    [COLS_P]
);
  localparam int N = COLS_P * LANES_P;

  logic [PBASE_P-1:0] sh_q [N];
  logic [PBASE_P-1:0] cur_q [N];
  logic [PBASE_P-1:0] prv_q [N];
  logic [PBASE_P-1:0] sh_m [N];  // shadow including this cycle's plane
  logic               full_q, tag_q, wr_fire;

  assign wr_ready = !full_q;
  assign wr_fire  = wr_valid && !full_q;
  // The group counts as complete already in the cycle its last plane arrives,
  // so a swap can take it without a bubble.
  assign full     = full_q || (wr_fire && wr_last);
  assign cur_tag  = tag_q;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      sh_m[i] = sh_q[i];
      if (wr_fire) sh_m[i][wr_plane] = wr_bits[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      tag_q  <= 1'b0;
      for (int i = 0; i < N; i++) begin
        sh_q[i]  <= '0;
        cur_q[i] <= '0;
        prv_q[i] <= '0;
      end
    end else if (swap && full) begin
      for (int i = 0; i < N; i++) begin
        prv_q[i] <= cur_q[i];
        cur_q[i] <= sh_m[i];
        sh_q[i]  <= '0;
      end
      full_q <= 1'b0;
      tag_q  <= ~tag_q;
    end else if (wr_fire) begin
      for (int i = 0; i < N; i++) sh_q[i] <= sh_m[i];
      if (wr_last) full_q <= 1'b1;
    end
  end

  logic [PBASE_P-1:0] ones_unused;
  dyn_prec #(.N(N), .PBASE_P(PBASE_P)) u_dp (.act(sh_m), .ones(ones_unused), .prec(shadow_prec));

  always_comb begin
    for (int c = 0; c < COLS_P; c++)
      for (int l = 0; l < LANES_P; l++)
        a_bus[c][l] = (col_tag[c] == tag_q) ? cur_q[int'(col_slot[c]) * LANES_P + l][col_bit[c]]
                                            : prv_q[int'(col_slot[c]) * LANES_P + l][col_bit[c]];
  end

  // A swap is only requested for a complete group.
  assert property (@(posedge clk) disable iff (!rst_n) swap |-> full);
endmodule
