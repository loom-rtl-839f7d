// loom_top: one Loom tile.
//
// Loom multiplies weights and activations bit-serially so that execution time
// shrinks with the precision actually needed: Pa x Pw cycles per set of 16
// inputs in convolutional layers and 16 x Pw in fully connected layers,
// against a fixed 16-bit parallel design. The tile holds:
//   loom_ctrl  - schedules weight planes, activation groups and SIP control;
//   abin       - input activation buffer, filled one 256-bit activation bit
//                plane per cycle, with run-time precision detection;
//   sip_array  - 128 x 16 serial inner-product units, a 16-bit weight bus
//                per row (2 Kb in total) and a 16-bit activation bus per
//                column (256 b in total);
//   about      - output buffer, drained 16 results per cycle;
//   afu        - ReLU and re-quantisation to 16 bits;
//   transposer - turns 16 results into 16 bit planes for the activation
//                memory.
// The weight memory and the activation memory are outside the tile: the
// weight memory must answer w_req_* in the same cycle on w_bits (row r,
// lane l: the requested bit plane of weight l of filter r in the requested
// set); the activation memory pushes bit planes on a_wr_*. Results leave on
// out_* as bit planes of 16 activations, word out_index (column-major, see
// about). stall, casc_step and ab_swap are exposed for observation.
module loom_top
  import loom_pkg::*;
#(
  parameter int ROWS_P = ROWS,
  parameter int COLS_P = COLS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  cfg_t                       cfg,
  output logic                       busy,
  output logic                       done,
  output logic                       stall,
  output logic                       casc_step,
  output logic                       ab_swap,
  // weight memory
  output logic                       w_req_valid,
  output logic [COLS_P-1:0]          w_req_mask,
  output logic [BIT_W-1:0]           w_req_plane,
  output logic [SET_W-1:0]           w_req_set,
  input  logic [LANES-1:0]           w_bits [ROWS_P],
  // activation memory to ABin
  input  logic                       a_wr_valid,
  output logic                       a_wr_ready,
  input  logic [BIT_W-1:0]           a_wr_plane,
  input  logic [COLS_P*LANES-1:0]    a_wr_bits,
  input  logic                       a_wr_last,
  // transposed outputs towards the activation memory
  input  logic                       out_ready,
  output logic                       out_valid,
  output logic [$clog2(ROWS_P*COLS_P/16)-1:0] out_index,
  output logic [15:0]                out_planes [PBASE]
);
  localparam int IDX_W = $clog2(ROWS_P * COLS_P / 16);

  logic                      en, ab_full, ab_tag, ao_busy, ao_cap;
  logic [PW_W-1:0]           ab_prec;
  logic [$clog2(COLS_P)-1:0] col_slot [COLS_P];
  logic [BIT_W-1:0]          col_bit  [COLS_P];
  logic                      col_tag  [COLS_P];
  col_ctl_t                  col_ctl  [COLS_P];
  logic [LANES-1:0]          a_bus    [COLS_P];
  logic signed [OR_W-1:0]    sip_out  [ROWS_P][COLS_P];
  logic                      rd_valid;
  logic [IDX_W-1:0]          rd_index;
  logic signed [OR_W-1:0]    rd_data  [16];
  logic [PBASE-1:0]          act      [16];
  cfg_t                      cfg_q;

  // Pool / prec / afu settings apply to the tile that was started.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cfg_q <= '0;
    else if (start && !busy)   cfg_q <= cfg;
  end

  loom_ctrl #(.COLS_P(COLS_P)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .en, .stall,
    .ab_full, .ab_dyn_prec(ab_prec), .ab_cur_tag(ab_tag), .ab_swap, .col_slot,
    .col_ctl, .w_req_valid, .w_req_mask, .w_req_plane, .w_req_set,
    .ao_busy, .ao_cap, .casc_step
  );

  always_comb begin
    for (int c = 0; c < COLS_P; c++) begin
      col_bit[c] = col_ctl[c].abit;
      col_tag[c] = col_ctl[c].tag;
    end
  end

  abin #(.COLS_P(COLS_P)) u_abin (
    .clk, .rst_n,
    .wr_valid(a_wr_valid), .wr_ready(a_wr_ready), .wr_plane(a_wr_plane),
    .wr_bits(a_wr_bits), .wr_last(a_wr_last),
    .swap(ab_swap), .full(ab_full), .shadow_prec(ab_prec), .cur_tag(ab_tag),
    .col_slot, .col_bit, .col_tag, .a_bus
  );

  sip_array #(.ROWS_P(ROWS_P), .COLS_P(COLS_P)) u_array (
    .clk, .rst_n, .en, .w_bus(w_bits), .a_bus, .ctl(col_ctl),
    .pool(cfg_q.pool), .prec(cfg_q.prec), .out(sip_out)
  );

  about #(.ROWS_P(ROWS_P), .COLS_P(COLS_P)) u_about (
    .clk, .rst_n, .cap(ao_cap), .sip_out, .busy(ao_busy),
    .rd_valid, .rd_ready(out_ready), .rd_index, .rd_data
  );

  afu u_afu (.in(rd_data), .shift(cfg_q.afu_shift), .out(act));

  transposer #(.IDX_W(IDX_W)) u_tr (
    .clk, .rst_n, .in_valid(rd_valid && out_ready), .in_index(rd_index),
    .in_act(act), .out_valid, .out_index, .out_planes
  );
endmodule
