// loom_ctrl: sequencer of the Loom tile.
//
// A tile computes ROWS x COLS outputs, each an inner product over n_sets sets
// of 16 inputs. The controller walks the weight bit planes from the most
// significant (sign) bit down and, inside each plane, the sets in order. For
// every (plane, set) pair it takes one activation group from ABin, loads one
// weight bit plane into the SIP weight registers and feeds the activation
// bits most significant first:
//   convolutional layer (CVL): all columns run together; a group lasts Pa
//     cycles, Pa being the profile precision or, with dyn_en, the precision
//     detected in the group at run time. A tile takes sum(Pa) over Pw*n_sets
//     groups, i.e. Pa*Pw per set of 16 inputs, plus 3 cycles.
//   fully connected layer (FCL): a group always lasts 16 cycles; column c
//     runs column 0's control delayed by c cycles, so one column loads
//     weights per cycle and after 15 cycles all columns are busy. With
//     cascading (sn > 1), the sn columns of a slice each take a share of the
//     inputs and sn-1 extra cycles add the partial outputs along the row.
// When ABin has no complete group at a group boundary, or ABout has not
// drained when the tile ends, the whole tile stalls (en = 0).
//
// Interface: start/cfg/busy/done; ABin swap and status; per-column SIP
// control and ABin slot select; a weight-plane request (valid, column mask,
// plane, set) that the weight memory answers in the same cycle on the row
// weight buses; ABout capture. The loop order (weight plane outermost), the
// stall rules and the cycle overheads are this design's choices; the CVL and
// FCL schedules and cascading follow the paper.
module loom_ctrl
  import loom_pkg::*;
#(
  parameter int COLS_P  = COLS,
  parameter int PBASE_P = PBASE
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  cfg_t                      cfg,
  output logic                      busy,
  output logic                      done,
  output logic                      en,
  output logic                      stall,
  // ABin
  input  logic                      ab_full,
  input  logic [PW_W-1:0]           ab_dyn_prec,
  input  logic                      ab_cur_tag,
  output logic                      ab_swap,
  output logic [$clog2(COLS_P)-1:0] col_slot [COLS_P],
  // SIP array
  output col_ctl_t                  col_ctl  [COLS_P],
  // weight memory request
  output logic                      w_req_valid,
  output logic [COLS_P-1:0]         w_req_mask,
  output logic [BIT_W-1:0]          w_req_plane,
  output logic [SET_W-1:0]          w_req_set,
  // ABout
  input  logic                      ao_busy,
  output logic                      ao_cap,
  // observation
  output logic                      casc_step
);
  typedef enum logic [2:0] {S_IDLE, S_PRIME, S_RUN, S_DRAIN, S_CASC, S_CAP} state_e;

  state_e           state_q;
  cfg_t             cfg_q;
  logic [BIT_W-1:0] b_q, i_q;
  logic [SET_W-1:0] s_q;
  logic [4:0]       cnt_q;
  col_ctl_t         lead;
  col_ctl_t         dly_q [COLS_P];

  logic             fcl;
  logic [PW_W-1:0]  next_len;
  logic             last_group, group_end;

  assign fcl        = (cfg_q.mode == MODE_FCL);
  // Length of the group about to be taken from ABin.
  assign next_len   = fcl ? PW_W'(PBASE_P) : (cfg_q.dyn_en ? ab_dyn_prec : cfg_q.pa);
  assign last_group = (b_q == '0) && (s_q == cfg_q.n_sets - 1'b1);
  assign group_end  = (state_q == S_RUN) && (i_q == '0);

  // Column 0 control.
  logic [BIT_W-1:0] top_q;
  always_comb begin
    lead = '0;
    if (state_q == S_RUN) begin
      lead.wr_load   = (i_q == top_q);
      lead.ac1_first = (i_q == top_q);
      lead.ac1_last  = (i_q == '0);
      lead.neg       = (b_q == BIT_W'(cfg_q.pw - 1'b1));
      lead.op        = (lead.neg && s_q == '0) ? AC2_LOAD :
                       (s_q == '0)             ? AC2_SHIFT_ADD : AC2_ADD;
      lead.abit      = i_q;
      lead.tag       = ab_cur_tag;
      lead.wplane    = b_q;
      lead.wset      = s_q;
    end
  end

  // Stall conditions.
  always_comb begin
    stall = 1'b0;
    if (group_end && !last_group && !ab_full) stall = 1'b1;
    if (state_q == S_CAP && ao_busy)          stall = 1'b1;
  end
  assign en = !stall;

  assign ab_swap = ((state_q == S_PRIME) && ab_full) ||
                   (group_end && !last_group && ab_full);
  assign ao_cap  = (state_q == S_CAP) && !ao_busy;
  assign done    = ao_cap;
  assign busy    = (state_q != S_IDLE);
  assign casc_step = (state_q == S_CASC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cfg_q   <= '0;
      b_q     <= '0;
      s_q     <= '0;
      i_q     <= '0;
      top_q   <= '0;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          cfg_q   <= cfg;
          b_q     <= BIT_W'(cfg.pw - 1'b1);
          s_q     <= '0;
          state_q <= S_PRIME;
        end
        S_PRIME: if (ab_full) begin
          i_q     <= BIT_W'(next_len - 1'b1);
          top_q   <= BIT_W'(next_len - 1'b1);
          state_q <= S_RUN;
        end
        S_RUN: begin
          if (i_q != '0) begin
            i_q <= i_q - 1'b1;
          end else if (last_group) begin
            cnt_q   <= fcl ? 5'(COLS_P) : 5'd1;
            state_q <= S_DRAIN;
          end else if (ab_full) begin
            i_q   <= BIT_W'(next_len - 1'b1);
            top_q <= BIT_W'(next_len - 1'b1);
            if (s_q == cfg_q.n_sets - 1'b1) begin
              s_q <= '0;
              b_q <= b_q - 1'b1;
            end else begin
              s_q <= s_q + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == 5'd1) begin
            if (fcl && cfg_q.sn > 5'd1) begin
              cnt_q   <= 5'd1;
              state_q <= S_CASC;
            end else begin
              state_q <= S_CAP;
            end
          end
        end
        S_CASC: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == cfg_q.sn - 1'b1) state_q <= S_CAP;
        end
        S_CAP: if (!ao_busy) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // FCL stagger: column c sees column 0's control delayed by c cycles.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS_P; c++) dly_q[c] <= '0;
    end else if (en) begin
      // Only FCL uses the delay line; in a CVL it flushes to zero so no
      // stale control reaches a following FCL tile.
      dly_q[0] <= fcl ? lead : '0;
      for (int c = 1; c < COLS_P; c++) dly_q[c] <= dly_q[c-1];
    end
  end

  always_comb begin
    for (int c = 0; c < COLS_P; c++) begin
      if (!fcl || c == 0) col_ctl[c] = lead;
      else                col_ctl[c] = dly_q[c-1];
      col_ctl[c].cas_add = (state_q == S_CASC) &&
                           ((5'(c) & (cfg_q.sn - 1'b1)) == cnt_q);
      col_slot[c] = fcl ? $clog2(COLS_P)'(5'(c) & (cfg_q.sn - 1'b1)) : $clog2(COLS_P)'(c);
    end
  end

  // Weight plane request: all columns in a CVL, the loading column in an FCL.
  always_comb begin
    w_req_mask  = '0;
    w_req_plane = '0;
    w_req_set   = '0;
    for (int c = COLS_P - 1; c >= 0; c--)
      if (col_ctl[c].wr_load) begin
        w_req_mask[c] = 1'b1;
        w_req_plane   = col_ctl[c].wplane;
        w_req_set     = col_ctl[c].wset;
      end
    w_req_valid = |w_req_mask;
  end

  // In an FCL at most one column loads weights per cycle.
  assert property (@(posedge clk) disable iff (!rst_n) fcl |-> $onehot0(w_req_mask));
endmodule
