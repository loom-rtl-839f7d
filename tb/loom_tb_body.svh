// Shared body of the end-to-end Loom tile testbenches. The including module
// declares localparams R (rows) and C (columns) and instantiates loom_top as
// 'dut' with the signals declared here. Behavioural weight memory and
// activation memory models live here; expected results are plain integer
// inner products computed in the testbench.
  import loom_pkg::*;
  localparam int MAXS = 4;              // sets of 16 inputs per output, at most
  localparam int MAXI = 16 * MAXS * 16; // inputs, at most (16 cascade slices)
  localparam int MAXO = R * C;          // outputs, at most
  localparam int IDXW = $clog2(R * C / 16);

  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic busy, done, stall, casc_step, ab_swap;
  logic w_req_valid;
  logic [C-1:0] w_req_mask;
  logic [BIT_W-1:0] w_req_plane;
  logic [SET_W-1:0] w_req_set;
  logic [LANES-1:0] w_bits [R];
  logic a_wr_valid, a_wr_ready, a_wr_last;
  logic [BIT_W-1:0] a_wr_plane;
  logic [C*LANES-1:0] a_wr_bits;
  logic out_ready, out_valid;
  logic [IDXW-1:0] out_index;
  logic [15:0] out_planes [PBASE];

  int checks = 0, failures = 0;
  int n_stall = 0, n_casc = 0, n_swap = 0, n_dynshort = 0, n_pool = 0, n_cvl = 0, n_fcl = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (stall) n_stall++;
    if (casc_step) n_casc++;
    if (ab_swap) n_swap++;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- layer data ----
  int W [MAXO][MAXI];   // signed weights, output x input
  int A [C][MAXI];      // unsigned activations, window x input (FCL uses A[0])
  longint EXP [R][C];   // expected OR value per SIP (-1 sentinel not used)
  bit     EXPV [R][C];  // SIP result is checked
  cfg_t   cur;

  // Output index held by SIP(r,c) and input held by lane l of set s in column c.
  function automatic int out_of(int r, int c);
    return (cur.mode == MODE_FCL) ? r + R * (c / int'(cur.sn)) : r;
  endfunction
  function automatic int in_of(int c, int s, int l);
    return (cur.mode == MODE_FCL) ? ((s * int'(cur.sn)) + (c % int'(cur.sn))) * 16 + l : s * 16 + l;
  endfunction

  // ---- weight memory model: answers in the same cycle ----
  int wm_col;
  always_comb begin
    wm_col = 0;
    for (int k = C - 1; k >= 0; k--) if (w_req_mask[k]) wm_col = k;
    for (int r = 0; r < R; r++) w_bits[r] = '0;
    if (w_req_valid)
      for (int r = 0; r < R; r++)
        for (int l = 0; l < 16; l++)
          w_bits[r][l] = 1'((W[out_of(r, wm_col)][in_of(wm_col, int'(w_req_set), l)] >>> w_req_plane) & 1);
  end

  // ---- activation memory model: pushes groups in the controller's order ----
  int feed_gap = 0;        // random idle cycles between planes (0: none)
  int feed_planes = 16;    // planes pushed per group
  bit feed_go = 0;
  task automatic feed_layer();
    int nplanes_w = int'(cur.pw);
    int ns = int'(cur.n_sets);
    for (int b = nplanes_w - 1; b >= 0; b--)
      for (int s = 0; s < ns; s++)
        for (int p = 0; p < feed_planes; p++) begin
          if (feed_gap > 0) begin
            a_wr_valid = 0;
            repeat ($urandom_range(0, feed_gap)) @(posedge clk);
            #1;
          end
          a_wr_valid = 1;
          a_wr_plane = BIT_W'(p);
          a_wr_last  = (p == feed_planes - 1);
          for (int c = 0; c < C; c++)
            for (int l = 0; l < 16; l++)
              a_wr_bits[c * 16 + l] = (cur.mode == MODE_FCL)
                  ? 1'((A[0][((s * int'(cur.sn)) + c % int'(cur.sn)) * 16 + l] >> p) & 1)
                  : 1'((A[c][s * 16 + l] >> p) & 1);
          do @(posedge clk); while (!a_wr_ready);
          #1;
        end
    a_wr_valid = 0; a_wr_last = 0;
  endtask

  // ---- output collector ----
  int got [R][C];
  int n_words = 0;
  always @(posedge clk) if (out_valid) begin
    int col, rg;
    col = int'(out_index) / (R / 16);
    rg  = int'(out_index) % (R / 16);
    for (int j = 0; j < 16; j++) begin
      int v;
      v = 0;
      for (int b = 0; b < 16; b++) v |= int'(out_planes[b][j]) << b;
      got[rg * 16 + j][col] = v;
    end
    n_words++;
  end

  function automatic int afu_ref(longint v, int prec, int sh);
    longint x;
    x = (v <<< prec) >>> sh;
    if (x < 0) return 0;
    if (x > 65535) return 65535;
    return int'(x);
  endfunction

  // Build random data and expectations for one tile.
  task automatic make_layer(input cfg_t c_in, input int amax_bits, input bit small_groups);
    int ni, no;
    cur = c_in;
    ni = (cur.mode == MODE_FCL) ? int'(cur.sn) * int'(cur.n_sets) * 16 : int'(cur.n_sets) * 16;
    no = (cur.mode == MODE_FCL) ? R * C / int'(cur.sn) : R;
    for (int o = 0; o < no; o++)
      for (int i = 0; i < ni; i++) begin
        W[o][i] = int'($urandom_range(0, (1 << int'(cur.pw)) - 1));
        if (W[o][i] >= (1 << (int'(cur.pw) - 1))) W[o][i] -= (1 << int'(cur.pw));
      end
    for (int c = 0; c < C; c++)
      for (int i = 0; i < ni; i++) begin
        int bits;
        // with small_groups, set 0 uses only 3 bits so run-time detection trims it
        bits = (small_groups && i < 16) ? 3 : amax_bits;
        A[c][i] = int'($urandom_range(0, (1 << bits) - 1));
      end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        longint acc = 0;
        int oi = out_of(r, c);
        if (cur.mode == MODE_FCL) begin
          for (int i = 0; i < ni; i++) acc += longint'(W[oi][i]) * A[0][i];
          EXPV[r][c] = (c % int'(cur.sn)) == int'(cur.sn) - 1;
        end else begin
          for (int i = 0; i < ni; i++) acc += longint'(W[r][i]) * A[c][i];
          EXPV[r][c] = 1;
        end
        EXP[r][c] = acc;
      end
    if (cur.pool)  // max with the left neighbour (zero at column 0)
      for (int r = 0; r < R; r++)
        for (int c = C - 1; c >= 0; c--)
          if (c == 0) EXP[r][c] = (EXP[r][c] > 0) ? EXP[r][c] : 0;
          else        EXP[r][c] = (EXP[r][c-1] > EXP[r][c]) ? EXP[r][c-1] : EXP[r][c];
  endtask

  // Run one tile; returns cycles from start to done.
  task automatic run_tile(input cfg_t c_in, input int amax_bits, input bit small_groups,
                          input int expect_cycles, input string name);
    longint t0;
    make_layer(c_in, amax_bits, small_groups);
    n_words = 0;
    fork
      feed_layer();
      begin
        // start once the first group is in ABin (the memory was ahead)
        do begin @(posedge clk); #1; end while (a_wr_ready && !(cur.mode == MODE_CVL && feed_gap > 0));
        cfg = c_in; start = 1;
        @(posedge clk); #1; start = 0;
        t0 = cyc;
        while (!done) begin @(posedge clk); #1; end
        if (expect_cycles > 0)
          check(cyc - t0 == longint'(expect_cycles),
                $sformatf("%s: %0d cycles, expected %0d", name, cyc - t0, expect_cycles));
        else $display("%s: %0d cycles", name, cyc - t0);
      end
    join
    while (n_words < R * C / 16) @(posedge clk);
    @(posedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (EXPV[r][c])
          check(got[r][c] == afu_ref(EXP[r][c], int'(cur.prec), int'(cur.afu_shift)),
                $sformatf("%s r=%0d c=%0d got %0d exp %0d (raw %0d)", name, r, c, got[r][c],
                          afu_ref(EXP[r][c], int'(cur.prec), int'(cur.afu_shift)), EXP[r][c]));
    if (cur.mode == MODE_FCL) n_fcl++; else n_cvl++;
    if (cur.pool) n_pool++;
  endtask

  function automatic cfg_t mk(mode_e m, int pw, int pa, bit dyn, int ns, int sn, bit pool, int prec, int sh);
    cfg_t c;
    c = '0;
    c.mode = m; c.pw = PW_W'(pw); c.pa = PW_W'(pa); c.dyn_en = dyn; c.n_sets = SET_W'(ns);
    c.sn = 5'(sn); c.pool = pool; c.prec = 4'(prec); c.afu_shift = 6'(sh);
    return c;
  endfunction
