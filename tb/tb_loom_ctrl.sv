// tb_loom_ctrl: the sequencer alone, with ABin and ABout replaced by simple
// status models. Checks for CVL tiles: one weight load per (plane, set),
// planes most significant first and sets in order, AC2 operations
// LOAD / SHIFT_ADD / ADD in the right places, the run-time precision used as
// group length, stalls while ABin is empty, and the tile length. For FCL
// tiles: column c repeats column 0's control exactly c cycles later, at most
// one column loads weights per cycle, and sn-1 cascade steps run with the
// right columns selected.
module tb_loom_ctrl;
  import loom_pkg::*;
  localparam int C = 16;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic busy, done, en, stall, ab_full, ab_cur_tag = 0, ab_swap, ao_busy = 0, ao_cap, casc_step;
  logic [PW_W-1:0] ab_dyn_prec;
  logic [3:0] col_slot [C];
  col_ctl_t col_ctl [C];
  logic w_req_valid;
  logic [C-1:0] w_req_mask;
  logic [BIT_W-1:0] w_req_plane;
  logic [SET_W-1:0] w_req_set;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  loom_ctrl dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // ABin model: full unless 'starve' is set; swap toggles the tag.
  bit starve = 0;
  assign ab_full = !starve;
  always @(posedge clk) if (ab_swap) ab_cur_tag <= ~ab_cur_tag;

  // Trace of column 0's control while enabled, per cycle.
  col_ctl_t hist [$];
  int t_en = 0;

  function automatic cfg_t mk(mode_e m, int pw, int pa, bit dyn, int ns, int sn);
    cfg_t c = '0;
    c.mode = m; c.pw = PW_W'(pw); c.pa = PW_W'(pa); c.dyn_en = dyn; c.n_sets = SET_W'(ns); c.sn = 5'(sn);
    return c;
  endfunction

  task automatic run_cvl(input int pw, input int pa, input int ns, input bit dyn, input int dynp, input bit gaps);
    int cycles = 0, loads = 0, exp_b, exp_s, nstall = 0;
    ab_dyn_prec = PW_W'(dynp);
    @(negedge clk); cfg = mk(MODE_CVL, pw, pa, dyn, ns, 1); start = 1;
    @(negedge clk); start = 0;
    exp_b = pw - 1; exp_s = 0;
    while (!done) begin
      starve = gaps && ($urandom_range(0, 3) == 0);
      #1;
      if (stall) nstall++;
      if (en && col_ctl[0].wr_load) begin
        chk(w_req_valid && w_req_mask == '1, "CVL loads all columns");
        chk(int'(col_ctl[0].wplane) == exp_b && int'(col_ctl[0].wset) == exp_s, "plane/set order");
        chk(col_ctl[0].neg == (exp_b == pw - 1), "neg on weight MSB");
        chk(col_ctl[0].op == ((exp_b == pw - 1 && exp_s == 0) ? AC2_LOAD : (exp_s == 0) ? AC2_SHIFT_ADD : AC2_ADD), "ac2 op");
        chk(int'(col_ctl[0].abit) == (dyn ? dynp : pa) - 1, "group starts at top bit");
        loads++;
        if (exp_s == ns - 1) begin exp_s = 0; exp_b--; end else exp_s++;
      end
      for (int c = 1; c < C; c++) chk(col_ctl[c] == col_ctl[0], "CVL columns in lockstep");
      cycles++;
      @(negedge clk);
    end
    starve = 0;
    chk(loads == pw * ns, $sformatf("loads %0d exp %0d", loads, pw * ns));
    if (!gaps) chk(cycles == pw * ns * (dyn ? dynp : pa) + 2, $sformatf("cvl cycles %0d", cycles));
    else chk(cycles >= pw * ns * pa + 2 + nstall && nstall > 0, "stalls lengthen the tile");
  endtask

  task automatic run_fcl(input int pw, input int ns, input int sn);
    col_ctl_t tr [C][$];
    int cycles = 0, nc = 0;
    @(negedge clk); cfg = mk(MODE_FCL, pw, 16, 0, ns, sn); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      #1;
      chk($onehot0(w_req_mask), "one column loads per cycle");
      for (int c = 0; c < C; c++) begin
        col_ctl_t x = col_ctl[c];
        x.cas_add = 0;
        tr[c].push_back(x);
        chk(int'(col_slot[c]) == c % sn, "slot");
      end
      if (casc_step) begin
        nc++;
        for (int c = 0; c < C; c++) chk(col_ctl[c].cas_add == ((c % sn) == nc), "cascade column select");
      end
      cycles++;
      @(negedge clk);
    end
    for (int c = 1; c < C; c++)
      for (int t = c; t < tr[c].size(); t++)
        chk(tr[c][t] == tr[0][t - c], $sformatf("column %0d lags column 0 by %0d", c, c));
    chk(nc == sn - 1, "cascade steps");
    chk(cycles == 16 * pw * ns + C + sn, $sformatf("fcl cycles %0d", cycles));
  endtask

  initial begin
    cfg = '0; ab_dyn_prec = 1;
    #12 rst_n = 1;
    run_cvl(2, 2, 1, 0, 1, 0);
    run_cvl(11, 9, 3, 0, 1, 0);
    run_cvl(4, 12, 2, 1, 5, 0);
    run_cvl(3, 4, 2, 0, 1, 1);
    run_fcl(3, 1, 1);
    run_fcl(2, 2, 4);
    run_fcl(2, 1, 16);
    // ABout busy at the end holds the tile
    ao_busy = 1;
    fork begin repeat (30) @(posedge clk); #1 ao_busy = 0; end join_none
    begin
      int cyc = 0;
      @(negedge clk); cfg = mk(MODE_CVL, 1, 1, 0, 1, 1); start = 1;
      @(negedge clk); start = 0;
      while (!done) begin cyc++; @(negedge clk); end
      chk(cyc > 20, "waits for ABout");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
