// tb_loom_top: end-to-end test of a reduced Loom tile (16 rows x 4 columns).
//
// Runs convolutional tiles (profile precision, run-time precision, pooling,
// output shift) and fully connected tiles (with and without cascading),
// compares every output activation with an integer reference, checks the
// cycle counts from start to done (CVL: Pa*Pw per set of 16 inputs plus 2;
// FCL: 16*Pw per set plus C + sn, C columns, sn cascade slices) and counts the stall, cascade, swap and precision-trim
// events, failing if any never happened.
module tb_loom_top;
  localparam int R = 16;
  localparam int C = 4;
`include "loom_tb_body.svh"

  loom_top #(.ROWS_P(R), .COLS_P(C)) dut (.*);

  initial begin
    cfg = '0; a_wr_valid = 0; a_wr_last = 0; a_wr_plane = 0; a_wr_bits = 0; out_ready = 1;
    #22 rst_n = 1;
    // CVL, profile precision: Pw=2, Pa=2, 1 set  -> 2*2*1 + 2 cycles
    feed_planes = 2;
    run_tile(mk(MODE_CVL, 2, 2, 0, 1, 1, 0, 0, 0), 2, 0, 2*2*1 + 2, "cvl_2x2");
    feed_planes = 9;
    run_tile(mk(MODE_CVL, 11, 9, 0, 3, 1, 0, 0, 4), 9, 0, 11*9*3 + 2, "cvl_11x9");
    feed_planes = 16;
    run_tile(mk(MODE_CVL, 16, 16, 0, 2, 1, 0, 2, 8), 16, 0, 16*16*2 + 2, "cvl_16x16");
    // CVL, run-time precision: set 0 needs 3 bits only
    feed_planes = 3;
    run_tile(mk(MODE_CVL, 4, 8, 1, 2, 1, 0, 0, 0), 3, 0, 4*2*3 + 2, "cvl_dyn_all3");
    feed_planes = 7;
    begin
      int s0 = n_stall;
      run_tile(mk(MODE_CVL, 3, 7, 1, 2, 1, 0, 0, 0), 7, 1, 0, "cvl_dyn_mixed");
      n_dynshort += (n_stall > s0);  // a trimmed group finishes before the memory delivers the next
    end
    // CVL with max pooling
    run_tile(mk(MODE_CVL, 5, 7, 0, 1, 1, 1, 0, 0), 7, 0, 0, "cvl_pool");
    // FCL: 16 cycles per weight bit and set, staggered columns
    feed_planes = 16;
    run_tile(mk(MODE_FCL, 7, 16, 0, 2, 1, 0, 0, 6), 16, 0, 16*7*2 + C + 1, "fcl_w7");
    // FCL with cascading over 2 and 4 columns
    run_tile(mk(MODE_FCL, 9, 16, 0, 1, 2, 0, 0, 6), 16, 0, 16*9*1 + C + 2, "fcl_cas2");
    run_tile(mk(MODE_FCL, 8, 16, 0, 2, 4, 0, 0, 6), 16, 0, 16*8*2 + C + 4, "fcl_cas4");
    // slow activation memory: stalls
    feed_gap = 3;
    run_tile(mk(MODE_CVL, 3, 5, 0, 2, 1, 0, 0, 0), 5, 0, 0, "cvl_slow_feed");
    run_tile(mk(MODE_FCL, 3, 16, 0, 1, 1, 0, 0, 4), 16, 0, 0, "fcl_slow_feed");
    feed_gap = 0;
    // output port blocked for a while: results must wait in ABout
    out_ready = 0;
    fork
      begin repeat (200) @(posedge clk); #1 out_ready = 1; end
    join_none
    begin
      cfg_t c1 = mk(MODE_CVL, 2, 2, 0, 1, 1, 0, 0, 0);
      feed_planes = 2;
      run_tile(c1, 2, 0, 0, "cvl_out_blocked");
    end
    check(n_stall > 0, "stall happened");
    check(n_casc > 0, "cascade happened");
    check(n_swap > 0, "abin swap happened");
    check(n_dynshort > 0, "run-time precision trim happened");
    check(n_pool > 0 && n_cvl > 0 && n_fcl > 0, "pool, CVL and FCL modes ran");
    $display("events: stall=%0d cascade=%0d swap=%0d dyn_trim=%0d pool=%0d cvl=%0d fcl=%0d",
             n_stall, n_casc, n_swap, n_dynshort, n_pool, n_cvl, n_fcl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
