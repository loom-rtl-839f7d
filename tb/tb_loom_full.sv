// tb_loom_full: the Loom tile at its full size (128 x 16 SIPs, default
// parameters) through one convolutional tile (Pw=3, Pa=4, 2 sets of 16
// inputs, 16 windows x 128 filters) and one fully connected tile with
// 2-way cascading (Pw=2, 1024 outputs). Every output activation is compared
// with an integer reference and the cycle counts are checked.
module tb_loom_full;
  localparam int R = 128;
  localparam int C = 16;
`include "loom_tb_body.svh"

  loom_top dut (.*);

  initial begin
    cfg = '0; a_wr_valid = 0; a_wr_last = 0; a_wr_plane = 0; a_wr_bits = 0; out_ready = 1;
    #22 rst_n = 1;
    feed_planes = 4;
    run_tile(mk(MODE_CVL, 3, 4, 0, 2, 1, 0, 0, 2), 4, 0, 3*4*2 + 2, "full_cvl");
    feed_planes = 16;
    run_tile(mk(MODE_FCL, 2, 16, 0, 1, 2, 0, 0, 4), 16, 0, 16*2*1 + C + 2, "full_fcl_cas2");
    check(n_casc > 0 && n_swap > 0, "cascade and swaps happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
