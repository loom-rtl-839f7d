// tb_loom_workloads: the precision profiles of the evaluated networks
// (NiN, AlexNet, GoogLeNet, VGG-S, VGG-M, VGG19; 100% accuracy profiles)
// on a reduced tile (16 rows x 4 columns). For every network, one
// convolutional tile per layer runs at that layer's activation precision and
// the network's convolutional weight precision, and one fully connected tile
// per FC layer runs at that layer's weight precision. Layer shapes are
// shortened to 2 sets of 16 inputs per output; every output activation and
// every cycle count (CVL: Pa*Pw*2 + 2, FCL: 16*Pw*2 + C + 1) is checked.
module tb_loom_workloads;
  localparam int R = 16;
  localparam int C = 4;
`include "loom_tb_body.svh"

  loom_top #(.ROWS_P(R), .COLS_P(C)) dut (.*);

  typedef struct {
    string name;
    int    pw_cvl;
    int    pa [16];
    int    n_cvl;
    int    pw_fcl [3];
    int    n_fcl;
  } net_t;

  net_t nets [6];

  initial begin
    nets[0] = '{"NiN",     11, '{8,8,8,9,7,8,8,9,9,8,8,8,0,0,0,0}, 12, '{0,0,0}, 0};
    nets[1] = '{"AlexNet", 11, '{9,8,5,5,7,0,0,0,0,0,0,0,0,0,0,0},  5, '{10,9,9}, 3};
    nets[2] = '{"GoogLeNet", 11, '{10,8,10,9,8,10,9,8,9,10,7,0,0,0,0,0}, 11, '{7,0,0}, 1};
    nets[3] = '{"VGG-S",   12, '{7,8,9,7,9,0,0,0,0,0,0,0,0,0,0,0},  5, '{10,9,9}, 3};
    nets[4] = '{"VGG-M",   12, '{7,7,7,8,7,0,0,0,0,0,0,0,0,0,0,0},  5, '{10,8,8}, 3};
    nets[5] = '{"VGG19",   12, '{12,12,12,11,12,10,11,11,13,12,13,13,13,13,13,13}, 16, '{10,9,9}, 3};
    cfg = '0; a_wr_valid = 0; a_wr_last = 0; a_wr_plane = 0; a_wr_bits = 0; out_ready = 1;
    #22 rst_n = 1;
    foreach (nets[n]) begin
      for (int L = 0; L < nets[n].n_cvl; L++) begin
        automatic int pa = nets[n].pa[L];
        automatic int pw = nets[n].pw_cvl;
        feed_planes = pa;
        run_tile(mk(MODE_CVL, pw, pa, 0, 2, 1, 0, 0, pw + pa - 4), pa, 0, pa * pw * 2 + 2,
                 $sformatf("%s conv%0d", nets[n].name, L + 1));
      end
      for (int L = 0; L < nets[n].n_fcl; L++) begin
        automatic int pw = nets[n].pw_fcl[L];
        feed_planes = 16;
        run_tile(mk(MODE_FCL, pw, 16, 0, 2, 1, 0, 0, pw + 8), 16, 0, 16 * pw * 2 + C + 1,
                 $sformatf("%s fc%0d", nets[n].name, L + 1));
      end
    end
    check(n_cvl == 54 && n_fcl == 13, "all layers ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
