// tb_sip_array: a reduced 4 x 3 SIP grid. Each row gets its own random
// signed weights on its weight bus, each column its own unsigned activations
// on its activation bus, all columns the same control; every SIP must hold
// the inner product of its row's weights and its column's activations after
// Pw*Pa + 1 cycles. Then cascade steps on columns 1 and 2 must add the
// left neighbour's result along each row, and pooling must output the max
// with the left neighbour.
module tb_sip_array;
  import loom_pkg::*;
  localparam int R = 4, C = 3;
  logic clk = 0, rst_n = 0, en = 1, pool = 0;
  logic [3:0] prec = 0;
  logic [15:0] w_bus [R];
  logic [15:0] a_bus [C];
  col_ctl_t ctl [C];
  logic signed [OR_W-1:0] out [R][C];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sip_array #(.ROWS_P(R), .COLS_P(C)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  int w [R][16];
  int a [C][16];
  longint e [R][C];
  initial begin
    for (int c = 0; c < C; c++) ctl[c] = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int pw = int'($urandom_range(1, 16)), pa = int'($urandom_range(1, 16));
      for (int r = 0; r < R; r++)
        for (int l = 0; l < 16; l++) begin
          w[r][l] = int'($urandom_range(0, (1 << pw) - 1));
          if (w[r][l] >= (1 << (pw - 1))) w[r][l] -= 1 << pw;
        end
      for (int c = 0; c < C; c++)
        for (int l = 0; l < 16; l++) a[c][l] = int'($urandom_range(0, (1 << pa) - 1));
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          e[r][c] = 0;
          for (int l = 0; l < 16; l++) e[r][c] += longint'(w[r][l]) * a[c][l];
        end
      @(negedge clk);
      for (int b = pw - 1; b >= 0; b--)
        for (int i = pa - 1; i >= 0; i--) begin
          for (int r = 0; r < R; r++) for (int l = 0; l < 16; l++) w_bus[r][l] = 1'((w[r][l] >>> b) & 1);
          for (int c = 0; c < C; c++) begin
            for (int l = 0; l < 16; l++) a_bus[c][l] = 1'((a[c][l] >> i) & 1);
            ctl[c] = '0;
            ctl[c].wr_load = (i == pa - 1); ctl[c].ac1_first = (i == pa - 1); ctl[c].ac1_last = (i == 0);
            ctl[c].neg = (b == pw - 1);
            ctl[c].op = (b == pw - 1) ? AC2_LOAD : AC2_SHIFT_ADD;
          end
          @(negedge clk);
        end
      for (int c = 0; c < C; c++) ctl[c] = '0;
      @(negedge clk);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          chk(out[r][c] == OR_W'(e[r][c]), $sformatf("sip(%0d,%0d) %0d exp %0d", r, c, out[r][c], e[r][c]));
      // pooling: max with the left neighbour
      pool = 1; #1;
      for (int r = 0; r < R; r++)
        chk(out[r][1] == ((e[r][0] > e[r][1]) ? OR_W'(e[r][0]) : OR_W'(e[r][1])), "pool");
      pool = 0;
      // cascade: column 1 adds column 0, then column 2 adds column 1
      ctl[1].cas_add = 1; @(negedge clk); ctl[1].cas_add = 0;
      ctl[2].cas_add = 1; @(negedge clk); ctl[2].cas_add = 0;
      for (int r = 0; r < R; r++)
        chk(out[r][2] == OR_W'(e[r][0] + e[r][1] + e[r][2]), "cascade sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
