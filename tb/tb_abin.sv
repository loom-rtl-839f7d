// tb_abin: input activation buffer, reduced to 4 columns. Random groups are
// written one bit plane per cycle; checks the full flag (also in the cycle
// of the last plane), the run-time precision of the shadow group, that every
// column reads the right slot, bit and generation (current or previous)
// after swaps, and that the shadow is cleared by a swap.
module tb_abin;
  localparam int C = 4, L = 16;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, wr_last = 0, swap = 0, full, cur_tag;
  logic [3:0] wr_plane = 0;
  logic [C*L-1:0] wr_bits = 0;
  logic [4:0] shadow_prec;
  logic [1:0] col_slot [C];
  logic [3:0] col_bit [C];
  logic col_tag [C];
  logic [L-1:0] a_bus [C];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  abin #(.COLS_P(C)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  int G [3][C*L];   // group k%3
  task automatic write_group(input int k, input int bits);
    int mx = 0, p;
    for (int i = 0; i < C * L; i++) begin
      G[k % 3][i] = (bits == 0) ? 0 : int'($urandom_range(0, (1 << bits) - 1));
      if (G[k % 3][i] > mx) mx = G[k % 3][i];
    end
    p = 1; while ((mx >> p) != 0) p++;
    for (int b = 0; b < 16; b++) begin
      @(negedge clk);
      wr_valid = 1; wr_plane = 4'(b); wr_last = (b == 15);
      for (int i = 0; i < C * L; i++) wr_bits[i] = 1'((G[k % 3][i] >> b) & 1);
      #1;
      if (b == 15) chk(full, "full in last-plane cycle");
      else chk(!full, "not full early");
    end
    @(negedge clk); wr_valid = 0; wr_last = 0; #1;
    chk(full && !wr_ready, "full after group");
    chk(int'(shadow_prec) == p, $sformatf("dyn prec %0d exp %0d", shadow_prec, p));
  endtask
  task automatic read_all(input bit tag, input int k);
    for (int t = 0; t < 40; t++) begin
      for (int c = 0; c < C; c++) begin
        col_slot[c] = 2'($urandom_range(0, C - 1));
        col_bit[c]  = 4'($urandom_range(0, 15));
        col_tag[c]  = tag;
      end
      #1;
      for (int c = 0; c < C; c++)
        for (int l = 0; l < L; l++)
          chk(a_bus[c][l] == 1'((G[k % 3][int'(col_slot[c]) * L + l] >> col_bit[c]) & 1), "read");
    end
  endtask
  initial begin
    for (int c = 0; c < C; c++) begin col_slot[c] = 0; col_bit[c] = 0; col_tag[c] = 0; end
    #12 rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      bit t_before;
      write_group(k, k % 17);
      @(negedge clk);
      t_before = cur_tag;
      swap = 1; @(negedge clk); swap = 0; #1;
      chk(cur_tag != t_before && !full, "swap flips tag, empties shadow");
      chk(shadow_prec == 5'd1, "shadow cleared");
      read_all(cur_tag, k);
      if (k > 0) read_all(!cur_tag, k - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
