// tb_dyn_prec: checks the per-group precision detector against a reference
// that finds the largest activation of the group and counts its bits
// (at least 1), over random groups of every precision 0..16 bits.
module tb_dyn_prec;
  localparam int N = 256;
  logic [15:0] act [N];
  logic [15:0] ones;
  logic [4:0]  prec;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  dyn_prec dut (.act, .ones, .prec);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int k = 0; k < 200; k++) begin
      int bits, mx, ref_p;
      logic [15:0] ref_or;
      bits = k % 17;
      mx = 0; ref_or = '0;
      for (int i = 0; i < N; i++) begin
        act[i] = (bits == 0) ? 16'd0 : 16'($urandom_range(0, (1 << bits) - 1));
        if ($urandom_range(0, 3) == 0 && bits > 0) act[i] = 16'($urandom_range(0, (1 << (bits - 1)) - 1));
        if (int'(act[i]) > mx) mx = int'(act[i]);
        ref_or |= act[i];
      end
      ref_p = 1;
      while ((mx >> ref_p) != 0) ref_p++;
      #1;
      checks++;
      if (int'(prec) != ref_p) begin failures++; $display("FAIL prec %0d exp %0d", prec, ref_p); end
      checks++;
      if (ones != ref_or) begin failures++; $display("FAIL ones"); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
