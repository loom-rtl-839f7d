// tb_afu: checks ReLU, right shift and 16-bit saturation of the activation
// function unit against an integer reference on random and edge values.
module tb_afu;
  import loom_pkg::*;
  logic signed [OR_W-1:0] in [16];
  logic [5:0] shift;
  logic [15:0] out [16];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  afu dut (.in, .shift, .out);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int k = 0; k < 300; k++) begin
      longint v [16];
      shift = 6'($urandom_range(0, 20));
      for (int i = 0; i < 16; i++) begin
        v[i] = longint'($signed($urandom())) * longint'($urandom_range(0, 200));
        if (i == 0) v[i] = -1;
        if (i == 1) v[i] = 65535 << shift;
        if (i == 2) v[i] = 65536 << shift;
        in[i] = OR_W'(v[i]);
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        longint x, e;
        x = longint'(in[i]) >>> shift;
        e = (x < 0) ? 0 : (x > 65535) ? 65535 : x;
        checks++;
        if (longint'(out[i]) != e) begin failures++; $display("FAIL %0d -> %0d exp %0d", in[i], out[i], e); end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
