// tb_transposer: random words of 16 activations; one cycle later plane b
// bit j must equal bit b of activation j, with valid and index following.
module tb_transposer;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [6:0] in_index, out_index;
  logic [15:0] in_act [16];
  logic [15:0] out_planes [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  transposer dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [15:0] prev [16];
    int pidx;
    in_index = 0;
    for (int j = 0; j < 16; j++) in_act[j] = 0;
    #12 rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      for (int j = 0; j < 16; j++) begin in_act[j] = 16'($urandom()); prev[j] = in_act[j]; end
      in_index = 7'(k); pidx = k; in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_index != 7'(pidx)) begin failures++; $display("FAIL valid/index"); end
      for (int b = 0; b < 16; b++)
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (out_planes[b][j] !== prev[j][b]) failures++;
        end
      in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
