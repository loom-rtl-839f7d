// tb_about: captures random SIP results into a reduced output buffer
// (16 rows x 4 columns), drains them with random back-pressure and checks
// every word's index, data and order, that busy holds for exactly the drain
// and that a capture while busy is ignored.
module tb_about;
  import loom_pkg::*;
  localparam int R = 16, C = 4;
  logic clk = 0, rst_n = 0, cap = 0, busy, rd_valid, rd_ready = 0;
  logic signed [OR_W-1:0] sip_out [R][C];
  logic [1:0] rd_index;
  logic signed [OR_W-1:0] rd_data [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  about #(.ROWS_P(R), .COLS_P(C)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic fill(output logic signed [OR_W-1:0] ref_v [R][C]);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        sip_out[r][c] = OR_W'($signed({$urandom(), $urandom()}));
        ref_v[r][c] = sip_out[r][c];
      end
  endtask
  initial begin
    logic signed [OR_W-1:0] ref_v [R][C];
    logic signed [OR_W-1:0] junk [R][C];
    #12 rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int w;
      @(negedge clk);
      fill(ref_v);
      cap = 1;
      @(negedge clk);
      cap = 0;
      checks++; if (!busy) begin failures++; $display("FAIL busy"); end
      // a capture while busy must not overwrite
      fill(junk); cap = 1; @(negedge clk); cap = 0;
      w = 0;
      while (w < R * C / 16) begin
        rd_ready = ($urandom_range(0, 2) != 0);
        #1;
        if (rd_valid && rd_ready) begin
          checks++;
          if (int'(rd_index) != w) begin failures++; $display("FAIL index"); end
          for (int j = 0; j < 16; j++) begin
            checks++;
            if (rd_data[j] != ref_v[(w % (R / 16)) * 16 + j][w / (R / 16)]) begin
              failures++; $display("FAIL data w=%0d j=%0d", w, j);
            end
          end
          w++;
        end
        @(negedge clk);
      end
      rd_ready = 0;
      checks++; if (busy || rd_valid) begin failures++; $display("FAIL still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
