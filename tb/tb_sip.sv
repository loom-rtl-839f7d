// tb_sip: self-checking test of one serial inner-product unit.
//
// Random signed weights (precision pw) and unsigned activations (precision
// pa) for up to 4 sets of 16 inputs are fed bit-serially, weight bit planes
// most significant first and, inside each plane, the sets in order and the
// activation bits most significant first. The OR must equal the integer inner
// product exactly pw*pa*sets + 1 cycles after the first bit. Also checked: a
// cascade step (OR += i_nbout), the pooling max and the output shifter.
module tb_sip;
  import loom_pkg::*;
  logic clk = 0, rst_n = 0, en = 1;
  logic [15:0] w_bits, a_bits;
  logic wr_load, ac1_first, ac1_last, neg, cas_add, pool;
  ac2_op_e op;
  logic [3:0] prec;
  logic signed [OR_W-1:0] i_nbout, o_nbout, o_out;
  int checks = 0, failures = 0;

  sip dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int w [4][16];
  int a [4][16];

  task automatic run(input int pw, input int pa, input int ns);
    longint expect_v = 0;
    int cyc = 0;
    for (int s = 0; s < ns; s++)
      for (int l = 0; l < 16; l++) begin
        w[s][l] = int'($urandom_range(0, (1 << pw) - 1));
        if (w[s][l] >= (1 << (pw - 1))) w[s][l] -= (1 << pw);  // sign extend
        a[s][l] = int'($urandom_range(0, (1 << pa) - 1));
        expect_v += longint'(w[s][l]) * a[s][l];
      end
    for (int b = pw - 1; b >= 0; b--)
      for (int s = 0; s < ns; s++)
        for (int i = pa - 1; i >= 0; i--) begin
          for (int l = 0; l < 16; l++) begin
            w_bits[l] = 1'((w[s][l] >>> b) & 1);
            a_bits[l] = 1'((a[s][l] >> i) & 1);
          end
          wr_load   = (i == pa - 1);
          ac1_first = (i == pa - 1);
          ac1_last  = (i == 0);
          neg       = (b == pw - 1);
          op        = (b == pw - 1 && s == 0) ? AC2_LOAD : (s == 0) ? AC2_SHIFT_ADD : AC2_ADD;
          @(posedge clk); #1; cyc++;
        end
    {wr_load, ac1_first, ac1_last} = '0;
    op = AC2_NONE; a_bits = '0;
    @(posedge clk); #1; cyc++;
    check(o_nbout == OR_W'(expect_v), $sformatf("pw=%0d pa=%0d ns=%0d got %0d exp %0d", pw, pa, ns, o_nbout, expect_v));
    check(cyc == pw * pa * ns + 1, "latency");
  endtask

  initial begin
    {wr_load, ac1_first, ac1_last, neg, cas_add, pool} = '0;
    op = AC2_NONE; prec = 0; i_nbout = 0; w_bits = 0; a_bits = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    run(2, 2, 1);
    run(16, 16, 1);
    run(1, 1, 2);
    for (int k = 0; k < 40; k++) run(int'($urandom_range(1, 16)), int'($urandom_range(1, 16)), int'($urandom_range(1, 4)));
    // cascade: OR += i_nbout
    begin
      logic signed [OR_W-1:0] or_prev;
      or_prev = o_nbout;
      i_nbout = -OR_W'(12345); cas_add = 1;
      @(posedge clk); #1; cas_add = 0;
      check(o_nbout == or_prev - OR_W'(12345), "cascade add");
      // pooling and output shift
      pool = 1; i_nbout = or_prev + 100; #1;
      check(o_out == or_prev + 100, "pool picks neighbour");
      i_nbout = or_prev - 12445 - 1; #1;
      check(o_out == o_nbout, "pool keeps own");
      pool = 0; prec = 3; #1;
      check(o_out == (o_nbout <<< 3), "prec shift");
      // stall freezes OR
      en = 0; i_nbout = 7; cas_add = 1; @(posedge clk); #1;
      check(o_nbout == or_prev - OR_W'(12345), "stall holds");
      en = 1; cas_add = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
