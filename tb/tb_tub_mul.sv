// tb_tub_mul: tub multiplier checked against the product a*b.
//
// A behavioural 2s-unary stream (floor(|a|/2) unary_a pulses, then one
// a_is_odd pulse when |a| is odd) drives the multiplier for every INT8
// weight a in -128..127 against a set of features b that covers 0, +-1,
// -128, 127 and random values. After the stream acc must equal a*b. The
// worked example of the paper's multiplier figure (value 4 in 2s-unary
// times binary 5 gives 20) is checked first.
module tb_tub_mul;
  localparam int unsigned W = 8;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b0;
  logic                  clear = 1'b0;
  logic                  a_neg = 1'b0, b_neg = 1'b0;
  logic [W-1:0]          b = '0;
  logic                  unary_a = 1'b0, a_is_odd = 1'b0;
  logic signed [2*W-1:0] acc;
  int                    checks = 0, failures = 0;

  tub_mul #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mul(input int a, input int bv);
    int am;
    am = (a < 0) ? -a : a;
    @(negedge clk);
    a_neg = (a < 0);
    b_neg = (bv < 0);
    b     = W'((bv < 0) ? -bv : bv);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int i = 0; i < am / 2; i++) begin
      unary_a = 1'b1;
      @(negedge clk);
    end
    unary_a = 1'b0;
    if (am % 2 == 1) begin
      a_is_odd = 1'b1;
      @(negedge clk);
      a_is_odd = 1'b0;
    end
    @(negedge clk);
    checks++;
    if (int'(acc) != a * bv) begin
      failures++;
      $display("FAIL: %0d * %0d gave %0d", a, bv, acc);
    end
  endtask

  initial begin
    int bs[$];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    mul(4, 5);
    mul(-4, 5);
    bs = '{0, 1, -1, 127, -128, 5, -77};
    repeat (5) bs.push_back(int'($urandom_range(0, 255)) - 128);
    for (int a = -128; a <= 127; a++)
      foreach (bs[i]) mul(a, bs[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
