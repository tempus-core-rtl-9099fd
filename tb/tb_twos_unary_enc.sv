// tb_twos_unary_enc: exhaustive check of the 2s-unary encoder for INT8.
//
// For every weight magnitude 0..128 the encoder is loaded and its pulses are
// counted until busy falls. Checks: 2*(#unary_a) + (#a_is_odd) equals the
// magnitude; the stream lasts exactly ceil(mag/2) cycles; the two pulse
// outputs are never high together and a_is_odd only comes on the last cycle.
module tb_twos_unary_enc;
  localparam int unsigned W = 8;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         load = 1'b0;
  logic [W-1:0] mag = '0;
  logic         unary_a, a_is_odd, busy;
  int           checks = 0, failures = 0;

  twos_unary_enc #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int value, cycles, ones;
    bit both, odd_early;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int m = 0; m <= 2**(W-1); m++) begin
      @(negedge clk);
      mag  = W'(m);
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      value = 0; cycles = 0; both = 0; odd_early = 0; ones = 0;
      while (busy) begin
        if (unary_a && a_is_odd) both = 1;
        if (ones > 0) odd_early = 1;     // a pulse after an odd pulse
        value += 2 * int'(unary_a) + int'(a_is_odd);
        if (a_is_odd) ones++;
        cycles++;
        @(negedge clk);
      end
      check(value == m, $sformatf("mag %0d: stream worth %0d", m, value));
      check(cycles == (m + 1) / 2, $sformatf("mag %0d: %0d cycles, expected %0d", m, cycles, (m + 1) / 2));
      check(!both && !odd_early && ones == (m % 2), $sformatf("mag %0d: pulse shape", m));
      check(!unary_a && !a_is_odd, $sformatf("mag %0d: pulse after busy fell", m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
