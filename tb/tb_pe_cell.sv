// tb_pe_cell: one PE cell (16 INT8 tub multipliers) against a dot product.
//
// Random weight cubes (with zeros, -128 and 127 mixed in) are loaded and
// reused for several random feature cubes. For each operation the
// testbench counts the cycles busy stays high and compares them with
// ceil(max|w|/2), and compares psum with sum_i w[i]*f[i] computed here.
// A disabled cell (en low) must stay idle and give zero.
module tb_pe_cell;
  localparam int unsigned W = 8;
  localparam int unsigned N = 16;
  localparam int unsigned PSUM_W = 2*W + $clog2(N);

  logic                     clk = 1'b0;
  logic                     rst_n = 1'b0;
  logic                     wt_load = 1'b0, start = 1'b0, en = 1'b0;
  logic signed [W-1:0]      wt_in [N];
  logic signed [W-1:0]      feat_in [N];
  logic                     busy;
  logic signed [PSUM_W-1:0] psum;
  int                       checks = 0, failures = 0;

  pe_cell #(.W(W), .N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rand_val();
    int r = int'($urandom_range(0, 9));
    if (r == 0) return 0;
    if (r == 1) return -128;
    if (r == 2) return 127;
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  int w [N];

  task automatic load_weights(input int maxmag);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      w[i] = rand_val();
      if (w[i] > maxmag) w[i] = maxmag;
      if (w[i] < -maxmag) w[i] = -maxmag;
      wt_in[i] = W'(w[i]);
    end
    wt_load = 1'b1;
    @(negedge clk);
    wt_load = 1'b0;
  endtask

  task automatic run(input bit enable);
    int f [N];
    int expect_sum, m, cycles;
    expect_sum = 0; m = 0;
    for (int i = 0; i < N; i++) begin
      f[i] = rand_val();
      feat_in[i] = W'(f[i]);
      expect_sum += w[i] * f[i];
      if (((w[i] < 0 ? -w[i] : w[i]) + 1) / 2 > m) m = ((w[i] < 0 ? -w[i] : w[i]) + 1) / 2;
    end
    if (!enable) begin
      expect_sum = 0;
      m = 0;
    end
    en = enable;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    en = 1'b0;
    cycles = 0;
    while (busy) begin
      cycles++;
      @(negedge clk);
    end
    check(cycles == m, $sformatf("busy for %0d cycles, expected %0d", cycles, m));
    check(int'(psum) == expect_sum, $sformatf("psum %0d, expected %0d", psum, expect_sum));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      wt_in[i] = '0;
      feat_in[i] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      // limit some weight cubes to small magnitudes to vary the latency
      load_weights((t % 4 == 0) ? 128 : (t % 4 == 1) ? 7 : (t % 4 == 2) ? 1 : 0);
      for (int r = 0; r < 4; r++) run(1'b1);
      run(1'b0);
    end
    // the slowest weight in each lane position in turn
    for (int k = 0; k < N; k++) begin
      load_weights(3);
      @(negedge clk);
      w[k] = (k % 2) ? 100 : -99;
      wt_in[k] = W'(w[k]);
      wt_load = 1'b1;
      @(negedge clk);
      wt_load = 1'b0;
      run(1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
