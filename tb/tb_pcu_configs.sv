// tb_pcu_configs: the PCU at the array sizes and precisions of the
// evaluation: 16 x n arrays with n = 4, 16 and 32 for INT8, INT4 and INT2,
// including the INT4 16 x 4 array that was taken through layout. Each
// instance is checked for exact partial sums and for the 2s-unary latency;
// each must also reach its precision's worst case of 2^(W-2) compute
// cycles (64 for INT8, 4 for INT4, 1 for INT2).
module tb_pcu_configs;
  localparam int NCFG = 8;
  localparam int CFG_N [NCFG] = '{4, 32, 4, 16, 32, 4, 16, 32};
  localparam int CFG_W [NCFG] = '{8, 8, 4, 4, 4, 2, 2, 2};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   c [NCFG], f [NCFG], ws [NCFG];
  logic d [NCFG];
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    pcu_cfg_tester #(.K(16), .N(CFG_N[g]), .W(CFG_W[g])) u_t (
      .clk, .rst_n, .checks(c[g]), .failures(f[g]), .worst_seen(ws[g]), .done(d[g])
    );
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int g = 0; g < NCFG; g++) all_done &= d[g];
    end while (!all_done);
    for (int g = 0; g < NCFG; g++) begin
      checks += c[g] + 1;
      failures += f[g];
      $display("16 x %0d INT%0d: %0d checks, %0d failures, worst case reached %0d times",
               CFG_N[g], CFG_W[g], c[g], f[g], ws[g]);
      if (ws[g] == 0) begin
        failures++;
        $display("FAIL: 16 x %0d INT%0d never reached its worst-case latency", CFG_N[g], CFG_W[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
