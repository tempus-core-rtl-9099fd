// tb_pcu: PE cell unit (16 cells x 16 INT8 tub multipliers) end to end.
//
// A driver sends weight loads (to one or several cells) and feature
// operations with random cell-enable masks; a reference model keeps its own
// copy of every cell's weight cube and predicts, per feature operation, the
// 16 partial sums (zero for disabled cells), the tag and the latency
// m = max over enabled cells of ceil(|w|/2). A monitor takes results in
// order and compares them. Phase 1 keeps out_ready high and checks that the
// result of a feature command accepted at one clock edge is taken m + 2
// edges later (registered after m + 1). Phase 2 drops out_ready at random to
// exercise the stall; phase 3 sends all-zero weights (no pulses at all).
module tb_pcu;
  import tempus_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned N = 16;
  localparam int unsigned W = 8;
  localparam int unsigned PSUM_W = 2*W + $clog2(N);

  logic                     clk = 1'b0;
  logic                     rst_n = 1'b0;
  logic                     in_valid = 1'b0, in_ready;
  pcu_op_e                  in_op = OP_WT;
  logic [K-1:0]             in_sel = '0;
  logic signed [W-1:0]      in_data [N];
  pcu_tag_t                 in_tag = '0;
  logic                     out_valid, out_ready = 1'b1;
  logic signed [PSUM_W-1:0] out_psum [K];
  pcu_tag_t                 out_tag;
  int                       checks = 0, failures = 0;

  pcu #(.K(K), .N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model --------------------------------------------------
  typedef struct {
    int       psum [K];
    pcu_tag_t tag;
    int       m;
    longint   accept_cycle;
  } expect_t;

  int      wmodel [K][N];
  expect_t expq [$];
  longint  cycle = 0;
  bit      check_latency = 1'b1;
  int      stalls = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && in_valid && in_ready) begin
      if (in_op == OP_WT) begin
        for (int j = 0; j < K; j++)
          if (in_sel[j]) for (int i = 0; i < N; i++) wmodel[j][i] = int'(in_data[i]);
      end else begin
        expect_t e;
        e.m = 0;
        for (int j = 0; j < K; j++) begin
          e.psum[j] = 0;
          if (in_sel[j]) begin
            for (int i = 0; i < N; i++) begin
              int a;
              a = wmodel[j][i] < 0 ? -wmodel[j][i] : wmodel[j][i];
              e.psum[j] += wmodel[j][i] * int'(in_data[i]);
              if ((a + 1) / 2 > e.m) e.m = (a + 1) / 2;
            end
          end
        end
        e.tag = in_tag;
        e.accept_cycle = cycle;
        expq.push_back(e);
      end
    end
    if (rst_n && out_valid && !out_ready) stalls++;
    if (rst_n && out_valid && out_ready) begin
      expect_t e;
      bit ok;
      ok = 1'b1;
      if (expq.size() == 0) begin
        check(1'b0, "result with no command");
      end else begin
        e = expq.pop_front();
        for (int j = 0; j < K; j++)
          if (int'(out_psum[j]) != e.psum[j]) begin
            ok = 1'b0;
            $display("  cell %0d: %0d, expected %0d", j, out_psum[j], e.psum[j]);
          end
        check(ok, "partial sums");
        check(out_tag == e.tag, "tag");
        if (check_latency)
          check(cycle - e.accept_cycle == longint'(e.m + 2),
                $sformatf("latency %0d edges, expected m + 2 = %0d", cycle - e.accept_cycle, e.m + 2));
      end
    end
  end

  // ---- driver -------------------------------------------------------------
  task automatic send(input pcu_op_e op, input logic [K-1:0] sel, input int data [N], input pcu_tag_t tag);
    @(negedge clk);
    in_valid = 1'b1;
    in_op    = op;
    in_sel   = sel;
    in_tag   = tag;
    for (int i = 0; i < N; i++) in_data[i] = W'(data[i]);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  function automatic int rand_val(input int maxmag);
    int r = int'($urandom_range(0, 9));
    int v;
    if (r == 0) v = 0;
    else if (r == 1) v = -128;
    else if (r == 2) v = 127;
    else v = int'($urandom_range(0, 255)) - 128;
    if (v > maxmag) v = maxmag;
    if (v < -maxmag) v = -maxmag;
    return v;
  endfunction

  task automatic random_traffic(input int ops, input int zero_weights);
    int d [N];
    pcu_tag_t tag;
    for (int t = 0; t < ops; t++) begin
      if ($urandom_range(0, 2) == 0) begin
        int maxmag = zero_weights ? 0 : (($urandom_range(0, 1) == 1) ? 128 : int'($urandom_range(0, 9)));
        for (int i = 0; i < N; i++) d[i] = rand_val(maxmag);
        send(OP_WT, ($urandom_range(0, 3) == 0) ? K'($urandom()) : (K'(1) << $urandom_range(0, K - 1)), d, '0);
      end else begin
        for (int i = 0; i < N; i++) d[i] = rand_val(128);
        tag = pcu_tag_t'($urandom());
        send(OP_FEAT, ($urandom_range(0, 3) == 0) ? K'($urandom()) : '1, d, tag);
      end
    end
  endtask

  always @(negedge clk) if (!check_latency) out_ready <= ($urandom_range(0, 2) != 0);

  initial begin
    int d [N];
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // load every cell once so the model and the cells agree
    for (int j = 0; j < K; j++) begin
      for (int i = 0; i < N; i++) d[i] = rand_val(128);
      send(OP_WT, K'(1) << j, d, '0);
    end
    random_traffic(150, 0);
    repeat (200) @(posedge clk);
    check_latency = 1'b0;
    random_traffic(150, 0);
    check_latency = 1'b1;
    @(negedge clk);
    out_ready = 1'b1;
    repeat (200) @(posedge clk);
    random_traffic(20, 1);
    repeat (50) @(posedge clk);
    check(expq.size() == 0, "results missing at the end");
    check(stalls > 0, "the output stall never happened");
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
