// tb_tempus_core: whole convolution core at its default size (16 PE cells
// of 16 INT8 tub multipliers) running 1x1 convolution layers end to end.
//
// The convolution buffer model holds random INT8 feature and weight cubes
// in the layout the sequencer expects. For each layer the testbench
// computes every output, out[p][j] = sum_c f[p][c] * w[j][c], with plain
// integer arithmetic and compares it with the core's result stream; the
// post-processing side (res_ready) applies random back-pressure in some
// layers. The PCU's multi-cycle latency is checked on every feature
// operation: m + 1 cycles from acceptance to registered result, m being
// the largest ceil(|w|/2) over the enabled weight array, unless the result
// had to wait for the accumulator. The mechanisms of the design are
// counted and each must occur at least once: PCU busy stall of the
// sequencer, PCU output stall, post-processing back-pressure, multi-group
// accumulation, several stripes, weights kept across stripes, disabled
// cells (fewer kernels than cells), an all-zero (silent) weight array, and
// the INT8 worst case of 64 cycles.
module tb_tempus_core;
  import tempus_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned N = 16;
  localparam int unsigned W = 8;
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned GRP_W = 8;
  localparam int unsigned ACC_W = 32;
  localparam int unsigned KER_W = $clog2(K + 1);
  localparam int unsigned DEPTH = 4096;

  logic                    clk = 1'b0;
  logic                    rst_n = 1'b0;
  logic                    start = 1'b0;
  logic [POS_W-1:0]        cfg_num_pos = '0;
  logic [GRP_W-1:0]        cfg_num_grp = '0;
  logic [KER_W-1:0]        cfg_num_ker = '0;
  logic [ADDR_W-1:0]       cfg_feat_base = '0, cfg_wt_base = '0;
  logic                    busy, done;
  logic                    cb_rd_en;
  logic [ADDR_W-1:0]       cb_rd_addr;
  logic [N*W-1:0]          cb_rd_data;
  logic                    res_valid, res_ready = 1'b1;
  logic signed [ACC_W-1:0] res_data [K];
  logic [POS_W-1:0]        res_pos;
  logic                    res_last;
  int                      checks = 0, failures = 0;

  tempus_core dut (.*);
  cb_model #(.N(N), .W(W), .ADDR_W(ADDR_W), .DEPTH(DEPTH)) u_cb (
    .clk, .rd_en(cb_rd_en), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters --------------------------------------------------
  int n_busy_stall = 0, n_out_stall = 0, n_backpressure = 0, n_multigroup = 0;
  int n_stripes = 0, n_wt_reuse = 0, n_disabled = 0, n_silent = 0, n_worst = 0;
  bit backpressure_on = 1'b0;

  always @(negedge clk) res_ready <= backpressure_on ? ($urandom_range(0, 3) == 0) : 1'b1;

  // ---- PCU latency monitor ---------------------------------------------------
  int cell_m [K];   // ceil(max|w|/2) of each cell's cached weight cube

  for (genvar j = 0; j < K; j++) begin : g_cm
    always_comb begin
      cell_m[j] = 0;
      for (int i = 0; i < N; i++) begin
        int a;
        a = int'(dut.u_pcu.g_cell[j].u_cell.wt_q[i]);
        if (a < 0) a = -a;
        if ((a + 1) / 2 > cell_m[j]) cell_m[j] = (a + 1) / 2;
      end
    end
  end

  longint cycle = 0;
  longint acc_cycle;
  int     acc_m;
  bit     waited;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (dut.c2p_valid && !dut.c2p_ready) n_busy_stall++;
      if (dut.u_pcu.done && !dut.u_pcu.out_free) begin
        n_out_stall++;
        waited = 1'b1;
      end
      if (res_valid && !res_ready) n_backpressure++;
      if (dut.u_pcu.capture && !waited)
        check(cycle - acc_cycle == longint'(acc_m + 1),
              $sformatf("PCU latency %0d, expected m + 1 = %0d", cycle - acc_cycle, acc_m + 1));
      if (dut.c2p_valid && dut.c2p_ready && dut.c2p_op == OP_FEAT) begin
        int m;
        m = 0;
        for (int j = 0; j < K; j++)
          if (dut.c2p_sel[j] && cell_m[j] > m) m = cell_m[j];
        acc_cycle = cycle;
        acc_m = m;
        waited = 1'b0;
        if (m == 0) n_silent++;
        if (m == 64) n_worst++;
        if (dut.c2p_sel != '1) n_disabled++;
      end
    end
  end

  // ---- result checker ---------------------------------------------------------
  int expq [$];     // flattened expected results: pos, then K values
  int n_results = 0;
  bit saw_done;

  always @(posedge clk) begin
    if (rst_n && done) saw_done = 1'b1;
    if (rst_n && res_valid && res_ready) begin
      bit ok;
      int pos;
      ok = 1'b1;
      if (expq.size() < K + 2) check(1'b0, "unexpected result");
      else begin
        pos = expq.pop_front();
        check(int'(res_pos) == pos, $sformatf("position %0d, expected %0d", res_pos, pos));
        check(res_last == (expq.pop_front() != 0), "res_last");
        for (int j = 0; j < K; j++) begin
          int e;
          e = expq.pop_front();
          if (int'(res_data[j]) != e) begin
            ok = 1'b0;
            if (failures < 5) $display("  pos %0d kernel %0d: %0d expected %0d", pos, j, res_data[j], e);
          end
        end
        check(ok, $sformatf("results of position %0d", pos));
        n_results++;
      end
    end
  end

  // ---- layer generator -----------------------------------------------------------
  // wkind: 0 random INT8, 1 small magnitudes, 2 all zero, 3 extremes (-128)
  function automatic int rand_w(input int wkind);
    case (wkind)
      0: return int'($urandom_range(0, 255)) - 128;
      1: return int'($urandom_range(0, 14)) - 7;
      2: return 0;
      default: return ($urandom_range(0, 3) == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
    endcase
  endfunction

  task automatic layer(input int np, input int ng, input int nk, input int wkind, input bit bp);
    int fb = 0;
    int wb = np * ng;
    int f [][];
    int w [][];
    f = new[np];
    foreach (f[p]) f[p] = new[ng * N];
    w = new[nk];
    foreach (w[j]) w[j] = new[ng * N];
    for (int p = 0; p < np; p++)
      for (int g = 0; g < ng; g++) begin
        logic [N*W-1:0] e;
        for (int i = 0; i < N; i++) begin
          f[p][g*N + i] = int'($urandom_range(0, 255)) - 128;
          e[i*W +: W] = W'(f[p][g*N + i]);
        end
        u_cb.mem[fb + p * ng + g] = e;
      end
    for (int g = 0; g < ng; g++)
      for (int j = 0; j < nk; j++) begin
        logic [N*W-1:0] e;
        for (int i = 0; i < N; i++) begin
          w[j][g*N + i] = rand_w(wkind);
          e[i*W +: W] = W'(w[j][g*N + i]);
        end
        u_cb.mem[wb + g * nk + j] = e;
      end
    // expected results in the order the core emits them (position order)
    for (int p = 0; p < np; p++) begin
      expq.push_back(p);
      expq.push_back(p == np - 1);
      for (int j = 0; j < K; j++) begin
        int s = 0;
        if (j < nk) for (int c = 0; c < ng * N; c++) s += f[p][c] * w[j][c];
        expq.push_back(s);
      end
    end
    if (ng > 1) n_multigroup++;
    if (np > 16) n_stripes++;
    if (np > 16 && ng == 1) n_wt_reuse++;
    backpressure_on = bp;
    saw_done = 1'b0;
    @(negedge clk);
    cfg_num_pos = POS_W'(np);
    cfg_num_grp = GRP_W'(ng);
    cfg_num_ker = KER_W'(nk);
    cfg_feat_base = ADDR_W'(fb);
    cfg_wt_base = ADDR_W'(wb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    check(saw_done, "done pulse");
    check(expq.size() == 0, $sformatf("%0d expected words left", expq.size()));
    expq.delete();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    layer(4, 1, 16, 0, 0);     // one group, all cells
    layer(20, 3, 16, 0, 1);    // stripes, groups, back-pressure
    layer(10, 2, 5, 1, 0);     // five kernels: 11 cells gated; short latency
    layer(35, 1, 12, 3, 0);    // weights reused across 3 stripes; -128 weights
    layer(6, 2, 16, 2, 1);     // silent array
    layer(12, 4, 9, 0, 1);
    check(n_busy_stall > 0, "no sequencer stall on a busy PCU");
    check(n_out_stall > 0, "no PCU output stall");
    check(n_backpressure > 0, "no post-processing back-pressure");
    check(n_multigroup > 0 && n_stripes > 0 && n_wt_reuse > 0, "layer shapes");
    check(n_disabled > 0, "no gated cells");
    check(n_silent > 0, "no silent weight array");
    check(n_worst > 0, "INT8 worst case never reached");
    $display("results %0d; stalls: pcu busy %0d, pcu out %0d, back-pressure %0d",
             n_results, n_busy_stall, n_out_stall, n_backpressure);
    $display("ops: gated %0d, silent %0d, worst-case %0d", n_disabled, n_silent, n_worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
