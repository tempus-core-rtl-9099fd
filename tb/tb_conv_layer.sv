// tb_conv_layer: a 3x3 convolution layer, the shape of a CNN workload,
// run through the whole core at its default size.
//
// Layer: 8x8 input map, 16 input channels, 16 kernels of 3x3x16, stride 1,
// zero padding 1, INT8 weights and activations. The layer is fed as a 1x1
// convolution over im2col cubes: for output pixel (y,x) and tap t = 3*dy+dx
// the buffer holds the 16 channels of input pixel (y+dy-1, x+dx-1) (zeros
// outside the map) as channel group t, so C = 144 and G = 9. Weight group t
// of kernel j holds that kernel's 16 weights for tap t. Expected outputs are
// computed here with the direct convolution sum, independently of the
// im2col layout. The test also records the average PCU compute cycles per
// feature operation, which is set by each 16x16 weight tile's largest
// magnitude.
module tb_conv_layer;
  import tempus_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned N = 16;
  localparam int unsigned W = 8;
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned GRP_W = 8;
  localparam int unsigned ACC_W = 32;
  localparam int unsigned KER_W = $clog2(K + 1);
  localparam int H = 8, WD = 8, C = 16, KS = 3;
  localparam int NP = H * WD;
  localparam int G = KS * KS * C / N;

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
  cb_model #(.N(N), .W(W), .ADDR_W(ADDR_W), .DEPTH(1024)) u_cb (
    .clk, .rd_en(cb_rd_en), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ifm [H][WD][C];
  int wts [K][KS][KS][C];
  int expected [NP][K];
  int results = 0;
  int feat_ops = 0;
  longint busy_cycles = 0;

  always @(posedge clk) begin
    if (rst_n && dut.u_pcu.state == 1'b1 && dut.u_pcu.cell_busy != '0) busy_cycles++;
    if (rst_n && dut.c2p_valid && dut.c2p_ready && dut.c2p_op == OP_FEAT) feat_ops++;
    if (rst_n && res_valid && res_ready) begin
      bit ok;
      int p;
      ok = 1'b1;
      p = int'(res_pos);
      checks++;
      if (p != results) begin
        failures++;
        $display("FAIL: result %0d has position %0d", results, p);
      end else begin
        for (int j = 0; j < K; j++) if (int'(res_data[j]) != expected[p][j]) ok = 1'b0;
        checks++;
        if (!ok) begin
          failures++;
          $display("FAIL: output pixel %0d", p);
        end
        checks++;
        if (res_last != (p == NP - 1)) begin
          failures++;
          $display("FAIL: res_last at pixel %0d", p);
        end
      end
      results++;
    end
  end

  initial begin
    int wb;
    wb = NP * G;
    // data: activations, and weights with magnitudes typical of a trained
    // INT8 layer (mostly small, a few large)
    foreach (ifm[y, x, c]) ifm[y][x][c] = int'($urandom_range(0, 255)) - 128;
    foreach (wts[j, dy, dx, c]) begin
      int r;
      r = int'($urandom_range(0, 99));
      wts[j][dy][dx][c] = (r < 90) ? int'($urandom_range(0, 40)) - 20 : int'($urandom_range(0, 255)) - 128;
    end
    // direct convolution
    for (int y = 0; y < H; y++)
      for (int x = 0; x < WD; x++)
        for (int j = 0; j < K; j++) begin
          int s;
          s = 0;
          for (int dy = 0; dy < KS; dy++)
            for (int dx = 0; dx < KS; dx++) begin
              int yy, xx;
              yy = y + dy - 1;
              xx = x + dx - 1;
              if (yy >= 0 && yy < H && xx >= 0 && xx < WD)
                for (int c = 0; c < C; c++) s += ifm[yy][xx][c] * wts[j][dy][dx][c];
            end
          expected[y * WD + x][j] = s;
        end
    // im2col layout in the buffer
    for (int y = 0; y < H; y++)
      for (int x = 0; x < WD; x++)
        for (int t = 0; t < G; t++) begin
          logic [N*W-1:0] e;
          int yy, xx;
          yy = y + t / KS - 1;
          xx = x + t % KS - 1;
          for (int c = 0; c < N; c++)
            e[c*W +: W] = (yy >= 0 && yy < H && xx >= 0 && xx < WD) ? W'(ifm[yy][xx][c]) : '0;
          u_cb.mem[(y * WD + x) * G + t] = e;
        end
    for (int t = 0; t < G; t++)
      for (int j = 0; j < K; j++) begin
        logic [N*W-1:0] e;
        for (int c = 0; c < N; c++) e[c*W +: W] = W'(wts[j][t / KS][t % KS][c]);
        u_cb.mem[wb + t * K + j] = e;
      end

    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_num_pos = POS_W'(NP);
    cfg_num_grp = GRP_W'(G);
    cfg_num_ker = KER_W'(K);
    cfg_feat_base = '0;
    cfg_wt_base = ADDR_W'(wb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    checks++;
    if (results != NP) begin
      failures++;
      $display("FAIL: %0d results, expected %0d", results, NP);
    end
    $display("3x3 conv %0dx%0dx%0d -> %0d kernels: %0d feature operations, %0.1f compute cycles each on average",
             H, WD, C, K, feat_ops, real'(busy_cycles) / real'(feat_ops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
