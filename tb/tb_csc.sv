// tb_csc: sequencer command stream against an independent list.
//
// The convolution buffer model is filled with random cubes. For each layer
// configuration the testbench builds, with its own loops, the list of
// commands the PCU should receive (weight loads of group g into cells
// 0..NK-1, then the stripe's feature cubes of group g with mask and tags;
// weights written once when there is a single group) and compares every
// accepted command (op, cell select, data, tag) with it. pcu_ready is
// dropped at random. A start with a zero size must be ignored.
module tb_csc;
  import tempus_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned N = 16;
  localparam int unsigned W = 8;
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned GRP_W = 8;
  localparam int unsigned STRIPE = 16;
  localparam int unsigned KER_W = $clog2(K + 1);

  logic                clk = 1'b0;
  logic                rst_n = 1'b0;
  logic                start = 1'b0;
  logic [POS_W-1:0]    cfg_num_pos = '0;
  logic [GRP_W-1:0]    cfg_num_grp = '0;
  logic [KER_W-1:0]    cfg_num_ker = '0;
  logic [ADDR_W-1:0]   cfg_feat_base = '0, cfg_wt_base = '0;
  logic                busy;
  logic                cb_rd_en;
  logic [ADDR_W-1:0]   cb_rd_addr;
  logic [N*W-1:0]      cb_rd_data;
  logic                pcu_valid, pcu_ready = 1'b0;
  pcu_op_e             pcu_op;
  logic [K-1:0]        pcu_sel;
  logic signed [W-1:0] pcu_data [N];
  pcu_tag_t            pcu_tag;
  int                  checks = 0, failures = 0;

  csc #(.K(K), .N(N), .W(W), .ADDR_W(ADDR_W), .GRP_W(GRP_W), .STRIPE(STRIPE)) dut (.*);
  cb_model #(.N(N), .W(W), .ADDR_W(ADDR_W), .DEPTH(2048)) u_cb (
    .clk, .rd_en(cb_rd_en), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data)
  );

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

  typedef struct {
    pcu_op_e        op;
    logic [K-1:0]   sel;
    logic [N*W-1:0] data;
    pcu_tag_t       tag;
  } cmd_t;
  cmd_t cmdq [$];
  int   mismatches = 0;

  always @(negedge clk) pcu_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) begin
    if (rst_n && pcu_valid && pcu_ready) begin
      cmd_t e;
      logic [N*W-1:0] d;
      for (int i = 0; i < N; i++) d[i*W +: W] = pcu_data[i];
      if (cmdq.size() == 0) check(1'b0, "unexpected command");
      else begin
        e = cmdq.pop_front();
        check(pcu_op == e.op && pcu_sel == e.sel && d == e.data &&
              (pcu_op == OP_WT || pcu_tag == e.tag),
              $sformatf("command: op %0d sel %h pos %0d", pcu_op, pcu_sel, pcu_tag.pos));
      end
    end
  end

  task automatic layer(input int np, input int ng, input int nk, input int fb, input int wb);
    bit wloaded = 0;
    for (int sb = 0; sb < np; sb += STRIPE) begin
      int len = (np - sb > STRIPE) ? STRIPE : np - sb;
      for (int g = 0; g < ng; g++) begin
        if (!(ng == 1 && wloaded)) begin
          for (int j = 0; j < nk; j++) begin
            cmd_t c;
            c.op = OP_WT;
            c.sel = K'(1) << j;
            c.data = u_cb.mem[wb + g * nk + j];
            c.tag = '0;
            cmdq.push_back(c);
          end
          wloaded = 1;
        end
        for (int p = 0; p < len; p++) begin
          cmd_t c;
          c.op = OP_FEAT;
          c.sel = K'((33'(1) << nk) - 1);
          c.data = u_cb.mem[fb + (sb + p) * ng + g];
          c.tag.pos = POS_W'(sb + p);
          c.tag.first = (g == 0);
          c.tag.last = (g == ng - 1);
          c.tag.layer_last = (g == ng - 1) && (sb + p == np - 1);
          cmdq.push_back(c);
        end
      end
    end
    @(negedge clk);
    cfg_num_pos = POS_W'(np);
    cfg_num_grp = GRP_W'(ng);
    cfg_num_ker = KER_W'(nk);
    cfg_feat_base = ADDR_W'(fb);
    cfg_wt_base = ADDR_W'(wb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy == (np != 0 && ng != 0 && nk != 0), "busy after start");
    while (busy) @(negedge clk);
    check(cmdq.size() == 0, $sformatf("%0d commands missing", cmdq.size()));
  endtask

  initial begin
    for (int a = 0; a < 2048; a++)
      for (int i = 0; i < N * W; i += 32) u_cb.mem[a][i +: 32] = $urandom();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    layer(20, 3, 5, 0, 1000);
    layer(16, 1, 16, 100, 1500);
    layer(33, 1, 7, 200, 1600);
    layer(7, 4, 1, 300, 1700);
    layer(0, 2, 4, 0, 0);
    layer(9, 2, 16, 1200, 1900);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
