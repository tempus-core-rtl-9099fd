// tb_cacc: convolution accumulator against a per-position sum of groups.
//
// Partial-sum streams are generated in the order the sequencer produces
// them (stripes of up to 16 positions; within a stripe, all positions of
// group 0, then group 1, ...). Each position's K results must equal the
// sum of its G partial sums, come out in position order with the right
// position number, and carry res_last only on the layer's final position.
// res_ready is dropped at random to check the back-pressure.
module tb_cacc;
  import tempus_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned PSUM_W = 20;
  localparam int unsigned ACC_W = 32;
  localparam int unsigned STRIPE = 16;

  logic                     clk = 1'b0;
  logic                     rst_n = 1'b0;
  logic                     in_valid = 1'b0, in_ready;
  logic signed [PSUM_W-1:0] in_psum [K];
  pcu_tag_t                 in_tag = '0;
  logic                     res_valid, res_ready = 1'b1;
  logic signed [ACC_W-1:0]  res_data [K];
  logic [POS_W-1:0]         res_pos;
  logic                     res_last;
  int                       checks = 0, failures = 0;

  cacc #(.K(K), .PSUM_W(PSUM_W), .ACC_W(ACC_W), .STRIPE(STRIPE)) dut (.*);

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
    int  pos;
    int  sum [K];
    bit  last;
  } res_t;
  res_t resq [$];
  int   backpressure = 0;

  always @(negedge clk) res_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    if (rst_n && res_valid && !res_ready) backpressure++;
    if (rst_n && res_valid && res_ready) begin
      res_t e;
      bit ok;
      ok = 1'b1;
      if (resq.size() == 0) check(1'b0, "unexpected result");
      else begin
        e = resq.pop_front();
        for (int j = 0; j < K; j++) if (int'(res_data[j]) != e.sum[j]) ok = 1'b0;
        check(ok, $sformatf("sums of position %0d", e.pos));
        check(int'(res_pos) == e.pos && res_last == e.last, $sformatf("position/last %0d", e.pos));
      end
    end
  end

  task automatic send(input int pos, input int g, input int ng, input int np, input int ps [K]);
    @(negedge clk);
    in_valid = 1'b1;
    for (int j = 0; j < K; j++) in_psum[j] = PSUM_W'(ps[j]);
    in_tag.pos = POS_W'(pos);
    in_tag.first = (g == 0);
    in_tag.last = (g == ng - 1);
    in_tag.layer_last = (g == ng - 1) && (pos == np - 1);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic layer(input int np, input int ng);
    int ps [K];
    int sums [STRIPE][K];
    for (int sb = 0; sb < np; sb += STRIPE) begin
      int len = (np - sb > STRIPE) ? STRIPE : np - sb;
      for (int g = 0; g < ng; g++) begin
        for (int p = 0; p < len; p++) begin
          for (int j = 0; j < K; j++) begin
            ps[j] = int'($urandom_range(0, 2**PSUM_W - 1)) - 2**(PSUM_W-1);
            sums[p][j] = (g == 0) ? ps[j] : sums[p][j] + ps[j];
          end
          if (g == ng - 1) begin
            res_t e;
            e.pos = sb + p;
            e.sum = sums[p];
            e.last = (sb + p == np - 1);
            resq.push_back(e);
          end
          send(sb + p, g, ng, np, ps);
        end
      end
    end
  endtask

  initial begin
    for (int j = 0; j < K; j++) in_psum[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    layer(5, 1);
    layer(16, 3);
    layer(40, 4);
    layer(17, 2);
    layer(3, 8);
    repeat (20) @(posedge clk);
    check(resq.size() == 0, "results missing");
    check(backpressure > 0, "back-pressure never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
