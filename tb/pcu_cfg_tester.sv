// pcu_cfg_tester: drives one PCU of a given size and precision with random
// weight and feature cubes and checks it (testbench helper).
//
// All K cells are loaded with random INT-W weight cubes (half of the loads
// contain the most negative value -2^(W-1), the worst case for latency),
// then OPS feature cubes are sent one at a time. Each result must equal the
// K dot products computed here, and must be taken m + 2 clock edges after
// the command (m = max ceil(|w|/2) over the array). worst_seen counts
// operations that hit the precision's worst case 2^(W-2) cycles.
// checks/failures are reported to the enclosing testbench; done rises
// when the run is over.
module pcu_cfg_tester #(
  parameter int unsigned K   = 16,
  parameter int unsigned N   = 4,
  parameter int unsigned W   = 4,
  parameter int unsigned OPS = 60
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   worst_seen,
  output logic done
);
  import tempus_pkg::*;
  localparam int unsigned PSUM_W = 2*W + $clog2(N);
  localparam int MAXV = 2**(W-1) - 1;
  localparam int MINV = -(2**(W-1));

  logic                     in_valid, in_ready;
  pcu_op_e                  in_op;
  logic [K-1:0]             in_sel;
  logic signed [W-1:0]      in_data [N];
  pcu_tag_t                 in_tag;
  logic                     out_valid;
  logic signed [PSUM_W-1:0] out_psum [K];
  pcu_tag_t                 out_tag;

  pcu #(.K(K), .N(N), .W(W)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_op, .in_sel, .in_data, .in_tag,
    .out_valid, .out_ready(1'b1), .out_psum, .out_tag
  );

  int wm [K][N];

  function automatic int rnd();
    return int'($urandom_range(0, 2**W - 1)) + MINV;
  endfunction

  initial begin
    int f [N];
    int m, t0, lat;
    checks = 0; failures = 0; worst_seen = 0; done = 1'b0;
    in_valid = 1'b0; in_op = OP_WT; in_sel = '0; in_tag = '0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    @(posedge rst_n);
    for (int op = 0; op < OPS; op++) begin
      if (op % 10 == 0) begin
        for (int j = 0; j < K; j++) begin
          for (int i = 0; i < N; i++) begin
            wm[j][i] = rnd();
            in_data[i] = W'(wm[j][i]);
          end
          if (op % 20 == 0) begin
            wm[j][0] = MINV;
            in_data[0] = W'(MINV);
          end
          @(negedge clk);
          in_valid = 1'b1; in_op = OP_WT; in_sel = K'(1) << j;
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
      m = 0;
      for (int i = 0; i < N; i++) begin
        f[i] = rnd();
        in_data[i] = W'(f[i]);
      end
      for (int j = 0; j < K; j++)
        for (int i = 0; i < N; i++) begin
          int a;
          a = wm[j][i] < 0 ? -wm[j][i] : wm[j][i];
          if ((a + 1) / 2 > m) m = (a + 1) / 2;
        end
      @(negedge clk);
      in_valid = 1'b1; in_op = OP_FEAT; in_sel = '1; in_tag = pcu_tag_t'(op);
      @(posedge clk);
      @(negedge clk);
      in_valid = 1'b0;
      lat = 1;
      @(posedge clk);
      while (!out_valid) begin
        lat++;
        @(posedge clk);
      end
      begin
        bit ok;
        ok = (out_tag == pcu_tag_t'(op));
        for (int j = 0; j < K; j++) begin
          int s;
          s = 0;
          for (int i = 0; i < N; i++) s += wm[j][i] * f[i];
          if (int'(out_psum[j]) != s) ok = 1'b0;
        end
        checks += 2;
        if (!ok) begin
          failures++;
          $display("FAIL: K=%0d N=%0d W=%0d op %0d: partial sums", K, N, W, op);
        end
        if (lat != m + 2) begin
          failures++;
          $display("FAIL: K=%0d N=%0d W=%0d op %0d: latency %0d, expected %0d", K, N, W, op, lat, m + 2);
        end
        if (m == 2**(W-2)) worst_seen++;
      end
    end
    done = 1'b1;
  end
endmodule
