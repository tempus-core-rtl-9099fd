// tempus_core: temporal-unary-binary convolution core (CSC + PCU + CACC).
//
// A drop-in for the convolution core of an NVDLA-style accelerator. The
// sequencer (csc) reads weight and feature cubes from the convolution
// buffer, caches one weight cube per PE cell and broadcasts feature cubes;
// the PE cell unit (pcu) multiplies them with tub multipliers, taking
// ceil(max|w|/2) cycles per feature cube; the accumulator (cacc) sums the
// partial sums of the channel groups and emits, per output position, one
// 32-bit result per kernel.
//
// Interface: the layer configuration (what NVDLA's configuration block would
// program) and the convolution buffer's read port are plain ports; results
// leave on a valid/ready stream towards post-processing. done pulses when the
// result marked res_last has been taken. See csc for the buffer layout.
//
// Default sizes are the paper's main configuration: 16 cells of 16 INT8
// tub multipliers (a 16x16 PE array). STRIPE, ADDR_W, GRP_W and ACC_W are
// this design's choices.
module tempus_core
  import tempus_pkg::*;
#(
  parameter int unsigned K      = 16,
  parameter int unsigned N      = 16,
  parameter int unsigned W      = 8,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned GRP_W  = 8,
  parameter int unsigned STRIPE = 16,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned KER_W  = $clog2(K + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // layer configuration
  input  logic                    start,
  input  logic [POS_W-1:0]        cfg_num_pos,
  input  logic [GRP_W-1:0]        cfg_num_grp,
  input  logic [KER_W-1:0]        cfg_num_ker,
  input  logic [ADDR_W-1:0]       cfg_feat_base,
  input  logic [ADDR_W-1:0]       cfg_wt_base,
  output logic                    busy,
  output logic                    done,
  // convolution buffer read port
  output logic                    cb_rd_en,
  output logic [ADDR_W-1:0]       cb_rd_addr,
  input  logic [N*W-1:0]          cb_rd_data,
  // results to post-processing
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic signed [ACC_W-1:0] res_data [K],
  output logic [POS_W-1:0]        res_pos,
  output logic                    res_last
);

  localparam int unsigned PSUM_W = 2*W + $clog2(N);

  logic                     c2p_valid, c2p_ready;
  pcu_op_e                  c2p_op;
  logic [K-1:0]             c2p_sel;
  logic signed [W-1:0]      c2p_data [N];
  pcu_tag_t                 c2p_tag;

  logic                     p2a_valid, p2a_ready;
  logic signed [PSUM_W-1:0] p2a_psum [K];
  pcu_tag_t                 p2a_tag;

  logic                     csc_busy;
  logic                     run_q;

  csc #(
    .K(K), .N(N), .W(W), .ADDR_W(ADDR_W), .GRP_W(GRP_W), .STRIPE(STRIPE), .KER_W(KER_W)
  ) u_csc (
    .clk, .rst_n, .start,
    .cfg_num_pos, .cfg_num_grp, .cfg_num_ker, .cfg_feat_base, .cfg_wt_base,
    .busy       (csc_busy),
    .cb_rd_en, .cb_rd_addr, .cb_rd_data,
    .pcu_valid  (c2p_valid),
    .pcu_ready  (c2p_ready),
    .pcu_op     (c2p_op),
    .pcu_sel    (c2p_sel),
    .pcu_data   (c2p_data),
    .pcu_tag    (c2p_tag)
  );

  pcu #(.K(K), .N(N), .W(W), .PSUM_W(PSUM_W)) u_pcu (
    .clk, .rst_n,
    .in_valid  (c2p_valid),
    .in_ready  (c2p_ready),
    .in_op     (c2p_op),
    .in_sel    (c2p_sel),
    .in_data   (c2p_data),
    .in_tag    (c2p_tag),
    .out_valid (p2a_valid),
    .out_ready (p2a_ready),
    .out_psum  (p2a_psum),
    .out_tag   (p2a_tag)
  );

  cacc #(.K(K), .PSUM_W(PSUM_W), .ACC_W(ACC_W), .STRIPE(STRIPE)) u_cacc (
    .clk, .rst_n,
    .in_valid  (p2a_valid),
    .in_ready  (p2a_ready),
    .in_psum   (p2a_psum),
    .in_tag    (p2a_tag),
    .res_valid, .res_ready, .res_data, .res_pos, .res_last
  );

  // busy from the accepted start until the last result has been taken
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                 run_q <= 1'b0;
    else if (res_valid && res_ready && res_last) run_q <= 1'b0;
    else if (csc_busy)                          run_q <= 1'b1;
  end

  assign busy = run_q || csc_busy;
  assign done = res_valid && res_ready && res_last;

endmodule
