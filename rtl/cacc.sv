// cacc: convolution accumulator.
//
// A convolution with C = G*N input channels needs G partial sums per kernel
// and output position, one from each channel group. The PCU delivers them
// as K partial sums at a time, tagged with the output position and with
// first/last-group flags. CACC keeps an assembly buffer of STRIPE rows of K
// accumulators, indexed by the position modulo STRIPE: the first group of a
// position overwrites its row, later groups add to it, and the last group's
// sum goes, instead of back into the row, into the output register as one
// K-wide result (one value per kernel) together with the position and the
// layer_last flag. The sequencer never has more than STRIPE positions in
// flight, so rows are never shared.
//
// Handshake: in_ready is low only while a finished result waits in the
// output register and res_ready is low (back-pressure from the consumer,
// NVDLA's post-processing in the full accelerator). A result accepted at
// edge 0 is visible after edge 0 (one register stage).
//
// The paper says only that CACC accumulates the cells' partial sums; the
// assembly buffer, the STRIPE depth, the 32-bit accumulators and the
// handshake are this design's choices. STRIPE must be a power of two.
module cacc
  import tempus_pkg::*;
#(
  parameter int unsigned K      = 16,
  parameter int unsigned PSUM_W = 20,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned STRIPE = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [PSUM_W-1:0] in_psum [K],
  input  pcu_tag_t                 in_tag,
  output logic                     res_valid,
  input  logic                     res_ready,
  output logic signed [ACC_W-1:0]  res_data [K],
  output logic [POS_W-1:0]         res_pos,
  output logic                     res_last
);

  localparam int unsigned RW = (STRIPE > 1) ? $clog2(STRIPE) : 1;

  logic signed [ACC_W-1:0] abuf [STRIPE][K];
  logic signed [ACC_W-1:0] sum  [K];
  logic [RW-1:0]           row;
  logic                    accept;

  always_comb begin
    in_ready = !res_valid || res_ready;
    accept   = in_valid && in_ready;
    row      = RW'(in_tag.pos % STRIPE);
    for (int j = 0; j < K; j++) begin
      sum[j] = (in_tag.first ? '0 : abuf[row][j]) + ACC_W'(in_psum[j]);
    end
  end

  always_ff @(posedge clk) begin
    if (accept && !in_tag.last) begin
      for (int j = 0; j < K; j++) abuf[row][j] <= sum[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_pos   <= '0;
      res_last  <= 1'b0;
      for (int j = 0; j < K; j++) res_data[j] <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (accept && in_tag.last) begin
        res_valid <= 1'b1;
        res_pos   <= in_tag.pos;
        res_last  <= in_tag.layer_last;
        for (int j = 0; j < K; j++) res_data[j] <= sum[j];
      end
    end
  end

  a_res_hold: assert property (
    @(posedge clk) disable iff (!rst_n) res_valid && !res_ready |=> res_valid && $stable(res_pos)
  ) else $error("cacc: result changed before it was taken");

endmodule
