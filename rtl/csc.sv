// csc: convolution sequence controller (modified for the tub PE array).
//
// Walks one 1x1 convolution layer and feeds the PCU from the convolution
// buffer (CB). The layer has P output positions, C = G*N input channels in
// G channel groups, and NK <= K kernels. Each CB entry is one 1x1xN cube of
// N signed W-bit values. The layout this sequencer assumes is
//   feature cube of position p, group g : feat_base + p*G + g
//   weight cube of kernel j, group g    : wt_base + g*NK + j
// Positions are processed in stripes of at most STRIPE positions. For each
// stripe and each group g the sequencer first writes the NK weight cubes of
// group g into PE cells 0..NK-1 (OP_WT), then broadcasts the stripe's
// feature cubes of group g (OP_FEAT, cell mask = NK low bits), each tagged
// with its position and first/last-group flags, so the accumulator can sum
// the groups. When G = 1 the weights stay cached across stripes and are
// written only once.
//
// Each cube costs one CB read (cb_rd_en/cb_rd_addr; the CB answers on
// cb_rd_data one cycle later and holds it until the next read) and one PCU
// handshake; the PCU's own multi-cycle latency dominates. The cube data
// goes to the PCU straight from cb_rd_data, which the buffer holds, so the
// sequencer needs no data register of its own. start (one cycle,
// while idle) latches the configuration; busy stays high until the last
// command has been accepted. A start with a zero size is ignored.
//
// From the paper: the CSC broadcasts feature data from the CB to the K
// cells, each cell caching a different kernel's weight cube; the feature
// cube is sent as a channel vector, which is the "transposed" feature of
// W x F^T = accum(W (.) F). The CB layout, stripes, ordering and
// configuration interface are this design's choices: NVDLA's own CSC is far
// more general (strides, padding, kernel sizes above 1x1) and is not
// described in the paper.
module csc
  import tempus_pkg::*;
#(
  parameter int unsigned K      = 16,
  parameter int unsigned N      = 16,
  parameter int unsigned W      = 8,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned GRP_W  = 8,
  parameter int unsigned STRIPE = 16,
  parameter int unsigned KER_W  = $clog2(K + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // layer configuration
  input  logic                start,
  input  logic [POS_W-1:0]    cfg_num_pos,  // P
  input  logic [GRP_W-1:0]    cfg_num_grp,  // G
  input  logic [KER_W-1:0]    cfg_num_ker,  // NK, 1..K
  input  logic [ADDR_W-1:0]   cfg_feat_base,
  input  logic [ADDR_W-1:0]   cfg_wt_base,
  output logic                busy,
  // convolution buffer read port
  output logic                cb_rd_en,
  output logic [ADDR_W-1:0]   cb_rd_addr,
  input  logic [N*W-1:0]      cb_rd_data,
  // commands to the PCU
  output logic                pcu_valid,
  input  logic                pcu_ready,
  output pcu_op_e             pcu_op,
  output logic [K-1:0]        pcu_sel,
  output logic signed [W-1:0] pcu_data [N],
  output pcu_tag_t            pcu_tag
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_ISSUE} state_e;

  state_e             state;
  pcu_op_e            phase;
  logic [POS_W-1:0]   num_pos, sb, p, len;
  logic [GRP_W-1:0]   num_grp, g;
  logic [KER_W-1:0]   num_ker, j;
  logic [ADDR_W-1:0]  feat_base, wt_base;
  logic               issued;

  always_comb begin
    len = ((num_pos - sb) > POS_W'(STRIPE)) ? POS_W'(STRIPE) : (num_pos - sb);
    cb_rd_en   = (state == S_RD);
    cb_rd_addr = (phase == OP_WT)
               ? ADDR_W'(wt_base + ADDR_W'(g) * ADDR_W'(num_ker) + ADDR_W'(j))
               : ADDR_W'(feat_base + ADDR_W'(sb + p) * ADDR_W'(num_grp) + ADDR_W'(g));
    pcu_valid = (state == S_ISSUE);
    pcu_op    = phase;
    for (int i = 0; i < N; i++) pcu_data[i] = cb_rd_data[i*W +: W];
    pcu_sel = '0;
    if (phase == OP_WT) begin
      pcu_sel = K'(1) << j;
    end else begin
      for (int c = 0; c < K; c++) pcu_sel[c] = (KER_W'(c) < num_ker);
    end
    pcu_tag.pos        = sb + p;
    pcu_tag.first      = (g == '0);
    pcu_tag.last       = (g == num_grp - GRP_W'(1));
    pcu_tag.layer_last = pcu_tag.last && (sb + p == num_pos - POS_W'(1));
    issued = pcu_valid && pcu_ready;
    busy   = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      phase     <= OP_WT;
      num_pos   <= '0;
      num_grp   <= '0;
      num_ker   <= '0;
      feat_base <= '0;
      wt_base   <= '0;
      sb        <= '0;
      p         <= '0;
      g         <= '0;
      j         <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start && cfg_num_pos != '0 && cfg_num_grp != '0 && cfg_num_ker != '0
              && cfg_num_ker <= KER_W'(K)) begin
            num_pos   <= cfg_num_pos;
            num_grp   <= cfg_num_grp;
            num_ker   <= cfg_num_ker;
            feat_base <= cfg_feat_base;
            wt_base   <= cfg_wt_base;
            sb        <= '0;
            p         <= '0;
            g         <= '0;
            j         <= '0;
            phase     <= OP_WT;
            state     <= S_RD;
          end
        end
        S_RD: state <= S_ISSUE;
        S_ISSUE: begin
          if (issued) begin
            state <= S_RD;
            if (phase == OP_WT) begin
              if (j + KER_W'(1) < num_ker) begin
                j <= j + KER_W'(1);
              end else begin
                j     <= '0;
                p     <= '0;
                phase <= OP_FEAT;
              end
            end else if (p + POS_W'(1) < len) begin
              p <= p + POS_W'(1);
            end else if (g + GRP_W'(1) < num_grp) begin
              g     <= g + GRP_W'(1);
              p     <= '0;
              phase <= OP_WT;
            end else if (sb + POS_W'(STRIPE) < num_pos) begin
              sb    <= sb + POS_W'(STRIPE);
              g     <= '0;
              p     <= '0;
              // a single group's weights are still cached in the cells
              phase <= (num_grp == GRP_W'(1)) ? OP_FEAT : OP_WT;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
