// pe_cell: one Tempus PE cell (n tub multipliers and an adder tree).
//
// A PE cell computes one partial sum, the dot product of a cached 1x1xN
// weight cube and a 1x1xN feature cube: psum = sum_i wt[i] * feat[i].
// The cell's "Reg" holds the weight cube (written by wt_load, kept across
// many feature cubes) and, for the current operation, the feature cube split
// into sign and magnitude. start loads the feature cube, clears the N
// multiplier accumulators and loads the N 2s-unary encoders with the weight
// magnitudes; the encoders then pulse the tub multipliers for
// ceil(|wt[i]|/2) cycles each. busy is high while any encoder still has a
// pulse to send; once it falls, psum (the adder tree over the N
// accumulators) is the finished partial sum and stays there until the next
// start. A cell started with en low loads zero magnitudes, so it stays
// silent and its psum is zero: this stands in for NVDLA's gating of unused
// MAC cells when there are fewer kernels than cells.
//
// Structure (Reg, N tub multipliers, "+" tree, N 2s-unary blocks in the
// encoder) follows the paper. The enable input, sign/magnitude split of the
// feature in the register, and the rule that weights may only be written
// while the cell is idle are this design's choices.
//
// Timing: start at edge 0; psum valid after edge ceil(max|wt|/2), i.e. when
// busy is seen low in a cycle after start.
module pe_cell #(
  parameter int unsigned W      = 8,   // INT precision
  parameter int unsigned N      = 16,  // multipliers per cell
  parameter int unsigned PSUM_W = 2*W + $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wt_load, // write the weight cube
  input  logic signed [W-1:0]      wt_in   [N],
  input  logic                     start,   // begin one operation
  input  logic                     en,      // cell used by this operation
  input  logic signed [W-1:0]      feat_in [N],
  output logic                     busy,
  output logic signed [PSUM_W-1:0] psum
);

  // ---- Reg: cached weight cube and current feature cube -----------------
  logic signed [W-1:0] wt_q    [N];
  logic        [W-1:0] fmag_q  [N];
  logic                fneg_q  [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        wt_q[i]   <= '0;
        fmag_q[i] <= '0;
        fneg_q[i] <= 1'b0;
      end
    end else begin
      if (wt_load) begin
        for (int i = 0; i < N; i++) wt_q[i] <= wt_in[i];
      end
      if (start && en) begin
        for (int i = 0; i < N; i++) begin
          fneg_q[i] <= feat_in[i][W-1];
          fmag_q[i] <= feat_in[i][W-1] ? W'(-feat_in[i]) : W'(feat_in[i]);
        end
      end
    end
  end

  // ---- N x (2s-unary encoder + tub multiplier) -----------------------------
  logic                  enc_busy [N];
  logic signed [2*W-1:0] prod     [N];

  for (genvar i = 0; i < N; i++) begin : g_pe
    logic [W-1:0] wmag;
    logic         unary_a, a_is_odd;

    assign wmag = en ? (wt_q[i][W-1] ? W'(-wt_q[i]) : W'(wt_q[i])) : '0;

    twos_unary_enc #(.W(W)) u_enc (
      .clk      (clk),
      .rst_n    (rst_n),
      .load     (start),
      .mag      (wmag),
      .unary_a  (unary_a),
      .a_is_odd (a_is_odd),
      .busy     (enc_busy[i])
    );

    tub_mul #(.W(W)) u_tub (
      .clk      (clk),
      .rst_n    (rst_n),
      .clear    (start),
      .a_neg    (wt_q[i][W-1]),
      .b_neg    (fneg_q[i]),
      .b        (fmag_q[i]),
      .unary_a  (unary_a),
      .a_is_odd (a_is_odd),
      .acc      (prod[i])
    );
  end

  always_comb begin
    busy = 1'b0;
    for (int i = 0; i < N; i++) busy |= enc_busy[i];
  end

  // ---- "+": adder tree -------------------------------------------------
  adder_tree #(.N(N), .IN_W(2*W), .OUT_W(PSUM_W)) u_tree (.in(prod), .sum(psum));

  // The weight register feeds the running multipliers' signs.
  a_no_wt_write_while_busy: assert property (
    @(posedge clk) disable iff (!rst_n) busy |-> !wt_load
  ) else $error("pe_cell: weight cube written during an operation");

endmodule
