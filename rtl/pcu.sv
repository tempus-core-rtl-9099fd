// pcu: PE cell unit, Tempus Core's replacement for NVDLA's CMAC.
//
// K PE cells of N tub multipliers each. A command is accepted on a
// valid/ready handshake and is one of two kinds (tempus_pkg::pcu_op_e):
//   OP_WT   writes in_data into the weight register of every cell whose bit
//           is set in in_sel (one cycle, the unit stays idle);
//   OP_FEAT broadcasts the feature cube in_data to all cells; in_sel is the
//           mask of cells in use. The unit is then busy for m cycles, m being
//           the largest ceil(|w|/2) over the whole K x N weight array of the
//           enabled cells (the 2s-unary latency), while the cells compute.
// When every cell is done, the K partial sums (zero for disabled cells) and
// the command's tag are copied into the output registers together and
// offered to the accumulator with out_valid. If the previous result is
// still waiting (out_ready low) the unit holds its finished sums and keeps
// in_ready low: this is the stall of the multi-cycle handshake. A new
// command is accepted in the same cycle the result is registered, so
// back-to-back feature operations take m + 1 cycles each, and the result of
// a feature command accepted at edge 0 appears after edge m + 1.
//
// What follows the paper: K cells sharing one feature cube, each with its own
// cached weight cube; partial sums released to CACC only when all cells are
// done; registers and handshaking for the multi-cycle operation; a latency
// set by the largest weight magnitude in the array. The command encoding,
// the tag pass-through and the exact cycle timing are this design's own.
module pcu
  import tempus_pkg::*;
#(
  parameter int unsigned K      = 16,  // PE cells (kernels in parallel)
  parameter int unsigned N      = 16,  // multipliers per cell (channels)
  parameter int unsigned W      = 8,   // INT precision
  parameter int unsigned PSUM_W = 2*W + $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command from the sequencer (CSC)
  input  logic                     in_valid,
  output logic                     in_ready,
  input  pcu_op_e                  in_op,
  input  logic [K-1:0]             in_sel,
  input  logic signed [W-1:0]      in_data [N],
  input  pcu_tag_t                 in_tag,
  // partial sums to the accumulator (CACC)
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [PSUM_W-1:0] out_psum [K],
  output pcu_tag_t                 out_tag
);

  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e       state;
  logic [K-1:0] cell_busy;
  logic [K-1:0] en_q;
  pcu_tag_t     tag_q;
  logic signed [PSUM_W-1:0] cell_psum [K];

  logic accept, done, capture, out_free;

  always_comb begin
    out_free = !out_valid || out_ready;
    done     = (state == S_RUN) && (cell_busy == '0);
    capture  = done && out_free;
    in_ready = (state == S_IDLE) || capture;
    accept   = in_valid && in_ready;
  end

  // ---- control ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      en_q  <= '0;
      tag_q <= '0;
    end else begin
      if (capture) state <= S_IDLE;
      if (accept && in_op == OP_FEAT) begin
        state <= S_RUN;
        en_q  <= in_sel;
        tag_q <= in_tag;
      end
    end
  end

  // ---- output registers -----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int j = 0; j < K; j++) out_psum[j] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (capture) begin
        out_valid <= 1'b1;
        out_tag   <= tag_q;
        for (int j = 0; j < K; j++) out_psum[j] <= en_q[j] ? cell_psum[j] : '0;
      end
    end
  end

  // ---- K x N PE cell array ----------------------------------------------------
  for (genvar j = 0; j < K; j++) begin : g_cell
    pe_cell #(.W(W), .N(N), .PSUM_W(PSUM_W)) u_cell (
      .clk     (clk),
      .rst_n   (rst_n),
      .wt_load (accept && in_op == OP_WT && in_sel[j]),
      .wt_in   (in_data),
      .start   (accept && in_op == OP_FEAT),
      .en      (in_sel[j]),
      .feat_in (in_data),
      .busy    (cell_busy[j]),
      .psum    (cell_psum[j])
    );
  end

  // ---- handshake rules -------------------------------------------------------
  a_in_hold: assert property (
    @(posedge clk) disable iff (!rst_n) in_valid && !in_ready |=> in_valid
  ) else $error("pcu: in_valid dropped before it was accepted");

  a_out_hold: assert property (
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_tag)
  ) else $error("pcu: result changed before it was taken");

endmodule
