// tub_mul: temporal-unary-binary (tub) multiplier.
//
// Multiplies a signed weight a, delivered as a 2s-unary pulse stream
// (see twos_unary_enc), by a signed binary feature b, delivered as
// sign (b_neg) and magnitude (b). For every pulse on unary_a the shifted
// magnitude b<<1 is added to the accumulator register; for the pulse on
// a_is_odd the unshifted b is added. The sign of each addend is
// a_neg ^ b_neg, so that after ceil(|a|/2) pulses acc holds a*b exactly.
// clear zeroes the accumulator at the start of an operation.
//
// Port names (a_neg, b_neg, b, unary_a, a_is_odd), the "<<1" path and a
// two-input selection between b and b<<1 feeding an accumulator register
// follow the multiplier detail of the paper's core figure. The exact gate
// structure around the selections, and how the sign is applied (here: the
// addend is negated before it is added), are this design's choices.
//
// Timing: clear at edge 0; pulses in the cycles after; acc is valid the
// cycle after the last pulse. Width: |a*b| <= 2^(2W-2), so 2W signed bits.
module tub_mul #(
  parameter int unsigned W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,    // start of a new product
  input  logic                  a_neg,    // weight is negative
  input  logic                  b_neg,    // feature is negative
  input  logic [W-1:0]          b,        // feature magnitude
  input  logic                  unary_a,  // weight pulse worth 2
  input  logic                  a_is_odd, // weight pulse worth 1
  output logic signed [2*W-1:0] acc       // Acc. Reg
);

  logic [2*W-1:0]        addend;
  logic signed [2*W-1:0] signed_addend;

  always_comb begin
    // selection between b<<1 (unary_a pulse) and b (odd pulse)
    addend        = a_is_odd ? (2*W)'(b) : ((2*W)'(b) << 1);
    signed_addend = (a_neg ^ b_neg) ? -$signed(addend) : $signed(addend);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clear) begin
      acc <= '0;
    end else if (unary_a || a_is_odd) begin
      acc <= acc + signed_addend;
    end
  end

endmodule
