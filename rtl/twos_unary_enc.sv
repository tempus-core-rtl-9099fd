// twos_unary_enc: one 2s-unary temporal encoder for a single weight.
//
// The weight magnitude |a| (unsigned, W bits, up to 2^(W-1) for the most
// negative INT-W weight) is turned into a bit-serial temporal stream in which
// every pulse stands for the value 2 ("2s-unary"), so |a| = 2*q + r needs
// q pulses on unary_a followed, when |a| is odd, by one pulse on a_is_odd
// that stands for the value 1. The stream therefore lasts ceil(|a|/2)
// cycles: 64 cycles worst case for INT8, 4 for INT4, as the paper states.
// A zero weight produces no pulse at all (a "silent" PE).
//
// Implementation: a down-counter holding the magnitude still to be sent.
// load (one cycle) captures mag; in each following cycle the outputs are
// decoded from the counter and the counter drops by 2 (or by 1 on the odd
// pulse). busy is high while pulses remain.
//
// The 2s-unary code and its latency follow the paper. The paper names the
// signals unary_a and a_is_odd on the multiplier; sending the odd pulse
// last, on its own cycle, is this design's choice.
module twos_unary_enc #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,     // capture mag; pulses start next cycle
  input  logic [W-1:0] mag,      // weight magnitude, unsigned
  output logic         unary_a,  // pulse worth 2
  output logic         a_is_odd, // pulse worth 1 (last pulse of an odd |a|)
  output logic         busy      // pulses still to come (this cycle included)
);

  logic [W-1:0] rem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0;
    end else if (load) begin
      rem <= mag;
    end else if (rem >= W'(2)) begin
      rem <= rem - W'(2);
    end else begin
      rem <= '0;
    end
  end

  always_comb begin
    unary_a  = (rem >= W'(2));
    a_is_odd = (rem == W'(1));
    busy     = (rem != '0);
  end

endmodule
