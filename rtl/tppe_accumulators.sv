// tppe_accumulators: the pseudo-accumulator and the T correction accumulators
// of one TPPE.
//
// The pseudo-accumulator adds every matched weight as if the pre-synaptic
// neuron had fired at all T timesteps.  When a check finds that the neuron was
// silent at some timesteps, the weight is added to the correction accumulator
// of each of those timesteps (c_mask bit t).  The corrected full sum for
// timestep t is x[t] = pseudo - correction[t], available combinationally.
// clear zeroes all accumulators (start of a new output neuron).  Both updates
// may happen in the same cycle.
//
// Widths (12-bit pseudo, 10-bit correction, 8-bit signed weights) follow the
// paper.  Overflow wraps in two's complement; the paper does not say.
module tppe_accumulators #(
  parameter int T      = loas_pkg::T,
  parameter int W_BITS = loas_pkg::W_BITS,
  parameter int PACC_W = loas_pkg::PACC_W,
  parameter int CACC_W = loas_pkg::CACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     p_en,
  input  logic signed [W_BITS-1:0] p_w,
  input  logic [T-1:0]             c_mask,
  input  logic signed [W_BITS-1:0] c_w,
  output logic signed [PACC_W-1:0] x [T]
);

  logic signed [PACC_W-1:0] pacc;
  logic signed [CACC_W-1:0] cacc [T];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pacc <= '0;
      for (int t = 0; t < T; t++) cacc[t] <= '0;
    end else if (clear) begin
      pacc <= '0;
      for (int t = 0; t < T; t++) cacc[t] <= '0;
    end else begin
      if (p_en) pacc <= pacc + PACC_W'(p_w);
      for (int t = 0; t < T; t++)
        if (c_mask[t]) cacc[t] <= cacc[t] + CACC_W'(c_w);
    end
  end

  always_comb
    for (int t = 0; t < T; t++)
      x[t] = pacc - PACC_W'(cacc[t]);

endmodule
