// p2m_ramp_generator -- BEHAVIOURAL MODEL of the single-slope ADC ramp.
// The real ramp generator is an analog circuit shared by all column ADCs
// (paper, Fig. 1, "Ramp Generator"); this model gives its function.
//
// The ramp restarts at 0 on `ramp_rst` and rises by `step` (integer analog
// units, same units as the pixel-array column lines) on each clock with
// `ramp_en` high.  The slope is set per output channel: a steeper ramp means
// fewer counts per unit of column signal, which is how the multiplicative
// part of batch normalization is applied before the counter (this design's
// reading of "BN ... implemented in the periphery ... using ... ADCs").
// Timing: `ramp` is registered; after a reset clock it reads 0, then step,
// 2*step, ...
module p2m_ramp_generator #(
  parameter int NB        = 8,
  parameter int STEP_BITS = 16
) (
  input  logic                 clk,
  input  logic                 ramp_rst,
  input  logic                 ramp_en,
  input  logic [STEP_BITS-1:0] step,
  output logic [31:0]          ramp
);
  logic [NB:0] t;

  always_ff @(posedge clk) begin
    if (ramp_rst)     t <= '0;
    else if (ramp_en) t <= t + 1'b1;
  end

  assign ramp = 32'(t) * 32'(step);

endmodule
