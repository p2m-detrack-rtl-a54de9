// p2m_relu_counter -- column counter of the single-slope ADC, with BN shift
// and ReLU.
//
// Function.  One counter sits under every pixel column (paper, Fig. 1:
// Counter with Reset, Up/Down and Clk).  A conversion has two ramps.  On
// `cnt_rst` the counter loads the channel's batch-norm shift `preset`.
// During the negative-weight ramp (up_dn = PH_NEG) it counts down on every
// enabled clock in which the comparator says the column signal is still
// above the ramp; during the positive-weight ramp (PH_POS) it counts up the
// same way.  The count is then preset + pos - neg, i.e. the signed
// convolution result with the negative weights subtracted by correlated
// double sampling (paper, Sec. II-A).  `relu` is that count clipped to
// [0, 2^NB-1]: negative results give 0, which is the ReLU; large results
// saturate at the NB-bit ADC full scale.
//
// Timing: count updates on the clock edge; `relu` is combinational from the
// count and is valid the clock after the last enabled step.
//
// From the paper: up/down counting, CDS and ReLU in the ADC, NB = 8 output
// bits (Table I).  This design's choices: the preset as the BN shift and
// saturation at full scale.
module p2m_relu_counter
  import p2m_pkg::*;
#(
  parameter int NB = 8
) (
  input  logic                 clk,
  input  logic                 cnt_rst,
  input  logic signed [NB:0]   preset,
  input  logic                 cnt_en,
  input  adc_phase_t           up_dn,
  input  logic                 cmp,
  output logic [NB-1:0]        relu
);
  // Range: preset in [-2^NB, 2^NB), +/- at most 2^NB steps each way.
  logic signed [NB+2:0] count;

  always_ff @(posedge clk) begin
    if (cnt_rst)
      count <= (NB+3)'(preset);
    else if (cnt_en && cmp)
      count <= (up_dn == PH_POS) ? count + 1 : count - 1;
  end

  always_comb begin
    if (count < 0)
      relu = '0;
    else if (count > (NB+3)'((1 << NB) - 1))
      relu = '1;
    else
      relu = count[NB-1:0];
  end

endmodule
