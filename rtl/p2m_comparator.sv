// p2m_comparator -- BEHAVIOURAL MODEL of one column comparator of the
// single-slope ADC (paper, Fig. 1, "Comparator").  The real part is an
// analog comparator clocked once per ADC step.
//
// Its output is high while the column-line signal is still above the ramp,
// so the column counter counts exactly ceil(signal/step) steps (clipped at
// the ramp's full scale).  The model is clocked like the real part: the
// decision for the ramp value of one clock is available in the same clock
// (the counter samples it on the next edge), matching "Clk" into the
// comparator in Fig. 1.  Which input is inverting is not given; only the
// sense (count while signal > ramp) matters here.
module p2m_comparator (
  input  logic [31:0] vin,
  input  logic [31:0] ramp,
  output logic        above
);
  always_comb above = (vin > ramp);
endmodule
