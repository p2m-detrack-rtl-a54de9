// p2m_adc_sequencer -- timing of one two-ramp single-slope conversion,
// shared by all column ADCs.
//
// A conversion is started by a one-clock `start`.  Sequence (clocks):
//   SAMPLE  1        sample=1: the pixel array latches the column sums of the
//                    kernels activated for this cycle; counters load the BN
//                    preset (cnt_rst); the ramp restarts (ramp_rst).
//   NEG     2^NB     phase=PH_NEG, ramp_en, cnt_en: counters count down while
//                    the negative-weight sum is above the ramp.
//   SWAP    1        ramp_rst, phase=PH_POS: ramp restarts for the second
//                    sample of correlated double sampling.
//   POS     2^NB     phase=PH_POS, ramp_en, cnt_en: counters count up.
//   LATCH   1        done=1: the ReLU outputs are final; the register bank
//                    stores them on this clock edge.
// One conversion therefore takes 2^(NB+1)+3 clocks, and `start` is accepted
// only in IDLE (`busy` low).  The paper gives the ingredients (ramp,
// comparator, up/down counter, reset, clock; Fig. 1, Sec. II-A) but not
// their timing; the state sequence and the one-clock gaps are this design's.
module p2m_adc_sequencer
  import p2m_pkg::*;
#(
  parameter int NB = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       sample,
  output logic       cnt_rst,
  output logic       ramp_rst,
  output logic       ramp_en,
  output logic       cnt_en,
  output adc_phase_t phase,
  output logic       done
);
  typedef enum logic [2:0] {S_IDLE, S_SAMPLE, S_NEG, S_SWAP, S_POS, S_LATCH} state_t;

  state_t      state;
  logic [NB:0] steps;
  localparam logic [NB:0] LAST = (NB+1)'((1 << NB) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      steps <= '0;
    end else begin
      unique case (state)
        S_IDLE:   if (start) state <= S_SAMPLE;
        S_SAMPLE: begin state <= S_NEG; steps <= '0; end
        S_NEG:    if (steps == LAST) begin state <= S_SWAP; steps <= '0; end
                  else steps <= steps + 1'b1;
        S_SWAP:   state <= S_POS;
        S_POS:    if (steps == LAST) begin state <= S_LATCH; steps <= '0; end
                  else steps <= steps + 1'b1;
        S_LATCH:  state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy     = (state != S_IDLE);
    sample   = (state == S_SAMPLE);
    cnt_rst  = (state == S_SAMPLE);
    ramp_rst = (state == S_SAMPLE) || (state == S_SWAP);
    ramp_en  = (state == S_NEG) || (state == S_POS);
    cnt_en   = ramp_en;
    phase    = (state == S_SWAP || state == S_POS || state == S_LATCH) ? PH_POS : PH_NEG;
    done     = (state == S_LATCH);
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("adc_sequencer: start while a conversion is running");

endmodule
