// p2m_pooling_unit -- the digital pooling operator of the sensor periphery
// (paper, Fig. 1, "Averaging"; Sec. III-A: an 'average' or 'max' operation
// by digital logic; Table II uses both).
//
// Takes the NV = POOL_S*POOL_S ReLU values of one pooling window and returns
//   POOL_AVG : floor(sum / NV)      (NV = 4: the sum shifted right by 2)
//   POOL_MAX : the largest value
//   POOL_NONE: v[0] unchanged (the no-pooling configuration; the caller
//              then walks single positions)
// Purely combinational.  The rounding (truncation) is this design's choice;
// the paper does not say how the average is rounded.
module p2m_pooling_unit
  import p2m_pkg::*;
#(
  parameter int NB     = 8,
  parameter int POOL_S = 2
) (
  input  pool_mode_t    mode,
  input  logic [NB-1:0] v [POOL_S*POOL_S],
  output logic [NB-1:0] y
);
  localparam int NV = POOL_S * POOL_S;
  localparam int SW = NB + $clog2(NV) + 1;

  logic [SW-1:0] sum;
  logic [NB-1:0] mx;

  always_comb begin
    sum = '0;
    mx  = '0;
    for (int i = 0; i < NV; i++) begin
      sum = sum + SW'(v[i]);
      if (v[i] > mx) mx = v[i];
    end
    unique case (mode)
      POOL_AVG: y = NB'(sum / SW'(NV));
      POOL_MAX: y = mx;
      default:  y = v[0];
    endcase
  end

endmodule
