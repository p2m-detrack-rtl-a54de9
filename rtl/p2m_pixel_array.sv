// p2m_pixel_array -- BEHAVIOURAL MODEL of the weight-embedded pixel array.
// Not synthesizable logic in the real chip: the pixels, their weight
// transistors and the column lines are analog circuits.  This model gives
// the array's function with integer "analog" values.
//
// What it models.  Every pixel carries, for each output channel and each
// kernel position it can take part in, a weight transistor whose width is
// the weight; positive weights hang on one supply line and negative weights
// on another (paper, Fig. 1, "VDD for Positive/Negative Weights").  When a
// KxK kernel is activated its pixels drive one column line together, so the
// line carries sum(pixel * |w|) over the positive (or the negative) weights.
// Correlated double sampling reads the negative sum first and the positive
// sum second; the column ADC takes the difference.
//
// Parallelism.  On `sample` the model latches, for every ADC column j, the
// two sums of the kernel that column converts in this cycle.  With
// P = ceil(K/S) and a strip of P*S columns, ADC j = b*P*S + k (k < K) reads
// the k-th kernel of the vertical stack of strip b: output row
// y = band*P*K + q + P*k, output column x = b*P + p.  Kernels of one cycle
// never share a pixel.  Columns with k >= K, or whose kernel falls outside
// the output map, read 0.  Pixels outside the array (padding D) count as 0.
//
// Interface.  pix_* loads the scene (one pixel per clock; models exposure),
// w_* programs one weight per clock (models the fixed transistor widths or
// the reprogrammable non-volatile option), sample/ch/band/q/p activate the
// kernels of one conversion cycle, `phase` selects which sum col_out shows.
// Timing: col_out is valid from the clock after `sample` until the next one.
//
// From the paper: the per-channel weight sets, positive/negative supply
// lines, CDS and the K-kernels-per-strip parallelism (Fig. 2, Eq. 2).  This
// design's own choices: a kernel over the raw sensor mosaic (one value per
// pixel), integer units, the ADC column assigned to each stacked kernel.
module p2m_pixel_array
  import p2m_pkg::*;
#(
  parameter int H_IN     = 720,
  parameter int W_IN     = 1280,
  parameter int K        = 7,
  parameter int S        = 4,
  parameter int D        = 3,
  parameter int CO       = 16,
  parameter int PIX_BITS = 12,
  parameter int W_BITS   = 4
) (
  input  logic                       clk,
  // scene / exposure load
  input  logic                       pix_we,
  input  logic [15:0]                pix_row,
  input  logic [15:0]                pix_col,
  input  logic [PIX_BITS-1:0]        pix_val,
  // weight programming
  input  logic                       w_we,
  input  logic [7:0]                 w_ch,
  input  logic [7:0]                 w_r,
  input  logic [7:0]                 w_c,
  input  logic signed [W_BITS-1:0]   w_val,
  // kernel activation of one conversion cycle
  input  logic                       sample,
  input  logic [7:0]                 ch,
  input  logic [15:0]                band,
  input  logic [7:0]                 q,
  input  logic [7:0]                 p,
  input  adc_phase_t                 phase,
  // column lines (analog magnitude, integer units)
  output logic [31:0]                col_out [W_IN]
);
  localparam int P     = phases(K, S);
  localparam int H_OUT = conv_out(H_IN, K, S, D);
  localparam int W_OUT = conv_out(W_IN, K, S, D);
  localparam int BAND  = P * K;
  localparam int STRIP = P * S;
  // The CO*K*K weights stored here are what the weight transistors of all
  // pixels encode; each pixel holds weight_transistors(K, S, CO) of them
  // (see p2m_pkg).
  localparam int RB    = $clog2(H_IN);
  localparam int CB    = $clog2(W_IN);
  localparam int OB    = (CO > 1) ? $clog2(CO) : 1;
  localparam int KB    = $clog2(K);

  logic [PIX_BITS-1:0]      pix [H_IN][W_IN];
  logic signed [W_BITS-1:0] wgt [CO][K][K];
  logic [31:0]              vpos [W_IN];
  logic [31:0]              vneg [W_IN];

  always_ff @(posedge clk) begin
    if (pix_we && int'(pix_row) < H_IN && int'(pix_col) < W_IN)
      pix[pix_row[RB-1:0]][pix_col[CB-1:0]] <= pix_val;
    if (w_we && int'(w_ch) < CO && int'(w_r) < K && int'(w_c) < K)
      wgt[w_ch[OB-1:0]][w_r[KB-1:0]][w_c[KB-1:0]] <= w_val;
  end

  always_ff @(posedge clk) begin
    if (sample) begin
      for (int j = 0; j < W_IN; j++) begin
        int b, k, x, y, row, col;
        logic [31:0] sp, sn;
        logic [OB-1:0] o;
        b  = j / STRIP;
        k  = j % STRIP;
        x  = b * P + int'(p);
        y  = int'(band) * BAND + int'(q) + P * k;
        sp = '0;
        sn = '0;
        o  = ch[OB-1:0];
        if (k < K && x < W_OUT && y < H_OUT && int'(ch) < CO) begin
          for (int r = 0; r < K; r++) begin
            for (int c = 0; c < K; c++) begin
              row = y * S - D + r;
              col = x * S - D + c;
              if (row >= 0 && row < H_IN && col >= 0 && col < W_IN) begin
                if (wgt[o][r][c] > 0)
                  sp = sp + 32'(pix[row][col]) * 32'(wgt[o][r][c]);
                else if (wgt[o][r][c] < 0)
                  sn = sn + 32'(pix[row][col]) * 32'(-wgt[o][r][c]);
              end
            end
          end
        end
        vpos[j] <= sp;
        vneg[j] <= sn;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < W_IN; j++)
      col_out[j] = (phase == PH_POS) ? vpos[j] : vneg[j];
  end

endmodule
