// p2m_frontend -- the in-sensor front-end: a camera chip that outputs the
// first CNN layer (strided convolution + batch-norm + ReLU + pooling)
// instead of raw pixels.
//
// Data path.  The weight-embedded pixel array (behavioural model) forms the
// analog convolution sums of many non-overlapping kernels at once and puts
// them on the column lines.  Each of the W_IN columns has a single-slope ADC
// (shared ramp, column comparator, up/down counter).  Two ramps per
// conversion -- negative weights counted down, positive weights counted up
// -- give the signed sum; the counter preset adds the BN shift, the ramp
// slope applies the BN scale, and clipping at 0 is the ReLU.  The NB-bit
// results of a band of output rows go into a double-buffered register
// bank; the pooling streamer averages (or takes the max of) each 2x2 window
// and streams the activations out to the back-end processor.
//
// Control.  p2m_scheduler walks channels, bands, vertical residues q and
// horizontal phases p (P = ceil(K/S) of each), starting one conversion per
// (q,p) through p2m_adc_sequencer (2^(NB+1)+3 clocks each).  A frame takes
// CO * ceil(H_OUT/(P*K)) * P*P conversions; for the default 720x1280
// array, K=7, S=4: 16*13*4 = 832 conversions, about 428k clocks.  If the
// back-end holds out_ready low long enough that both banks are full, the
// scheduler stalls.
//
// Interface.  pix_* loads the scene and w_* the weights (both belong to the
// pixel-array model).  bn_step[c] (ramp slope, >= 1) and bn_shift[c]
// (counter preset) are the per-channel BN constants.  pool_mode selects
// average, max or no pooling and is sampled per band.  frame_start (one
// clock, while !frame_busy) starts a frame; frame_done pulses when the last
// activation has been accepted.  The output stream is out_valid/out_ready
// with out_data, out_ch, out_row and out_col.
//
// Defaults are the paper's main configuration: K = 7, S = 4, CO = 16,
// NB = 8, 2x2 pooling with stride 2 (Table I, 24x bandwidth reduction).
// The 1280x720 array size, the padding D = 3 and all widths of the control
// ports are this design's choices.
module p2m_frontend
  import p2m_pkg::*;
#(
  parameter int H_IN      = 720,
  parameter int W_IN      = 1280,
  parameter int K         = 7,
  parameter int S         = 4,
  parameter int D         = 3,
  parameter int CO        = 16,
  parameter int NB        = 8,
  parameter int POOL_S    = 2,
  parameter int PIX_BITS  = 12,
  parameter int W_BITS    = 4,
  parameter int STEP_BITS = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // scene and weights (pixel-array model)
  input  logic                     pix_we,
  input  logic [15:0]              pix_row,
  input  logic [15:0]              pix_col,
  input  logic [PIX_BITS-1:0]      pix_val,
  input  logic                     w_we,
  input  logic [7:0]               w_ch,
  input  logic [7:0]               w_r,
  input  logic [7:0]               w_c,
  input  logic signed [W_BITS-1:0] w_val,
  // per-channel batch-norm constants
  input  logic [STEP_BITS-1:0]     bn_step  [CO],
  input  logic signed [NB:0]       bn_shift [CO],
  input  pool_mode_t               pool_mode,
  // frame control
  input  logic                     frame_start,
  output logic                     frame_busy,
  output logic                     frame_done,
  output logic                     stall,
  output logic [31:0]              conv_count,
  // activation stream to the back-end
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [NB-1:0]            out_data,
  output logic [7:0]               out_ch,
  output logic [15:0]              out_row,
  output logic [15:0]              out_col
);
  localparam int P     = phases(K, S);
  localparam int H_OUT = conv_out(H_IN, K, S, D);
  localparam int W_OUT = conv_out(W_IN, K, S, D);
  localparam int NV    = POOL_S * POOL_S;
  localparam int OB    = (CO > 1) ? $clog2(CO) : 1;

  if ((cdiv(W_OUT, P) - 1) * P * S + K > W_IN) begin : g_adc_check
    $error("p2m_frontend: not enough column ADCs for the strip schedule");
  end

  // scheduler <-> sequencer <-> columns
  logic        conv_start, conv_done, seq_busy;
  logic        sample, cnt_rst, ramp_rst, ramp_en, cnt_en;
  adc_phase_t  phase;
  logic [7:0]  ch, q, p;
  logic [15:0] band;
  logic        wr_en, wr_bank;
  logic [7:0]  wr_slot;
  logic [1:0]  bank_full, bank_release;
  logic [7:0]  bank_ch   [2];
  logic [15:0] bank_band [2];
  logic        running, frame_conv_done, str_busy;

  logic [31:0]   col_v [W_IN];
  logic [31:0]   ramp;
  logic [NB-1:0] relu [W_IN];

  logic          rd_bank [NV];
  logic [7:0]    rd_slot [NV];
  logic [15:0]   rd_col  [NV];
  logic [NB-1:0] rd_data [NV];

  p2m_pixel_array #(
    .H_IN(H_IN), .W_IN(W_IN), .K(K), .S(S), .D(D), .CO(CO),
    .PIX_BITS(PIX_BITS), .W_BITS(W_BITS)
  ) u_array (
    .clk, .pix_we, .pix_row, .pix_col, .pix_val,
    .w_we, .w_ch, .w_r, .w_c, .w_val,
    .sample, .ch, .band, .q, .p, .phase,
    .col_out (col_v)
  );

  p2m_ramp_generator #(.NB(NB), .STEP_BITS(STEP_BITS)) u_ramp (
    .clk, .ramp_rst, .ramp_en,
    .step (bn_step[ch[OB-1:0]]),
    .ramp
  );

  for (genvar j = 0; j < W_IN; j++) begin : g_col
    logic above;
    p2m_comparator u_cmp (.vin(col_v[j]), .ramp, .above);
    p2m_relu_counter #(.NB(NB)) u_cnt (
      .clk, .cnt_rst,
      .preset (bn_shift[ch[OB-1:0]]),
      .cnt_en,
      .up_dn  (phase),
      .cmp    (above),
      .relu   (relu[j])
    );
  end

  p2m_adc_sequencer #(.NB(NB)) u_seq (
    .clk, .rst_n,
    .start (conv_start),
    .busy  (seq_busy),
    .sample, .cnt_rst, .ramp_rst, .ramp_en, .cnt_en, .phase,
    .done  (conv_done)
  );

  p2m_scheduler #(.H_OUT(H_OUT), .K(K), .S(S), .CO(CO)) u_sched (
    .clk, .rst_n, .frame_start,
    .running, .frame_conv_done,
    .conv_start, .conv_done,
    .ch, .band, .q, .p,
    .wr_en, .wr_bank, .wr_slot,
    .bank_full, .bank_ch, .bank_band, .bank_release,
    .stall, .conv_count
  );

  p2m_register_bank #(.W_IN(W_IN), .SLOTS(P * P), .NB(NB), .NRD(NV)) u_regs (
    .clk, .wr_en, .wr_bank, .wr_slot,
    .wr_data (relu),
    .rd_bank, .rd_slot, .rd_col, .rd_data
  );

  p2m_pool_streamer #(
    .H_OUT(H_OUT), .W_OUT(W_OUT), .K(K), .S(S), .NB(NB), .POOL_S(POOL_S)
  ) u_stream (
    .clk, .rst_n,
    .mode (pool_mode),
    .bank_full, .bank_ch, .bank_band, .bank_release,
    .rd_bank, .rd_slot, .rd_col, .rd_data,
    .out_valid, .out_ready, .out_data, .out_ch, .out_row, .out_col,
    .busy (str_busy)
  );

  // frame completion: conversions finished and both banks drained
  logic conv_finished;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conv_finished <= 1'b0;
      frame_done    <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (frame_start && !frame_busy)
        conv_finished <= 1'b0;
      else if (frame_conv_done)
        conv_finished <= 1'b1;
      else if (conv_finished && bank_full == '0 && !str_busy && bank_release == '0) begin
        conv_finished <= 1'b0;
        frame_done    <= 1'b1;
      end
    end
  end

  assign frame_busy = running || conv_finished;

  a_seq_idle: assert property (@(posedge clk) disable iff (!rst_n) conv_start |-> !seq_busy)
    else $error("frontend: conversion started while the ADCs are busy");

endmodule
