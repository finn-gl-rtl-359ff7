// convlstm_top: quantised ConvLSTM accelerator for mid-price trend
// prediction from limit-order-book data.
//
// A frame is a block of IN_H order-book snapshots of IN_W INT8 features
// (100 x 40 by default), streamed one feature per beat, snapshot after
// snapshot. The network is a chain of streaming layers, each with its own
// weights and thresholds in on-chip memory:
//   conv block 1: 3x3 conv, stride 2, 64 ch -> 3x3, 32 ch -> 3x3, 32 ch
//   conv block 2: 3x3 conv, stride 2, 64 ch -> 3x3, 16 ch -> 3x3,  4 ch
//   LSTM:         input 10*4 = 40 per step, 25 steps, 64 hidden units
//   dense:        64 -> 256 (ReLU), 256 -> 3 class scores
// Each conv layer includes BatchNorm, ReLU and a 6-bit quantiser, all in
// its thresholds. The two stride-2 layers shrink 100 x 40 to 25 x 10; each
// row of the 25 x 10 x 4 map (40 codes, in stream order) is one LSTM step.
// The last hidden state feeds the dense layers. The three signed class
// scores (down, stationary, up) leave one per beat; the predicted class is
// the largest.
//
// Layer sizes, kernel, strides, precision (W8A6, INT8 input) and the
// layer order follow the paper. The one-pixel zero padding is inferred
// from the sizes it gives (100 x 40 -> 25 x 10 needs it). The folding
// (SIMD, PE) is this design's choice under the paper's 36-bit weight-
// stream limit, aiming at about 150k cycles per layer (1000 frames/s at
// 150 MHz). All layers work at once, each on its part of the stream,
// passing codes over valid/ready streams; the slowest layer (conv1_2,
// about 144k cycles) sets the frame interval.
//
// Parameters are written through cfg (see finngl_pkg) before frames are
// sent. All streams use valid/ready; a beat moves when both are high.
module convlstm_top
  import finngl_pkg::*;
#(
  parameter int unsigned IN_H  = 100,
  parameter int unsigned IN_W  = 40,
  parameter int unsigned C11   = 64,
  parameter int unsigned C12   = 32,
  parameter int unsigned C13   = 32,
  parameter int unsigned C21   = 64,
  parameter int unsigned C22   = 16,
  parameter int unsigned C23   = 4,
  parameter int unsigned HID   = 64,
  parameter int unsigned FC1   = 256,
  parameter int unsigned NCLS  = 3,
  // folding
  parameter int unsigned PE11  = 8,
  parameter int unsigned PE12  = 32,
  parameter int unsigned PE13  = 32,
  parameter int unsigned PE21  = 32,
  parameter int unsigned PE22  = 16,
  parameter int unsigned PE23  = 4,
  parameter int unsigned PE_L  = 32,
  parameter int unsigned PE_F1 = 32,
  parameter int unsigned PE_F2 = 3,
  parameter int unsigned SIMD  = 4,
  localparam int unsigned H1   = (IN_H - 1) / 2 + 1,
  localparam int unsigned W1   = (IN_W - 1) / 2 + 1,
  localparam int unsigned H2   = (H1 - 1) / 2 + 1,
  localparam int unsigned W2   = (W1 - 1) / 2 + 1,
  localparam int unsigned OUT_W = (A_BITS + 1) + W_BITS + $clog2(FC1) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_wr_t                 cfg,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [X_BITS-1:0]       in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned N_STAGE = 9;

  // per-layer write enables
  logic [N_STAGE-1:0] wr;
  always_comb begin
    for (int l = 0; l < N_STAGE; l++) wr[l] = cfg.we && (32'(cfg.layer) == l);
  end
  logic wr_thr;
  assign wr_thr = (cfg.mem != M_WEIGHTS);

  // inter-layer streams of 6-bit codes
  logic               v [7];
  logic               r [7];
  logic [A_BITS-1:0]  d [7];

  conv_layer #(.IFM_H(IN_H), .IFM_W(IN_W), .CIN(1), .COUT(C11), .STRIDE(2),
               .SIMD(1), .PE(PE11), .IN_BITS(X_BITS), .IN_SIGNED(1'b1)) u_conv1_1 (
    .clk, .rst_n, .wr_en(wr[L_CONV1_1]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid, .in_ready, .in_data,
    .out_valid(v[0]), .out_ready(r[0]), .out_data(d[0]));

  conv_layer #(.IFM_H(H1), .IFM_W(W1), .CIN(C11), .COUT(C12), .STRIDE(1),
               .SIMD(SIMD), .PE(PE12), .IN_BITS(A_BITS)) u_conv1_2 (
    .clk, .rst_n, .wr_en(wr[L_CONV1_2]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[0]), .in_ready(r[0]), .in_data(d[0]),
    .out_valid(v[1]), .out_ready(r[1]), .out_data(d[1]));

  conv_layer #(.IFM_H(H1), .IFM_W(W1), .CIN(C12), .COUT(C13), .STRIDE(1),
               .SIMD(SIMD), .PE(PE13), .IN_BITS(A_BITS)) u_conv1_3 (
    .clk, .rst_n, .wr_en(wr[L_CONV1_3]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[1]), .in_ready(r[1]), .in_data(d[1]),
    .out_valid(v[2]), .out_ready(r[2]), .out_data(d[2]));

  conv_layer #(.IFM_H(H1), .IFM_W(W1), .CIN(C13), .COUT(C21), .STRIDE(2),
               .SIMD(SIMD), .PE(PE21), .IN_BITS(A_BITS)) u_conv2_1 (
    .clk, .rst_n, .wr_en(wr[L_CONV2_1]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[2]), .in_ready(r[2]), .in_data(d[2]),
    .out_valid(v[3]), .out_ready(r[3]), .out_data(d[3]));

  conv_layer #(.IFM_H(H2), .IFM_W(W2), .CIN(C21), .COUT(C22), .STRIDE(1),
               .SIMD(SIMD), .PE(PE22), .IN_BITS(A_BITS)) u_conv2_2 (
    .clk, .rst_n, .wr_en(wr[L_CONV2_2]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[3]), .in_ready(r[3]), .in_data(d[3]),
    .out_valid(v[4]), .out_ready(r[4]), .out_data(d[4]));

  conv_layer #(.IFM_H(H2), .IFM_W(W2), .CIN(C22), .COUT(C23), .STRIDE(1),
               .SIMD(SIMD), .PE(PE23), .IN_BITS(A_BITS)) u_conv2_3 (
    .clk, .rst_n, .wr_en(wr[L_CONV2_3]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[4]), .in_ready(r[4]), .in_data(d[4]),
    .out_valid(v[5]), .out_ready(r[5]), .out_data(d[5]));

  qlstm_layer #(.IN_DIM(W2 * C23), .HID(HID), .SEQ(H2), .SIMD(SIMD), .PE(PE_L)) u_lstm (
    .clk, .rst_n, .wr_en(wr[L_LSTM]), .wr_sel(cfg.mem), .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[5]), .in_ready(r[5]), .in_data(d[5]),
    .out_valid(v[6]), .out_ready(r[6]), .out_data(d[6]));

  logic              fc1_valid, fc1_ready;
  logic [A_BITS-1:0] fc1_data;

  fc_layer #(.MW(HID), .MH(FC1), .SIMD(SIMD), .PE(PE_F1), .IN_BITS(A_BITS),
             .IN_SIGNED(1'b1), .USE_THR(1'b1)) u_fc1 (
    .clk, .rst_n, .wr_en(wr[L_FC1]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(v[6]), .in_ready(r[6]), .in_data(d[6]),
    .out_valid(fc1_valid), .out_ready(fc1_ready), .out_data(fc1_data));

  fc_layer #(.MW(FC1), .MH(NCLS), .SIMD(SIMD), .PE(PE_F2), .IN_BITS(A_BITS),
             .USE_THR(1'b0)) u_fc2 (
    .clk, .rst_n, .wr_en(wr[L_FC2]), .wr_thr, .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(fc1_valid), .in_ready(fc1_ready), .in_data(fc1_data),
    .out_valid, .out_ready, .out_data(out_data));

endmodule
