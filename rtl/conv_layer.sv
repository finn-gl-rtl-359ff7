// conv_layer: one quantised Conv2D + BatchNorm + ReLU layer.
//
// A swg (sliding-window generator) feeds an mvau whose weight matrix has
// COUT rows and K*K*CIN columns, column = (ky*K + kx)*CIN + c. BatchNorm,
// the ReLU and the 6-bit output quantiser are folded into 63 per-channel
// thresholds, so each output is an unsigned 6-bit code [0, 63].
//
// Input: one element per beat, height-width-channel order. IN_SIGNED
// selects a signed input code (the INT8 features of the first layer) or
// an unsigned one (the 6-bit ReLU outputs of earlier layers). Output: one
// 6-bit code per beat, same order, OFM_H x OFM_W x COUT.
//
// Timing: after the input rows of the first output row are in, about
// NF*max(SF, PE) cycles per output pixel (see mvau), with SF =
// K*K*CIN/SIMD and NF = COUT/PE; loading overlaps computing (see swg).
module conv_layer #(
  parameter int unsigned IFM_H     = 50,
  parameter int unsigned IFM_W     = 20,
  parameter int unsigned CIN       = 64,
  parameter int unsigned COUT      = 32,
  parameter int unsigned K         = 3,
  parameter int unsigned STRIDE    = 1,
  parameter int unsigned PAD       = 1,
  parameter int unsigned SIMD      = 4,
  parameter int unsigned PE        = 32,
  parameter int unsigned IN_BITS   = 6,
  parameter bit          IN_SIGNED = 1'b0,
  parameter int unsigned W_W       = 8,
  parameter int unsigned OUT_W     = 6,
  parameter int unsigned NT        = 63
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic                wr_thr,
  input  logic [19:0]         wr_addr,
  input  logic signed [31:0]  wr_data,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IN_BITS-1:0]  in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [OUT_W-1:0]    out_data
);
  localparam int unsigned EW = IN_SIGNED ? IN_BITS : IN_BITS + 1;

  logic signed [EW-1:0] in_ext;
  logic                 w_valid, w_ready;
  logic signed [EW-1:0] w_data [SIMD];

  assign in_ext = IN_SIGNED ? EW'(signed'(in_data)) : EW'({1'b0, in_data});

  swg #(.IFM_H(IFM_H), .IFM_W(IFM_W), .CIN(CIN), .K(K), .STRIDE(STRIDE),
        .PAD(PAD), .SIMD(SIMD), .IN_W(EW)) u_swg (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_ext),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  mvau #(.MW(K*K*CIN), .MH(COUT), .SIMD(SIMD), .PE(PE), .IN_W(EW), .W_W(W_W),
         .USE_THR(1'b1), .NT(NT), .OUT_W(OUT_W), .BIAS(0)) u_mvau (
    .clk, .rst_n,
    .wr_en, .wr_thr, .wr_addr, .wr_data,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
