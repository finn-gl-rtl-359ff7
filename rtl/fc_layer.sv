// fc_layer: one quantised fully connected layer.
//
// A stream_dwc packs the incoming elements (one per beat) into SIMD-wide
// beats for an mvau with an MH x MW weight matrix. With USE_THR = 1 the
// outputs pass through per-neuron thresholds (ReLU and 6-bit quantiser
// folded in, unsigned codes [0, 63]); with USE_THR = 0 the raw signed
// accumulators leave, as the class scores of the last layer do.
// Output: one value per beat, neuron order.
module fc_layer #(
  parameter int unsigned MW        = 64,
  parameter int unsigned MH        = 256,
  parameter int unsigned SIMD      = 4,
  parameter int unsigned PE        = 32,
  parameter int unsigned IN_BITS   = 6,
  parameter bit          IN_SIGNED = 1'b0,
  parameter int unsigned W_W       = 8,
  parameter bit          USE_THR   = 1'b1,
  parameter int unsigned OUT_W     = 6,
  parameter int unsigned NT        = 63,
  localparam int unsigned EW       = IN_SIGNED ? IN_BITS : IN_BITS + 1,
  localparam int unsigned ACC_W    = EW + W_W + $clog2(MW) + 1,
  localparam int unsigned OW       = USE_THR ? OUT_W : ACC_W
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
  output logic [OW-1:0]       out_data
);
  logic signed [EW-1:0] in_ext;
  logic                 v_valid, v_ready;
  logic signed [EW-1:0] v_data [SIMD];

  assign in_ext = IN_SIGNED ? EW'(signed'(in_data)) : EW'({1'b0, in_data});

  stream_dwc #(.SIMD(SIMD), .W(EW)) u_dwc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_ext),
    .out_valid(v_valid), .out_ready(v_ready), .out_data(v_data)
  );

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_W(EW), .W_W(W_W),
         .USE_THR(USE_THR), .NT(NT), .OUT_W(OUT_W), .BIAS(0)) u_mvau (
    .clk, .rst_n,
    .wr_en, .wr_thr, .wr_addr, .wr_data,
    .in_valid(v_valid), .in_ready(v_ready), .in_data(v_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
