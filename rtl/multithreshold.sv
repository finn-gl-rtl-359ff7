// multithreshold: the quantised activation of the network.
//
// The output is the number of thresholds that the input is greater than
// or equal to, plus a constant output bias. With ascending thresholds this
// models any monotonically increasing activation (ReLU, sigmoid, tanh)
// followed by a uniform quantiser, with any scale and bias folded into the
// threshold values. A bias of 0 gives an unsigned code in [0, NT]; a bias
// of -31 with NT = 62 gives the signed narrow-range 6-bit code [-31, 31].
//
// Purely combinational: NT parallel comparators and a population count.
// The thresholds come in as an array so that the caller can hold them in
// any memory. The comparison rule (count of thresholds <= input) follows
// the paper; the array interface is this design's own.
module multithreshold #(
  parameter int unsigned IN_W  = 24,
  parameter int unsigned NT    = 63,
  parameter int unsigned OUT_W = 6,
  parameter int          BIAS  = 0
) (
  input  logic signed [IN_W-1:0] x,
  input  logic signed [IN_W-1:0] thr [NT],
  output logic        [OUT_W-1:0] y
);
  localparam int unsigned CW = $clog2(NT + 1) + 1;

  logic [CW-1:0] cnt;

  always_comb begin
    cnt = '0;
    for (int i = 0; i < NT; i++) begin
      if (x >= thr[i]) cnt = cnt + CW'(1);
    end
  end

  logic signed [31:0] sum;
  assign sum = 32'(signed'({1'b0, cnt})) + BIAS;
  assign y   = sum[OUT_W-1:0];

endmodule
