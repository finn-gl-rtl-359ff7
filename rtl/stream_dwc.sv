// stream_dwc: width converter from one element per beat to SIMD elements
// per beat. Collects SIMD consecutive elements (the first in lane 0) and
// offers them as one beat; it accepts no new element while a full beat
// waits. Throughput is one element per cycle. This plays the part of the
// data-width converters a streaming dataflow design places between layers
// of different parallelism; its form is this design's own.
module stream_dwc #(
  parameter int unsigned SIMD = 4,
  parameter int unsigned W    = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic signed [W-1:0] out_data [SIMD]
);
  localparam int unsigned CW = $clog2(SIMD + 1);
  logic [CW-1:0] cnt;

  assign out_valid = (32'(cnt) == SIMD);
  assign in_ready  = !out_valid;

  always_ff @(posedge clk) begin
    for (int s = 0; s < SIMD; s++) begin
      if (in_valid && in_ready && 32'(cnt) == s) out_data[s] <= in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (out_valid && out_ready) cnt <= '0;
    else if (in_valid && in_ready) cnt <= cnt + 1'b1;
  end

endmodule
