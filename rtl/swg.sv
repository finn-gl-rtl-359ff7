// swg: sliding-window generator for a K x K convolution.
//
// Turns a feature map, streamed one element per beat in height-width-
// channel order (channel fastest), into the window vectors of a K x K
// convolution with stride STRIDE and PAD zero pixels on every side. For
// each output pixel (row-major) it emits K*K*CIN/SIMD beats of SIMD
// elements, ordered kernel row, kernel column, channel (channel fastest).
// This is also the column order of the convolution's weight matrix.
//
// The input rows go into a circular line buffer of R = K + STRIDE rows.
// Output row oy may start as soon as the input rows it covers are in;
// meanwhile the buffer keeps loading rows up to R rows ahead of the
// oldest row oy still needs, so that loading and emitting overlap. Taps
// outside the frame read as zero. A new frame starts loading when the
// current one has been fully loaded and emitted.
//
// Timing: while its rows are present, one window beat per cycle the
// consumer accepts; input is accepted one element per cycle while the
// buffer has room.
//
// The paper only says that each Conv2D uses a 3x3 kernel and that the
// first layer of each block has stride 2; the one-pixel zero padding is
// implied by its layer sizes. The line-buffer organisation is this
// design's own.
module swg #(
  parameter int unsigned IFM_H  = 50,
  parameter int unsigned IFM_W  = 20,
  parameter int unsigned CIN    = 64,
  parameter int unsigned K      = 3,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned PAD    = 1,
  parameter int unsigned SIMD   = 4,
  parameter int unsigned IN_W   = 7,
  localparam int unsigned OFM_H = (IFM_H + 2*PAD - K) / STRIDE + 1,
  localparam int unsigned OFM_W = (IFM_W + 2*PAD - K) / STRIDE + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic signed [IN_W-1:0] in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic signed [IN_W-1:0] out_data [SIMD]
);
  localparam int unsigned CF    = CIN / SIMD;
  localparam int unsigned R     = K + STRIDE;
  localparam int unsigned ROWW  = IFM_W * CF;          // words per row
  localparam int unsigned DEPTH = R * ROWW;

  logic signed [IN_W-1:0] lb [DEPTH][SIMD];

  // load side: next row, word in row, lane
  logic [15:0] ly, lw, ls;
  // emit side
  logic [15:0] oy, ox, ky, kx, cf;
  logic        edone;                                  // frame fully emitted

  int first_row, rows_needed;
  always_comb begin
    first_row   = 32'(oy) * STRIDE - PAD;              // oldest row oy uses
    rows_needed = 32'(oy) * STRIDE - PAD + K;          // rows that must be in
    if (rows_needed > int'(IFM_H)) rows_needed = IFM_H;
  end

  assign in_ready  = (32'(ly) < IFM_H) && (edone || int'(32'(ly)) < first_row + int'(R));
  assign out_valid = !edone && (int'(32'(ly)) >= rows_needed);

  always_ff @(posedge clk) begin
    for (int s = 0; s < SIMD; s++) begin
      if (in_valid && in_ready && 32'(ls) == s)
        lb[(32'(ly) % R) * ROWW + 32'(lw)][s] <= in_data;
    end
  end

  // window tap position
  int iy, ix;
  logic in_frame;
  always_comb begin
    iy       = 32'(oy) * STRIDE + 32'(ky) - PAD;
    ix       = 32'(ox) * STRIDE + 32'(kx) - PAD;
    in_frame = (iy >= 0) && (iy < IFM_H) && (ix >= 0) && (ix < IFM_W);
    for (int s = 0; s < SIMD; s++) begin
      out_data[s] = in_frame ? lb[(iy % R) * ROWW + ix * CF + 32'(cf)][s] : '0;
    end
  end

  logic last_tap, frame_end;
  assign last_tap  = (32'(cf) == CF - 1) && (32'(kx) == K - 1) && (32'(ky) == K - 1)
                  && (32'(ox) == OFM_W - 1) && (32'(oy) == OFM_H - 1);
  assign frame_end = (edone || (out_valid && out_ready && last_tap))
                  && (32'(ly) == IFM_H || (in_valid && in_ready && 32'(ly) == IFM_H - 1
                      && 32'(lw) == ROWW - 1 && 32'(ls) == SIMD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {ly, lw, ls} <= '0;
      {oy, ox, ky, kx, cf} <= '0;
      edone <= 1'b0;
    end else if (frame_end) begin
      {ly, lw, ls} <= '0;
      {oy, ox, ky, kx, cf} <= '0;
      edone <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        if (32'(ls) != SIMD - 1) ls <= ls + 1'b1;
        else begin
          ls <= '0;
          if (32'(lw) != ROWW - 1) lw <= lw + 1'b1;
          else begin
            lw <= '0;
            ly <= ly + 1'b1;
          end
        end
      end
      if (out_valid && out_ready) begin
        if (32'(cf) != CF - 1) cf <= cf + 1'b1;
        else begin
          cf <= '0;
          if (32'(kx) != K - 1) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (32'(ky) != K - 1) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (32'(ox) != OFM_W - 1) ox <= ox + 1'b1;
              else begin
                ox <= '0;
                if (32'(oy) != OFM_H - 1) oy <= oy + 1'b1;
                else edone <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

endmodule
