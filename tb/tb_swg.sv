// tb_swg: checks the sliding-window generator for a 3x3 window, stride 2,
// one-pixel zero padding, against windows cut directly from the frame.
// Two random frames are sent, loading concurrently with the window
// read-out (the generator overlaps them); the output side stalls at random. Counts
// the taps that fall into the padding and requires some.
module tb_swg;
  localparam int H = 5, W = 6, CIN = 8, K = 3, STRIDE = 2, PAD = 1, SIMD = 4, IN_W = 7;
  localparam int OH = (H + 2 * PAD - K) / STRIDE + 1, OW = (W + 2 * PAD - K) / STRIDE + 1;
  localparam int CF = CIN / SIMD;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, pad_taps = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [IN_W-1:0] in_data = '0;
  logic signed [IN_W-1:0] out_data [SIMD];

  swg #(.IFM_H(H), .IFM_W(W), .CIN(CIN), .K(K), .STRIDE(STRIDE), .PAD(PAD),
        .SIMD(SIMD), .IN_W(IN_W)) dut (.*);

  int F [2][H][W][CIN];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 2; f++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int c = 0; c < CIN; c++) F[f][y][x][c] = int'($urandom_range(126, 1)) - 63;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      fork
      // load, concurrently with the windows
      begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < CIN; c++) begin
        @(negedge clk); in_valid = 1; in_data = IN_W'(F[f][y][x][c]);
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
      end
      // windows
      begin
      for (int oy = 0; oy < OH; oy++) for (int ox = 0; ox < OW; ox++)
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) for (int cf = 0; cf < CF; cf++) begin
        int iy, ix, e;
        @(negedge clk); out_ready = 1'($urandom_range(1, 0));
        @(posedge clk);
        while (!(out_valid && out_ready)) begin
          @(negedge clk); out_ready = 1'($urandom_range(1, 0)); @(posedge clk);
        end
        iy = oy * STRIDE + ky - PAD; ix = ox * STRIDE + kx - PAD;
        if (iy < 0 || iy >= H || ix < 0 || ix >= W) pad_taps++;
        for (int s = 0; s < SIMD; s++) begin
          e = (iy < 0 || iy >= H || ix < 0 || ix >= W) ? 0 : F[f][iy][ix][cf * SIMD + s];
          checks++;
          if (int'(out_data[s]) != e) begin
            failures++;
            if (failures < 10) $display("f%0d (%0d,%0d) k(%0d,%0d) lane %0d got %0d exp %0d",
                                        f, oy, ox, ky, kx, cf * SIMD + s, out_data[s], e);
          end
        end
      end
      end
      join
      @(negedge clk); out_ready = 0;
      @(posedge clk);
      checks++;
      if (out_valid || !in_ready) begin failures++; $display("did not return to load after frame"); end
    end
    checks++;
    if (pad_taps == 0) begin failures++; $display("no padding taps seen"); end
    $display("padding taps: %0d", pad_taps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
