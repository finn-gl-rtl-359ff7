// tb_conv_layer: checks a small 3x3, stride-1, padded convolution layer
// with 6-bit unsigned inputs and thresholded 6-bit outputs against a
// direct convolution followed by a threshold count. Two frames, random
// output stalls. Also checks the frame latency without stalls against
// first-rows fill + pixels * NF * max(SF, PE) + PE, which holds only if
// the window generator overlaps loading with computing.
module tb_conv_layer;
  localparam int H = 4, W = 5, CIN = 4, COUT = 8, K = 3, SIMD = 4, PE = 4, NT = 63;
  localparam int SF = K * K * CIN / SIMD, NF = COUT / PE;
  // fill the rows the first output row needs, then NF*max(SF,PE) cycles
  // per pixel (load overlaps compute), then drain the last PE outputs
  localparam int EXP_LAT = (K - 1) * W * CIN + H * W * NF * ((SF > PE) ? SF : PE) + PE;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, wr_thr = 0;
  logic [19:0] wr_addr = '0;
  logic signed [31:0] wr_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [5:0] in_data = '0, out_data;

  conv_layer #(.IFM_H(H), .IFM_W(W), .CIN(CIN), .COUT(COUT), .K(K), .STRIDE(1), .PAD(1),
               .SIMD(SIMD), .PE(PE), .IN_BITS(6), .IN_SIGNED(1'b0)) dut (.*);

  int Wt [COUT][K*K*CIN];
  int T [COUT][NT];
  int F [2][H][W][CIN];

  function automatic int ref_out(int f, int y, int x, int o);
    int a = 0, n = 0;
    for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) for (int c = 0; c < CIN; c++) begin
      int iy = y + ky - 1, ix = x + kx - 1;
      if (iy >= 0 && iy < H && ix >= 0 && ix < W) a += Wt[o][(ky * K + kx) * CIN + c] * F[f][iy][ix][c];
    end
    for (int k = 0; k < NT; k++) if (a >= T[o][k]) n++;
    return n;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    for (int o = 0; o < COUT; o++) begin
      for (int c = 0; c < K * K * CIN; c++) Wt[o][c] = int'($urandom_range(255, 0)) - 128;
      for (int k = 0; k < NT; k++) T[o][k] = -12000 + k * 400 + o * 13;
    end
    for (int f = 0; f < 2; f++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int c = 0; c < CIN; c++) F[f][y][x][c] = int'($urandom_range(63, 0));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < COUT; o++) for (int c = 0; c < K * K * CIN; c++) begin
      @(negedge clk); wr_en = 1; wr_thr = 0; wr_addr = 20'(o * K * K * CIN + c); wr_data = Wt[o][c];
    end
    for (int o = 0; o < COUT; o++) for (int k = 0; k < NT; k++) begin
      @(negedge clk); wr_en = 1; wr_thr = 1; wr_addr = 20'(o * NT + k); wr_data = T[o][k];
    end
    @(negedge clk); wr_en = 0;
    for (int f = 0; f < 2; f++) begin
      t0 = int'($time);
      fork
        begin
          for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < CIN; c++) begin
            @(negedge clk); in_valid = 1; in_data = 6'(F[f][y][x][c]);
            @(posedge clk); while (!in_ready) @(posedge clk);
          end
          @(negedge clk); in_valid = 0;
        end
        begin
          for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int o = 0; o < COUT; o++) begin
            @(negedge clk); out_ready = (f == 0) ? 1'b1 : 1'($urandom_range(1, 0));
            @(posedge clk);
            while (!(out_valid && out_ready)) begin
              @(negedge clk); out_ready = (f == 0) ? 1'b1 : 1'($urandom_range(1, 0)); @(posedge clk);
            end
            checks++;
            if (int'(out_data) != ref_out(f, y, x, o)) begin
              failures++;
              if (failures < 10) $display("f%0d (%0d,%0d,%0d) got %0d exp %0d", f, y, x, o, out_data, ref_out(f, y, x, o));
            end
          end
        end
      join
      lat = (int'($time) - t0) / 10;
      if (f == 0) begin
        checks++;
        // one cycle of slack at each end for the testbench's own handshake
        if (lat < EXP_LAT || lat > EXP_LAT + 3) begin
          failures++;
          $display("frame took %0d cycles, expected about %0d", lat, EXP_LAT);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
