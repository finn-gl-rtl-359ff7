// tb_fc_layer: checks two small fully connected layers fed the same code
// stream: one reads the codes as signed (as the layer after the LSTM
// does) and thresholds its outputs, the other reads them as unsigned and
// returns raw accumulators (as the class-score layer does). Reference:
// direct matrix-vector products. Random input gaps and output stalls.
module tb_fc_layer;
  localparam int MW = 16, MH = 6, SIMD = 4, PE = 3, NT = 63, NVEC = 12;
  localparam int ACC_W = 7 + 8 + $clog2(MW) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, wr_thr = 0;
  logic [19:0] wr_addr = '0;
  logic signed [31:0] wr_data = '0;
  logic in_valid = 0, in_ready_a, in_ready_b, out_valid_a, out_valid_b, out_ready = 0;
  logic [5:0] in_data = '0, out_a;
  logic [ACC_W-1:0] out_b;

  fc_layer #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_BITS(6), .IN_SIGNED(1'b1),
             .USE_THR(1'b1)) u_a (
    .clk, .rst_n, .wr_en, .wr_thr, .wr_addr, .wr_data, .in_valid, .in_ready(in_ready_a),
    .in_data, .out_valid(out_valid_a), .out_ready, .out_data(out_a));
  fc_layer #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_BITS(6), .IN_SIGNED(1'b0),
             .USE_THR(1'b0)) u_b (
    .clk, .rst_n, .wr_en, .wr_thr, .wr_addr, .wr_data, .in_valid, .in_ready(in_ready_b),
    .in_data, .out_valid(out_valid_b), .out_ready, .out_data(out_b));

  int Wt [MH][MW];
  int T [MH][NT];
  logic [5:0] X [NVEC][MW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < MH; r++) begin
      for (int c = 0; c < MW; c++) Wt[r][c] = int'($urandom_range(255, 0)) - 128;
      for (int k = 0; k < NT; k++) T[r][k] = -4000 + k * 130 - r * 11;
    end
    for (int v = 0; v < NVEC; v++) for (int c = 0; c < MW; c++) X[v][c] = 6'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < MH; r++) for (int c = 0; c < MW; c++) begin
      @(negedge clk); wr_en = 1; wr_thr = 0; wr_addr = 20'(r * MW + c); wr_data = Wt[r][c];
    end
    for (int r = 0; r < MH; r++) for (int k = 0; k < NT; k++) begin
      @(negedge clk); wr_en = 1; wr_thr = 1; wr_addr = 20'(r * NT + k); wr_data = T[r][k];
    end
    @(negedge clk); wr_en = 0;
    fork
      begin
        for (int v = 0; v < NVEC; v++) for (int c = 0; c < MW; c++) begin
          @(negedge clk);
          while ($urandom_range(3, 0) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = X[v][c];
          @(posedge clk); while (!in_ready_a) @(posedge clk);
          if (!in_ready_b) begin failures++; $display("layers out of step"); end
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        for (int v = 0; v < NVEC; v++) for (int r = 0; r < MH; r++) begin
          int sa, sb, na;
          sa = 0; sb = 0; na = 0;
          @(negedge clk); out_ready = 1'($urandom_range(1, 0));
          @(posedge clk);
          while (!(out_valid_a && out_ready)) begin
            @(negedge clk); out_ready = 1'($urandom_range(1, 0)); @(posedge clk);
          end
          for (int c = 0; c < MW; c++) begin
            sa += Wt[r][c] * int'(signed'(X[v][c]));
            sb += Wt[r][c] * int'(X[v][c]);
          end
          for (int k = 0; k < NT; k++) if (sa >= T[r][k]) na++;
          checks += 2;
          if (int'(out_a) != na) begin
            failures++; if (failures < 10) $display("v%0d r%0d act got %0d exp %0d", v, r, out_a, na);
          end
          if (!out_valid_b || int'(signed'(out_b)) != sb) begin
            failures++; if (failures < 10) $display("v%0d r%0d raw got %0d exp %0d", v, r, signed'(out_b), sb);
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
