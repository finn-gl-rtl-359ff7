// tb_mvau: checks the folded matrix-vector unit against a direct
// matrix-vector product. Two units see the same random vectors: one
// returns raw accumulators, one applies per-row thresholds. The first
// vectors run without backpressure and their latency is checked against
// the fold count (NF folds of max(SF, PE) cycles each); later
// vectors run with random input gaps and random output stalls.
module tb_mvau;
  localparam int MW = 12, MH = 8, SIMD = 4, PE = 2, IN_W = 7, NT = 63;
  localparam int SF = MW / SIMD, NF = MH / PE;
  localparam int ACC_W = IN_W + 8 + $clog2(MW) + 1;
  localparam int NVEC = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic wr_en = 0, wr_thr = 0;
  logic [19:0] wr_addr = '0;
  logic signed [31:0] wr_data = '0;
  logic in_valid = 0;
  logic in_ready_r, in_ready_t;
  logic signed [IN_W-1:0] in_data [SIMD];
  logic out_valid_r, out_valid_t, out_ready = 0;
  logic [ACC_W-1:0] out_r;
  logic [5:0] out_t;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_W(IN_W), .USE_THR(1'b0)) u_raw (
    .clk, .rst_n, .wr_en, .wr_thr, .wr_addr, .wr_data,
    .in_valid, .in_ready(in_ready_r), .in_data,
    .out_valid(out_valid_r), .out_ready, .out_data(out_r));
  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_W(IN_W), .USE_THR(1'b1), .NT(NT)) u_thr (
    .clk, .rst_n, .wr_en, .wr_thr, .wr_addr, .wr_data,
    .in_valid, .in_ready(in_ready_t), .in_data,
    .out_valid(out_valid_t), .out_ready, .out_data(out_t));

  int W [MH][MW];
  int T [MH][NT];
  int X [NVEC][MW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_acc(int v, int r);
    int a = 0;
    for (int c = 0; c < MW; c++) a += W[r][c] * X[v][c];
    return a;
  endfunction

  function automatic int ref_act(int v, int r);
    int a = ref_acc(v, r), n = 0;
    for (int k = 0; k < NT; k++) if (a >= T[r][k]) n++;
    return n;
  endfunction

  // producer
  int sent = 0;
  logic stall_mode = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready_r) begin
        if (!in_ready_t) begin failures++; $display("units out of step"); end
        sent++;
      end
    end
  end

  initial begin
    for (int r = 0; r < MH; r++) begin
      for (int c = 0; c < MW; c++) W[r][c] = int'($urandom_range(255, 0)) - 128;
      for (int k = 0; k < NT; k++) T[r][k] = -6000 + k * 190 + r * 7;
    end
    for (int v = 0; v < NVEC; v++)
      for (int c = 0; c < MW; c++) X[v][c] = int'($urandom_range(127, 0)) - 64;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load parameters
    for (int r = 0; r < MH; r++) for (int c = 0; c < MW; c++) begin
      @(negedge clk); wr_en = 1; wr_thr = 0; wr_addr = 20'(r * MW + c); wr_data = W[r][c];
    end
    for (int r = 0; r < MH; r++) for (int k = 0; k < NT; k++) begin
      @(negedge clk); wr_en = 1; wr_thr = 1; wr_addr = 20'(r * NT + k); wr_data = T[r][k];
    end
    @(negedge clk); wr_en = 0;
    fork
      // input side
      begin
        for (int v = 0; v < NVEC; v++) begin
          for (int s = 0; s < SF; s++) begin
            @(negedge clk);
            while (v >= 4 && $urandom_range(3, 0) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1;
            for (int e = 0; e < SIMD; e++) in_data[e] = IN_W'(X[v][s * SIMD + e]);
            @(posedge clk);
            while (!in_ready_r) @(posedge clk);
          end
        end
        @(negedge clk); in_valid = 0;
      end
      // output side
      begin
        int t0, lat;
        for (int v = 0; v < NVEC; v++) begin
          t0 = int'($time);
          for (int r = 0; r < MH; r++) begin
            @(negedge clk);
            out_ready = (v < 4) ? 1'b1 : 1'($urandom_range(1, 0));
            @(posedge clk);
            while (!(out_valid_r && out_ready)) begin
              @(negedge clk);
              out_ready = (v < 4) ? 1'b1 : 1'($urandom_range(1, 0));
              @(posedge clk);
            end
            checks += 2;
            if (!out_valid_t) begin failures++; $display("thr unit not valid"); end
            if (int'(signed'(out_r)) != ref_acc(v, r)) begin
              failures++;
              if (failures < 10) $display("v%0d r%0d raw got %0d exp %0d", v, r, signed'(out_r), ref_acc(v, r));
            end
            if (int'(out_t) != ref_act(v, r)) begin
              failures++;
              if (failures < 10) $display("v%0d r%0d act got %0d exp %0d", v, r, out_t, ref_act(v, r));
            end
          end
          lat = (int'($time) - t0) / 10;
          if (v >= 1 && v < 4) begin
            // back to back with no stalls: NF folds of max(SF, PE) cycles
            checks++;
            if (lat != NF * ((SF > PE) ? SF : PE)) begin
              failures++;
              $display("vector %0d took %0d cycles, expected %0d", v, lat, NF * ((SF > PE) ? SF : PE));
            end
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
