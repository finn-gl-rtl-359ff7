// tb_qlstm_layer: runs a small LSTM layer (8 inputs, 4 hidden units,
// 3 steps) that emits every hidden state, over two sequences, and checks
// each h_t against the integer reference model. The second sequence
// checks that the state restarts from zero. Random input gaps and output
// stalls; counts the recurrent steps that reused a non-zero h_{t-1}.
module tb_qlstm_layer;
  import finngl_pkg::*;
  import convlstm_ref_pkg::*;
  localparam int IN_DIM = 8, HID = 4, SEQ = 3, SIMD = 4, PE = 4, MW = IN_DIM + HID;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, recur = 0;

  logic wr_en = 0;
  mem_sel_e wr_sel = M_WEIGHTS;
  logic [19:0] wr_addr = '0;
  logic signed [31:0] wr_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [5:0] in_data = '0, out_data;

  qlstm_layer #(.IN_DIM(IN_DIM), .HID(HID), .SEQ(SEQ), .SIMD(SIMD), .PE(PE),
                .EMIT_ALL(1'b1)) dut (.*);

  int wt[], tf[], ti[], tg[], to[], tc[], tt[], th[];
  int xs [2][];
  int hs [2][];

  task automatic wr(mem_sel_e s, int a, int d);
    @(negedge clk); wr_en = 1; wr_sel = s; wr_addr = 20'(a); wr_data = d;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wt = new[4 * HID * MW];
    foreach (wt[k]) wt[k] = int'($urandom_range(63, 0)) - 32;
    tf = new[HID * 63]; ti = new[HID * 63]; to = new[HID * 63]; tg = new[HID * 62];
    foreach (tf[k]) begin tf[k] = (k % 63 - 31) * 60 + (k / 63) * 9; ti[k] = (k % 63 - 31) * 55; to[k] = (k % 63 - 30) * 50; end
    foreach (tg[k]) tg[k] = (k % 62 - 30) * 70 - (k / 62) * 5;
    tc = new[62]; tt = new[62]; th = new[62];
    foreach (tc[k]) begin tc[k] = (2 * k - 61) * 16; tt[k] = k - 30; th[k] = (2 * k - 61) * 16; end
    for (int s = 0; s < 2; s++) begin
      xs[s] = new[SEQ * IN_DIM];
      foreach (xs[s][k]) xs[s][k] = int'($urandom_range(63, 0));
      lstm(xs[s], IN_DIM, HID, SEQ, wt, tf, ti, tg, to, tc, tt, th, hs[s]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (wt[k]) wr(M_WEIGHTS, k, wt[k]);
    foreach (tf[k]) begin wr(M_THR_F, k, tf[k]); wr(M_THR_I, k, ti[k]); wr(M_THR_O, k, to[k]); end
    foreach (tg[k]) wr(M_THR_G, k, tg[k]);
    foreach (tc[k]) begin wr(M_THR_C, k, tc[k]); wr(M_THR_TC, k, tt[k]); wr(M_THR_H, k, th[k]); end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 2; s++) begin
      for (int t = 1; t < SEQ; t++) begin
        bit nz = 0;
        for (int j = 0; j < HID; j++) if (hs[s][(t - 1) * HID + j] != 0) nz = 1;
        if (nz) recur++;
      end
    end
    fork
      begin
        for (int s = 0; s < 2; s++) foreach (xs[s][k]) begin
          @(negedge clk);
          while ($urandom_range(3, 0) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = 6'(xs[s][k]);
          @(posedge clk); while (!in_ready) @(posedge clk);
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        for (int s = 0; s < 2; s++) foreach (hs[s][k]) begin
          @(negedge clk); out_ready = 1'($urandom_range(1, 0));
          @(posedge clk);
          while (!(out_valid && out_ready)) begin
            @(negedge clk); out_ready = 1'($urandom_range(1, 0)); @(posedge clk);
          end
          checks++;
          if (int'(signed'(out_data)) != hs[s][k]) begin
            failures++;
            if (failures < 10) $display("seq %0d t %0d j %0d: got %0d exp %0d", s, k / HID, k % HID,
                                        signed'(out_data), hs[s][k]);
          end
        end
      end
    join
    $display("recurrent steps with non-zero h: %0d", recur);
    checks++;
    if (recur == 0) begin failures++; $display("recurrence never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
