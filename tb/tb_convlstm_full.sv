// tb_convlstm_full: end-to-end test of the ConvLSTM accelerator with every
// parameter at its default (100 x 40 INT8 frames, the full layer sizes and
// folding). It writes random weights and spread-out ascending thresholds
// into every layer, streams two frames back to back with random input
// gaps, takes the three class scores with random stalls and compares them
// with the integer reference model. It reports the frame latency and the
// interval between frames, and fails if the interval exceeds 150,000
// cycles, i.e. if the design would miss the paper's target of 1000
// frames/s at 150 MHz. It also counts the design's mechanisms as the
// reduced-size test does.
module tb_convlstm_full;
  import finngl_pkg::*;
  import convlstm_ref_pkg::*;

  // ---- sizes (the design's defaults) ----
  localparam int IN_H = 100, IN_W = 40;
  localparam int C11 = 64, C12 = 32, C13 = 32, C21 = 64, C22 = 16, C23 = 4;
  localparam int HID = 64, FC1 = 256, NCLS = 3;
  localparam int NFR = 2;
  localparam int MAX_II = 150000;   // 1000 frames/s at 150 MHz
  localparam int WATCHDOG = 20000000;
  // ---- end of sizes ----

  localparam int H1 = (IN_H - 1) / 2 + 1, W1 = (IN_W - 1) / 2 + 1;
  localparam int H2 = (H1 - 1) / 2 + 1, W2 = (W1 - 1) / 2 + 1;
  localparam int IN_DIM = W2 * C23, SEQ = H2, MWL = IN_DIM + HID;
  localparam int OUT_W = 7 + 8 + $clog2(FC1) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_wr_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [7:0] in_data = '0;
  logic signed [OUT_W-1:0] out_data;

  // ---- device under test, default parameters ----
  convlstm_top dut (
    .clk, .rst_n, .cfg, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);
  // ---- end of device under test ----

  // parameters of every layer
  int w [9][];
  int thr [9][];
  int tf[], ti[], tg[], to[], tc[], tt[], th[];

  // mechanism counters
  int n_pad = 0, n_inner_stall = 0, n_out_stall = 0, n_in_gap = 0;
  int n_clamp_lo = 0, n_clamp_hi = 0, n_recur = 0, n_fresh = 0, n_steps = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 7; k++) if (dut.v[k] && !dut.r[k]) n_inner_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.u_lstm.unit_done && 32'(dut.u_lstm.j) == HID - 1) n_steps++;
  end

  task automatic cfg_write(layer_id_e l, mem_sel_e m, int a, int d);
    @(negedge clk);
    cfg.we = 1'b1; cfg.layer = l; cfg.mem = m; cfg.addr = 20'(a); cfg.data = d;
  endtask

  // threshold tables: ascending, step grows with the fan-in
  function automatic void make_thr(ref int t[], input int ch, nt, mw, int centre);
    int step = int'(3.0 * $sqrt(real'(mw))) + 1;
    t = new[ch * nt];
    for (int c = 0; c < ch; c++) for (int k = 0; k < nt; k++)
      t[c * nt + k] = ((centre != 0) ? (k - nt / 2) : (k + 1)) * step + c * 3;
  endfunction

  function automatic void make_w(ref int wv[], input int n);
    wv = new[n];
    foreach (wv[k]) wv[k] = int'($urandom_range(31, 0)) - 16;
  endfunction

  function automatic void count_clamp(const ref int m[]);
    foreach (m[k]) begin
      if (m[k] == 0) n_clamp_lo++;
      if (m[k] == 63) n_clamp_hi++;
    end
  endfunction

  int frames [NFR][];
  longint t_in [NFR], t_out [NFR];
  int scores [NFR][];

  initial begin
    int cin [6];
    int cout_ [6];
    int hh [6];
    int ww [6];
    int st [6];
    cin = '{1, C11, C12, C13, C21, C22};
    cout_ = '{C11, C12, C13, C21, C22, C23};
    hh = '{IN_H, H1, H1, H1, H2, H2};
    ww = '{IN_W, W1, W1, W1, W2, W2};
    st = '{2, 1, 1, 2, 1, 1};
    cfg = '0;

    // ---- parameters ----
    for (int l = 0; l < 6; l++) begin
      make_w(w[l], cout_[l] * 9 * cin[l]);
      make_thr(thr[l], cout_[l], 63, 9 * cin[l] * ((l == 0) ? 8 : 1), 0);
    end
    make_w(w[6], 4 * HID * MWL);
    make_thr(tf, HID, 63, MWL, 1); make_thr(ti, HID, 63, MWL, 1); make_thr(to, HID, 63, MWL, 1);
    make_thr(tg, HID, 62, MWL, 1);
    tc = new[62]; tt = new[62]; th = new[62];
    foreach (tc[k]) begin tc[k] = (2 * k - 61) * 16; tt[k] = k - 30; th[k] = (2 * k - 61) * 16; end
    make_w(w[7], FC1 * HID);
    make_thr(thr[7], FC1, 63, HID, 0);
    make_w(w[8], NCLS * FC1);

    // ---- reference ----
    for (int f = 0; f < NFR; f++) begin
      int m[], nxt[], hs[], lastc[], o1[];
      frames[f] = new[IN_H * IN_W];
      foreach (frames[f][k]) frames[f][k] = int'($urandom_range(255, 0)) - 128;
      m = frames[f];
      for (int l = 0; l < 6; l++) begin
        conv3x3(m, hh[l], ww[l], cin[l], cout_[l], st[l], w[l], thr[l], nxt, n_pad);
        count_clamp(nxt);
        m = nxt;
      end
      lstm(m, IN_DIM, HID, SEQ, w[6], tf, ti, tg, to, tc, tt, th, hs);
      for (int t = 1; t < SEQ; t++) begin
        bit nz = 0;
        for (int j = 0; j < HID; j++) if (hs[(t - 1) * HID + j] != 0) nz = 1;
        if (nz) n_recur++;
      end
      lastc = new[HID];
      foreach (lastc[j]) lastc[j] = hs[(SEQ - 1) * HID + j];
      dense(lastc, HID, FC1, w[7], thr[7], 63, o1);
      count_clamp(o1);
      dense(o1, FC1, NCLS, w[8], thr[7], 0, scores[f]);
      $display("frame %0d reference scores: %0d %0d %0d", f, scores[f][0], scores[f][1], scores[f][2]);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 6; l++) begin
      foreach (w[l][k])   cfg_write(layer_id_e'(l), M_WEIGHTS, k, w[l][k]);
      foreach (thr[l][k]) cfg_write(layer_id_e'(l), M_THR_F, k, thr[l][k]);
    end
    foreach (w[6][k]) cfg_write(L_LSTM, M_WEIGHTS, k, w[6][k]);
    foreach (tf[k]) begin
      cfg_write(L_LSTM, M_THR_F, k, tf[k]); cfg_write(L_LSTM, M_THR_I, k, ti[k]);
      cfg_write(L_LSTM, M_THR_O, k, to[k]);
    end
    foreach (tg[k]) cfg_write(L_LSTM, M_THR_G, k, tg[k]);
    foreach (tc[k]) begin
      cfg_write(L_LSTM, M_THR_C, k, tc[k]); cfg_write(L_LSTM, M_THR_TC, k, tt[k]);
      cfg_write(L_LSTM, M_THR_H, k, th[k]);
    end
    foreach (w[7][k])   cfg_write(L_FC1, M_WEIGHTS, k, w[7][k]);
    foreach (thr[7][k]) cfg_write(L_FC1, M_THR_F, k, thr[7][k]);
    foreach (w[8][k])   cfg_write(L_FC2, M_WEIGHTS, k, w[8][k]);
    @(negedge clk); cfg.we = 1'b0;

    // ---- stream: all frames back to back, input and output concurrently ----
    fork
      begin
        for (int f = 0; f < NFR; f++) begin
          t_in[f] = $time;
          foreach (frames[f][k]) begin
            @(negedge clk);
            while ($urandom_range(7, 0) == 0) begin in_valid = 0; n_in_gap++; @(negedge clk); end
            in_valid = 1; in_data = 8'(frames[f][k]);
            @(posedge clk); while (!in_ready) @(posedge clk);
          end
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        for (int f = 0; f < NFR; f++) begin
          for (int c = 0; c < NCLS; c++) begin
            @(negedge clk); out_ready = 1'($urandom_range(1, 0));
            @(posedge clk);
            while (!(out_valid && out_ready)) begin
              @(negedge clk); out_ready = 1'($urandom_range(1, 0)); @(posedge clk);
            end
            checks++;
            if (int'(out_data) != scores[f][c]) begin
              failures++;
              $display("frame %0d class %0d: got %0d exp %0d", f, c, out_data, scores[f][c]);
            end
          end
          t_out[f] = $time;
          $display("frame %0d: %0d cycles from first input to last score", f, (t_out[f] - t_in[f]) / 10);
          if (f > 0) begin
            n_fresh++;
            $display("frame interval %0d cycles", (t_out[f] - t_out[f-1]) / 10);
            checks++;
            if ((t_out[f] - t_out[f-1]) / 10 > MAX_II) begin
              failures++;
              $display("frame interval above %0d cycles", MAX_II);
            end
          end
        end
      end
    join

    // ---- mechanisms ----
    $display("padding taps %0d, stride-2 layers 2, inner stalls %0d, output stalls %0d, input gaps %0d",
             n_pad, n_inner_stall, n_out_stall, n_in_gap);
    $display("clamped codes low %0d high %0d, LSTM steps %0d (with non-zero h %0d), fresh sequences %0d",
             n_clamp_lo, n_clamp_hi, n_steps, n_recur, n_fresh);
    checks += 8;
    if (n_pad == 0)         begin failures++; $display("no padding taps"); end
    if (n_inner_stall == 0) begin failures++; $display("no stall between layers"); end
    if (n_out_stall == 0)   begin failures++; $display("no output backpressure"); end
    if (n_clamp_lo == 0)    begin failures++; $display("no activation clamped at 0"); end
    if (n_clamp_hi == 0)    begin failures++; $display("no activation clamped at 63"); end
    if (n_recur == 0)       begin failures++; $display("no step reused a non-zero h"); end
    if (n_steps != NFR * SEQ) begin failures++; $display("LSTM ran %0d steps, expected %0d", n_steps, NFR * SEQ); end
    if (NFR > 1 && n_fresh == 0) begin failures++; $display("no second sequence"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
