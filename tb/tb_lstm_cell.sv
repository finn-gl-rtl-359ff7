// tb_lstm_cell: checks the element-wise LSTM update against a model of
// the same integer equations: sigmoid/tanh gate codes by threshold
// counting, c_t = Q_c(f*c_{t-1} + i*g), h_t = Q_h(o*tanh(c_t)). Tables
// are random ascending sequences; inputs are random, for random units.
module tb_lstm_cell;
  import finngl_pkg::*;
  localparam int HID = 8, ACC_W = 20, NS = 63, NTH = 62;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0;
  mem_sel_e wr_sel = M_THR_F;
  logic [19:0] wr_addr = '0;
  logic signed [31:0] wr_data = '0;
  logic [2:0] ch = '0;
  logic signed [ACC_W-1:0] acc_f = '0, acc_i = '0, acc_g = '0, acc_o = '0;
  logic signed [5:0] c_prev = '0;
  logic [5:0] f_code, i_code, o_code;
  logic signed [5:0] g_code, c_new, h_new;

  lstm_cell #(.HID(HID), .ACC_W(ACC_W)) dut (.*);

  int TF [HID][NS], TI [HID][NS], TO [HID][NS], TG [HID][NTH];
  int TC [NTH], TT [NTH], TH [NTH];

  function automatic int cnt(int x, int n, int t[]);
    int r = 0;
    for (int k = 0; k < n; k++) if (x >= t[k]) r++;
    return r;
  endfunction

  task automatic wr(mem_sel_e s, int a, int d);
    @(negedge clk); wr_en = 1; wr_sel = s; wr_addr = 20'(a); wr_data = d;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b;
    for (int j = 0; j < HID; j++) begin
      b = -3000 + j * 50; for (int k = 0; k < NS; k++)  begin b += $urandom_range(150, 40); TF[j][k] = b; end
      b = -3000 - j * 30; for (int k = 0; k < NS; k++)  begin b += $urandom_range(150, 40); TI[j][k] = b; end
      b = -2500;          for (int k = 0; k < NS; k++)  begin b += $urandom_range(150, 40); TO[j][k] = b; end
      b = -3000 + j * 20; for (int k = 0; k < NTH; k++) begin b += $urandom_range(150, 40); TG[j][k] = b; end
    end
    b = -2000; for (int k = 0; k < NTH; k++) begin b += $urandom_range(80, 40); TC[k] = b; end
    b = -32;   for (int k = 0; k < NTH; k++) begin b += 1; TT[k] = b + ((k > 31) ? 0 : 0); end
    b = -2000; for (int k = 0; k < NTH; k++) begin b += $urandom_range(80, 40); TH[k] = b; end
    for (int j = 0; j < HID; j++) begin
      for (int k = 0; k < NS; k++) begin
        wr(M_THR_F, j * NS + k, TF[j][k]); wr(M_THR_I, j * NS + k, TI[j][k]); wr(M_THR_O, j * NS + k, TO[j][k]);
      end
      for (int k = 0; k < NTH; k++) wr(M_THR_G, j * NTH + k, TG[j][k]);
    end
    for (int k = 0; k < NTH; k++) begin wr(M_THR_C, k, TC[k]); wr(M_THR_TC, k, TT[k]); wr(M_THR_H, k, TH[k]); end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      int ef, ei, eg, eo, ec, etc, eh, jj;
      int tf[], ti[], tg[], to[];
      jj = $urandom_range(HID - 1, 0);
      @(negedge clk);
      ch = 3'(jj);
      acc_f = ACC_W'(int'($urandom_range(8000, 0)) - 4000);
      acc_i = ACC_W'(int'($urandom_range(8000, 0)) - 4000);
      acc_g = ACC_W'(int'($urandom_range(8000, 0)) - 4000);
      acc_o = ACC_W'(int'($urandom_range(8000, 0)) - 4000);
      c_prev = 6'(int'($urandom_range(62, 0)) - 31);
      @(posedge clk);
      tf = new[NS]; ti = new[NS]; to = new[NS]; tg = new[NTH];
      for (int k = 0; k < NS; k++) begin tf[k] = TF[jj][k]; ti[k] = TI[jj][k]; to[k] = TO[jj][k]; end
      for (int k = 0; k < NTH; k++) tg[k] = TG[jj][k];
      ef = cnt(int'(acc_f), NS, tf);
      ei = cnt(int'(acc_i), NS, ti);
      eo = cnt(int'(acc_o), NS, to);
      eg = cnt(int'(acc_g), NTH, tg) - 31;
      ec = cnt(ef * int'(c_prev) + ei * eg, NTH, TC) - 31;
      etc = cnt(ec, NTH, TT) - 31;
      eh = cnt(eo * etc, NTH, TH) - 31;
      checks += 6;
      if (int'(f_code) != ef) failures++;
      if (int'(i_code) != ei) failures++;
      if (int'(o_code) != eo) failures++;
      if (int'(g_code) != eg) failures++;
      if (int'(c_new) != ec) begin failures++; if (failures < 10) $display("c got %0d exp %0d", c_new, ec); end
      if (int'(h_new) != eh) begin failures++; if (failures < 10) $display("h got %0d exp %0d", h_new, eh); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
