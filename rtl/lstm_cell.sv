// lstm_cell: the element-wise part of one LSTM state update, for one
// hidden unit per call.
//
// Given the four integer gate pre-activations of hidden unit ch (the
// matrix products W*x_t + U*h_{t-1}; the gate biases live in the
// thresholds) and the unit's previous cell state, it computes
//   f = sigma(acc_f), i = sigma(acc_i), g = tanh(acc_g), o = sigma(acc_o)
//   c_t = Q_c(f*c_{t-1} + i*g)
//   h_t = Q_h(o * tanh(c_t))
// with every activation and quantiser a multithreshold:
//   sigmoid gates: 63 per-unit thresholds -> unsigned code [0, 63]
//   tanh gate:     62 per-unit thresholds -> signed code [-31, 31]
//   Q_c, tanh(c_t), Q_h: 62 shared thresholds -> signed code [-31, 31]
// The element-wise products and the sum are exact integer operations. The
// sum is exact only because f*c_{t-1} and i*g carry the same scale, which
// holds when the three sigmoids share one quantiser scale and the tanh
// gate's scale equals the cell-state scale; the scales themselves are
// folded into the next thresholds.
//
// Combinational from the gate inputs to c_new/h_new; only the threshold
// writes are clocked. Write port: wr_sel picks the table (M_THR_F, _I,
// _G, _O: address ch*NT + k; M_THR_C, _TC, _H: address k).
//
// From the paper: the equations, the use of thresholds for sigmoid and
// tanh, element-wise Mul/Add nodes with floating-point scales absorbed
// into the following thresholds, and tables of 62 thresholds for signed
// 6-bit codes. Which codes are signed, the per-unit versus shared tables
// and the equal-scale condition are this design's own choices.
module lstm_cell
  import finngl_pkg::*;
#(
  parameter int unsigned HID     = 64,
  parameter int unsigned ACC_W   = 23,
  parameter int unsigned A_W     = 6,
  parameter int unsigned NT_SIG  = 63,
  parameter int unsigned NT_TANH = 62,
  parameter int unsigned E_W     = 16,
  localparam int unsigned CHW    = (HID > 1) ? $clog2(HID) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  mem_sel_e                wr_sel,
  input  logic [19:0]             wr_addr,
  input  logic signed [31:0]      wr_data,
  input  logic [CHW-1:0]          ch,
  input  logic signed [ACC_W-1:0] acc_f,
  input  logic signed [ACC_W-1:0] acc_i,
  input  logic signed [ACC_W-1:0] acc_g,
  input  logic signed [ACC_W-1:0] acc_o,
  input  logic signed [A_W-1:0]   c_prev,
  output logic        [A_W-1:0]   f_code,
  output logic        [A_W-1:0]   i_code,
  output logic signed [A_W-1:0]   g_code,
  output logic        [A_W-1:0]   o_code,
  output logic signed [A_W-1:0]   c_new,
  output logic signed [A_W-1:0]   h_new
);
  localparam int BIAS_T = -(int'(NT_TANH) / 2);

  logic signed [ACC_W-1:0] thr_f [HID][NT_SIG];
  logic signed [ACC_W-1:0] thr_i [HID][NT_SIG];
  logic signed [ACC_W-1:0] thr_o [HID][NT_SIG];
  logic signed [ACC_W-1:0] thr_g [HID][NT_TANH];
  logic signed [E_W-1:0]   thr_c  [NT_TANH];
  logic signed [E_W-1:0]   thr_tc [NT_TANH];
  logic signed [E_W-1:0]   thr_h  [NT_TANH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      case (wr_sel)
        M_THR_F:  thr_f[32'(wr_addr) / NT_SIG][32'(wr_addr) % NT_SIG]   <= wr_data[ACC_W-1:0];
        M_THR_I:  thr_i[32'(wr_addr) / NT_SIG][32'(wr_addr) % NT_SIG]   <= wr_data[ACC_W-1:0];
        M_THR_O:  thr_o[32'(wr_addr) / NT_SIG][32'(wr_addr) % NT_SIG]   <= wr_data[ACC_W-1:0];
        M_THR_G:  thr_g[32'(wr_addr) / NT_TANH][32'(wr_addr) % NT_TANH] <= wr_data[ACC_W-1:0];
        M_THR_C:  thr_c[32'(wr_addr) % NT_TANH]  <= wr_data[E_W-1:0];
        M_THR_TC: thr_tc[32'(wr_addr) % NT_TANH] <= wr_data[E_W-1:0];
        M_THR_H:  thr_h[32'(wr_addr) % NT_TANH]  <= wr_data[E_W-1:0];
        default: ;
      endcase
    end
  end

  // gate activations
  multithreshold #(.IN_W(ACC_W), .NT(NT_SIG),  .OUT_W(A_W), .BIAS(0))
    u_sig_f (.x(acc_f), .thr(thr_f[ch]), .y(f_code));
  multithreshold #(.IN_W(ACC_W), .NT(NT_SIG),  .OUT_W(A_W), .BIAS(0))
    u_sig_i (.x(acc_i), .thr(thr_i[ch]), .y(i_code));
  multithreshold #(.IN_W(ACC_W), .NT(NT_SIG),  .OUT_W(A_W), .BIAS(0))
    u_sig_o (.x(acc_o), .thr(thr_o[ch]), .y(o_code));
  logic [A_W-1:0] g_raw;
  multithreshold #(.IN_W(ACC_W), .NT(NT_TANH), .OUT_W(A_W), .BIAS(BIAS_T))
    u_tanh_g (.x(acc_g), .thr(thr_g[ch]), .y(g_raw));
  assign g_code = signed'(g_raw);

  // cell state: element-wise Mul, Mul, Add, then the cell quantiser
  logic signed [E_W-1:0] p_fc, p_ig, c_sum, c_ext, p_oh;
  assign p_fc  = E_W'(signed'({1'b0, f_code}) * c_prev);
  assign p_ig  = E_W'(signed'({1'b0, i_code}) * g_code);
  assign c_sum = p_fc + p_ig;

  logic [A_W-1:0] c_raw, tc_raw, h_raw;
  multithreshold #(.IN_W(E_W), .NT(NT_TANH), .OUT_W(A_W), .BIAS(BIAS_T))
    u_q_c (.x(c_sum), .thr(thr_c), .y(c_raw));
  assign c_new = signed'(c_raw);

  // hidden state: tanh of the new cell state, Mul with the output gate,
  // then the hidden-state quantiser
  assign c_ext = E_W'(c_new);
  multithreshold #(.IN_W(E_W), .NT(NT_TANH), .OUT_W(A_W), .BIAS(BIAS_T))
    u_tanh_c (.x(c_ext), .thr(thr_tc), .y(tc_raw));
  assign p_oh = E_W'(signed'({1'b0, o_code}) * signed'(tc_raw));
  multithreshold #(.IN_W(E_W), .NT(NT_TANH), .OUT_W(A_W), .BIAS(BIAS_T))
    u_q_h (.x(p_oh), .thr(thr_h), .y(h_raw));
  assign h_new = signed'(h_raw);

endmodule
