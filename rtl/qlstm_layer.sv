// qlstm_layer: quantised LSTM layer that loops over an input sequence.
//
// For each of SEQ time steps it takes an IN_DIM-element input x_t
// (unsigned 6-bit codes, one per beat), and updates HID hidden units:
//   gate pre-activations  [W | U] * [x_t ; h_{t-1}]   (one mvau)
//   f, i, g, o, c_t, h_t                             (lstm_cell)
// The mvau holds all four gates' weights as a 4*HID x (IN_DIM+HID) matrix.
// Row 4*j + q is gate q of hidden unit j (q = 0 f, 1 i, 2 g, 3 o), so the
// four pre-activations of a unit leave the mvau back to back and the cell
// updates that unit as the fourth arrives. Columns 0..IN_DIM-1 hold the
// input weights W, the rest the recurrent weights U.
//
// The recurrence is a loop in the controller: the hidden and cell states
// live in registers and h_{t-1} is fed back as the tail of the next
// step's input vector. A step can only start once every unit of the
// previous step is done, which is what serialises the layer. h and c
// start at zero for each sequence.
//
// Output: the last hidden state h_SEQ (HID signed 6-bit codes, one per
// beat), or, with EMIT_ALL = 1, the hidden state of every step.
//
// Timing per step: IN_DIM load beats, then (IN_DIM+HID)/SIMD beats into
// the mvau, which needs about NF*max(SF, PE) cycles to produce its 4*HID
// gate sums.
//
// Write port: wr_sel = M_WEIGHTS goes to the mvau (address row*MW + col),
// the threshold selectors to the lstm_cell.
//
// The paper gives the equations, the operator set (MatMul, Threshold,
// element-wise Add and Mul), the for loop over the sequence whose length
// bounds the recurrence, and the output choice of its Scan-based model
// (all hidden states or the last one). The single combined gate matrix,
// the row order and the zero initial state are this design's own.
module qlstm_layer
  import finngl_pkg::*;
#(
  parameter int unsigned IN_DIM   = 40,
  parameter int unsigned HID      = 64,
  parameter int unsigned SEQ      = 25,
  parameter int unsigned SIMD     = 4,
  parameter int unsigned PE       = 32,
  parameter int unsigned A_W      = 6,
  parameter int unsigned W_W      = 8,
  parameter bit          EMIT_ALL = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  mem_sel_e           wr_sel,
  input  logic [19:0]        wr_addr,
  input  logic signed [31:0] wr_data,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [A_W-1:0]     in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [A_W-1:0]     out_data
);
  localparam int unsigned MW    = IN_DIM + HID;
  localparam int unsigned MH    = 4 * HID;
  localparam int unsigned SF    = MW / SIMD;
  localparam int unsigned EW    = A_W + 1;
  localparam int unsigned ACC_W = EW + W_W + $clog2(MW) + 1;
  localparam int unsigned CHW   = (HID > 1) ? $clog2(HID) : 1;
  localparam int unsigned XIW   = (IN_DIM > 1) ? $clog2(IN_DIM) : 1;

  // ------------------------------------------------------------ state
  logic signed [EW-1:0]  xbuf [IN_DIM];
  logic signed [A_W-1:0] hbuf [HID];
  logic signed [A_W-1:0] cbuf [HID];

  typedef enum logic [1:0] {F_LOAD, F_FEED, F_WAIT} feed_e;
  feed_e        fstate;
  logic [15:0]  xi;      // input element counter
  logic [15:0]  fsf;     // vector beat counter into the mvau
  logic [15:0]  t;       // time step
  logic [1:0]   q;       // gate of the next mvau result
  logic [15:0]  j;       // hidden unit of the next mvau result
  logic signed [ACC_W-1:0] acc_f, acc_i, acc_g;

  // ------------------------------------------------------------ gate mvau
  logic                    m_in_valid, m_in_ready;
  logic signed [EW-1:0]    m_in_data [SIMD];
  logic                    m_out_valid, m_out_ready;
  logic [ACC_W-1:0]        m_out_data;

  always_comb begin
    for (int s = 0; s < SIMD; s++) begin
      int e;
      e = 32'(fsf) * SIMD + s;
      if (e < IN_DIM) m_in_data[s] = xbuf[e];
      else            m_in_data[s] = EW'(hbuf[e - IN_DIM]);
    end
  end
  assign m_in_valid = (fstate == F_FEED);

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_W(EW), .W_W(W_W),
         .USE_THR(1'b0)) u_gates (
    .clk, .rst_n,
    .wr_en(wr_en && wr_sel == M_WEIGHTS), .wr_thr(1'b0), .wr_addr, .wr_data,
    .in_valid(m_in_valid), .in_ready(m_in_ready), .in_data(m_in_data),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out_data)
  );

  // ------------------------------------------------------------ cell
  logic [A_W-1:0]        f_code, i_code, o_code;
  logic signed [A_W-1:0] g_code, c_new, h_new;

  lstm_cell #(.HID(HID), .ACC_W(ACC_W), .A_W(A_W)) u_cell (
    .clk,
    .wr_en(wr_en && wr_sel != M_WEIGHTS), .wr_sel, .wr_addr, .wr_data,
    .ch(CHW'(j)),
    .acc_f, .acc_i, .acc_g, .acc_o(signed'(m_out_data)),
    .c_prev(cbuf[CHW'(j)]),
    .f_code, .i_code, .g_code, .o_code,
    .c_new, .h_new
  );

  logic emit, unit_done;
  assign emit        = EMIT_ALL || (32'(t) == SEQ - 1);
  assign out_valid   = m_out_valid && (q == 2'd3) && emit;
  assign out_data    = h_new;
  assign m_out_ready = (q != 2'd3) || !emit || out_ready;
  assign unit_done   = m_out_valid && m_out_ready && (q == 2'd3);
  assign in_ready    = (fstate == F_LOAD);

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate <= F_LOAD;
      xi     <= '0;
      fsf    <= '0;
      t      <= '0;
      q      <= '0;
      j      <= '0;
    end else begin
      // result side: count gates and units
      if (m_out_valid && m_out_ready) begin
        q <= q + 2'd1;
        if (q == 2'd3) j <= j + 1'b1;
      end
      case (fstate)
        F_LOAD: if (in_valid) begin
          if (32'(xi) == IN_DIM - 1) begin
            xi     <= '0;
            fstate <= F_FEED;
          end else begin
            xi <= xi + 1'b1;
          end
        end
        F_FEED: if (m_in_ready) begin
          if (32'(fsf) == SF - 1) begin
            fsf    <= '0;
            fstate <= F_WAIT;
          end else begin
            fsf <= fsf + 1'b1;
          end
        end
        F_WAIT: if (unit_done && 32'(j) == HID - 1) begin
          j      <= '0;
          fstate <= F_LOAD;
          t      <= (32'(t) == SEQ - 1) ? '0 : t + 1'b1;
        end
        default: fstate <= F_LOAD;
      endcase
    end
  end

  // data registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < HID; k++) begin
        hbuf[k] <= '0;
        cbuf[k] <= '0;
      end
    end else if (fstate == F_WAIT && unit_done && 32'(j) == HID - 1
                 && 32'(t) == SEQ - 1) begin
      // end of a sequence: the next one starts from zero state
      for (int k = 0; k < HID; k++) begin
        hbuf[k] <= '0;
        cbuf[k] <= '0;
      end
    end else if (unit_done) begin
      hbuf[CHW'(j)] <= h_new;
      cbuf[CHW'(j)] <= c_new;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) xbuf[XIW'(xi)] <= EW'({1'b0, in_data});
    if (m_out_valid && m_out_ready) begin
      case (q)
        2'd0: acc_f <= signed'(m_out_data);
        2'd1: acc_i <= signed'(m_out_data);
        2'd2: acc_g <= signed'(m_out_data);
        default: ;
      endcase
    end
  end

endmodule
