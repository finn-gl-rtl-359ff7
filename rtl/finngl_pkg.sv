// finngl_pkg: types and constants shared by the Q-ConvLSTM accelerator.
//
// The network quantises weights to 8 bits and activations to 6 bits
// (the W8A6 scheme), and the input order-book features to INT8. Every
// layer holds its own weights and thresholds in on-chip memory. They are
// written through one configuration port (cfg_wr_t) before frames are
// streamed. That port, its layer numbering and its memory selectors are
// this design's own choice: the trained parameters are not fixed in the
// logic.
package finngl_pkg;

  localparam int unsigned W_BITS   = 8;   // weight precision (W8)
  localparam int unsigned A_BITS   = 6;   // activation precision (A6)
  localparam int unsigned X_BITS   = 8;   // input feature precision (INT8)

  // Thresholds per channel: an unsigned 6-bit activation has 64 levels,
  // a signed narrow-range one ([-31, 31]) has 63 levels.
  localparam int unsigned NT_U     = 63;
  localparam int unsigned NT_S     = 62;
  localparam int          BIAS_S   = -31;

  // Layer numbers on the configuration port.
  typedef enum logic [3:0] {
    L_CONV1_1 = 4'd0,
    L_CONV1_2 = 4'd1,
    L_CONV1_3 = 4'd2,
    L_CONV2_1 = 4'd3,
    L_CONV2_2 = 4'd4,
    L_CONV2_3 = 4'd5,
    L_LSTM    = 4'd6,
    L_FC1     = 4'd7,
    L_FC2     = 4'd8
  } layer_id_e;

  // Memory selector within a layer. Conv and dense layers use WEIGHTS and
  // THR_GATE_F (their single threshold table). The LSTM uses all of them.
  typedef enum logic [2:0] {
    M_WEIGHTS  = 3'd0,
    M_THR_F    = 3'd1,   // forget-gate sigmoid (per hidden unit)
    M_THR_I    = 3'd2,   // input-gate sigmoid (per hidden unit)
    M_THR_G    = 3'd3,   // candidate tanh (per hidden unit)
    M_THR_O    = 3'd4,   // output-gate sigmoid (per hidden unit)
    M_THR_C    = 3'd5,   // cell-state quantiser (shared)
    M_THR_TC   = 3'd6,   // tanh of the cell state (shared)
    M_THR_H    = 3'd7    // hidden-state quantiser (shared)
  } mem_sel_e;

  // One configuration write. Weight address: row*MW + column.
  // Threshold address: channel*NT + index (shared tables: index only).
  typedef struct packed {
    logic              we;
    layer_id_e         layer;
    mem_sel_e          mem;
    logic [19:0]       addr;
    logic signed [31:0] data;
  } cfg_wr_t;

endpackage
