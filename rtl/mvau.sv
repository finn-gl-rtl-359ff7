// mvau: folded matrix-vector unit with a multithreshold activation.
//
// Computes y = act(W * x) for an MH x MW integer weight matrix W and an
// MW-element input vector x. The work is folded: PE rows are computed in
// parallel, each taking SIMD products per cycle. One input vector arrives
// as SF = MW/SIMD beats of SIMD elements. The first neuron fold works on
// the beats as they arrive and keeps them in an input buffer; the other
// NF-1 folds (NF = MH/PE) read the buffer. When a fold ends, its PE sums
// move to an output bank and leave one per beat, in row order, while the
// next fold computes. On the way out they pass through a single
// multithreshold unit (per-row thresholds) when USE_THR is 1, or leave as
// raw accumulators when USE_THR is 0 (a final layer without activation).
//
// Timing: a fold takes SF cycles; a fold can only end once the previous
// fold's PE results have left, so with a steady input and no output
// stalls a vector takes NF * max(SF, PE) cycles, and its first result
// appears one cycle after its first fold ends.
//
// Weights and thresholds are written through wr_* before use:
//   wr_thr = 0: weight W[row][col], wr_addr = row*MW + col
//   wr_thr = 1: threshold T[row][k], wr_addr = row*NT + k
//
// The paper takes this unit from the FINN HLS library and says only what
// it does, and that it was generated with a weight-stream width limit of
// 36 bits (SIMD * 8-bit weights <= 36, so SIMD <= 4). The folding scheme,
// the buffers and the serial output are this design's own.
module mvau #(
  parameter int unsigned MW      = 104,
  parameter int unsigned MH      = 256,
  parameter int unsigned SIMD    = 4,
  parameter int unsigned PE      = 32,
  parameter int unsigned IN_W    = 7,
  parameter int unsigned W_W     = 8,
  parameter bit          USE_THR = 1'b1,
  parameter int unsigned NT      = 63,
  parameter int unsigned OUT_W   = 6,
  parameter int          BIAS    = 0,
  localparam int unsigned ACC_W  = IN_W + W_W + $clog2(MW) + 1,
  localparam int unsigned OW     = USE_THR ? OUT_W : ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // parameter writes
  input  logic                    wr_en,
  input  logic                    wr_thr,
  input  logic [19:0]             wr_addr,
  input  logic signed [31:0]      wr_data,
  // input vector stream, SIMD elements per beat
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_data [SIMD],
  // output stream, one row result per beat
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [OW-1:0]           out_data
);
  localparam int unsigned SF = MW / SIMD;
  localparam int unsigned NF = MH / PE;
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned PW  = (PE > 1) ? $clog2(PE) : 1;
  localparam int unsigned TNT = USE_THR ? NT : 1;

  // ---------------------------------------------------------------- memories
  logic signed [W_W-1:0]   wmem [NF*SF][PE][SIMD];
  logic signed [ACC_W-1:0] tmem [MH][TNT];
  logic signed [IN_W-1:0]  ibuf [SF][SIMD];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_thr) begin
      wmem[(32'(wr_addr) / MW / PE) * SF + (32'(wr_addr) % MW) / SIMD]
          [(32'(wr_addr) / MW) % PE]
          [(32'(wr_addr) % MW) % SIMD] <= wr_data[W_W-1:0];
    end
    if (wr_en && wr_thr && USE_THR) begin
      tmem[32'(wr_addr) / TNT][32'(wr_addr) % TNT] <= wr_data[ACC_W-1:0];
    end
  end

  // ---------------------------------------------------------------- control
  // Compute side: sf/nf walk the folds; acc holds the running sums.
  // Output side: a finished fold is copied into obank and drained from
  // there while the next fold computes.
  logic [SFW-1:0]          sf;
  logic [NFW-1:0]          nf;
  logic signed [ACC_W-1:0] acc   [PE];
  logic signed [ACC_W-1:0] obank [PE];
  logic                    obusy;
  logic [PW-1:0]           oidx;
  logic [31:0]             obase;

  logic                    last_sf, bank_free, step;
  logic signed [IN_W-1:0]  vec [SIMD];
  logic signed [ACC_W-1:0] dot [PE];

  assign last_sf   = (32'(sf) == SF - 1);
  assign bank_free = !obusy || (out_ready && 32'(oidx) == PE - 1);
  // the last beat of a fold may only complete when the output bank is free
  assign in_ready  = (nf == '0) && (!last_sf || bank_free);
  assign step      = ((nf != '0) || in_valid) && (!last_sf || bank_free);

  always_comb begin
    for (int s = 0; s < SIMD; s++) vec[s] = (nf == '0) ? in_data[s] : ibuf[sf][s];
    for (int p = 0; p < PE; p++) begin
      dot[p] = '0;
      for (int s = 0; s < SIMD; s++) begin
        dot[p] = dot[p] + ACC_W'(wmem[32'(nf) * SF + 32'(sf)][p][s] * vec[s]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sf    <= '0;
      nf    <= '0;
      obusy <= 1'b0;
      oidx  <= '0;
      obase <= '0;
    end else begin
      if (obusy && out_ready) begin
        if (32'(oidx) == PE - 1) begin
          obusy <= 1'b0;
          oidx  <= '0;
        end else begin
          oidx <= oidx + 1'b1;
        end
      end
      if (step) begin
        if (last_sf) begin
          sf    <= '0;
          nf    <= (32'(nf) == NF - 1) ? '0 : nf + 1'b1;
          obusy <= 1'b1;
          oidx  <= '0;
          obase <= 32'(nf) * PE;
        end else begin
          sf <= sf + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step) begin
      if (nf == '0) ibuf[sf] <= in_data;
      for (int p = 0; p < PE; p++) begin
        acc[p] <= ((sf == '0) ? '0 : acc[p]) + dot[p];
        if (last_sf) obank[p] <= ((sf == '0) ? '0 : acc[p]) + dot[p];
      end
    end
  end

  // ---------------------------------------------------------------- output
  assign out_valid = obusy;

  generate
    if (USE_THR) begin : g_thr
      logic [OUT_W-1:0] act;
      multithreshold #(.IN_W(ACC_W), .NT(NT), .OUT_W(OUT_W), .BIAS(BIAS)) u_mt (
        .x   (obank[oidx]),
        .thr (tmem[obase + 32'(oidx)]),
        .y   (act)
      );
      assign out_data = OW'(act);
    end else begin : g_raw
      assign out_data = OW'(obank[oidx]);
    end
  endgenerate

  // A result, once offered, stays until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
