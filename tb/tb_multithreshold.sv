// tb_multithreshold: checks the threshold counter against a direct count,
// for an unsigned 63-threshold table and a signed 62-threshold table with
// output bias -31, on random ascending tables and random inputs,
// including inputs equal to a threshold (which must count).
module tb_multithreshold;
  localparam int IN_W = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [IN_W-1:0] x;
  logic signed [IN_W-1:0] thr_u [63];
  logic signed [IN_W-1:0] thr_s [62];
  logic [5:0] y_u, y_s;

  multithreshold #(.IN_W(IN_W), .NT(63), .OUT_W(6), .BIAS(0))   dut_u (.x, .thr(thr_u), .y(y_u));
  multithreshold #(.IN_W(IN_W), .NT(62), .OUT_W(6), .BIAS(-31)) dut_s (.x, .thr(thr_s), .y(y_s));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base, e_u, e_s;
    for (int tab = 0; tab < 20; tab++) begin
      base = -int'($urandom_range(2000, 0));
      for (int k = 0; k < 63; k++) begin
        base += int'($urandom_range(60, 1));
        thr_u[k] = IN_W'(base);
        if (k < 62) thr_s[k] = IN_W'(base - 300);
      end
      for (int n = 0; n < 200; n++) begin
        if (n % 4 == 0) x = thr_u[$urandom_range(62, 0)];
        else x = IN_W'(int'($urandom_range(5000, 0)) - 2500);
        @(posedge clk);
        e_u = 0; e_s = 0;
        for (int k = 0; k < 63; k++) if (int'(x) >= int'(thr_u[k])) e_u++;
        for (int k = 0; k < 62; k++) if (int'(x) >= int'(thr_s[k])) e_s++;
        e_s -= 31;
        checks += 2;
        if (int'(y_u) != e_u) begin
          failures++;
          if (failures < 10) $display("unsigned: x=%0d got %0d exp %0d", x, y_u, e_u);
        end
        if (int'(signed'(y_s)) != e_s) begin
          failures++;
          if (failures < 10) $display("signed: x=%0d got %0d exp %0d", x, signed'(y_s), e_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
