// tb_sigmoid_pwl: sweeps every 14-bit input code in [-8, 8) and checks the
// output against the exact sigmoid (error below 0.03), that it is monotonic,
// within [0, 1], and that sigmoid(0) = 0.5.
module tb_sigmoid_pwl;
  localparam int W = 14, F = 7;
  int checks = 0, failures = 0;
  logic [W-1:0] x, y;
  real prev;

  sigmoid_pwl #(.W(W), .F(F)) dut (.x, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prev = -1.0;
    for (int v = -8 * 128; v < 8 * 128; v++) begin
      real xr, yr, ref_v;
      x = W'(v);
      #1;
      xr = real'(v) / 128.0;
      yr = real'(signed'(y)) / 128.0;
      ref_v = 1.0 / (1.0 + $exp(-xr));
      checks++;
      if (yr - ref_v > 0.03 || ref_v - yr > 0.03 || yr < 0.0 || yr > 1.0 || yr < prev) begin
        failures++;
        if (failures < 10) $display("x=%f y=%f exact=%f prev=%f", xr, yr, ref_v, prev);
      end
      prev = yr;
    end
    x = '0; #1;
    checks++;
    if (y != W'(64)) begin failures++; $display("sigmoid(0)=%0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
