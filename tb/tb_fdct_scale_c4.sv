// tb_fdct_scale_c4: self-checking test of the 0.707 (181/256) scaler.
// Sweeps every W-bit input and compares with floor(181*x/256) computed by
// multiplication; also checks the result is within 1 of 0.7071*x.
module tb_fdct_scale_c4;
  localparam int W = 12;
  logic signed [W-1:0] x, y;
  int checks = 0, failures = 0;

  fdct_scale_c4 #(.W(W)) dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -(2 ** (W - 1)); v < 2 ** (W - 1); v++) begin
      int e;
      real r;
      x = W'(v);
      #1;
      e = (181 * v) >>> 8;
      r = 0.70710678 * v - real'(int'(y));
      checks += 2;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d got %0d exp %0d", v, y, e);
      end
      if (r > 2.0 || r < -2.0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
