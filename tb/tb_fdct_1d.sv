// tb_fdct_1d: self-checking test of the 8-point multiplier-less 1D DCT.
// For random and corner input vectors the outputs must (1) equal the
// integer reference of jpeg_ref_pkg bit for bit and (2) lie within 3 of the
// exact 2*T*x computed in floating point, which checks the frequency order
// and the signs of every output.
module tb_fdct_1d;
  import jpeg_ref_pkg::*;
  localparam int IN_W = 8;
  localparam int OUT_W = IN_W + 3;
  logic signed [IN_W-1:0]  x [8];
  logic signed [OUT_W-1:0] y [8];
  int checks = 0, failures = 0;

  fdct_1d #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.x(x), .y(y));

  task automatic run(input int v[8]);
    int e[8];
    for (int n = 0; n < 8; n++) x[n] = IN_W'(v[n]);
    #1;
    fdct1d(v, e);
    for (int k = 0; k < 8; k++) begin
      real ex = 0.0;
      for (int n = 0; n < 8; n++) ex += 2.0 * tcoef(k, n) * v[n];
      checks += 2;
      if (int'(y[k]) != e[k]) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d got %0d ref %0d", k, y[k], e[k]);
      end
      if (real'(int'(y[k])) - ex > 3.0 || real'(int'(y[k])) - ex < -3.0) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d got %0d exact %f", k, y[k], ex);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[8];
    for (int n = 0; n < 8; n++) v[n] = 127;   run(v);
    for (int n = 0; n < 8; n++) v[n] = -128;  run(v);
    for (int n = 0; n < 8; n++) v[n] = (n % 2) ? -128 : 127; run(v);
    for (int k = 0; k < 8; k++) begin          // pure cosine inputs
      for (int n = 0; n < 8; n++) v[n] = $rtoi(100.0 * $cos((2.0 * n + 1.0) * k * 3.14159265 / 16.0));
      run(v);
    end
    repeat (2000) begin
      for (int n = 0; n < 8; n++) v[n] = $signed($urandom_range(0, 255)) - 128;
      run(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
