// tb_fdct_rot_c2c6: self-checking test of fdct_rot_c2c6, the (473, 196)/2^9 shift-add rotation.
// Drives corner values and random operands across the full W-bit range and
// compares both outputs with floor((473*x + 196*y)/2^9) and
// floor((196*x - 473*y)/2^9) computed with ordinary multiplication.
module tb_fdct_rot_c2c6;
  localparam int W = 12;
  logic signed [W-1:0] x, y, xo, yo;
  int checks = 0, failures = 0;

  fdct_rot_c2c6 #(.W(W)) dut (.x(x), .y(y), .xo(xo), .yo(yo));

  task automatic check(input int xi, input int yi);
    int ex, ey;
    x = W'(xi); y = W'(yi);
    #1;
    ex = (473 * xi + 196 * yi) >>> 9;
    ey = (196 * xi - 473 * yi) >>> 9;
    checks += 2;
    if (int'(xo) != ex || int'(yo) != ey) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d y=%0d got (%0d,%0d) exp (%0d,%0d)", xi, yi, xo, yo, ex, ey);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lim = 2 ** (W - 2) - 1;   // keeps results inside W bits
    check(0, 0); check(1, 0); check(0, 1); check(-1, -1);
    check(lim, lim); check(-lim, lim); check(lim, -lim); check(-lim - 1, -lim - 1);
    repeat (2000) check($signed($urandom_range(0, 2 * lim)) - lim, $signed($urandom_range(0, 2 * lim)) - lim);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
