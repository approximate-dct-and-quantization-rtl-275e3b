// tb_fdct_rot_c3c5: self-checking test of fdct_rot_c3c5, the (213, 142)/2^8 shift-add rotation.
// Drives corner values and random operands across the full W-bit range and
// compares both outputs with floor((213*x + 142*y)/2^8) and
// floor((142*x - 213*y)/2^8) computed with ordinary multiplication.
module tb_fdct_rot_c3c5;
  localparam int W = 12;
  logic signed [W-1:0] x, y, xo, yo;
  int checks = 0, failures = 0;

  fdct_rot_c3c5 #(.W(W)) dut (.x(x), .y(y), .xo(xo), .yo(yo));

  task automatic check(input int xi, input int yi);
    int ex, ey;
    x = W'(xi); y = W'(yi);
    #1;
    ex = (213 * xi + 142 * yi) >>> 8;
    ey = (142 * xi - 213 * yi) >>> 8;
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
