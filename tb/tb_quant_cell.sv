// tb_quant_cell: test of the approximate quantisation cell c = d / 2^floor(log2 q).
// Every q in 1..255 with random and corner coefficients; the expected value
// is floor(d / q') with q' found by a search loop, and for the paper's Q50
// entries it also checks q' against the approximate matrix printed in the
// paper (first row: 16 8 8 16 16 32 32 32).
module tb_quant_cell;
  import jpeg_ref_pkg::*;
  localparam int D_W = 12;
  logic [7:0] q;
  logic signed [D_W-1:0] d, c;
  int checks = 0, failures = 0;
  int q50_row0[8]  = '{16, 11, 10, 16, 24, 40, 51, 61};
  int q50a_row0[8] = '{16,  8,  8, 16, 16, 32, 32, 32};

  quant_cell #(.D_W(D_W)) dut (.q(q), .d(d), .c(c));

  task automatic chk(input int qi, input int di);
    q = 8'(qi); d = D_W'(di);
    #1;
    checks++;
    if (int'(c) != quant(di, qi)) begin
      failures++;
      if (failures < 10) $display("FAIL q=%0d d=%0d got %0d exp %0d", qi, di, c, quant(di, qi));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int qi = 1; qi < 256; qi++) begin
      chk(qi, 2047); chk(qi, -2048); chk(qi, -1); chk(qi, 1000);
      repeat (8) chk(qi, $signed($urandom_range(0, 4095)) - 2048);
    end
    for (int k = 0; k < 8; k++) begin     // 1024 / q' must equal 1024 / Q50'
      chk(q50_row0[k], 1024);
      checks++;
      if (int'(c) != 1024 / q50a_row0[k]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
