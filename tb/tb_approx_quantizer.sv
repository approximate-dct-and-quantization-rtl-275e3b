// tb_approx_quantizer: test of the 64-cell approximate quantiser.
// With Q50, Q90 and random Q matrices and random coefficient blocks, checks
// every output against floor(d / 2^floor(log2 q)). One test divides a block of
// 1024s by Q50 and Q90 and compares with 1024 / Q' using the approximate
// matrices printed in the paper.
module tb_approx_quantizer;
  import jpeg_pkg::*;
  import jpeg_ref_pkg::*;
  q_mat_t    q_mat;
  coef_blk_t d_blk, c_blk;
  int checks = 0, failures = 0;
  // Entry [5][3] is 64 here: Q50[5][3] = 64 is already a power of two, although
  // the approximate matrix printed in the paper shows 32 at that position.
  int q50a[8][8] = '{'{16,8,8,16,16,32,32,32}, '{8,8,8,16,16,32,32,32}, '{8,8,16,16,32,32,64,32},
                     '{8,16,16,16,32,64,64,32}, '{16,16,32,32,64,64,64,64}, '{16,32,32,64,64,64,64,64},
                     '{32,64,64,64,64,64,64,64}, '{64,64,64,64,64,64,64,64}};
  int q90a[8][8] = '{'{2,2,2,2,4,8,8,8}, '{2,2,2,4,4,8,8,8}, '{2,2,2,4,8,8,8,8}, '{2,2,4,4,8,16,16,8},
                     '{4,4,4,8,8,16,16,8}, '{4,4,8,8,16,8,16,16}, '{8,8,16,16,16,16,16,16}, '{8,16,16,16,16,16,16,16}};

  approx_quantizer dut (.q_mat(q_mat), .d_blk(d_blk), .c_blk(c_blk));

  task automatic run;
    #1;
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) begin
        checks++;
        if (int'(c_blk[u][v]) != quant(int'(d_blk[u][v]), int'(q_mat[u][v]))) begin
          failures++;
          if (failures < 10) $display("FAIL [%0d][%0d] q=%0d d=%0d c=%0d", u, v, q_mat[u][v], d_blk[u][v], c_blk[u][v]);
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
    // the approximate matrices printed in the paper
    for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) d_blk[u][v] = coef_t'(1024);
    q_mat = Q50; run();
    for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) begin
      checks++;
      if (int'(c_blk[u][v]) != 1024 / q50a[u][v]) failures++;
    end
    q_mat = Q90; run();
    for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) begin
      checks++;
      if (int'(c_blk[u][v]) != 1024 / q90a[u][v]) begin
        failures++;
        $display("FAIL Q90' [%0d][%0d] = %0d", u, v, 1024 / int'(c_blk[u][v]));
      end
    end
    repeat (200) begin
      for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) begin
        d_blk[u][v] = coef_t'($urandom_range(0, 4095));
        case ($urandom_range(0, 2))
          0: q_mat[u][v] = Q50[u][v];
          1: q_mat[u][v] = Q90[u][v];
          default: q_mat[u][v] = qent_t'($urandom_range(1, 255));
        endcase
      end
      run();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
