// tb_precision_scaler: test of precision scaling M_tr = round(M / 2^B).
// For every truncation level B = 0..7, checks all 256 pixel values (spread
// over the 64 positions) against round-half-up division and against the
// real-valued round(m / 2^B) within 0.5.
module tb_precision_scaler;
  import jpeg_pkg::*;
  import jpeg_ref_pkg::*;
  logic [2:0] b;
  pix_blk_t in_blk, out_blk;
  int checks = 0, failures = 0;

  precision_scaler dut (.b(b), .in_blk(in_blk), .out_blk(out_blk));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int bl = 0; bl < 8; bl++)
      for (int base = -128; base < 128; base += 64) begin
        b = 3'(bl);
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) in_blk[i][j] = pix_t'(base + 8 * i + j);
        #1;
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
          int m;
          real r;
          m = base + 8 * i + j;
          r = real'(m) / real'(2 ** bl) - real'(int'(out_blk[i][j]));
          checks += 2;
          if (int'(out_blk[i][j]) != trunc_round(m, bl)) begin
            failures++;
            if (failures < 10) $display("FAIL B=%0d m=%0d got %0d", bl, m, out_blk[i][j]);
          end
          if (r > 0.5 || r < -0.5) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
