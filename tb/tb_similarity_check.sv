// tb_similarity_check: test of the loop-skip similarity rule.
// For every level L = 0..7 it builds blocks whose largest pixel difference
// to the stored block is exactly 5L (must be similar) or 5L+1 (must not),
// at random positions and signs, including stored pixels near 127 and -128
// where the tolerance window is clipped, plus random block pairs checked
// against the reference rule.
module tb_similarity_check;
  import jpeg_pkg::*;
  import jpeg_ref_pkg::*;
  logic [2:0] level;
  pix_blk_t cur_blk, prev_blk;
  logic similar;
  int checks = 0, failures = 0;
  int n_true = 0, n_false = 0;

  similarity_check dut (.level(level), .cur_blk(cur_blk), .prev_blk(prev_blk), .similar(similar));

  task automatic run(input blk_t c, input blk_t p, input int l, input int expect_v);
    bit e;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      cur_blk[i][j] = pix_t'(c[i][j]); prev_blk[i][j] = pix_t'(p[i][j]);
    end
    level = 3'(l);
    #1;
    e = jpeg_ref_pkg::similar(c, p, l);
    checks++;
    if (similar !== e) begin
      failures++;
      if (failures < 10) $display("FAIL L=%0d got %0b ref %0b", l, similar, e);
    end
    if (expect_v >= 0) begin
      checks++;
      if (int'(similar) != expect_v) begin
        failures++;
        if (failures < 10) $display("FAIL L=%0d got %0b expected %0d", l, similar, expect_v);
      end
    end
    if (similar) n_true++; else n_false++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t c, p;
    for (int l = 0; l < 8; l++) begin
      repeat (40) begin
        int pi, pj, sgn;
        pi = $urandom_range(0, 7);
        pj = $urandom_range(0, 7);
        sgn = $urandom_range(0, 1) ? 1 : -1;
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
          p[i][j] = $signed($urandom_range(0, 160)) - 80;
          c[i][j] = p[i][j] + ($signed($urandom_range(0, 2 * 5 * l)) - 5 * l);
        end
        c[pi][pj] = p[pi][pj] + sgn * 5 * l;
        run(c, p, l, 1);
        c[pi][pj] = p[pi][pj] + sgn * (5 * l + 1);
        run(c, p, l, 0);
      end
      // clipped windows: stored 127 / -128, incoming at the rail
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin p[i][j] = 127; c[i][j] = 127 - 5 * l; end
      run(c, p, l, 1);
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin p[i][j] = -128; c[i][j] = -128 + 5 * l; end
      run(c, p, l, 1);
    end
    repeat (500) begin
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
        p[i][j] = $signed($urandom_range(0, 255)) - 128;
        c[i][j] = p[i][j] + $signed($urandom_range(0, 24)) - 12;
        if (c[i][j] > 127) c[i][j] = 127;
        if (c[i][j] < -128) c[i][j] = -128;
      end
      run(c, p, $urandom_range(0, 7), -1);
    end
    checks++;
    if (n_true == 0 || n_false == 0) failures++;
    $display("similar=%0d not similar=%0d", n_true, n_false);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
