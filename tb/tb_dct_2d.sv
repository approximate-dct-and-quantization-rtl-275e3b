// tb_dct_2d: self-checking test of the pipelined 8x8 2D DCT.
// Streams random and corner pixel blocks, one per cycle with gaps, and checks
// each result (1) bit for bit against the integer reference model, (2) within
// 4 of the exact floating-point T*M*T', and (3) that it arrives exactly two
// cycles after its input.
module tb_dct_2d;
  import jpeg_pkg::*;
  import jpeg_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  pix_blk_t  in_blk;
  coef_blk_t out_blk;
  int checks = 0, failures = 0, cycle = 0;
  blk_t exp_mem [512];
  int   t_in_mem [512];
  int   wr = 0, rd = 0;
  real  maxerr = 0.0;

  dct_2d dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) if (rst_n && out_valid) begin
    blk_t e;
    int t;
    e = exp_mem[rd % 512];
    t = t_in_mem[rd % 512];
    rd++;
    checks++;
    if (cycle - t != 2) begin
      failures++;
      $display("FAIL latency %0d", cycle - t);
    end
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) begin
        checks++;
        if (int'(out_blk[u][v]) != e[u][v]) begin
          failures++;
          if (failures < 10) $display("FAIL D[%0d][%0d] got %0d ref %0d", u, v, out_blk[u][v], e[u][v]);
        end
      end
  end

  task automatic send(input blk_t m);
    blk_t d;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) in_blk[i][j] = pix_t'(m[i][j]);
    dct2d(m, d);
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) begin
        real err;
        err = real'(d[u][v]) - exact_dct2d(m, u, v);
        if (err < 0) err = -err;
        if (err > maxerr) maxerr = err;
        checks++;
        if (err > 4.0) begin
          failures++;
          if (failures < 10) $display("FAIL approx D[%0d][%0d] err %f", u, v, err);
        end
      end
    exp_mem[wr % 512] = d;
    t_in_mem[wr % 512] = cycle + 1;
    wr++;
    in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    blk_t m;
    in_blk = '{default: '0};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) m[i][j] = 127;  send(m);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) m[i][j] = -128; send(m);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) m[i][j] = ((i + j) % 2) ? -128 : 127; send(m);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) m[i][j] = 16 * i - 8 * j; send(m);
    repeat (300) begin
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) m[i][j] = $signed($urandom_range(0, 255)) - 128;
      send(m);
      if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (rd != wr) begin failures++; $display("FAIL %0d results missing", wr - rd); end
    $display("max |D - exact| = %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
