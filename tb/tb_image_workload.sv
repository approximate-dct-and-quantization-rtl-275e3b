// tb_image_workload: a full 512x512 grayscale (Y) image through the core.
//
// The image is generated here: a flat band at the top (so neighbouring blocks
// repeat), smooth sinusoidal shading in the middle and a fine texture in one
// quadrant. Its 4096 8x8 blocks are streamed in raster order, one per cycle,
// under four knob settings:
//   Q50, B0, L0   no approximation besides the power-of-two quantiser
//   Q50, B1, L2   truncation level 1 with loop-skip level 2
//   Q50, B0, L3   loop-skip level 3 alone
//   Q90, B0, L0   quality level 90
// For each run it checks every output block against the reference model,
// that the whole image leaves the core in 4096 + 3 cycles, and it reports
// the fraction of skipped blocks and the PSNR of the image decoded with the
// same power-of-two matrix. The textured quadrant dominates the error, so
// the floors are 18 dB for Q50 and 30 dB for Q90 (measured: about 21.7 and
// 34.8 dB); a broken datapath lands far below them. In addition
// Q90 must not decode worse than Q50, and the approximate settings may not
// lose more than 10 dB against the first run.
module tb_image_workload;
  import jpeg_pkg::*;
  import jpeg_ref_pkg::*;

  localparam int IMG = 512;
  localparam int NB  = IMG / 8;

  logic       clk = 0, rst_n = 0;
  logic [2:0] trunc_level = 0, skip_level = 0;
  q_mat_t     q_mat;
  logic       in_valid = 0;
  pix_blk_t   in_blk;
  logic       out_valid, out_skipped;
  coef_blk_t  out_blk;

  approx_jpeg_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  // reference state and expected outputs, indexed by block number
  blk_t ref_prev, ref_res, qref;
  blk_t exp_mem [NB * NB];
  int   n_out, n_skipped, first_out, last_out;
  real  sq_err;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pixel(input int x, input int y);
    real v;
    if (y < 96) v = 200.0 + 10.0 * (x / 128);
    else begin
      v = 128.0 + 60.0 * $sin(x / 40.0) * $cos(y / 55.0) + 0.1 * (y - 96);
      if (x >= 256 && y >= 256) v += 3.0 * (((x * 7 + y * 13) % 23) - 11);
    end
    if (v > 255.0) v = 255.0;
    if (v < 0.0) v = 0.0;
    return $rtoi(v);
  endfunction

  function automatic void get_blk(input int bx, input int by, output blk_t m);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++)
      m[i][j] = pixel(8 * bx + j, 8 * by + i) - 128;   // level shift
  endfunction

  // decode one output block: the quantiser shifts right, i.e. rounds towards
  // minus infinity, so each coefficient is rebuilt at the centre of its bin,
  // (c + 1/2) * 2^s, followed by the exact inverse DCT
  function automatic real block_sq_err(input blk_t c, input blk_t m);
    real acc = 0.0;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      real n = 0.0;
      int r;
      for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++)
        n += tcoef(u, i) * (real'(c[u][v]) + 0.5) * real'(2 ** log2floor(qref[u][v])) * tcoef(v, j);
      r = $rtoi(n + ((n < 0) ? -0.5 : 0.5));
      acc += real'((r - m[i][j]) * (r - m[i][j]));
    end
    return acc;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    blk_t e, c, m;
    e = exp_mem[n_out];
    if (n_out == 0) first_out = cycle;
    last_out = cycle;
    if (out_skipped) n_skipped++;
    for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) begin
      c[u][v] = int'(out_blk[u][v]);
      checks++;
      if (c[u][v] != e[u][v]) begin
        failures++;
        if (failures < 10) $display("FAIL block %0d C[%0d][%0d] got %0d exp %0d", n_out, u, v, c[u][v], e[u][v]);
      end
    end
    get_blk(n_out % NB, n_out / NB, m);
    sq_err += block_sq_err(c, m);
    n_out++;
  end

  task automatic run_image(input string name, input q_mat_t q, input int b, input int l, output real psnr);
    int t0;
    blk_t m, c;
    // reset between runs: both loop-skip registers return to zero
    rst_n = 0;
    q_mat = q;
    for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) qref[u][v] = int'(q[u][v]);
    ref_prev = '{default: '{default: 0}};
    ref_res  = '{default: '{default: 0}};
    n_out = 0; n_skipped = 0; sq_err = 0.0;
    trunc_level = 3'(b);
    skip_level  = 3'(l);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    t0 = cycle + 1;
    for (int k = 0; k < NB * NB; k++) begin
      get_blk(k % NB, k / NB, m);
      if (!jpeg_ref_pkg::similar(m, ref_prev, l)) begin
        compress(m, b, qref, c);
        ref_prev = m;
        ref_res  = c;
      end
      exp_mem[k] = ref_res;
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) in_blk[i][j] = pix_t'(m[i][j]);
      in_valid = 1;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks += 2;
    if (n_out != NB * NB) begin failures++; $display("FAIL %s: %0d blocks out", name, n_out); end
    if (last_out - t0 != NB * NB - 1 + 3) begin
      failures++;
      $display("FAIL %s: image took %0d cycles", name, last_out - t0 + 1);
    end
    psnr = 10.0 * $log10(255.0 * 255.0 / (sq_err / (IMG * IMG)));
    $display("%s: %0d blocks in %0d cycles, skipped %0d (%0.1f%%), PSNR %0.2f dB",
             name, n_out, last_out - t0 + 1, n_skipped, 100.0 * n_skipped / (NB * NB), psnr);
  endtask

  initial begin
    real p0, p1, p2, p3;
    in_blk = '{default: '{default: '0}};
    q_mat  = Q50;
    run_image("Q50 B0 L0", Q50, 0, 0, p0);
    run_image("Q50 B1 L2", Q50, 1, 2, p1);
    run_image("Q50 B0 L3", Q50, 0, 3, p2);
    run_image("Q90 B0 L0", Q90, 0, 0, p3);
    checks += 4;
    if (p0 < 18.0 || p1 < 18.0 || p2 < 18.0) begin failures++; $display("FAIL Q50 PSNR below 18 dB"); end
    if (p3 < 30.0) begin failures++; $display("FAIL Q90 PSNR below 30 dB"); end
    if (p3 < p0) begin failures++; $display("FAIL Q90 should not decode worse than Q50"); end
    if (p0 - p1 > 10.0 || p0 - p2 > 10.0) begin failures++; $display("FAIL approximation lost more than 10 dB"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
