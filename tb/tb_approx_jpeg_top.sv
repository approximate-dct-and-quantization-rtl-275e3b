// tb_approx_jpeg_top: end-to-end test of the approximate JPEG core at its
// default (paper) sizes: 8x8 blocks, 8-bit pixels, 8-bit Q entries.
//
// A reference model (jpeg_ref_pkg) keeps its own previous-block and result
// registers, decides skips with the loop-skip rule, and compresses computed
// blocks with truncation, the integer DCT, 2^B rescaling and power-of-two
// quantisation. Every output block, its skipped flag and its latency of
// exactly 3 cycles are compared with the model. The stimulus makes each
// mechanism happen and counts it; a mechanism that never happens is a
// failure:
//   skip            identical or near-identical blocks at levels L0..L6
//   compute         blocks outside the tolerance
//   skip-after-compute  a skipped block right behind the computed block it
//                       reuses (tests the in-order result register)
//   truncation      blocks at B = 1..4, and a B change between blocks
//   Q switch        Q50 then Q90 (pipeline drained in between)
//   zero-from-reset an all-zero first block is skipped and returns zeros
// It also checks that the DCT core is started only for computed blocks.
module tb_approx_jpeg_top;
  import jpeg_pkg::*;
  import jpeg_ref_pkg::*;

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
  int n_skip = 0, n_comp = 0, n_skip_b2b = 0, n_trunc = 0, n_bswitch = 0, n_q90 = 0, n_zero_skip = 0;
  int n_core_starts = 0;
  int skip_at_level [8];

  // reference state
  blk_t ref_prev, ref_res, qref;
  blk_t exp_mem [64];
  bit   exp_skip [64];
  int   exp_t [64];
  int   wr = 0, rd = 0;
  bit   last_was_comp = 0;
  int   last_b = 0;

  always @(posedge clk) begin
    cycle++;
    if (rst_n && dut.core_go) n_core_starts++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) if (rst_n && out_valid) begin
    blk_t e;
    int k;
    k = rd % 64;
    e = exp_mem[k];
    rd++;
    checks += 2;
    if (cycle - exp_t[k] != 3) begin
      failures++;
      $display("FAIL latency %0d", cycle - exp_t[k]);
    end
    if (out_skipped != exp_skip[k]) begin
      failures++;
      $display("FAIL block %0d skipped=%0b expected %0b", rd - 1, out_skipped, exp_skip[k]);
    end
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) begin
        checks++;
        if (int'(out_blk[u][v]) != e[u][v]) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d C[%0d][%0d] got %0d exp %0d", rd - 1, u, v, out_blk[u][v], e[u][v]);
        end
      end
  end

  task automatic set_q(input q_mat_t q);
    q_mat = q;
    for (int u = 0; u < 8; u++) for (int v = 0; v < 8; v++) qref[u][v] = int'(q[u][v]);
  endtask

  // present one block for one cycle; b and l are the knobs for this block
  task automatic send(input blk_t m, input int b, input int l);
    bit   sim;
    blk_t c;
    bit   allzero = 1;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      in_blk[i][j] = pix_t'(m[i][j]);
      if (m[i][j] != 0) allzero = 0;
    end
    trunc_level = 3'(b);
    skip_level  = 3'(l);
    sim = jpeg_ref_pkg::similar(m, ref_prev, l);
    if (sim) begin
      n_skip++;
      skip_at_level[l]++;
      if (last_was_comp) n_skip_b2b++;
      if (allzero && n_comp == 0) n_zero_skip++;
      last_was_comp = 0;
    end else begin
      compress(m, b, qref, c);
      ref_prev = m;
      ref_res  = c;
      n_comp++;
      if (b > 0) n_trunc++;
      if (b != last_b) n_bswitch++;
      if (qref[0][0] == 3) n_q90++;
      last_b = b;
      last_was_comp = 1;
    end
    exp_mem[wr % 64]  = ref_res;
    exp_skip[wr % 64] = sim;
    exp_t[wr % 64]    = cycle + 1;
    wr++;
    in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    last_was_comp = sim ? 1'b0 : last_was_comp;
  endtask

  task automatic idle(input int n);
    repeat (n) @(posedge clk);
    #1;
    last_was_comp = 0;
  endtask

  function automatic void rand_blk(output blk_t m, input int base, input int spread);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      int v;
      v = base + $signed($urandom_range(0, 2 * spread)) - spread;
      m[i][j] = (v > 127) ? 127 : (v < -128) ? -128 : v;
    end
  endfunction

  // a block at distance exactly d (or d+1) from p at one pixel, within d elsewhere
  function automatic void near_blk(output blk_t m, input blk_t p, input int d, input bit outside);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      int v;
      v = p[i][j] + ((d == 0) ? 0 : ($signed($urandom_range(0, 2 * d)) - d));
      m[i][j] = (v > 127) ? 127 : (v < -128) ? -128 : v;
    end
    if (p[3][4] < 0) m[3][4] = p[3][4] + d + int'(outside);
    else             m[3][4] = p[3][4] - d - int'(outside);
  endfunction

  initial begin
    blk_t m, m2;
    ref_prev = '{default: '{default: 0}};
    ref_res  = '{default: '{default: 0}};
    set_q(Q50);
    in_blk = '{default: '{default: '0}};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // zero block straight after reset: equals the cleared previous-block register
    m = '{default: '{default: 0}};
    send(m, 0, 0);

    // computed random blocks, back to back, no truncation
    repeat (20) begin rand_blk(m, 0, 128); send(m, 0, 0); end
    // identical block repeated: skip at L0 right behind its computation
    rand_blk(m, 20, 60); send(m, 0, 0); send(m, 0, 0); send(m, 0, 0);

    // each skip level: inside tolerance skips, one LSB outside computes
    for (int l = 0; l <= 6; l++) begin
      rand_blk(m, 0, 90); send(m, 0, l);
      near_blk(m2, m, 5 * l, 0); send(m2, 0, l);
      near_blk(m2, m, 5 * l, 1); send(m2, 0, l);
      idle($urandom_range(0, 2));
    end

    // precision scaling B1..B4, switching between blocks, mixed with skips
    for (int b = 1; b <= 4; b++) begin
      repeat (5) begin rand_blk(m, 0, 128); send(m, b, 2); end
      send(m, b, 2);                     // skipped: result of the B=b block
      rand_blk(m, -30, 50); send(m, (b + 1) % 5, 1);
    end

    // drain, switch to Q90, run again
    idle(5);
    set_q(Q90);
    repeat (30) begin
      rand_blk(m, $signed($urandom_range(0, 160)) - 80, $urandom_range(0, 20));
      send(m, $urandom_range(0, 4), $urandom_range(0, 6));
      if ($urandom_range(0, 1)) begin near_blk(m2, m, 2, 0); send(m2, 0, 1); end
    end

    // random stress with Q50
    idle(5);
    set_q(Q50);
    repeat (300) begin
      if ($urandom_range(0, 2) == 0) near_blk(m, ref_prev, $urandom_range(0, 20), 1'($urandom_range(0, 1)));
      else rand_blk(m, $signed($urandom_range(0, 200)) - 100, $urandom_range(0, 127));
      send(m, $urandom_range(0, 4), $urandom_range(0, 6));
      if ($urandom_range(0, 4) == 0) idle(1);
    end

    idle(6);
    checks++;
    if (rd != wr) begin failures++; $display("FAIL %0d outputs missing", wr - rd); end
    checks++;
    if (n_core_starts != n_comp) begin
      failures++;
      $display("FAIL core started %0d times for %0d computed blocks", n_core_starts, n_comp);
    end
    $display("mechanisms: skip=%0d compute=%0d skip_after_compute=%0d trunc=%0d b_switch=%0d q90=%0d zero_skip=%0d",
             n_skip, n_comp, n_skip_b2b, n_trunc, n_bswitch, n_q90, n_zero_skip);
    foreach (skip_at_level[l]) if (l <= 6) begin
      checks++;
      if (skip_at_level[l] == 0) begin failures++; $display("FAIL no skip at level L%0d", l); end
    end
    checks++;
    if (n_skip == 0 || n_comp == 0 || n_skip_b2b == 0 || n_trunc == 0 || n_bswitch == 0 || n_q90 == 0 || n_zero_skip == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
