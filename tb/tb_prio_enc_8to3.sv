// tb_prio_enc_8to3: exhaustive test of the 8-to-3 priority encoder.
// For all 256 values of q checks 2^s <= q < 2^(s+1) (s = 0 for q = 0) and
// compares with a search-loop reference.
module tb_prio_enc_8to3;
  import jpeg_ref_pkg::*;
  logic [7:0] q;
  logic [2:0] s;
  int checks = 0, failures = 0;

  prio_enc_8to3 dut (.q(q), .s(s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      q = 8'(v);
      #1;
      checks++;
      if (int'(s) != log2floor(v == 0 ? 1 : v)) begin
        failures++;
        $display("FAIL q=%0d s=%0d", v, s);
      end
      if (v > 0) begin
        checks++;
        if (!((2 ** int'(s)) <= v && v < (2 ** (int'(s) + 1)))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
