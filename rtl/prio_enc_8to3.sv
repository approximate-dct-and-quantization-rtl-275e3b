// prio_enc_8to3: 8-to-3 priority encoder that finds the exponent of the
// largest power of two not exceeding a quantisation entry.
//
// For q in 1..255 it returns s with 2^s <= q < 2^(s+1), i.e. the position of
// the most significant one of q. As in the paper, eight range comparators
// 2^k <= q < 2^(k+1) form a one-hot vector a[7:0], which an 8-to-3 one-hot
// encoder turns into s. q = 0 (outside the range the paper allows) leaves a
// all zero and gives s = 0; that case is this design's choice.
// Purely combinational.
module prio_enc_8to3 (
  input  logic [7:0] q,
  output logic [2:0] s
);
  logic [7:0] a;

  always_comb begin
    for (int k = 0; k < 8; k++)
      a[k] = (9'(q) >= (9'd1 << k)) && (9'(q) < (9'd1 << (k + 1)));
    // one-hot to binary: bit b of s is set when the hot position has bit b set
    s = '0;
    for (int k = 0; k < 8; k++)
      if (a[k]) s = s | 3'(k);
  end
endmodule
