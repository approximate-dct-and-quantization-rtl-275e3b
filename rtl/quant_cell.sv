// quant_cell: approximate element-wise quantisation cell, c = d / q'.
//
// The quantisation entry q is replaced by q' = 2^s, the largest power of two
// not above q (the paper's approximate quantisation). The cell therefore
// needs no divider: an 8-to-3 priority encoder derives s from q, and a barrel
// shifter divides the DCT coefficient d by 2^s. The paper's cell drawing
// prints "d << s" while its text defines the operation as division by 2^s;
// the division (arithmetic right shift) is implemented. Negative values round
// toward minus infinity, as a plain shifter does (rounding is not specified
// in the paper).
// Interface: q unsigned 8 bits, d and c signed D_W bits. Combinational.
module quant_cell #(
  parameter int D_W = 12
) (
  input  logic [7:0]            q,
  input  logic signed [D_W-1:0] d,
  output logic signed [D_W-1:0] c
);
  logic [2:0] s;

  prio_enc_8to3 u_penc (.q(q), .s(s));

  assign c = d >>> s;
endmodule
