// lookup_multiplier -- one Lookup Multiplier (LM) of the LUT-based array.
//
// Multiplies two 8-bit elements, packed in a 16-bit operand A, by an 8-bit
// scalar B using no arithmetic partial products. The two nibbles of B each
// select a 120-bit hex string (ResString0 for B[3:0], ResString1 for
// B[7:4]) from a copy of the hex-string table. Every nibble of A then drives
// a 16-way slice multiplexer that picks byte A-1 of one string, which is the
// 8-bit nibble product (input 0 of the multiplexer is zero). With
// A = {A3,A2,A1,A0} and B = {B1,B0}:
//
//   P0_1 = A0*B0   P2_1 = A0*B1   P1_1 = A1*B0   P3_1 = A1*B1
//   P0_2 = A2*B0   P2_2 = A2*B1   P1_2 = A3*B0   P3_2 = A3*B1
//   out1 = P0_1 + (P2_1 << 4) + (P1_1 << 4) + (P3_1 << 8) = A[7:0]  * B
//   out2 = P0_2 + (P2_2 << 4) + (P1_2 << 4) + (P3_2 << 8) = A[15:8] * B
//
// Interface: a (16 bits), b (8 bits) in; out1, out2 (16 bits each) out.
// Timing: fully combinational; the product is ready in the same cycle.
//
// The string selection, the eight slice selections, the fixed shifts and the
// two 16-bit sums follow the paper exactly. The paper's algorithm calls the
// output a 32-bit product; here it is the two 16-bit halves out2:out1 its
// datapath figure draws.
module lookup_multiplier
  import nibble_mult_pkg::*;
(
  input  logic [15:0] a,
  input  elem_t       b,
  output prod_t       out1,
  output prod_t       out2
);

  hex_string_t res_string0, res_string1;

  hex_string_lut u_lut0 (.sel(b[3:0]), .str(res_string0));
  hex_string_lut u_lut1 (.sel(b[7:4]), .str(res_string1));

  // Slice multiplexer: byte (idx-1) of a string, zero for idx = 0.
  function automatic elem_t slice(hex_string_t s, nibble_t idx);
    elem_t r;
    r = '0;
    for (int k = 1; k < 16; k++)
      if (idx == nibble_t'(k)) r = s[8*k-8 +: 8];
    return r;
  endfunction

  elem_t p0_1, p1_1, p2_1, p3_1, p0_2, p1_2, p2_2, p3_2;

  assign p0_1 = slice(res_string0, a[3:0]);
  assign p2_1 = slice(res_string1, a[3:0]);
  assign p1_1 = slice(res_string0, a[7:4]);
  assign p3_1 = slice(res_string1, a[7:4]);
  assign p0_2 = slice(res_string0, a[11:8]);
  assign p2_2 = slice(res_string1, a[11:8]);
  assign p1_2 = slice(res_string0, a[15:12]);
  assign p3_2 = slice(res_string1, a[15:12]);

  assign out1 = prod_t'(p0_1) + (prod_t'(p2_1) << 4) + (prod_t'(p1_1) << 4)
              + (prod_t'(p3_1) << 8);
  assign out2 = prod_t'(p0_2) + (prod_t'(p2_2) << 4) + (prod_t'(p1_2) << 4)
              + (prod_t'(p3_2) << 8);

endmodule
