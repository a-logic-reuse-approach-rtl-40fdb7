// precompute_logic -- the Precompute Logic (PL) of the nibble multiplier.
//
// Forms the scaled value nibble * A of an 8-bit vector element A without a
// multiplier and without a stored table. The 4-bit nibble of the scalar
// selects one of sixteen fixed configurations, each a sum of at most four
// shifted copies of A (A, A<<1, A<<2, A<<3), exactly as in the paper's
// precompute table: 0000 gives 12'b0, 0001 gives {4'b0,A}, 0110 gives
// {2'b0,A,2'b0} + {3'b0,A,1'b0}, ... 1111 gives the sum of all four terms.
// Low nibble values are a single shifted copy; larger ones add terms.
//
// Interface: a (8 bits), nibble (4 bits) in; scaled (12 bits) out.
// Timing: purely combinational.
//
// The sixteen configurations follow the paper. Writing them as one case
// statement over the four shifted terms is this design's own choice.
module precompute_logic
  import nibble_mult_pkg::*;
(
  input  elem_t   a,
  input  nibble_t nibble,
  output pl_t     scaled
);

  // The four shifted terms, zero-extended to 12 bits.
  pl_t t0, t1, t2, t3;
  assign t0 = {4'b0, a};        // A
  assign t1 = {3'b0, a, 1'b0};  // A << 1
  assign t2 = {2'b0, a, 2'b0};  // A << 2
  assign t3 = {1'b0, a, 3'b0};  // A << 3

  always_comb begin
    unique case (nibble)
      4'b0000: scaled = '0;
      4'b0001: scaled = t0;
      4'b0010: scaled = t1;
      4'b0011: scaled = t1 + t0;
      4'b0100: scaled = t2;
      4'b0101: scaled = t2 + t0;
      4'b0110: scaled = t2 + t1;
      4'b0111: scaled = t2 + t1 + t0;
      4'b1000: scaled = t3;
      4'b1001: scaled = t3 + t0;
      4'b1010: scaled = t3 + t1;
      4'b1011: scaled = t3 + t1 + t0;
      4'b1100: scaled = t3 + t2;
      4'b1101: scaled = t3 + t2 + t0;
      4'b1110: scaled = t3 + t2 + t1;
      4'b1111: scaled = t3 + t2 + t1 + t0;
      default: scaled = '0;
    endcase
  end

endmodule
