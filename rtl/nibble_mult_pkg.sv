// nibble_mult_pkg
//
// Shared widths and types of the nibble-based vector-scalar multipliers.
// An 8-bit vector element (OpA) is multiplied by a broadcast 8-bit scalar
// (OpB). The scalar is split into two 4-bit nibbles; the element is never
// split in the nibble engine, while the lookup engine splits both operands.
//
//   ELEM_W  = 8   operand width (the paper's 8-bit low-precision operands)
//   NIB_W   = 4   nibble width (fixed 4-bit decomposition)
//   PL_W    = 12  width of one precompute-logic output (8-bit A times a
//                 nibble, "12'b0" in the paper's precompute table)
//   PROD_W  = 16  width of one element product (the 16-bit results drawn
//                 in the paper's datapath and waveform figures)
//   STR_W   = 120 width of one hex string of the lookup table (15 bytes)
package nibble_mult_pkg;

  localparam int unsigned ELEM_W  = 8;
  localparam int unsigned NIB_W   = 4;
  localparam int unsigned PL_W    = ELEM_W + NIB_W;   // 12
  localparam int unsigned PROD_W  = 2 * ELEM_W;       // 16
  localparam int unsigned STR_W   = 8 * 15;           // 120

  typedef logic [ELEM_W-1:0] elem_t;
  typedef logic [NIB_W-1:0]  nibble_t;
  typedef logic [PL_W-1:0]   pl_t;
  typedef logic [PROD_W-1:0] prod_t;
  typedef logic [STR_W-1:0]  hex_string_t;

  // Reference product used by the testbenches' scoreboards.
  function automatic prod_t ref_mul(elem_t a, elem_t b);
    return prod_t'(a) * prod_t'(b);
  endfunction

endpackage
