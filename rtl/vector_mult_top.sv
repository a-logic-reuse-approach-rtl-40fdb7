// vector_mult_top -- nibble vector multiplier with its LUT-based counterpart.
//
// The two multiplier organisations for 8-bit vector-scalar products, fed
// the same vector OpA and the same broadcast scalar OpB:
//   * the precompute-reuse nibble multiplier (nibble_vector_multiplier),
//     the low-area, low-power engine: a compact shift-and-add datapath
//     reused over the elements, 2 cycles per element (2N per vector) in
//     sequential mode;
//   * the LUT-based array multiplier (lut_array_multiplier), the
//     throughput-oriented engine: replicated lookup multipliers that produce
//     the whole vector combinationally in one cycle.
//
// Interface:
//   clk, rst_n       clock, active-low synchronous reset (nibble engine)
//   start            start a nibble-engine operation; opa/opb sampled then
//   opa, opb         N_OPS x 8-bit vector, 8-bit scalar (element i at
//                    opa[8i+7:8i])
//   nib_result       N_OPS x 16-bit products of the nibble engine, written
//                    one element at a time
//   nib_busy, nib_done  nibble-engine status; done pulses when all are in
//   lut_result       N_OPS x 16-bit products of the LUT engine,
//                    combinational from opa/opb
//
// Timing: see the two engines. With the defaults (16 elements, sequential)
// nib_done rises 32 clock edges after the edge that samples start.
//
// Both engines, their widths and the 16-element (128-bit) default follow
// the paper, which evaluates them under identical stimulus. Placing them
// side by side behind one set of operand inputs is this design's own
// packaging; either may be used on its own.
module vector_mult_top
  import nibble_mult_pkg::*;
#(
  parameter int unsigned N_OPS    = 16,
  parameter bit          UNROLLED = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [N_OPS*ELEM_W-1:0] opa,
  input  elem_t                   opb,
  output logic [N_OPS*PROD_W-1:0] nib_result,
  output logic                    nib_busy,
  output logic                    nib_done,
  output logic [N_OPS*PROD_W-1:0] lut_result
);

  nibble_vector_multiplier #(.N_OPS(N_OPS), .UNROLLED(UNROLLED)) u_nibble (
    .clk, .rst_n, .start, .opa, .opb,
    .result (nib_result),
    .busy   (nib_busy),
    .done   (nib_done)
  );

  lut_array_multiplier #(.N_OPS(N_OPS)) u_lut_array (
    .opa, .opb,
    .result (lut_result)
  );

endmodule
