// lut_array_multiplier -- LUT-based array multiplier (single cycle).
//
// The throughput-oriented vector-scalar multiplier built by replicating
// identical Lookup Multipliers (LM): LM k takes elements 2k and 2k+1 of the
// vector (opa[16k+15:16k]) and the broadcast scalar opb, and returns their
// two products. N_OPS elements need N_OPS/2 LMs: 2, 4 and 8 LMs for the
// 4-, 8- and 16-element configurations (OpA 32, 64 and 128 bits, result
// 64, 128 and 256 bits), matching the paper's scaling table.
//
// Interface: opa (N_OPS x 8 bits, element i in opa[8i+7:8i]), opb (8 bits)
// in; result (N_OPS x 16 bits, product i in result[16i+15:16i]) out.
// Timing: fully combinational, the whole vector in one cycle window.
//
// The replication scheme and bus widths follow the paper; N_OPS must be
// even (the paper's configurations all are).
module lut_array_multiplier
  import nibble_mult_pkg::*;
#(
  parameter int unsigned N_OPS = 16
) (
  input  logic [N_OPS*ELEM_W-1:0] opa,
  input  elem_t                   opb,
  output logic [N_OPS*PROD_W-1:0] result
);

  localparam int unsigned N_LM = N_OPS / 2;

  if (N_OPS % 2 != 0) begin : g_bad_size
    $error("lut_array_multiplier: N_OPS must be even");
  end

  for (genvar k = 0; k < N_LM; k++) begin : g_lm
    lookup_multiplier u_lm (
      .a    (opa[k*2*ELEM_W +: 2*ELEM_W]),
      .b    (opb),
      .out1 (result[(2*k)*PROD_W   +: PROD_W]),
      .out2 (result[(2*k+1)*PROD_W +: PROD_W])
    );
  end

endmodule
