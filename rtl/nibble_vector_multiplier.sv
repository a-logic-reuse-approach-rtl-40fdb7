// nibble_vector_multiplier -- precompute-reuse nibble vector-scalar multiplier.
//
// Multiplies a vector of N_OPS 8-bit elements OpA by one 8-bit scalar OpB
// that is broadcast to, and reused for, every element. Instead of a
// multiplier array or stored product tables, each nibble of OpB selects a
// small shift-and-add configuration (precompute logic) that scales the
// element; the scaled values are aligned by nibble position and accumulated.
//
// Organisation: an operand register bank holds the vector and the scalar,
// a step sequencer (nibble_controller) walks the elements and their nibbles,
// one per-element datapath (nibble_element_datapath) does the arithmetic,
// and a result register bank collects one 16-bit product per element.
//
// Interface:
//   opa      N_OPS x 8 bits, element i in opa[8i+7:8i]; element 0 is
//            processed first.
//   opb      8-bit scalar.
//   start    begins an operation; opa and opb are sampled in that cycle
//            and may change afterwards.
//   result   N_OPS x 16 bits, product i in result[16i+15:16i]; each product
//            is written as soon as it is finished, so results appear one by
//            one, every two cycles in sequential mode.
//   busy     high while an operation runs; start is ignored then.
//   done     one-cycle pulse when all N_OPS products are in `result`.
//
// Timing: sequential mode (UNROLLED = 0) takes 2 cycles per element, 2N in
// all (8, 16 and 32 cycles for 4, 8 and 16 elements); unrolled mode takes 1
// per element. Counting from the clock edge that samples start, product i
// is in `result` after 2(i+1) edges (i+1 unrolled), and done is high in the
// same cycle as the last product.
//
// The algorithm, the datapath, the 2N latency and the progressive result
// updates follow the paper. Registering the whole operand vector at start,
// the element order within the packed buses and the reset values are this
// design's own. Results of a previous operation stay in `result` until
// overwritten.
module nibble_vector_multiplier
  import nibble_mult_pkg::*;
#(
  parameter int unsigned N_OPS    = 16,
  parameter bit          UNROLLED = 1'b0,
  localparam int unsigned IDX_W   = (N_OPS > 1) ? $clog2(N_OPS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [N_OPS*ELEM_W-1:0]  opa,
  input  elem_t                    opb,
  output logic [N_OPS*PROD_W-1:0]  result,
  output logic                     busy,
  output logic                     done
);

  localparam int unsigned STEPS = UNROLLED ? 1 : 2;

  logic             issue, first, nib_idx;
  logic [IDX_W-1:0] elem_idx;
  logic [IDX_W-1:0] wr_idx_q;

  elem_t            opa_q [N_OPS];
  elem_t            opb_q;
  elem_t            a_sel, b_sel;
  prod_t            product;
  logic             prod_valid;

  nibble_controller #(.N_OPS(N_OPS), .STEPS(STEPS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .issue, .first, .elem_idx, .nib_idx, .done
  );

  // Operand registers, loaded when an operation starts.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_OPS; i++) opa_q[i] <= '0;
      opb_q <= '0;
    end else if (first) begin
      for (int i = 0; i < N_OPS; i++) opa_q[i] <= opa[i*ELEM_W +: ELEM_W];
      opb_q <= opb;
    end
  end

  // Element selection: the first step reads the live inputs, the rest the
  // registered copy.
  assign a_sel = first ? opa[ELEM_W-1:0] : opa_q[elem_idx];
  assign b_sel = first ? opb : opb_q;

  nibble_element_datapath #(.UNROLLED(UNROLLED)) u_dp (
    .clk, .rst_n,
    .load       (issue),
    .a_in       (a_sel),
    .b_in       (b_sel),
    .nib_idx    (nib_idx),
    .product    (product),
    .prod_valid (prod_valid)
  );

  // Write-back: the element index travels alongside the datapath register.
  always_ff @(posedge clk) begin
    if (!rst_n)     wr_idx_q <= '0;
    else if (issue) wr_idx_q <= elem_idx;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      result <= '0;
    end else if (prod_valid) begin
      for (int i = 0; i < N_OPS; i++)
        if (wr_idx_q == IDX_W'(i)) result[i*PROD_W +: PROD_W] <= product;
    end
  end

endmodule
