// nibble_element_datapath -- per-element datapath of the nibble multiplier.
//
// One vector element A is multiplied by the broadcast scalar B, one 4-bit
// nibble of B per step. The structure is the paper's per-element datapath:
//
//   a_in --> [operand reg] --------------------+
//   b_in --> nibble selector --> [nibble reg] --+--> precompute logic (12 b)
//                                                    --> shift logic (<< 4*pos)
//                                                    --> adder --> product (16 b)
//                                                          ^--- accumulator
//
// Sequential mode (UNROLLED = 0): a step is one nibble. In the cycle that
// `load` is high the element, the selected nibble (b_in[3:0] for nib_idx 0,
// b_in[7:4] for nib_idx 1) and the nibble position are registered. In the
// next cycle the precompute logic scales the registered element by the
// registered nibble, the shift logic aligns it by 4*position, and the adder
// adds it to the accumulator (to zero on nibble 0, which starts a new
// element). The accumulator register is updated at the end of that cycle.
// `product` is the adder's output; `prod_valid` marks the cycle in which it
// holds a finished product (second nibble), so a caller can store it at
// the same clock edge as the accumulator.
//
// Unrolled mode (UNROLLED = 1): both nibbles are registered together and two
// copies of the precompute logic with their fixed alignments are summed in
// one cycle; every step then finishes a product and nib_idx is ignored.
//
// Timing: one cycle from `load` to `prod_valid`; a new step may be loaded
// every cycle, so a sequential element takes two cycles and an unrolled one
// takes one.
//
// The operand register, nibble selector, nibble register, precompute logic,
// shift logic and accumulating adder follow the paper. The extra registered
// position bit and valid bit, the active-low synchronous reset and the
// choice to clear the accumulator on nibble 0 (rather than in a separate
// cycle) are this design's own.
module nibble_element_datapath
  import nibble_mult_pkg::*;
#(
  parameter bit UNROLLED = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,        // register a new step this cycle
  input  elem_t a_in,        // vector element OpA[idx]
  input  elem_t b_in,        // broadcast scalar OpB
  input  logic  nib_idx,     // nibble of b_in to use (sequential mode)
  output prod_t product,     // adder output
  output logic  prod_valid   // product holds a finished element product
);

  elem_t a_q;
  logic  vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q   <= '0;
      vld_q <= 1'b0;
    end else begin
      vld_q <= load;
      if (load) a_q <= a_in;
    end
  end

  if (!UNROLLED) begin : g_seq
    nibble_t nib_q;
    logic    pos_q;
    prod_t   acc_q;
    pl_t     partial;
    prod_t   shifted;

    // Nibble selector and nibble register.
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        nib_q <= '0;
        pos_q <= 1'b0;
      end else if (load) begin
        nib_q <= nib_idx ? b_in[7:4] : b_in[3:0];
        pos_q <= nib_idx;
      end
    end

    precompute_logic u_pl (.a(a_q), .nibble(nib_q), .scaled(partial));

    // Shift logic: fixed alignment by 4 * nibble position.
    assign shifted = pos_q ? {partial, 4'b0} : {4'b0, partial};

    // Adder: a new element starts from zero on nibble 0.
    assign product = (pos_q ? acc_q : '0) + shifted;

    always_ff @(posedge clk) begin
      if (!rst_n)     acc_q <= '0;
      else if (vld_q) acc_q <= product;
    end

    assign prod_valid = vld_q & pos_q;
  end else begin : g_unrolled
    elem_t b_q;
    pl_t   partial_lo, partial_hi;

    always_ff @(posedge clk) begin
      if (!rst_n)    b_q <= '0;
      else if (load) b_q <= b_in;
    end

    precompute_logic u_pl_lo (.a(a_q), .nibble(b_q[3:0]), .scaled(partial_lo));
    precompute_logic u_pl_hi (.a(a_q), .nibble(b_q[7:4]), .scaled(partial_hi));

    assign product    = {4'b0, partial_lo} + {partial_hi, 4'b0};
    assign prod_valid = vld_q;
  end

endmodule
