// top_cfg_harness -- runs one vector_mult_top configuration for
// tb_operand_configs.
//
// Builds the top with N_OPS elements (sequential nibble engine), runs
// N_RUNS random operations and counts the clock edges from the edge that
// samples start to done, which must be 2*N_OPS. The nibble-engine result
// and the LUT-engine result (sampled in the start cycle, i.e. produced
// within one cycle of the operands) are compared with integer products.
// Reports the measured latency of the last operation.
module top_cfg_harness
  import nibble_mult_pkg::*;
#(
  parameter int unsigned N_OPS  = 4,
  parameter int unsigned N_RUNS = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  output int unsigned checks,
  output int unsigned failures,
  output int unsigned latency,
  output logic        finished
);

  logic                    start;
  logic [N_OPS*ELEM_W-1:0] opa;
  elem_t                   opb;
  logic [N_OPS*PROD_W-1:0] nib_result, lut_result, exp_r;
  logic                    nib_busy, nib_done;

  vector_mult_top #(.N_OPS(N_OPS)) dut (
    .clk, .rst_n, .start, .opa, .opb, .nib_result, .nib_busy, .nib_done, .lut_result);

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL [N=%0d] %s at %0t", N_OPS, what, $time);
    end
  endtask

  initial begin
    checks = 0; failures = 0; latency = 0; finished = 1'b0;
    start = 1'b0; opa = '0; opb = '0;
    @(posedge rst_n);
    @(posedge clk); #1;
    for (int r = 0; r < int'(N_RUNS); r++) begin
      for (int i = 0; i < N_OPS; i++) begin
        opa[i*ELEM_W +: ELEM_W] = elem_t'($urandom);
      end
      opb = elem_t'($urandom);
      for (int i = 0; i < N_OPS; i++)
        exp_r[i*PROD_W +: PROD_W] = ref_mul(opa[i*ELEM_W +: ELEM_W], opb);
      start = 1'b1;
      #1;
      check("LUT engine: whole vector within the start cycle", lut_result == exp_r);
      @(posedge clk); #1;
      start = 1'b0;
      latency = 0;
      while (!nib_done && latency < 4 * N_OPS) begin
        @(posedge clk); #1;
        latency++;
      end
      check($sformatf("nibble engine latency %0d, expected %0d", latency, 2 * N_OPS),
            latency == 2 * N_OPS);
      check("nibble engine products", nib_result == exp_r);
      @(posedge clk); #1;
    end
    finished = 1'b1;
  end
endmodule
