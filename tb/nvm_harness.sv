// nvm_harness -- drives and checks one nibble_vector_multiplier instance.
//
// Used by tb_nibble_vector_multiplier, once per configuration. After reset
// it runs the paper's waveform example when FIG3 is set (elements 40, ff,
// 11, 21 times scalar 80, results 2000, 7f80, 0880, 1080), then N_RUNS
// operations on random vectors and scalars, including scalars with zero
// nibbles and back-to-back starts. At every clock edge of an operation it
// checks that product i appears exactly STEPS*(i+1) edges after the edge
// that sampled start, that older products keep their previous value until
// then, that the inputs may change after start, that a start while busy is
// ignored, and that done pulses once, STEPS*N_OPS edges after start.
// Expected products are integer products computed here.
module nvm_harness
  import nibble_mult_pkg::*;
#(
  parameter int unsigned N_OPS    = 4,
  parameter bit          UNROLLED = 1'b0,
  parameter int unsigned N_RUNS   = 50,
  parameter bit          FIG3     = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  output int unsigned checks,
  output int unsigned failures,
  output logic        finished
);

  localparam int unsigned STEPS = UNROLLED ? 1 : 2;

  logic                    start;
  logic [N_OPS*ELEM_W-1:0] opa;
  elem_t                   opb;
  logic [N_OPS*PROD_W-1:0] result;
  logic                    busy, done;

  nibble_vector_multiplier #(.N_OPS(N_OPS), .UNROLLED(UNROLLED)) dut (
    .clk, .rst_n, .start, .opa, .opb, .result, .busy, .done);

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL [N=%0d U=%0d] %s at %0t", N_OPS, UNROLLED, what, $time);
    end
  endtask

  task automatic run_op(logic [N_OPS*ELEM_W-1:0] a, elem_t b);
    logic [N_OPS*PROD_W-1:0] old_r, exp_r;
    old_r = result;
    for (int i = 0; i < N_OPS; i++)
      exp_r[i*PROD_W +: PROD_W] = ref_mul(a[i*ELEM_W +: ELEM_W], b);
    check("idle before start", !busy);
    start = 1'b1; opa = a; opb = b;
    @(posedge clk); #1;
    // inputs are free to change once start has been sampled
    start = 1'b0;
    opa = {N_OPS{8'($urandom)}};
    opb = elem_t'($urandom);
    check("busy after start", busy);
    start = 1'b1;                   // ignored: the engine is busy
    for (int e = 1; e <= int'(STEPS * N_OPS); e++) begin
      @(posedge clk); #1;
      start = 1'b0;
      // e edges after the edge that sampled start
      for (int i = 0; i < N_OPS; i++) begin
        if (e >= int'(STEPS * (i + 1)))
          check($sformatf("product %0d after %0d edges", i, e),
                result[i*PROD_W +: PROD_W] == exp_r[i*PROD_W +: PROD_W]);
        else
          check($sformatf("product %0d unchanged after %0d edges", i, e),
                result[i*PROD_W +: PROD_W] == old_r[i*PROD_W +: PROD_W]);
      end
      check($sformatf("done only after %0d edges", STEPS * N_OPS),
            done == (e == int'(STEPS * N_OPS)));
      check("busy until done", busy == (e < int'(STEPS * N_OPS)));
    end
    @(posedge clk); #1;
    check("done is a single pulse", !done);
    check("results hold after done", result == exp_r);
  endtask

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    start = 1'b0; opa = '0; opb = '0;
    @(posedge rst_n);
    @(posedge clk); #1;
    check("results cleared by reset", result == '0 && !busy && !done);
    if (FIG3 && N_OPS == 4) begin
      run_op((N_OPS*ELEM_W)'(32'h2111ff40), 8'h80);
      check("waveform example result", result == (N_OPS*PROD_W)'(64'h108008807f802000));
      @(posedge clk); #1;
    end
    for (int r = 0; r < int'(N_RUNS); r++) begin
      logic [N_OPS*ELEM_W-1:0] a;
      elem_t b;
      for (int i = 0; i < N_OPS; i++) a[i*ELEM_W +: ELEM_W] = elem_t'($urandom);
      b = elem_t'($urandom);
      if (r % 7 == 1) b[3:0] = 4'h0;
      if (r % 7 == 2) b[7:4] = 4'h0;
      if (r % 7 == 3) b = 8'hff;
      run_op(a, b);
      // back-to-back on even runs, one idle cycle on odd runs
      if (r % 2 == 1) begin
        @(posedge clk); #1;
      end
    end
    finished = 1'b1;
  end
endmodule
