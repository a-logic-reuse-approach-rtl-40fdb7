// tb_vector_mult_top -- end-to-end test of the top at its default size.
//
// The top is instantiated with no parameter overrides: 16 elements (a
// 128-bit vector, 256-bit result), sequential nibble engine. One operation
// is run for every scalar value 00..ff, with random vectors; the paper's
// waveform example (elements 40, ff, 11, 21 times 80) is run first in the
// low four elements. For every operation the testbench checks, against
// integer products computed here:
//   * the LUT engine's whole result, in every cycle of the operation;
//   * each nibble-engine product appearing exactly 2(i+1) clock edges after
//     the edge that sampled start, done exactly 32 edges after it;
//   * that the two engines agree when done.
// It also counts how often each mechanism of the design happened and
// counts a failure for any that never did: every one of the sixteen
// precompute configurations at each nibble position, a zero element nibble
// reaching the lookup multiplexers' zero input, a start ignored while busy,
// a back-to-back start right at done, and completed operations.
module tb_vector_mult_top;
  import nibble_mult_pkg::*;

  localparam int unsigned N = 16;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start;
  logic [N*8-1:0]    opa;
  elem_t             opb;
  logic [N*16-1:0]   nib_result, lut_result;
  logic              nib_busy, nib_done;

  vector_mult_top dut (
    .clk, .rst_n, .start, .opa, .opb,
    .nib_result, .nib_busy, .nib_done, .lut_result);

  // mechanism counters
  int unsigned pl_lo_hits [16];
  int unsigned pl_hi_hits [16];
  int unsigned zero_slice_hits, ignored_starts, back_to_back, ops_done;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic finish_run();
    for (int v = 0; v < 16; v++) begin
      check($sformatf("low-nibble configuration %0d exercised", v), pl_lo_hits[v] > 0);
      check($sformatf("high-nibble configuration %0d exercised", v), pl_hi_hits[v] > 0);
    end
    check("zero element nibble seen by the lookup multiplexers", zero_slice_hits > 0);
    check("start ignored while busy", ignored_starts > 0);
    check("back-to-back start at done", back_to_back > 0);
    check("operations completed", ops_done == 257);
    $display("mechanisms: ops=%0d ignored_starts=%0d back_to_back=%0d zero_slices=%0d",
             ops_done, ignored_starts, back_to_back, zero_slice_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One operation; start is already high if `chained` (back-to-back).
  task automatic run_op(logic [N*8-1:0] a, elem_t b, bit poke, bit chain_next);
    logic [N*16-1:0] old_r, exp_r;
    old_r = nib_result;
    for (int i = 0; i < N; i++) begin
      exp_r[16*i +: 16] = ref_mul(a[8*i +: 8], b);
      if (a[8*i +: 4] == 4'h0 || a[8*i+4 +: 4] == 4'h0) zero_slice_hits++;
    end
    pl_lo_hits[b[3:0]]++;
    pl_hi_hits[b[7:4]]++;
    check("idle before start", !nib_busy);
    start = 1'b1; opa = a; opb = b;
    #1;
    check("LUT engine result at start", lut_result == exp_r);
    @(posedge clk); #1;
    start = 1'b0;
    for (int e = 1; e <= int'(2 * N); e++) begin
      if (poke && e == 5) begin
        start = 1'b1;
        ignored_starts++;
      end
      if (chain_next && e == int'(2 * N)) start = 1'b1;
      check("LUT engine result holds", lut_result == exp_r);
      @(posedge clk); #1;
      if (!(chain_next && e == int'(2 * N))) start = 1'b0;
      for (int i = 0; i < N; i++)
        check($sformatf("nibble product %0d after %0d edges", i, e),
              nib_result[16*i +: 16] == ((e >= 2 * (i + 1)) ? exp_r[16*i +: 16]
                                                            : old_r[16*i +: 16]));
      check("done exactly 2N edges after start", nib_done == (e == int'(2 * N)));
    end
    if (nib_done) ops_done++;
    check("engines agree", nib_result == lut_result);
  endtask

  initial begin
    logic [N*8-1:0] a;
    start = 1'b0; opa = '0; opb = '0;
    zero_slice_hits = 0; ignored_starts = 0; back_to_back = 0; ops_done = 0;
    for (int v = 0; v < 16; v++) begin
      pl_lo_hits[v] = 0;
      pl_hi_hits[v] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check("results cleared by reset", nib_result == '0 && !nib_done && !nib_busy);

    // The waveform example of the paper in the low four elements.
    a = '0;
    a[31:0] = 32'h2111ff40;
    run_op(a, 8'h80, 1'b0, 1'b0);
    check("waveform example", nib_result[63:0] == 64'h108008807f802000);

    for (int bv = 0; bv < 256; bv++) begin
      bit chain;
      for (int i = 0; i < N; i++) a[8*i +: 8] = elem_t'($urandom);
      chain = (bv % 4 == 1);
      // a chained start is taken in the done cycle, so the next operation
      // begins without an idle cycle
      if (bv > 0 && (bv - 1) % 4 == 1) begin
        back_to_back++;
        check("back-to-back start accepted", !nib_busy);
      end else begin
        @(posedge clk); #1;
      end
      run_op(a, elem_t'(bv), bv % 3 == 0, chain);
    end
    finish_run();
  end
endmodule
