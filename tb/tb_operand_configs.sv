// tb_operand_configs -- the three reference vector sizes.
//
// Runs the top at 4, 8 and 16 elements (32-, 64- and 128-bit vectors) and
// checks the cycle counts the design is meant to have: 8, 16 and 32 cycles
// for the sequential nibble engine (2 per element) and a single cycle for
// the LUT engine, with correct products in both. Each size is driven by a
// top_cfg_harness instance.
module tb_operand_configs;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int unsigned c4, f4, l4, c8, f8, l8, c16, f16, l16;
  logic        d4, d8, d16;

  top_cfg_harness #(.N_OPS(4))  h4  (.clk, .rst_n, .checks(c4),  .failures(f4),  .latency(l4),  .finished(d4));
  top_cfg_harness #(.N_OPS(8))  h8  (.clk, .rst_n, .checks(c8),  .failures(f8),  .latency(l8),  .finished(d8));
  top_cfg_harness #(.N_OPS(16)) h16 (.clk, .rst_n, .checks(c16), .failures(f16), .latency(l16), .finished(d16));

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c8 + c16, f4 + f8 + f16 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (d4 && d8 && d16);
    $display("nibble engine cycles: 4 elements %0d, 8 elements %0d, 16 elements %0d", l4, l8, l16);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c8 + c16, f4 + f8 + f16);
    $finish;
  end
endmodule
