// tb_nibble_vector_multiplier -- checks the nibble vector multiplier.
//
// Three configurations run side by side: 4 elements sequential (with the
// paper's waveform example), 16 elements sequential (the default size) and
// 8 elements unrolled. Each is driven and checked cycle by cycle by an
// nvm_harness instance; see that module for the checks. The run ends when
// all three have finished, or when the watchdog expires.
module tb_nibble_vector_multiplier;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int unsigned c4, f4, c16, f16, c8, f8;
  logic        d4, d16, d8;

  nvm_harness #(.N_OPS(4),  .UNROLLED(1'b0), .N_RUNS(200), .FIG3(1'b1))
    h4 (.clk, .rst_n, .checks(c4), .failures(f4), .finished(d4));
  nvm_harness #(.N_OPS(16), .UNROLLED(1'b0), .N_RUNS(100))
    h16 (.clk, .rst_n, .checks(c16), .failures(f16), .finished(d16));
  nvm_harness #(.N_OPS(8),  .UNROLLED(1'b1), .N_RUNS(200))
    h8 (.clk, .rst_n, .checks(c8), .failures(f8), .finished(d8));

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16 + c8, f4 + f16 + f8 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (d4 && d16 && d8);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16 + c8, f4 + f16 + f8);
    $finish;
  end
endmodule
