// tb_lookup_multiplier -- checks one Lookup Multiplier.
//
// Runs every pair of low element and scalar (65,536 cases) with a random
// high element, so both outputs are exercised, plus the two products of the
// paper's waveform example. Expected values are plain integer products.
module tb_lookup_multiplier;
  import nibble_mult_pkg::*;

  int unsigned checks = 0, failures = 0;
  logic [15:0] a;
  elem_t       b;
  prod_t       out1, out2;

  lookup_multiplier dut (.a, .b, .out1, .out2);

  task automatic apply(logic [15:0] av, elem_t bv);
    a = av;
    b = bv;
    #1;
    checks++;
    if (out1 != ref_mul(av[7:0], bv) || out2 != ref_mul(av[15:8], bv)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h out2:out1=%h:%h expected %h:%h", av, bv, out2, out1,
                 ref_mul(av[15:8], bv), ref_mul(av[7:0], bv));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(16'hff40, 8'h80);  // 7f80, 2000
    apply(16'h2111, 8'h80);  // 1080, 0880
    for (int lo = 0; lo < 256; lo++)
      for (int bv = 0; bv < 256; bv++)
        apply({8'($urandom), 8'(lo)}, elem_t'(bv));
    // high element exhaustive against a random low element
    for (int hi = 0; hi < 256; hi++)
      apply({8'(hi), 8'($urandom)}, 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
