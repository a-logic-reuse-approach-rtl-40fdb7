// tb_precompute_logic -- exhaustive check of the precompute logic.
//
// Applies all 256 element values with all 16 nibble values and compares the
// 12-bit scaled output with the integer product nibble * a worked out here.
// Purely combinational; a watchdog ends the run if it ever stalls.
module tb_precompute_logic;
  import nibble_mult_pkg::*;

  int unsigned checks = 0, failures = 0;
  elem_t   a;
  nibble_t nibble;
  pl_t     scaled;

  precompute_logic dut (.a, .nibble, .scaled);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = 0; ia < 256; ia++) begin
      for (int in = 0; in < 16; in++) begin
        a = elem_t'(ia);
        nibble = nibble_t'(in);
        #1;
        checks++;
        if (int'(scaled) != ia * in) begin
          failures++;
          if (failures < 10)
            $display("FAIL a=%0d nibble=%0d scaled=%0d expected=%0d", ia, in, scaled, ia * in);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
