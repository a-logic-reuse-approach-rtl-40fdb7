// tb_hex_string_lut -- checks every byte of the sixteen hex strings.
//
// For each selector value s the string must hold s*k in byte k-1 for
// k = 1..15 (and all zeros for s = 0). The expected bytes are computed here
// from that rule, independently of the constants in the table.
module tb_hex_string_lut;
  import nibble_mult_pkg::*;

  int unsigned checks = 0, failures = 0;
  nibble_t     sel;
  hex_string_t str;

  hex_string_lut dut (.sel, .str);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin
      sel = nibble_t'(s);
      #1;
      for (int k = 1; k <= 15; k++) begin
        checks++;
        if (int'(str[8*k-8 +: 8]) != s * k) begin
          failures++;
          $display("FAIL sel=%0d byte %0d = %h, expected %h", s, k - 1, str[8*k-8 +: 8], s * k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
