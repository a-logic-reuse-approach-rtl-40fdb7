// tb_lut_array_multiplier -- checks the LUT-based array multiplier.
//
// A 4-element instance is driven with the four operand sets of the paper's
// waveform example and must give the printed results; the default
// 16-element instance is driven with random vectors and scalars. All
// expected values are integer products computed here.
module tb_lut_array_multiplier;
  import nibble_mult_pkg::*;

  int unsigned checks = 0, failures = 0;

  logic [31:0]  opa4;
  elem_t        opb4;
  logic [63:0]  res4;
  logic [127:0] opa16;
  elem_t        opb16;
  logic [255:0] res16;

  lut_array_multiplier #(.N_OPS(4)) dut4 (.opa(opa4), .opb(opb4), .result(res4));
  lut_array_multiplier dut16 (.opa(opa16), .opb(opb16), .result(res16));

  task automatic check4(logic [31:0] a, elem_t b, logic [63:0] expected);
    opa4 = a;
    opb4 = b;
    #1;
    checks++;
    if (res4 != expected) begin
      failures++;
      $display("FAIL opa=%h opb=%h result=%h expected=%h", a, b, res4, expected);
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
    check4(32'h2111ff40, 8'h80, 64'h108008807f802000);
    check4(32'h01020304, 8'h00, 64'h0000000000000000);
    check4(32'h8cf72d46, 8'h07, 64'h03d406c1013b01ea);
    check4(32'hffffffff, 8'hff, 64'hfe01fe01fe01fe01);
    for (int t = 0; t < 2000; t++) begin
      opa16 = {$urandom, $urandom, $urandom, $urandom};
      opb16 = elem_t'($urandom);
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (res16[16*i +: 16] != ref_mul(opa16[8*i +: 8], opb16)) begin
          failures++;
          if (failures < 10)
            $display("FAIL element %0d: %h * %h gave %h", i, opa16[8*i +: 8], opb16, res16[16*i +: 16]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
