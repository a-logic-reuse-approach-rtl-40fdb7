// tb_nibble_element_datapath -- checks the per-element datapath.
//
// Two instances: sequential (two nibble steps per element) and unrolled
// (one step per element). Random elements and scalars are fed back to back
// and with random idle cycles in between. After every clock edge the
// outputs are compared with what the step loaded at that edge must give:
// prod_valid exactly one cycle after the last step of an element, and then
// product = a * b computed here. The one-cycle latency is thereby checked
// on every element.
module tb_nibble_element_datapath;
  import nibble_mult_pkg::*;

  int unsigned checks = 0, failures = 0;
  logic  clk = 1'b0, rst_n = 1'b0;

  logic  s_load, u_load, s_nib;
  elem_t s_a, s_b, u_a, u_b;
  prod_t s_prod, u_prod;
  logic  s_valid, u_valid;

  always #5 clk = ~clk;

  nibble_element_datapath dut_seq (
    .clk, .rst_n, .load(s_load), .a_in(s_a), .b_in(s_b), .nib_idx(s_nib),
    .product(s_prod), .prod_valid(s_valid));

  nibble_element_datapath #(.UNROLLED(1'b1)) dut_unr (
    .clk, .rst_n, .load(u_load), .a_in(u_a), .b_in(u_b), .nib_idx(1'b0),
    .product(u_prod), .prod_valid(u_valid));

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sequential instance.
  task automatic seq_element(elem_t a, elem_t b);
    s_load = 1'b1; s_a = a; s_b = b; s_nib = 1'b0;
    @(posedge clk); #1;
    check("seq: no product after nibble 0", !s_valid);
    s_nib = 1'b1;
    @(posedge clk); #1;
    check("seq: product valid after nibble 1", s_valid);
    check($sformatf("seq: %h*%h = %h", a, b, s_prod), s_prod == ref_mul(a, b));
    s_load = 1'b0;
  endtask

  task automatic unr_element(elem_t a, elem_t b);
    u_load = 1'b1; u_a = a; u_b = b;
    @(posedge clk); #1;
    check("unr: product valid", u_valid);
    check($sformatf("unr: %h*%h = %h", a, b, u_prod), u_prod == ref_mul(a, b));
    u_load = 1'b0;
  endtask

  initial begin
    s_load = 0; u_load = 0; s_a = 0; s_b = 0; u_a = 0; u_b = 0; s_nib = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    fork
      begin
        seq_element(8'hff, 8'hff);
        seq_element(8'h40, 8'h80);
        for (int t = 0; t < 3000; t++) begin
          if ($urandom_range(3) == 0) begin
            @(posedge clk); #1;
            check("seq: idle", !s_valid);
          end
          seq_element(elem_t'($urandom), elem_t'($urandom));
        end
      end
      begin
        unr_element(8'hff, 8'hff);
        for (int t = 0; t < 3000; t++) begin
          if ($urandom_range(3) == 0) begin
            @(posedge clk); #1;
            check("unr: idle", !u_valid);
          end
          unr_element(elem_t'($urandom), elem_t'($urandom));
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
