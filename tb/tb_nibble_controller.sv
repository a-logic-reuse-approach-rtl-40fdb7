// tb_nibble_controller -- checks the step sequence of the controller.
//
// A 4-element sequential instance (2 steps per element) and a 4-element
// unrolled instance (1 step) are started repeatedly. Each issued step is
// compared with the expected (element, nibble) order -- elements in order,
// nibble 0 then 1 -- and the cycles are counted: done must come exactly
// N*STEPS clock edges after the edge that sampled start (8 and 4), busy
// must cover the operation, and a start while busy must be ignored.
module tb_nibble_controller;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start_s, start_u;

  logic       busy_s, issue_s, first_s, nib_s, done_s;
  logic [1:0] elem_s;
  logic       busy_u, issue_u, first_u, nib_u, done_u;
  logic [1:0] elem_u;

  always #5 clk = ~clk;

  nibble_controller #(.N_OPS(4), .STEPS(2)) dut_s (
    .clk, .rst_n, .start(start_s), .busy(busy_s), .issue(issue_s), .first(first_s),
    .elem_idx(elem_s), .nib_idx(nib_s), .done(done_s));

  nibble_controller #(.N_OPS(4), .STEPS(1)) dut_u (
    .clk, .rst_n, .start(start_u), .busy(busy_u), .issue(issue_u), .first(first_u),
    .elem_idx(elem_u), .nib_idx(nib_u), .done(done_u));

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One operation on the sequential instance; a stray start mid-way when
  // `poke` is set.
  task automatic run_seq(bit poke);
    int edges;
    start_s = 1'b1;
    #1;
    check("seq: first step issued with start", issue_s && first_s && elem_s == 0 && !nib_s);
    @(posedge clk); #1;
    start_s = 1'b0;
    edges = 1;
    for (int k = 1; k < 8; k++) begin
      if (poke && k == 3) start_s = 1'b1;
      #1;
      check($sformatf("seq: step %0d issued", k),
            issue_s && !first_s && elem_s == 2'(k / 2) && nib_s == 1'(k % 2));
      check("seq: busy", busy_s);
      check("seq: no early done", !done_s);
      @(posedge clk); #1;
      start_s = 1'b0;
      edges++;
    end
    // last step now in the datapath
    check("seq: nothing issued after last step", !issue_s);
    check("seq: busy while draining", busy_s && !done_s);
    @(posedge clk); #1;
    edges++;
    check($sformatf("seq: done %0d edges after the start edge", edges - 1), done_s && edges - 1 == 8);
    check("seq: idle at done", !busy_s && !issue_s);
    @(posedge clk); #1;
    check("seq: done is one pulse", !done_s);
  endtask

  task automatic run_unr();
    int edges;
    start_u = 1'b1;
    #1;
    check("unr: first step", issue_u && first_u && elem_u == 0);
    @(posedge clk); #1;
    start_u = 1'b0;
    edges = 1;
    for (int k = 1; k < 4; k++) begin
      check($sformatf("unr: step %0d", k), issue_u && elem_u == 2'(k) && !nib_u);
      @(posedge clk); #1;
      edges++;
    end
    check("unr: draining", busy_u && !issue_u && !done_u);
    @(posedge clk); #1;
    check("unr: done after 4 edges", done_u && edges == 4);
    @(posedge clk); #1;
    check("unr: single pulse", !done_u);
  endtask

  initial begin
    start_s = 0; start_u = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check("idle after reset", !busy_s && !issue_s && !done_s && !busy_u);
    fork
      begin
        run_seq(1'b0);
        run_seq(1'b1);
        repeat (3) @(posedge clk);
        #1;
        run_seq(1'b0);
      end
      begin
        run_unr();
        run_unr();
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
