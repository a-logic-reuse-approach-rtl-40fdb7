// nibble_controller -- step sequencer of the nibble vector multiplier.
//
// Runs the two loops of the nibble algorithm: an outer loop over the N
// vector elements and an inner loop over the STEPS nibble steps of each
// element (2 in sequential mode, 1 in unrolled mode). One step is issued
// per cycle, so an operation takes N*STEPS cycles: 2N for the sequential
// multiplier, as the paper's latency table gives.
//
// Interface and timing:
//   start    sampled while idle; the first step (element 0, nibble 0) is
//            issued in that same cycle, `first` marks it. A start while
//            busy is ignored.
//   issue    a step is issued this cycle, for element elem_idx and nibble
//            nib_idx.
//   busy     an operation is in progress (steps still to issue or the
//            last step still in the one-cycle datapath).
//   done     one-cycle pulse in the cycle after the last step has been
//            accumulated, i.e. when every result is visible; it rises
//            N*STEPS clock edges after the edge that sampled start.
//
// The loop order (elements outer, nibbles inner, nibble 0 first) and the
// Start/Done signals follow the paper; the exact handshake (same-cycle
// first issue, ignored start while busy, one-cycle done pulse) is this
// design's own.
module nibble_controller #(
  parameter int unsigned N_OPS = 16,
  parameter int unsigned STEPS = 2,
  localparam int unsigned IDX_W = (N_OPS > 1) ? $clog2(N_OPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             issue,
  output logic             first,
  output logic [IDX_W-1:0] elem_idx,
  output logic             nib_idx,
  output logic             done
);

  typedef enum logic [0:0] {S_IDLE, S_RUN} state_e;

  state_e           state_q;
  logic [IDX_W-1:0] elem_q;
  logic             nib_q;
  logic             last_q;   // last step is in the datapath
  logic             last_step;

  assign first    = (state_q == S_IDLE) && start && !last_q;
  assign issue    = first || (state_q == S_RUN);
  assign elem_idx = first ? '0 : elem_q;
  assign nib_idx  = first ? 1'b0 : nib_q;
  assign last_step = issue && (elem_idx == IDX_W'(N_OPS - 1))
                     && (nib_idx == 1'((STEPS == 2) ? 1 : 0));
  assign busy     = (state_q == S_RUN) || last_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      elem_q  <= '0;
      nib_q   <= 1'b0;
      last_q  <= 1'b0;
      done    <= 1'b0;
    end else begin
      last_q <= last_step;
      done   <= last_q;
      if (issue) begin
        if (last_step) begin
          state_q <= S_IDLE;
          elem_q  <= '0;
          nib_q   <= 1'b0;
        end else begin
          state_q <= S_RUN;
          if (STEPS == 2 && !nib_idx) begin
            elem_q <= elem_idx;
            nib_q  <= 1'b1;
          end else begin
            elem_q <= elem_idx + 1'b1;
            nib_q  <= 1'b0;
          end
        end
      end
    end
  end

  // A step is never issued for an element beyond the vector.
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue |-> (int'(elem_idx) < int'(N_OPS)));
  // done is a single-cycle pulse.
  assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);

endmodule
