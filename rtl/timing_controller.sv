// timing_controller -- timing queue and timer of the queue-based timing scheme.
//
// The core pushes timing points {label, interval}: QWAIT/QWAITR and every
// bundle word with PI > 0 open a new timing point whose label is one above the
// previous one and whose interval is the number of cycles after the previous
// timing point at which it occurs.  The controller releases the labels in
// order: it emits the head label (`emit`, `emit_label`) when `elapsed`, the
// number of cycles since the previous emission, has reached the head's
// interval.  The per-qubit event queues fire the operations carrying that
// label.
//
// A timing point may still collect operations (bundle words with PI = 0) until
// the next timing point is created, so the head is only released once a later
// point is queued or the core has stopped (`closed`).  If at that moment the
// interval has already passed, the label is emitted at once and `late` pulses:
// the program did not run far enough ahead of the timeline.  An interval of 0
// or 1 releases the label in the cycle after the previous one.  At reset the
// queue holds label 0 with interval 0, the start of the timeline; its
// emission is never late.  The wait-for-closure rule and the late flag are this
// design's own; the specification only says that timing points and operations
// are buffered in queues.  `rst_n` also disables the overflow assertion, so
// lint tools see it used both asynchronously and synchronously; expected.
module timing_controller
  import eqasm_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  label_t push_label,
  input  wait_t  push_wait,
  output logic   full,
  input  logic   closed,
  output logic   emit,
  output label_t emit_label,
  output logic   late
);
  label_t            lab_q  [DEPTH];
  wait_t             wait_q [DEPTH];
  logic [AW-1:0]     rptr, wptr;
  logic [AW:0]       count;
  logic [WAIT_W:0]   elapsed;
  logic              first;

  assign full       = (count == (AW+1)'(DEPTH));
  assign emit       = (count != '0) && (elapsed >= {1'b0, wait_q[rptr]}) &&
                      ((count >= (AW+1)'(2)) || closed);
  assign emit_label = lab_q[rptr];
  assign late       = emit && !first && (elapsed > {1'b0, wait_q[rptr]});

  logic do_push;
  assign do_push = push && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr    <= '0;
      wptr    <= AW'(1);
      count   <= (AW+1)'(1);
      elapsed <= '0;
      first   <= 1'b1;
      for (int i = 0; i < DEPTH; i++) begin
        lab_q[i]  <= '0;
        wait_q[i] <= '0;
      end
    end else begin
      if (do_push) begin
        lab_q[wptr]  <= push_label;
        wait_q[wptr] <= push_wait;
        wptr         <= wptr + AW'(1);
      end
      if (emit) begin
        rptr    <= rptr + AW'(1);
        elapsed <= (WAIT_W+1)'(1);
        first   <= 1'b0;
      end else if (elapsed != '1) begin
        elapsed <= elapsed + (WAIT_W+1)'(1);
      end
      count <= count + (AW+1)'(do_push) - (AW+1)'(emit);
    end
  end

  // a full queue must not be pushed; the core stalls instead
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
endmodule
