// event_distributor -- per-qubit event queues with fast conditional execution.
//
// One event_queue per qubit receives the operations the core issues for that
// qubit.  When the timing controller emits a label, every queue whose oldest
// operation carries that label pops it, and the operation is executed only if
// the execution flag it selects (eqasm_pkg XF_*) is 1 for that qubit at that
// moment: the codeword is then driven on `cw`/`cw_valid`, and a measurement
// also pulses `meas_trig`.  A measurement whose flag is 0 is dropped and
// pulses `meas_cancel`, so the measurement-result registers stop waiting for
// it.  An operation whose label was already emitted (a second operation for
// the same qubit in one timing point) fires one cycle later and pulses
// `late_fire`.  Outputs are registered: they appear one cycle after `emit`.
//
// An opcode may decompose into two codewords at a fixed distance: an event
// with `dly2` > 0 loads a per-qubit countdown, and `cw2` is driven `dly2`
// cycles after the first codeword, under the same execution-flag decision.
// If a newly fired operation needs the output in the cycle the second
// codeword falls due, the new operation goes first, the second codeword
// slips by one cycle and `late_fire` pulses.  If a new two-codeword
// operation fires while a second codeword is still pending, the pending one
// is lost and `overlap` pulses (a scheduling error of the program).
//
// The specification gives the queues, the flag-based conditional execution
// and the opcode-to-"one or multiple codewords with correct timing" map; the
// per-qubit split, the depths, the limit of two codewords and the one-cycle
// output register are this design's choices.
module event_distributor
  import eqasm_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic   [NQUBITS-1:0]     push,
  input  event_t [NQUBITS-1:0]     push_data,
  output logic   [NQUBITS-1:0]     full,
  input  logic                     emit,
  input  label_t                   emit_label,
  input  logic   [NQUBITS-1:0][3:0] xflags,
  output logic   [NQUBITS-1:0]     cw_valid,
  output cw_t    [NQUBITS-1:0]     cw,
  output logic   [NQUBITS-1:0]     meas_trig,
  output logic   [NQUBITS-1:0]     meas_cancel,
  output logic                     late_fire,
  output logic                     overlap
);
  event_t [NQUBITS-1:0] head;
  logic   [NQUBITS-1:0] empty, pop, pop_new, exec_ok;
  label_t               last_label;
  logic                 started;
  logic   [NQUBITS-1:0] fire, seq_due, seq_clobber;
  logic   [NQUBITS-1:0][3:0] seq_cnt;   // cycles until the second codeword
  cw_t    [NQUBITS-1:0] seq_cw;

  for (genvar q = 0; q < NQUBITS; q++) begin : g_q
    event_queue #(.DEPTH(DEPTH)) u_q (
      .clk, .rst_n,
      .push(push[q]), .push_data(push_data[q]),
      .pop(pop[q]), .head(head[q]), .empty(empty[q]), .full(full[q])
    );
    assign pop_new[q] = !empty[q] && emit && (head[q].label == emit_label);
    assign pop[q]     = pop_new[q] ||
                        (!empty[q] && started && (head[q].label == last_label));
    assign exec_ok[q] = xflags[q][head[q].cond];
    assign fire[q]    = pop[q] && exec_ok[q];
    assign seq_due[q] = (seq_cnt[q] == 4'd1);
    // a new two-codeword operation replaces a second codeword still pending
    assign seq_clobber[q] = fire[q] && (head[q].dly2 != 4'd0) && (seq_cnt[q] != 4'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_label  <= '0;
      started     <= 1'b0;
      cw_valid    <= '0;
      cw          <= '0;
      meas_trig   <= '0;
      meas_cancel <= '0;
      late_fire   <= 1'b0;
      overlap     <= 1'b0;
      seq_cnt     <= '0;
      seq_cw      <= '0;
    end else begin
      if (emit) begin
        last_label <= emit_label;
        started    <= 1'b1;
      end
      late_fire <= |(pop & ~pop_new) | |(fire & seq_due);
      overlap   <= |seq_clobber;
      for (int q = 0; q < NQUBITS; q++) begin
        meas_trig[q]   <= fire[q] && head[q].is_meas;
        meas_cancel[q] <= pop[q] && !exec_ok[q] && head[q].is_meas;
        if (fire[q]) begin
          // a newly fired operation owns the output; a second codeword that
          // falls due now slips by one cycle
          cw_valid[q] <= 1'b1;
          cw[q]       <= head[q].cw;
          if (head[q].dly2 != 4'd0) begin
            seq_cnt[q] <= head[q].dly2;
            seq_cw[q]  <= head[q].cw2;
          end else if (!seq_due[q] && seq_cnt[q] != 4'd0) begin
            seq_cnt[q] <= seq_cnt[q] - 4'd1;
          end
        end else if (seq_due[q]) begin
          cw_valid[q] <= 1'b1;
          cw[q]       <= seq_cw[q];
          seq_cnt[q]  <= 4'd0;
        end else begin
          cw_valid[q] <= 1'b0;
          cw[q]       <= '0;
          if (seq_cnt[q] != 4'd0) seq_cnt[q] <= seq_cnt[q] - 4'd1;
        end
      end
    end
  end
endmodule
