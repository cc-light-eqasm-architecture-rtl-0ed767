// qmrr_file -- qubit measurement result registers Q0..Q6.
//
// Each qubit has a 1-bit result register and a count of measurements issued
// on it that have not finished.  `issue[q]` (the core queued a measurement on
// qubit q) increments the count; a returning result (`res_valid[q]`, value
// `res[q]`) stores the value and decrements it, as does `cancel[q]` (the
// measurement was dropped by conditional execution).  Q_q is valid when no
// measurement on q is outstanding: FMR waits for that, as the specification
// requires ("wait until the last measurement instruction on qubit i finishes").
// `sat[q]` tells the core that the count is at its maximum and no further
// measurement may be issued.  Results reset to 0; the counter width is this
// design's choice.
module qmrr_file
  import eqasm_pkg::*;
#(
  parameter int unsigned CNT_W = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NQUBITS-1:0] issue,
  input  logic [NQUBITS-1:0] cancel,
  input  logic [NQUBITS-1:0] res_valid,
  input  logic [NQUBITS-1:0] res,
  output logic [NQUBITS-1:0] valid,
  output logic [NQUBITS-1:0] value,
  output logic [NQUBITS-1:0] sat
);
  logic [CNT_W-1:0] pend [NQUBITS];
  logic [CNT_W+1:0] nxt  [NQUBITS];

  // next outstanding count; more completions than issues clamp to zero
  always_comb begin
    for (int q = 0; q < NQUBITS; q++) begin
      nxt[q] = {2'b00, pend[q]} + (CNT_W+2)'(issue[q])
               - (CNT_W+2)'(res_valid[q]) - (CNT_W+2)'(cancel[q]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      value <= '0;
      for (int q = 0; q < NQUBITS; q++) pend[q] <= '0;
    end else begin
      for (int q = 0; q < NQUBITS; q++) begin
        if (res_valid[q]) value[q] <= res[q];
        pend[q] <= nxt[q][CNT_W+1] ? '0 : nxt[q][CNT_W-1:0];
      end
    end
  end

  always_comb begin
    for (int q = 0; q < NQUBITS; q++) begin
      valid[q] = (pend[q] == '0);
      sat[q]   = (pend[q] == '1);
    end
  end
endmodule
