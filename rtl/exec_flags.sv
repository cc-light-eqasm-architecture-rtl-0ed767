// exec_flags -- execution flag registers, four flags per qubit.
//
// Keeps the last two finished measurement results of every qubit (updated
// when `res_valid[q]` brings a result) and derives the four flags the
// specification defines: flag 0 is always 1 (unconditional), flag 1 is 1 iff
// the last result was |1>, flag 2 iff it was |0>, flag 3 iff the last two
// results were equal.  The flags depend only on finished results, not on the
// validity of the result register.  Before any measurement the history reads
// as two |0> results (reset value chosen by this design).
module exec_flags
  import eqasm_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NQUBITS-1:0]       res_valid,
  input  logic [NQUBITS-1:0]       res,
  output logic [NQUBITS-1:0][3:0]  flags
);
  logic [NQUBITS-1:0] last, prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= '0;
      prev <= '0;
    end else begin
      for (int q = 0; q < NQUBITS; q++) begin
        if (res_valid[q]) begin
          prev[q] <= last[q];
          last[q] <= res[q];
        end
      end
    end
  end

  always_comb begin
    for (int q = 0; q < NQUBITS; q++) begin
      flags[q][XF_ALWAYS] = 1'b1;
      flags[q][XF_ONE]    = last[q];
      flags[q][XF_ZERO]   = ~last[q];
      flags[q][XF_SAME]   = (last[q] == prev[q]);
    end
  end
endmodule
