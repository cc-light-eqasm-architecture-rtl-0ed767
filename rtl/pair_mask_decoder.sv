// pair_mask_decoder -- expands a two-qubit target mask into per-qubit roles.
//
// Combinational.  Bit p of the 16-bit T-register mask selects allowed pair p
// = (source, target) of the seven-qubit chip; the numbering of the sixteen
// directed pairs is the one drawn in the chip's pair diagram (eqasm_pkg::
// pair_of).  Output bit q of `src` (`tgt`) is set when qubit q is the source
// (target) of at least one selected pair.  A qubit that is both (two pairs
// sharing it, which a valid program does not do) shows in both outputs and in
// `conflict`.
module pair_mask_decoder
  import eqasm_pkg::*;
(
  input  logic [NPAIRS-1:0]  mask,
  output logic [NQUBITS-1:0] src,
  output logic [NQUBITS-1:0] tgt,
  output logic               conflict
);
  always_comb begin
    logic [5:0] pr;
    logic [NQUBITS-1:0] seen;
    src      = '0;
    tgt      = '0;
    seen     = '0;
    conflict = 1'b0;
    for (int p = 0; p < NPAIRS; p++) begin
      pr = pair_of(p);
      if (mask[p]) begin
        if (seen[pr[5:3]] || seen[pr[2:0]]) conflict = 1'b1;
        src[pr[5:3]]  = 1'b1;
        tgt[pr[2:0]]  = 1'b1;
        seen[pr[5:3]] = 1'b1;
        seen[pr[2:0]] = 1'b1;
      end
    end
  end
endmodule
