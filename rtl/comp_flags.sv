// comp_flags -- comparison flag register (COMPFLAG) of the eQASM core.
//
// Stores the twelve flags produced by the comparator when `we` (a CMP
// instruction) is high, and returns the flag chosen by the 4-bit code `sel`
// (the comp_flag field of BR and FBR).  ALWAYS reads 1 and NEVER 0 even before
// the first CMP; the other flags reset to 0 (this design's choice).  The read
// is combinational from the stored flags: an instruction right after a CMP
// already sees its flags, which meets the one-instruction CMP-to-BR spacing the
// specification asks compilers for.  Codes 12..15 read 0.
module comp_flags
  import eqasm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic [NCFLAGS-1:0] flags_in,
  input  logic [3:0]         sel,
  output logic               flag
);
  logic [NCFLAGS-1:0] flags_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flags_q <= NCFLAGS'(1) << CF_ALWAYS;
    else if (we) flags_q <= flags_in;
  end

  always_comb begin
    if (sel == CF_ALWAYS)          flag = 1'b1;
    else if (sel == CF_NEVER)      flag = 1'b0;
    else if (32'(sel) < NCFLAGS)   flag = flags_q[sel];
    else                           flag = 1'b0;
  end
endmodule
