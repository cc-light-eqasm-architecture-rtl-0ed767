// microcode_unit -- control store translating quantum opcodes into codewords.
//
// NOPC entries (one per 9-bit quantum opcode), each an eqasm_pkg::ucode_t:
// whether the operation takes an S or a T register, whether it is a
// measurement, which execution flag gates it, and the codeword(s) sent to the
// pulse generators (one for a single-qubit operation or a pair's source, one
// for a pair's target).  The store is written at configuration time through
// the `cfg_*` port (one entry per cycle) and read combinationally on two ports,
// one per operation slot of a bundle word.  Opcode 0 is QNOP and is never
// looked up by the core.  The specification defines the opcode-to-codeword map
// as configurable ("one or multiple codewords with correct timing") but does
// not give the entry format.  Here an entry holds up to two codewords per
// qubit: the first fires at the operation's timing point, the second
// (`cw2_src`/`cw2_tgt`) `dly2` = 1..15 cycles later (0: none); longer
// decompositions are not supported.
module microcode_unit
  import eqasm_pkg::*;
#(
  parameter int unsigned NOPC = 512,
  localparam int unsigned AW  = $clog2(NOPC)
) (
  input  logic            clk,
  input  logic            cfg_we,
  input  logic [AW-1:0]   cfg_addr,
  input  ucode_t          cfg_data,
  input  logic [1:0][AW-1:0] opcode,
  output ucode_t [1:0]    entry
);
  ucode_t store [NOPC];

  always_ff @(posedge clk) begin
    if (cfg_we) store[cfg_addr] <= cfg_data;
  end

  always_comb begin
    for (int k = 0; k < 2; k++) entry[k] = store[opcode[k]];
  end
endmodule
