// gpr_file -- general purpose register file R0..R31 of the eQASM core.
//
// NREGS registers of WIDTH bits (32 x 32 in CC-Light).  Two combinational read
// ports (rs, rt) and one write port that updates on the rising clock edge.  A
// read of the register being written in the same cycle returns its old value;
// the core writes at the end of its single execute cycle, so the next
// instruction already reads the new value and no bypass is needed (GPR
// dependences are resolved in hardware, as the specification requires).  R0 is
// an ordinary register (the specification gives it no special role).  All registers reset to zero: the reset value is this
// design's choice.
module gpr_file #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AW-1:0]    rs_addr,
  output logic [WIDTH-1:0] rs_data,
  input  logic [AW-1:0]    rt_addr,
  output logic [WIDTH-1:0] rt_data,
  input  logic             we,
  input  logic [AW-1:0]    wd_addr,
  input  logic [WIDTH-1:0] wd_data
);
  logic [WIDTH-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wd_addr] <= wd_data;
    end
  end

  always_comb begin
    rs_data = regs[rs_addr];
    rt_data = regs[rt_addr];
  end
endmodule
