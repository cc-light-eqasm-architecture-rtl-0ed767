// qotr_file -- quantum operation target registers S0..S31 and T0..T31.
//
// S registers hold 7-bit qubit masks (bit i selects physical qubit i) written
// by SMIS; T registers hold 16-bit pair masks (bit p selects allowed pair p)
// written by SMIT.  Each file has one write port (rising edge) and two
// combinational read ports, one per operation slot of a quantum bundle word.
// A read of a register written in the same cycle returns the old value; the
// core writes and reads in different instructions, so this never matters
// within an instruction.  All registers reset to zero (no qubit selected), a
// choice of this design.
module qotr_file
  import eqasm_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      s_we,
  input  logic [4:0]                s_waddr,
  input  logic [NQUBITS-1:0]        s_wdata,
  input  logic                      t_we,
  input  logic [4:0]                t_waddr,
  input  logic [NPAIRS-1:0]         t_wdata,
  input  logic [1:0][4:0]           raddr,   // per bundle slot
  output logic [1:0][NQUBITS-1:0]   s_rdata,
  output logic [1:0][NPAIRS-1:0]    t_rdata
);
  logic [NQUBITS-1:0] sregs [NQOTR];
  logic [NPAIRS-1:0]  tregs [NQOTR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NQOTR; i++) begin
        sregs[i] <= '0;
        tregs[i] <= '0;
      end
    end else begin
      if (s_we) sregs[s_waddr] <= s_wdata;
      if (t_we) tregs[t_waddr] <= t_wdata;
    end
  end

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      s_rdata[k] = sregs[raddr[k]];
      t_rdata[k] = tregs[raddr[k]];
    end
  end
endmodule
