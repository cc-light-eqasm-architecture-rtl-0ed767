// data_mem -- data memory shared by the eQASM core and the host.
//
// DEPTH words of 32 bits, addressed by word index (the core drops the two low
// bits of the byte address; accesses are taken as word aligned, which the
// specification does not discuss).  Two synchronous ports with the same
// behaviour: on a rising edge with `en` high, `we` writes `wdata`, otherwise
// the word is read and appears on `rdata` in the next cycle.  Port A belongs to
// the core (LD/ST), port B to the host, which uses the memory to pass
// initialisation data in and results out.  If both ports write the same word in
// one cycle, port A wins.  The size is not given by the specification: 1024
// words (4 KiB) is this design's choice.
module data_mem #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_en && b_we) mem[b_addr] <= b_wdata;
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end
endmodule
