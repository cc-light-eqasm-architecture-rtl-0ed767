// instr_mem -- instruction memory of the eQASM processor.
//
// DEPTH words of 32 bits.  The 17-bit byte program counter of the
// specification spans 128 KiB, i.e. 32768 instruction words, which is the
// default.  Port A is the fetch port: `rd_addr` (a word index) is registered on
// the rising edge and `rd_data` shows that word in the next cycle (synchronous
// read, one cycle latency).  Port B is the host's load port: one word written
// per cycle when `wr_en` is high.  The memory is not reset; the host loads the
// program before starting the core.
module instr_mem #(
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
