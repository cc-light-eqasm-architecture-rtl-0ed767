// event_queue -- FIFO of pending operations for one qubit.
//
// Holds up to DEPTH eqasm_pkg::event_t records (timing label, codeword,
// execution-flag selector, measurement bit) in program order.  One push and
// one pop per cycle; `head` is the oldest record and is valid when `empty` is
// low.  Pushing when full or popping when empty is a protocol error caught by
// the assertions.  The depth is not given by the specification (16 is this
// design's choice).  `rst_n` also disables the assertions, the only place it
// is used synchronously; lint tools report it as both an asynchronous reset
// and a synchronous signal, which is expected.
module event_queue
  import eqasm_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  event_t push_data,
  input  logic   pop,
  output event_t head,
  output logic   empty,
  output logic   full
);
  event_t        mem [DEPTH];
  logic [AW-1:0] rptr, wptr;
  logic [AW:0]   count;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign head  = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wptr] <= push_data;
        wptr      <= wptr + AW'(1);
      end
      if (pop) rptr <= rptr + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
