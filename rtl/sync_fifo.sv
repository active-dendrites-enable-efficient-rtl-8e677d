// sync_fifo: first-word-fall-through FIFO of neuron addresses.
//
// Each layer has two of these: the input queue, holding the addresses of the
// pre-synaptic neurons that spiked in the current timestep, and the output
// queue, holding the addresses of this layer's neurons that spiked. The queue
// itself is named by the architecture; its construction (a register array with
// read and write pointers, dout always showing the oldest entry) is this
// design's choice.
//
// Interface: push/din writes when !full; pop removes the entry on dout when
// !empty. Push and pop may happen in the same cycle. count gives the fill level.
// Timing: an entry pushed in cycle n is on dout (empty low) in cycle n+1.
module sync_fifo #(
  parameter int unsigned WIDTH = 10,
  parameter int unsigned DEPTH = 784
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  assign empty = (count == '0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign dout  = mem[rptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  // A producer must not push into a full queue, a consumer not pop an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
