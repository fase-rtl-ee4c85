// fase_byte_fifo: the RX and TX buffers of the FASE controller.
//
// A synchronous first-word-fall-through FIFO. The controller keeps one between
// the UART receiver and the main state machine (RX buffer) and one between the
// main state machine and the UART transmitter (TX buffer), so that UART
// transfers overlap with the execution of the previous request. The paper only
// says the UART data are buffered; the depth (DEPTH, default 64 entries) and
// the FIFO organisation are this design's choice.
//
// Interface: push when push && !full; pop when pop && !empty; rdata shows the
// oldest entry whenever !empty (no read latency). count gives the fill level.
// A push and a pop in the same cycle are both served.
module fase_byte_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               push,
  input  logic [WIDTH-1:0]   wdata,
  input  logic               pop,
  output logic [WIDTH-1:0]   rdata,
  output logic               full,
  output logic               empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign rdata = mem[rptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      unique case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // A push into a full buffer or a pop from an empty one is a protocol error.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);
endmodule
