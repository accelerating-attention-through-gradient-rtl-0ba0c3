// sync_fifo: single-clock first-in first-out buffer.
// Used for the Q-FIFO (query vectors streamed in), the Score-FIFO and
// IDX-FIFO (unpruned scores and their key indices passed from the front end
// to the back end) and the Output-FIFO (attention output rows). The paper
// names these FIFOs and gives the Score/IDX depths (512); the storage style,
// show-ahead read and flag logic are this design's own.
// Interface: push/din write when not full; dout always shows the oldest
// entry, pop removes it when not empty. Pushing and popping in one cycle is
// allowed. Flags and count update on the clock edge after the operation.
module sync_fifo #(
  parameter int WIDTH = 24,
  parameter int DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign dout  = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  // Handshake rules: the producer never pushes into a full FIFO and the
  // consumer never pops an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
