// sync_fifo: single-clock first-in first-out buffer, used for the timing queue and the
// event queues of the timing control unit.
//
// Storage is a DEPTH-entry array with read and write pointers and an occupancy count.
// push is accepted when !full (or when a pop happens in the same cycle); pop removes the
// front entry. The front entry (dout) is visible combinationally while !empty, so the
// label comparator downstream can look at it in the same cycle. Reset empties the queue.
// The paper gives no queue depth; DEPTH is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam logic [CW-1:0] ONE  = CW'(1);
  localparam logic [CW-1:0] ZERO = CW'(0);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == CW'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rptr];

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
      count <= count + (do_push ? ONE : ZERO) - (do_pop ? ONE : ZERO);
    end
  end

  // A push into a full queue without a pop is a protocol error of the producer.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sync_fifo: push into full queue");
endmodule
