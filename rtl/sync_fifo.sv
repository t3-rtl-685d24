// sync_fifo: single-clock first-in first-out queue of any element type.
//
// Helper for the memory controller's queues. push/pop are accepted when the queue
// is not full / not empty; a push and a pop may happen in the same cycle. The head
// is visible on `head` while `empty` is low (first-word fall-through). DEPTH must be
// a power of two. `count` reports the occupancy, which the MCA monitors.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      push,
  input  T          din,
  input  logic      pop,
  output T          head,
  output logic      empty,
  output logic      full,
  output logic [PW:0] count
);
  T              mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign empty = (count == '0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign head  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= wp + PW'(1);
      if (pop && !empty) rp <= rp + PW'(1);
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
