// sync_fifo: single-clock first-in first-out queue with an occupancy count.
//
// Used for the timing queue and the event queues. Push and pop may happen in
// the same clock. head shows the oldest entry combinationally while not
// empty. Pushing when full or popping when empty is a usage error, checked
// by assertions and otherwise ignored. DEPTH must be a power of two.
// Lint note: rst_n is an asynchronous reset everywhere in the logic; its
// only synchronous use is the "disable iff (!rst_n)" of the assertions, which
// is why a lint tool may report it as both a synchronous and an asynchronous
// signal. No flip-flop uses it synchronously.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16,
  parameter int CW    = $clog2(DEPTH) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] head,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    count
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rp, wp;
  logic             do_push, do_pop;

  assign empty   = count == '0;
  assign full    = count == CW'(DEPTH);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign head    = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
