// hm_fifo: small synchronous FIFO used for the command queue and the result
// buffer of the rank-level unit.
//
// DEPTH entries of type T, written when push is high and the FIFO is not
// full, read (first-word fall-through: dout shows the oldest entry whenever
// not empty) and removed when pop is high. A push and a pop in the same
// cycle are both served. Reset empties it. The storage is a register array.
module hm_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic full,
  output logic empty
);

  T              mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [AW:0]   cnt_q;
  logic          do_push, do_pop;

  assign full    = (cnt_q == (AW+1)'(DEPTH));
  assign empty   = (cnt_q == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp_q];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wp_q <= (32'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
      if (do_pop)  rp_q <= (32'(rp_q) == DEPTH - 1) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
