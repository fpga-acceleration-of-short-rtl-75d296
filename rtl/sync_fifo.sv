// sync_fifo -- small single-clock first-in first-out buffer.
//
// A helper for the units that keep requests in flight. DEPTH entries of type
// T held in a register array with read and write pointers and an occupancy
// count. Push when `push` is high and the FIFO is not full; pop when `pop` is
// high and it is not empty; both in one cycle are allowed. `dout` shows the
// oldest entry combinationally (first-word fall-through). Pushing when full or
// popping when empty is a usage error and is flagged by assertions.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : PW'(p + 1'b1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count <= count + {{($bits(count)-1){1'b0}}, push} - {{($bits(count)-1){1'b0}}, pop};
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
