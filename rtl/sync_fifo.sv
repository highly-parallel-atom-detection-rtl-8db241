// sync_fifo: small synchronous first-in first-out buffer.
//
// DEPTH entries of WIDTH bits in registers. push writes din when not full;
// pop drops the head, which is visible on dout whenever not empty (first-word
// fall-through). count gives the number of stored entries. Pushing while
// full or popping while empty is a usage error and is flagged by assertions.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 4
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
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rp, wp;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (push && !full)  wp <= inc(wp);
      if (pop && !empty)  rp <= inc(rp);
      count <= count + ($bits(count))'(push && !full) - ($bits(count))'(pop && !empty);
    end
  end

  assign full  = (int'(count) == DEPTH);
  assign empty = (count == '0);
  assign dout  = mem[rp];

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("push into full fifo");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("pop from empty fifo");
endmodule
