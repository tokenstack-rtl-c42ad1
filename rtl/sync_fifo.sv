// sync_fifo -- small synchronous FIFO used for the request, job and response
// queues of the base die.
//
// DEPTH entries of type T in a register array with read and write pointers.
// push is ignored while full, pop while empty; both may happen in one cycle.
// The head entry is shown combinationally on dout; count is the fill level.
//
// Not described in the paper: a generic helper of this design, used for every
// queue of the base die.
module sync_fifo #(
  parameter type T     = logic [63:0],
  parameter int  DEPTH = 4,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  T            din,
  input  logic        pop,
  output T            dout,
  output logic        full,
  output logic        empty,
  output logic [AW:0] count
);

  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= din;
        wp      <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

endmodule
