// Small synchronous FIFO (helper): DEPTH entries of type T, first-word fall
// through. push/pop in the same cycle are allowed; pushing when full or popping when
// empty is a protocol error caught by the assertions.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic empty,
  output logic full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  assign dout  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) pop |-> !empty);
endmodule
