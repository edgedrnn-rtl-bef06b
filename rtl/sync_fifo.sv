// sync_fifo -- single-clock first-word-fall-through FIFO used for the
// accelerator's buffers.
//
// push writes din when the FIFO is not full; pop removes the head, which is
// always visible on dout while empty is low.  A push and a pop may happen in
// the same cycle.  count gives the fill level and almost_full rises when fewer
// than SLACK free entries are left, so a producer with SLACK words in flight
// can stop in time.  DEPTH must be a power of two.  Pointers are reset; the
// storage is not.
module sync_fifo #(
  parameter type T     = logic [15:0],
  parameter int  DEPTH = 16,
  parameter int  SLACK = 2,
  parameter int  AW    = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    push,
  input  T        din,
  input  logic    pop,
  output T        dout,
  output logic    empty,
  output logic    full,
  output logic    almost_full,
  output logic [AW:0] count
);
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  assign dout        = mem[rp];
  assign empty       = (count == '0);
  assign full        = (count == (AW+1)'(DEPTH));
  assign almost_full = (count > (AW+1)'(DEPTH - SLACK));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
