// d_fifo -- the D-FIFO: queue of nonzero delta elements between the Delta
// Unit and the PE array.
//
// Each entry is a dfifo_t: the 16-bit delta value and a flag telling whether
// it belongs to the hidden-state part of the delta vector.  The Delta Unit
// writes one entry per cycle at most and keeps two writes in flight, so it
// watches almost_full (two or fewer free entries).  The PE array reads the head
// without latency.  The paper names the FIFO and its place; the depth and the
// entry format are this design's choice (DEPTH = 1024 fills one 18-kbit block
// RAM with 17-bit entries).  Besides the queue it counts the entries written
// since the last clear, so the controller can tell how many columns a layer
// step produced.
module d_fifo
  import edgedrnn_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr_stat,
  input  logic        push,
  input  dfifo_t      din,
  input  logic        pop,
  output dfifo_t      dout,
  output logic        empty,
  output logic        almost_full,
  output logic [15:0] n_written
);
  logic full;
  logic [AW:0] count;

  sync_fifo #(.T(dfifo_t), .DEPTH(DEPTH), .SLACK(2)) u_q (
    .clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .almost_full, .count
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        n_written <= '0;
    else if (clr_stat) n_written <= '0;
    else if (push)     n_written <= n_written + 16'd1;
  end
endmodule
