// w_fifo -- the W-FIFO: buffers the weight stream coming from the AXI
// Datamover (AXI4-Stream slave s_w_axis, one 64-bit beat = K weights) until
// the PE array consumes it.
//
// s_w_axis_tready is high while the FIFO has room; a beat is taken when tvalid
// and tready are both high (tlast is not needed: the column length is known
// from the configuration).  The read side is first-word-fall-through: the
// head beat is on dout while valid is high and leaves with pop.  The paper
// names the FIFO; its depth (512 beats, one 36-kbit block RAM at 72-bit width)
// is this design's choice.  An assertion checks the AXI-Stream rule that a
// beat offered with tvalid stays unchanged until it is accepted.
module w_fifo
  import edgedrnn_pkg::*;
#(
  parameter int DEPTH = 512,
  parameter int DW    = edgedrnn_pkg::DRAM_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] s_w_axis_tdata,
  input  logic          s_w_axis_tvalid,
  output logic          s_w_axis_tready,
  output logic          valid,
  output logic [DW-1:0] dout,
  input  logic          pop
);
  logic empty, full, afull;
  logic [$clog2(DEPTH):0] count;

  sync_fifo #(.T(logic [DW-1:0]), .DEPTH(DEPTH), .SLACK(1)) u_q (
    .clk, .rst_n,
    .push        (s_w_axis_tvalid && s_w_axis_tready),
    .din         (s_w_axis_tdata),
    .pop         (pop),
    .dout        (dout),
    .empty       (empty),
    .full        (full),
    .almost_full (afull),
    .count       (count)
  );

  assign s_w_axis_tready = !full;
  assign valid           = !empty;

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
                 s_w_axis_tvalid && !s_w_axis_tready |=>
                 s_w_axis_tvalid && $stable(s_w_axis_tdata));
endmodule
