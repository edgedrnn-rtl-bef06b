// obuf -- output buffer (OBUF).
//
// Collects the new hidden state h_t of the layer just computed, which the PE
// array delivers as H/K words of K elements (pw_*), and redirects it:
//   * the same words also go straight from the PE array to the Delta Unit's
//     h memory, where they become h_{t-1} of the next time step (the top
//     wires that fan-out; this buffer keeps its own copy);
//   * the Delta Unit reads it element by element (rd_*, one-cycle latency) as
//     the input x_t of the next layer;
//   * after the last layer, out_start streams h_t on the AXI4-Stream master
//     m_data_axis, one 16-bit element per beat, tlast on the last element;
//     out_done pulses when the last beat is accepted.
// Streaming reads one word and then sends its K elements, so it takes
// H + H/K cycles without back-pressure.  The read port is shared; the
// controller never streams while the Delta Unit reads.  The paper gives the
// buffer's role (buffer outputs and redirect them to the Delta Unit); the word
// organisation and the stream format are this design's choice.
module obuf
  import edgedrnn_pkg::*;
#(
  parameter int NPE = edgedrnn_pkg::K,
  parameter int NH  = edgedrnn_pkg::MAX_H,
  parameter int HGW = $clog2(NH / NPE)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [15:0]    h_dim,
  // from the PE array
  input  logic           pw_valid,
  input  logic [HGW-1:0] pw_addr,
  input  act_t           pw_data [NPE],
  // element reads by the Delta Unit
  input  logic           rd_en,
  input  logic [15:0]    rd_addr,
  output act_t           rd_data,
  // output stream
  input  logic           out_start,
  output logic           out_done,
  output act_t           m_data_axis_tdata,
  output logic           m_data_axis_tvalid,
  input  logic           m_data_axis_tready,
  output logic           m_data_axis_tlast
);
  localparam int HG  = NH / NPE;
  localparam int LNW = (NPE > 1) ? $clog2(NPE) : 1;

  logic [NPE*ACT_W-1:0] mem [HG];
  logic [NPE*ACT_W-1:0] rword;
  logic [LNW-1:0]       rlane;

  always_ff @(posedge clk) begin
    if (pw_valid)
      for (int k = 0; k < NPE; k++) mem[pw_addr][k*ACT_W +: ACT_W] <= pw_data[k];
  end

  // ------------------------------------------------------------ streaming
  typedef enum logic [1:0] {O_IDLE, O_LOAD, O_SEND} ostate_e;
  ostate_e        ost;
  logic [HGW:0]   ogrp;
  logic [LNW-1:0] olane;
  logic           last_grp;

  assign last_grp = (ogrp == (HGW+1)'(h_dim / 16'(NPE)) - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ost      <= O_IDLE;
      ogrp     <= '0;
      olane    <= '0;
      out_done <= 1'b0;
    end else begin
      out_done <= 1'b0;
      unique case (ost)
        O_IDLE: if (out_start) begin
          ost   <= O_LOAD;
          ogrp  <= '0;
        end
        O_LOAD: begin
          ost   <= O_SEND;
          olane <= '0;
        end
        O_SEND: if (m_data_axis_tready) begin
          if (olane == LNW'(NPE - 1)) begin
            if (last_grp) begin
              ost      <= O_IDLE;
              out_done <= 1'b1;
            end else begin
              ost  <= O_LOAD;
              ogrp <= ogrp + 1'b1;
            end
          end else begin
            olane <= olane + 1'b1;
          end
        end
        default: ost <= O_IDLE;
      endcase
    end
  end

  // shared read port: the stream loads whole words, the Delta Unit elements
  always_ff @(posedge clk) begin
    if (ost == O_LOAD) begin
      rword <= mem[HGW'(ogrp)];
    end else if (rd_en) begin
      rword <= mem[HGW'(rd_addr >> LNW)];
      rlane <= LNW'(rd_addr);
    end
  end

  assign rd_data            = act_t'(rword[rlane*ACT_W +: ACT_W]);
  assign m_data_axis_tvalid = (ost == O_SEND);
  assign m_data_axis_tdata  = act_t'(rword[olane*ACT_W +: ACT_W]);
  assign m_data_axis_tlast  = (ost == O_SEND) && last_grp && (olane == LNW'(NPE - 1));

  a_no_share: assert property (@(posedge clk) disable iff (!rst_n)
                               rd_en |-> ost == O_IDLE);
  a_hold:     assert property (@(posedge clk) disable iff (!rst_n)
                               m_data_axis_tvalid && !m_data_axis_tready |=>
                               m_data_axis_tvalid && $stable(m_data_axis_tdata));
endmodule
