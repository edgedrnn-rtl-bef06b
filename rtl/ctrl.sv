// ctrl -- control module (CTRL): the time-step FSM and the weight-fetch
// instruction generator.
//
// Time step.  When the first element of x_t is offered on the input stream
// the FSM runs the layers one after another.  For layer l it starts the Delta
// Unit, lets the MxV run until the Delta Unit has finished, the D-FIFO is
// empty, every column's instruction has left and the PE array is idle, then
// starts the activation pass of the PE array.  After the last layer it lets
// the output buffer stream h_t out and pulses step_done (the host's "time step
// finished" flag).  A CONTROL write requests init, which clears the Delta Unit
// memories and the PE accumulation memories in parallel.
//
// Instructions.  Each pcol from the Delta Unit is queued (16 entries; the
// Delta Unit stops when two or fewer are free) and turned into one 80-bit AXI
// Datamover MM2S command on m_inst_axis that reads one weight column:
//   [22:0]  BTT   bytes to transfer = 3H * 8/8 (one column of 8-bit weights)
//   [23]    TYPE  1 (incrementing burst)      [29:24] DSA 0
//   [30]    EOF   1                           [31]    DRR 0
//   [71:32] SADDR wbase[l] + pcol * BTT (40-bit byte address)
//   [75:72] TAG   pcol[3:0]                   [79:76] reserved 0
// The command is held until accepted (AXI4-Stream rules).
//
// The paper gives the 80-bit width, that the instruction holds pcol and a
// burst length derived from the network size, and that one multiplier forms
// the column address.  The field layout is the Datamover's 40-bit-address
// command format (vendor documentation, not the paper); the FSM and the queue
// are this design's.
module ctrl
  import edgedrnn_pkg::*;
#(
  parameter int NL     = edgedrnn_pkg::MAX_L,
  parameter int LW     = (NL > 1) ? $clog2(NL) : 1,
  parameter int PC_DEP = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg_i,
  input  logic              init_req,
  output logic              busy,
  output logic              step_done,
  input  logic              x_valid,           // s_data_axis_tvalid
  // Delta Unit
  output logic              du_start,
  output logic [LW-1:0]     layer,
  output logic [15:0]       x_dim,
  output act_t              th_x,
  output act_t              th_h,
  input  logic              du_done,
  output logic              du_init_start,
  input  logic              du_init_done,
  input  logic              pc_push,
  input  logic [15:0]       pc_data,
  output logic              pc_afull,
  // D-FIFO / PE array / OBUF
  input  logic              dq_empty,
  output logic              dq_clr_stat,
  input  logic              mxv_idle,
  output logic              pe_init_start,
  input  logic              pe_init_done,
  output logic              act_start,
  input  logic              act_done,
  output logic              out_start,
  input  logic              out_done,
  // Datamover command stream
  output logic [INST_W-1:0] m_inst_axis_tdata,
  output logic              m_inst_axis_tvalid,
  input  logic              m_inst_axis_tready
);
  typedef enum logic [2:0] {
    C_IDLE, C_INIT, C_LSTART, C_MXV, C_ACT, C_OUT
  } cstate_e;

  cstate_e state;
  logic    du_fin, du_ini, pe_ini;

  // ------------------------------------------------------------ per-layer view
  assign x_dim = (layer == '0) ? cfg_i.i_dim : cfg_i.h_dim;
  assign th_x  = act_t'(cfg_i.th_x[layer]);
  assign th_h  = act_t'(cfg_i.th_h[layer]);
  assign busy  = (state != C_IDLE);

  // ------------------------------------------------------------ pcol queue
  logic        pq_empty, pq_pop;
  logic [15:0] pq_head;
  logic        pq_full;
  logic [$clog2(PC_DEP):0] pq_count;

  sync_fifo #(.T(logic [15:0]), .DEPTH(PC_DEP), .SLACK(2)) u_pq (
    .clk, .rst_n,
    .push        (pc_push),
    .din         (pc_data),
    .pop         (pq_pop),
    .dout        (pq_head),
    .empty       (pq_empty),
    .full        (pq_full),
    .almost_full (pc_afull),
    .count       (pq_count)
  );

  // ------------------------------------------------------------ instruction
  logic [22:0]       btt;
  logic [ADDR_W-1:0] col_addr;
  assign btt      = 23'(cfg_i.h_dim) * 23'd3 * 23'(W_W / 8);
  assign col_addr = cfg_i.wbase[layer] + ADDR_W'(pq_head) * ADDR_W'(btt);   // the address DSP
  assign pq_pop   = !pq_empty && (!m_inst_axis_tvalid || m_inst_axis_tready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_inst_axis_tvalid <= 1'b0;
      m_inst_axis_tdata  <= '0;
    end else begin
      if (m_inst_axis_tvalid && m_inst_axis_tready) m_inst_axis_tvalid <= 1'b0;
      if (pq_pop) begin
        m_inst_axis_tvalid <= 1'b1;
        m_inst_axis_tdata  <= {4'd0, pq_head[3:0], col_addr, 1'b0, 1'b1, 6'd0, 1'b1, btt};
      end
    end
  end

  // ------------------------------------------------------------ step FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= C_IDLE;
      layer         <= '0;
      du_start      <= 1'b0;
      du_init_start <= 1'b0;
      pe_init_start <= 1'b0;
      act_start     <= 1'b0;
      out_start     <= 1'b0;
      step_done     <= 1'b0;
      dq_clr_stat   <= 1'b0;
      du_fin        <= 1'b0;
      du_ini        <= 1'b0;
      pe_ini        <= 1'b0;
    end else begin
      du_start      <= 1'b0;
      du_init_start <= 1'b0;
      pe_init_start <= 1'b0;
      act_start     <= 1'b0;
      out_start     <= 1'b0;
      step_done     <= 1'b0;
      dq_clr_stat   <= 1'b0;
      if (du_done)      du_fin <= 1'b1;
      if (du_init_done) du_ini <= 1'b1;
      if (pe_init_done) pe_ini <= 1'b1;
      unique case (state)
        C_IDLE: begin
          if (init_req) begin
            state         <= C_INIT;
            du_init_start <= 1'b1;
            pe_init_start <= 1'b1;
            du_ini        <= 1'b0;
            pe_ini        <= 1'b0;
          end else if (x_valid && cfg_i.num_layers != 8'd0) begin
            state <= C_LSTART;
            layer <= '0;
          end
        end
        C_INIT: if (du_ini && pe_ini) state <= C_IDLE;
        C_LSTART: begin
          du_start    <= 1'b1;
          dq_clr_stat <= 1'b1;
          du_fin      <= 1'b0;
          state       <= C_MXV;
        end
        C_MXV: begin
          if (du_fin && dq_empty && mxv_idle && pq_empty && !m_inst_axis_tvalid) begin
            act_start <= 1'b1;
            state     <= C_ACT;
          end
        end
        C_ACT: begin
          if (act_done) begin
            if (8'(layer) + 8'd1 < cfg_i.num_layers) begin
              layer <= layer + 1'b1;
              state <= C_LSTART;
            end else begin
              out_start <= 1'b1;
              state     <= C_OUT;
            end
          end
        end
        C_OUT: begin
          if (out_done) begin
            step_done <= 1'b1;
            state     <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  a_inst_hold: assert property (@(posedge clk) disable iff (!rst_n)
                 m_inst_axis_tvalid && !m_inst_axis_tready |=>
                 m_inst_axis_tvalid && $stable(m_inst_axis_tdata));
  a_layers:    assert property (@(posedge clk) disable iff (!rst_n)
                 state == C_LSTART |-> int'(cfg_i.num_layers) <= NL);
endmodule
