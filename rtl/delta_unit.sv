// delta_unit -- Delta Unit: turns the state vector of a layer into the sparse
// delta vector that drives the MxV, and keeps the state memories.
//
// For layer l (start pulse, layer index and sizes held by the controller for
// the whole layer step) the unit walks the layer's concatenated state vector
// s = [1, x_t, h_{t-1}] of x_dim+1+h_dim elements, one element per cycle:
//   element 0       the constant 1.0 that multiplies the bias column,
//   elements 1..I   x_t: from s_data_axis for layer 0, read from the output
//                   buffer (h_t of layer l-1) for the other layers,
//   the rest        h_{t-1} of layer l, read from this unit's h memory.
// Each element is compared with its last propagated value s_hat (the state
// memory, Eq. 2 of the delta-network formulation).  If the difference is
// nonzero and its magnitude is at least the threshold (th_x for the input
// part, th_h for the hidden part) the difference goes to the D-FIFO, the
// element index -- the physical column pointer pcol of the weight column it
// multiplies -- goes to the controller, and s_hat is advanced by the sent
// difference.  Otherwise nothing is sent and s_hat is kept.  A difference
// beyond the 16-bit range is clipped and s_hat advanced by the clipped value,
// so that s_hat always equals the sum of the deltas sent.
//
// Timing: two-stage pipeline (read state memory, then compare and write);
// with no back-pressure a vector of D elements takes D cycles plus 2; done
// pulses after the last element.  Issue stops while either downstream FIFO is
// almost full or the input stream has no data.
//
// The unit also holds the true h_{t-1} of every layer (h memory, K lanes per
// word).  The PE array reads it by group for the update u*h_{t-1} (hrd_*), and
// the output buffer writes the new h_t into it (hw_*).  init_start clears
// s_hat and h of all layers (Eq. 2: initial states are zero).
//
// Following the paper: one element per cycle, the threshold test, the state
// memory in block RAM, pcol to the controller and delta to the D-FIFO.  This
// design's choices: skipping zero differences at threshold 0 (needed for the
// paper's natural sparsity at threshold 0), the memory layout, the separate h
// memory, clipping, and the sequencing of the three sources.
module delta_unit
  import edgedrnn_pkg::*;
#(
  parameter int NL  = edgedrnn_pkg::MAX_L,
  parameter int NI  = edgedrnn_pkg::MAX_I,
  parameter int NH  = edgedrnn_pkg::MAX_H,
  parameter int NPE = edgedrnn_pkg::K,
  parameter int LW  = (NL > 1) ? $clog2(NL) : 1,
  parameter int HGW = $clog2(NH / NPE)
) (
  input  logic                clk,
  input  logic                rst_n,
  // control from CTRL
  input  logic                start,
  input  logic [LW-1:0]       layer,
  input  logic [15:0]         x_dim,
  input  logic [15:0]         h_dim,
  input  act_t                th_x,
  input  act_t                th_h,
  output logic                done,
  output logic                ready,
  input  logic                init_start,
  output logic                init_done,
  // layer-0 input x_t
  input  act_t                s_data_axis_tdata,
  input  logic                s_data_axis_tvalid,
  output logic                s_data_axis_tready,
  // x_t of later layers: element reads of the output buffer (1-cycle latency)
  output logic                ob_rd_en,
  output logic [15:0]         ob_rd_addr,
  input  act_t                ob_rd_data,
  // delta to the D-FIFO, pcol to CTRL
  output logic                dq_push,
  output dfifo_t              dq_data,
  input  logic                dq_afull,
  output logic                pc_push,
  output logic [15:0]         pc_data,
  input  logic                pc_afull,
  // h_{t-1} of the current layer for the PE array
  input  logic                hrd_en,
  input  logic [HGW-1:0]      hrd_addr,
  output act_t                hrd_data [NPE],
  // new h_t of the current layer from the output buffer
  input  logic                hw_en,
  input  logic [HGW-1:0]      hw_addr,
  input  act_t                hw_data [NPE]
);
  localparam int COLS  = NI + 1 + NH;           // state elements per layer
  localparam int SDEP  = NL * COLS;
  localparam int SAW   = $clog2(SDEP);
  localparam int HG    = NH / NPE;
  localparam int HDEP  = NL * HG;
  localparam int HAW   = $clog2(HDEP);
  localparam int LNW   = (NPE > 1) ? $clog2(NPE) : 1;
  localparam act_t ONE = act_t'(1 << ACT_FRAC);

  typedef enum logic [1:0] {SRC_ONE, SRC_STREAM, SRC_OBUF, SRC_HMEM} src_e;
  typedef enum logic [1:0] {IDLE, RUN, INIT} state_e;

  state_e state;

  // ------------------------------------------------------------ memories
  act_t                  smem [SDEP];          // s_hat of every layer
  logic [NPE*ACT_W-1:0]  hmem [HDEP];          // h_{t-1} of every layer

  // ------------------------------------------------------------ element walk
  logic [15:0]   e;                 // element being issued
  logic [15:0]   n_el;              // x_dim + 1 + h_dim
  logic [HGW:0]  hgrp;              // h-part group
  logic [LNW-1:0] hlane;
  src_e          src0;
  logic          go;
  logic [SAW-1:0] sbase;

  assign n_el  = x_dim + 16'd1 + h_dim;
  assign sbase = SAW'(int'(layer) * COLS);

  always_comb begin
    if (e == 16'd0)        src0 = SRC_ONE;
    else if (e <= x_dim)   src0 = (layer == '0) ? SRC_STREAM : SRC_OBUF;
    else                   src0 = SRC_HMEM;
  end

  assign go = (state == RUN) && (e < n_el) && !dq_afull && !pc_afull &&
              (src0 != SRC_STREAM || s_data_axis_tvalid);

  assign s_data_axis_tready = go && (src0 == SRC_STREAM);
  assign ob_rd_en           = go && (src0 == SRC_OBUF);
  assign ob_rd_addr         = e - 16'd1;
  assign ready              = (state == IDLE);

  // ------------------------------------------------------------ stage 1 registers
  logic          v1;
  src_e          src1;
  logic [15:0]   e1;
  logic [SAW-1:0] a1;
  logic [LNW-1:0] lane1;
  act_t          strm1;
  act_t          sprev1;            // s_hat read from smem
  logic [NPE*ACT_W-1:0] hword;      // h memory read data

  // init walk
  logic [15:0]   icnt;
  localparam int IMAX = (SDEP > HDEP) ? SDEP : HDEP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      e         <= '0;
      hgrp      <= '0;
      hlane     <= '0;
      v1        <= 1'b0;
      done      <= 1'b0;
      init_done <= 1'b0;
      icnt      <= '0;
    end else begin
      done      <= 1'b0;
      init_done <= 1'b0;
      v1        <= go;
      unique case (state)
        IDLE: begin
          if (init_start) begin
            state <= INIT;
            icnt  <= '0;
          end else if (start) begin
            state <= RUN;
            e     <= '0;
            hgrp  <= '0;
            hlane <= '0;
          end
        end
        RUN: begin
          if (go) begin
            e <= e + 16'd1;
            if (src0 == SRC_HMEM) begin
              if (hlane == LNW'(NPE - 1)) begin
                hlane <= '0;
                hgrp  <= hgrp + 1'b1;
              end else begin
                hlane <= hlane + 1'b1;
              end
            end
          end
          if (e == n_el && !v1) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        INIT: begin
          icnt <= icnt + 16'd1;
          if (icnt == 16'(IMAX - 1)) begin
            state     <= IDLE;
            init_done <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (go) begin
      src1  <= src0;
      e1    <= e;
      a1    <= sbase + SAW'(e);
      lane1 <= hlane;
      strm1 <= s_data_axis_tdata;
    end
  end

  // ------------------------------------------------------------ stage 1: compare
  act_t              s1;
  logic signed [16:0] diff;
  act_t              dsat;
  logic [16:0]       mag;
  logic              fire;
  logic              is_h1;

  always_comb begin
    unique case (src1)
      SRC_ONE:    s1 = ONE;
      SRC_STREAM: s1 = strm1;
      SRC_OBUF:   s1 = ob_rd_data;
      default:    s1 = act_t'(hword[lane1*ACT_W +: ACT_W]);
    endcase
    is_h1 = (src1 == SRC_HMEM);
    diff  = 17'(s1) - 17'(sprev1);
    if (diff > 17'sd32767)       dsat = 16'sh7fff;
    else if (diff < -17'sd32768) dsat = -16'sh8000;
    else                         dsat = act_t'(diff);
    mag   = dsat[ACT_W-1] ? 17'(-17'(dsat)) : 17'(dsat);
    fire  = v1 && (dsat != '0) && (mag >= 17'(is_h1 ? th_h : th_x));
  end

  assign dq_push       = fire;
  assign dq_data.delta = dsat;
  assign dq_data.is_h  = is_h1;
  assign pc_push       = fire;
  assign pc_data       = e1;

  // ------------------------------------------------------------ state memory
  always_ff @(posedge clk) begin
    if (state == INIT) begin
      if (int'(icnt) < SDEP) smem[SAW'(icnt)] <= '0;
    end else if (fire) begin
      smem[a1] <= sprev1 + dsat;
    end
    if (go) sprev1 <= smem[sbase + SAW'(e)];
  end

  // ------------------------------------------------------------ h memory
  logic [HAW-1:0] hbase;
  assign hbase = HAW'(int'(layer) * HG);

  always_ff @(posedge clk) begin
    if (state == INIT) begin
      if (int'(icnt) < HDEP) hmem[HAW'(icnt)] <= '0;
    end else if (hw_en) begin
      for (int k = 0; k < NPE; k++) hmem[hbase + HAW'(hw_addr)][k*ACT_W +: ACT_W] <= hw_data[k];
    end
    if (state == RUN) begin
      if (go && src0 == SRC_HMEM) hword <= hmem[hbase + HAW'(hgrp)];
    end else if (hrd_en) begin
      hword <= hmem[hbase + HAW'(hrd_addr)];
    end
  end

  for (genvar k = 0; k < NPE; k++) begin : g_hrd
    assign hrd_data[k] = act_t'(hword[k*ACT_W +: ACT_W]);
  end

  // ------------------------------------------------------------ rules
  a_size:   assert property (@(posedge clk) disable iff (!rst_n)
                             start |-> (int'(x_dim) <= NI && int'(h_dim) <= NH &&
                                        int'(layer) < NL));
  a_hrd:    assert property (@(posedge clk) disable iff (!rst_n)
                             hrd_en |-> state != RUN);
  a_hw:     assert property (@(posedge clk) disable iff (!rst_n)
                             hw_en |-> state != RUN);
endmodule
