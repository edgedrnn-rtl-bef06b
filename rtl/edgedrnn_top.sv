// edgedrnn_top -- EdgeDRNN: a delta-GRU recurrent network accelerator that
// keeps its weights in external DRAM and fetches only the weight columns whose
// input or hidden-state element changed by more than a threshold.
//
// Blocks and flow of one time step (for each layer in turn):
//   delta_unit  walks [1, x_t, h_{t-1}], sends nonzero deltas to the D-FIFO
//               and their column pointers (pcol) to ctrl;
//   ctrl        turns every pcol into an AXI Datamover command (m_inst_axis)
//               and sequences layers, activation and output;
//   w_fifo      buffers the weight columns returned on s_w_axis;
//   pe_array    K = 8 PEs multiply each column by its delta into the delta
//               memories, then compute h_t with the same arithmetic units;
//   obuf        passes h_t back to the Delta Unit (next layer's input and
//               next step's h_{t-1}) and, after the last layer, out on
//               m_data_axis;
//   cfg         AXI4-Lite registers (sizes, thresholds, weight addresses).
// Interfaces: AXI4-Lite slave s_axil (host control), AXI4-Stream slave
// s_data_axis (x_t, 16-bit Q8.8 per beat) and master m_data_axis (h_t),
// AXI4-Stream master m_inst_axis (80-bit Datamover commands) and slave s_w_axis
// (64-bit weight beats).  step_done pulses once per completed time step.
// tlast of s_data_axis is not used: the input size comes from I_DIM.  The AXI
// Datamover, the AXI DMA, the DRAM and the host are outside this module.
// Single clock domain (125 MHz in the paper's implementation), active-low
// asynchronous reset.
module edgedrnn_top
  import edgedrnn_pkg::*;
#(
  parameter int NL      = edgedrnn_pkg::MAX_L,
  parameter int NI      = edgedrnn_pkg::MAX_I,
  parameter int NH      = edgedrnn_pkg::MAX_H,
  parameter int DQ_DEP  = 1024,
  parameter int WQ_DEP  = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite configuration port
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [7:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // input features x_t
  input  logic [15:0]       s_data_axis_tdata,
  input  logic              s_data_axis_tvalid,
  output logic              s_data_axis_tready,
  input  logic              s_data_axis_tlast,
  // output h_t
  output logic [15:0]       m_data_axis_tdata,
  output logic              m_data_axis_tvalid,
  input  logic              m_data_axis_tready,
  output logic              m_data_axis_tlast,
  // Datamover commands
  output logic [INST_W-1:0] m_inst_axis_tdata,
  output logic              m_inst_axis_tvalid,
  input  logic              m_inst_axis_tready,
  // weights from the Datamover
  input  logic [DRAM_W-1:0] s_w_axis_tdata,
  input  logic              s_w_axis_tvalid,
  output logic              s_w_axis_tready,
  output logic              step_done
);
  localparam int LW  = (NL > 1) ? $clog2(NL) : 1;
  localparam int HGW = $clog2(NH / K);

  cfg_t cfg_r;
  logic init_req, busy;

  cfg #(.AXW(8)) u_cfg (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cfg_o     (cfg_r),
    .init_req  (init_req),
    .busy      (busy),
    .step_done (step_done)
  );

  // ------------------------------------------------------------ control wires
  logic          du_start, du_done, du_ready, du_init_start, du_init_done;
  logic [LW-1:0] layer;
  logic [15:0]   x_dim;
  act_t          th_x, th_h;
  logic          pc_push, pc_afull;
  logic [15:0]   pc_data;
  logic          dq_push, dq_pop, dq_empty, dq_afull, dq_clr;
  dfifo_t        dq_din, dq_dout;
  logic [15:0]   dq_nwr;
  logic          mxv_idle, pe_init_start, pe_init_done, act_start, act_done;
  logic          out_start, out_done;
  logic          wq_valid, wq_pop;
  logic [DRAM_W-1:0] wq_data;
  logic          ob_rd_en;
  logic [15:0]   ob_rd_addr;
  act_t          ob_rd_data;
  logic          hrd_en;
  logic [HGW-1:0] hrd_addr;
  act_t          hrd_data [K];
  logic          pw_valid;           // new h_t words: to OBUF and h memory
  logic [HGW-1:0] pw_addr;
  act_t          pw_data [K];

  ctrl #(.NL(NL), .LW(LW)) u_ctrl (
    .clk, .rst_n,
    .cfg_i         (cfg_r),
    .init_req      (init_req),
    .busy          (busy),
    .step_done     (step_done),
    .x_valid       (s_data_axis_tvalid),
    .du_start      (du_start),
    .layer         (layer),
    .x_dim         (x_dim),
    .th_x          (th_x),
    .th_h          (th_h),
    .du_done       (du_done),
    .du_init_start (du_init_start),
    .du_init_done  (du_init_done),
    .pc_push       (pc_push),
    .pc_data       (pc_data),
    .pc_afull      (pc_afull),
    .dq_empty      (dq_empty),
    .dq_clr_stat   (dq_clr),
    .mxv_idle      (mxv_idle),
    .pe_init_start (pe_init_start),
    .pe_init_done  (pe_init_done),
    .act_start     (act_start),
    .act_done      (act_done),
    .out_start     (out_start),
    .out_done      (out_done),
    .m_inst_axis_tdata, .m_inst_axis_tvalid, .m_inst_axis_tready
  );

  delta_unit #(.NL(NL), .NI(NI), .NH(NH), .NPE(K), .LW(LW), .HGW(HGW)) u_du (
    .clk, .rst_n,
    .start              (du_start),
    .layer              (layer),
    .x_dim              (x_dim),
    .h_dim              (cfg_r.h_dim),
    .th_x               (th_x),
    .th_h               (th_h),
    .done               (du_done),
    .ready              (du_ready),
    .init_start         (du_init_start),
    .init_done          (du_init_done),
    .s_data_axis_tdata  (act_t'(s_data_axis_tdata)),
    .s_data_axis_tvalid (s_data_axis_tvalid),
    .s_data_axis_tready (s_data_axis_tready),
    .ob_rd_en           (ob_rd_en),
    .ob_rd_addr         (ob_rd_addr),
    .ob_rd_data         (ob_rd_data),
    .dq_push            (dq_push),
    .dq_data            (dq_din),
    .dq_afull           (dq_afull),
    .pc_push            (pc_push),
    .pc_data            (pc_data),
    .pc_afull           (pc_afull),
    .hrd_en             (hrd_en),
    .hrd_addr           (hrd_addr),
    .hrd_data           (hrd_data),
    .hw_en              (pw_valid),
    .hw_addr            (pw_addr),
    .hw_data            (pw_data)
  );

  d_fifo #(.DEPTH(DQ_DEP)) u_dfifo (
    .clk, .rst_n,
    .clr_stat    (dq_clr),
    .push        (dq_push),
    .din         (dq_din),
    .pop         (dq_pop),
    .dout        (dq_dout),
    .empty       (dq_empty),
    .almost_full (dq_afull),
    .n_written   (dq_nwr)
  );

  w_fifo #(.DEPTH(WQ_DEP), .DW(DRAM_W)) u_wfifo (
    .clk, .rst_n,
    .s_w_axis_tdata, .s_w_axis_tvalid, .s_w_axis_tready,
    .valid (wq_valid),
    .dout  (wq_data),
    .pop   (wq_pop)
  );

  pe_array #(.NPE(K), .NL(NL), .HGM(NH / K), .LW(LW), .HGW(HGW)) u_pea (
    .clk, .rst_n,
    .h_dim      (cfg_r.h_dim),
    .layer      (layer),
    .dq_valid   (!dq_empty),
    .dq_data    (dq_dout),
    .dq_pop     (dq_pop),
    .wq_valid   (wq_valid),
    .wq_data    (wq_data),
    .wq_pop     (wq_pop),
    .mxv_idle   (mxv_idle),
    .init_start (pe_init_start),
    .init_done  (pe_init_done),
    .act_start  (act_start),
    .act_done   (act_done),
    .hrd_en     (hrd_en),
    .hrd_addr   (hrd_addr),
    .hrd_data   (hrd_data),
    .hw_valid   (pw_valid),
    .hw_addr    (pw_addr),
    .hw_data    (pw_data)
  );

  obuf #(.NPE(K), .NH(NH), .HGW(HGW)) u_obuf (
    .clk, .rst_n,
    .h_dim              (cfg_r.h_dim),
    .pw_valid           (pw_valid),
    .pw_addr            (pw_addr),
    .pw_data            (pw_data),
    .rd_en              (ob_rd_en),
    .rd_addr            (ob_rd_addr),
    .rd_data            (ob_rd_data),
    .out_start          (out_start),
    .out_done           (out_done),
    .m_data_axis_tdata  (m_data_axis_tdata),
    .m_data_axis_tvalid (m_data_axis_tvalid),
    .m_data_axis_tready (m_data_axis_tready),
    .m_data_axis_tlast  (m_data_axis_tlast)
  );

  // Rules of the stream ports seen from outside.
  a_x_hold:  assert property (@(posedge clk) disable iff (!rst_n)
               s_data_axis_tvalid && !s_data_axis_tready && !busy |=> s_data_axis_tvalid);
  a_du_idle: assert property (@(posedge clk) disable iff (!rst_n)
               du_start |-> du_ready);
endmodule
