// cfg -- configuration module (CFG): AXI4-Lite slave register file written by
// the host CPU.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CONTROL    write 1 to bit 0: clear all network state (s_hat, h, M)
//   0x04 STATUS     bit 0 busy (read only); bit 1 step done, set at the end of
//                   every time step, write 1 to clear
//   0x08 NUM_LAYERS number of stacked GRU layers (1 .. MAX_L)
//   0x0C I_DIM      input size of layer 0
//   0x10 H_DIM      hidden size of every layer (multiple of K)
//   0x14 STEPS      time steps completed since reset (read only)
//   0x40+16*l       layer l: +0 weight base address [31:0], +4 bits [39:32],
//                   +8 input threshold th_x, +12 hidden threshold th_h (Q8.8)
// Writes take one cycle once both address and data are valid; responses are
// always OKAY.  Reads return data one cycle after the address.  The paper
// lists what is configured (weight start address, thresholds, network
// dimensions) and that it arrives over AXI-Lite; the map is this design's.
module cfg
  import edgedrnn_pkg::*;
#(
  parameter int AXW = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [AXW-1:0] s_axil_awaddr,
  input  logic           s_axil_awvalid,
  output logic           s_axil_awready,
  input  logic [31:0]    s_axil_wdata,
  input  logic [3:0]     s_axil_wstrb,
  input  logic           s_axil_wvalid,
  output logic           s_axil_wready,
  output logic [1:0]     s_axil_bresp,
  output logic           s_axil_bvalid,
  input  logic           s_axil_bready,
  input  logic [AXW-1:0] s_axil_araddr,
  input  logic           s_axil_arvalid,
  output logic           s_axil_arready,
  output logic [31:0]    s_axil_rdata,
  output logic [1:0]     s_axil_rresp,
  output logic           s_axil_rvalid,
  input  logic           s_axil_rready,
  // to the datapath
  output cfg_t           cfg_o,
  output logic           init_req,
  input  logic           busy,
  input  logic           step_done
);
  logic        done_flag;
  logic [31:0] steps;
  logic        wr_go;

  assign wr_go          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;

  function automatic int lyr(input logic [AXW-1:0] a);
    return (int'(a) - 'h40) / 16;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o         <= '0;
      init_req      <= 1'b0;
      done_flag     <= 1'b0;
      steps         <= '0;
      s_axil_bvalid <= 1'b0;
    end else begin
      init_req <= 1'b0;
      if (step_done) begin
        done_flag <= 1'b1;
        steps     <= steps + 32'd1;
      end
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        if (s_axil_awaddr >= AXW'('h40)) begin
          if (lyr(s_axil_awaddr) < MAX_L) begin
            unique case (s_axil_awaddr[3:2])
              2'd0: cfg_o.wbase[lyr(s_axil_awaddr)][31:0]  <= s_axil_wdata;
              2'd1: cfg_o.wbase[lyr(s_axil_awaddr)][ADDR_W-1:32] <= s_axil_wdata[ADDR_W-33:0];
              2'd2: cfg_o.th_x[lyr(s_axil_awaddr)] <= s_axil_wdata[ACT_W-1:0];
              default: cfg_o.th_h[lyr(s_axil_awaddr)] <= s_axil_wdata[ACT_W-1:0];
            endcase
          end
        end else begin
          unique case (s_axil_awaddr[5:2])
            4'h0: init_req <= s_axil_wdata[0];
            4'h1: if (s_axil_wdata[1]) done_flag <= 1'b0;
            4'h2: cfg_o.num_layers <= s_axil_wdata[7:0];
            4'h3: cfg_o.i_dim      <= s_axil_wdata[15:0];
            4'h4: cfg_o.h_dim      <= s_axil_wdata[15:0];
            default: ;
          endcase
        end
      end
    end
  end

  // read channel
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= '0;
        if (s_axil_araddr >= AXW'('h40)) begin
          if (lyr(s_axil_araddr) < MAX_L) begin
            unique case (s_axil_araddr[3:2])
              2'd0: s_axil_rdata <= cfg_o.wbase[lyr(s_axil_araddr)][31:0];
              2'd1: s_axil_rdata <= 32'(cfg_o.wbase[lyr(s_axil_araddr)][ADDR_W-1:32]);
              2'd2: s_axil_rdata <= 32'(cfg_o.th_x[lyr(s_axil_araddr)]);
              default: s_axil_rdata <= 32'(cfg_o.th_h[lyr(s_axil_araddr)]);
            endcase
          end
        end else begin
          unique case (s_axil_araddr[5:2])
            4'h1: s_axil_rdata <= {30'd0, done_flag, busy};
            4'h2: s_axil_rdata <= 32'(cfg_o.num_layers);
            4'h3: s_axil_rdata <= 32'(cfg_o.i_dim);
            4'h4: s_axil_rdata <= 32'(cfg_o.h_dim);
            4'h5: s_axil_rdata <= steps;
            default: ;
          endcase
        end
      end
    end
  end

  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
