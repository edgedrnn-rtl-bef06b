// tb_edgedrnn_workloads -- the network sizes evaluated for EdgeDRNN, run one
// after another on the default-size accelerator (no parameter overridden).
//
// Networks: 1L-256H, 2L-256H, 1L-512H, 2L-512H, 1L-768H with 40 inputs
// (spoken digits, threshold 64 = 0.25 in Q8.8 for inputs and hidden states),
// 2L-256H with 14 inputs and thresholds (4, 8) (gas-sensor regression), and
// 2L-128H with an assumed 8 inputs (robot control; the input size is not
// known).  2L-768H is run by tb_edgedrnn_full.  For each network the host
// reconfigures the sizes, thresholds and weight addresses over AXI4-Lite and
// re-initialises; then NSTEP time steps of a slowly changing input are run.
// Every step's weight-column commands and h_t are compared with the reference
// model bit for bit.  The testbench reports the cycles of every step and the
// latency at 125 MHz, and checks the latency model of this design: a step
// takes at least (columns sent) * 3H/K cycles, the rate of the 64-bit weight
// stream, plus one activation pass of 5*(H/K)+6 cycles per layer.
module tb_edgedrnn_workloads;
  import edgedrnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NSTEP = 4;
  localparam longint WB0 = 64'h00_1000_0000;
  localparam longint WB1 = 64'h01_2000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [7:0]  awaddr, araddr;
  logic        awvalid = 0, wvalid = 0, arvalid = 0;
  logic [31:0] wdata, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [15:0] x_tdata;
  logic        x_tvalid = 0, x_tready;
  logic [15:0] y_tdata;
  logic        y_tvalid, y_tlast;
  logic [79:0] inst;
  logic        inst_valid, inst_ready;
  logic [63:0] w_tdata;
  logic        w_tvalid, w_tready;
  logic        step_done;

  edgedrnn_top u_dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hf), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b1),
    .s_data_axis_tdata(x_tdata), .s_data_axis_tvalid(x_tvalid), .s_data_axis_tready(x_tready),
    .s_data_axis_tlast(1'b0),
    .m_data_axis_tdata(y_tdata), .m_data_axis_tvalid(y_tvalid), .m_data_axis_tready(1'b1),
    .m_data_axis_tlast(y_tlast),
    .m_inst_axis_tdata(inst), .m_inst_axis_tvalid(inst_valid), .m_inst_axis_tready(inst_ready),
    .s_w_axis_tdata(w_tdata), .s_w_axis_tvalid(w_tvalid), .s_w_axis_tready(w_tready),
    .step_done
  );

  // a DRAM path at full rate after the command latency
  int n_cmd, n_bad, n_beats;
  axi_datamover_model #(.LAT(20), .QMAX(8), .STALL_PCT(0)) u_dm (
    .clk, .rst_n,
    .s_cmd_tdata(inst), .s_cmd_tvalid(inst_valid), .s_cmd_tready(inst_ready),
    .m_data_tdata(w_tdata), .m_data_tvalid(w_tvalid), .m_data_tready(w_tready),
    .n_cmd, .n_bad, .n_beats
  );

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!bvalid);
    awvalid = 0; wvalid = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(negedge clk); while (!rvalid);
    d = rdata;
    arvalid = 0;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  int cur_h;
  int cmd_log[$];
  always @(posedge clk) if (rst_n && inst_valid && inst_ready) begin
    longint a, wb;
    int     lay;
    a   = longint'(inst[71:32]);
    lay = (a >= WB1) ? 1 : 0;
    wb  = lay ? WB1 : WB0;
    check(int'(inst[22:0]) == 3 * cur_h, "BTT is 3H bytes");
    cmd_log.push_back((lay << 16) | int'((a - wb) / (3 * cur_h)));
  end

  int y_got[$];
  always @(posedge clk) if (rst_n && y_tvalid) y_got.push_back(int'($signed(y_tdata)));

  task automatic run_net(input string name, input int L, input int I, input int H,
                         input int thx, input int thh);
    DeltaGruRef rm;
    int x[], yref[];
    logic [31:0] r;
    longint tot;
    cur_h = H;
    rm = new(L, I, H);
    rm.wbase[0] = WB0; rm.wbase[1] = WB1;
    for (int l = 0; l < L; l++) begin rm.thx[l] = thx; rm.thh[l] = thh; end
    axil_write(8'h08, L);
    axil_write(8'h0C, I);
    axil_write(8'h10, H);
    axil_write(8'h40, 32'(WB0)); axil_write(8'h44, 32'(WB0 >> 32));
    axil_write(8'h50, 32'(WB1)); axil_write(8'h54, 32'(WB1 >> 32));
    for (int l = 0; l < MAX_L; l++) begin
      axil_write(8'(8'h48 + 16 * l), thx);
      axil_write(8'(8'h4C + 16 * l), thh);
    end
    axil_write(8'h00, 1);
    do axil_read(8'h04, r); while (r[0]);
    x = new[I];
    tot = 0;
    for (int t = 0; t < NSTEP; t++) begin
      longint t0, dt, floor_c;
      int nsent;
      foreach (x[i]) begin
        if (t == 0) x[i] = int'($urandom_range(512)) - 256;
        else if ($urandom_range(1) == 1) x[i] += int'($urandom_range(160)) - 80;
      end
      rm.step(x, yref);
      nsent = rm.sent_col.size();
      cmd_log.delete(); y_got.delete();
      t0 = cyc;
      for (int i = 0; i < I; i++) begin
        @(negedge clk);
        x_tdata = 16'(x[i]); x_tvalid = 1;
        do @(posedge clk); while (!x_tready);
      end
      @(negedge clk) x_tvalid = 0;
      @(posedge step_done);
      dt = cyc - t0;
      tot += dt;
      @(negedge clk);
      floor_c = longint'(nsent) * (3 * H / K) + longint'(L) * (5 * (H / K) + 6);
      check(dt >= floor_c, $sformatf("%s step %0d: %0d cycles below the weight-stream bound %0d",
                                     name, t, dt, floor_c));
      check(cmd_log.size() == nsent, $sformatf("%s step %0d: %0d commands, expected %0d",
                                               name, t, cmd_log.size(), nsent));
      for (int i = 0; i < nsent && i < cmd_log.size(); i++)
        check(cmd_log[i] == rm.sent_col[i], $sformatf("%s step %0d command %0d", name, t, i));
      check(y_got.size() == H, $sformatf("%s step %0d: %0d outputs", name, t, y_got.size()));
      for (int j = 0; j < H && j < y_got.size(); j++)
        check(y_got[j] == yref[j], $sformatf("%s step %0d h[%0d] = %0d expected %0d",
                                             name, t, j, y_got[j], yref[j]));
      $display("%-10s I=%0d step %0d: %0d of %0d columns sent, %0d cycles = %0.1f us at 125 MHz (bound %0d)",
               name, I, t, nsent, L * (H + 1) + I + (L - 1) * H, dt, real'(dt) / 125.0, floor_c);
    end
  endtask

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    run_net("1L-256H", 1, 40, 256, 64, 64);
    run_net("2L-256H", 2, 40, 256, 64, 64);
    run_net("1L-512H", 1, 40, 512, 64, 64);
    run_net("2L-512H", 2, 40, 512, 64, 64);
    run_net("1L-768H", 1, 40, 768, 64, 64);
    run_net("Gas2L256H", 2, 14, 256, 4, 8);
    run_net("2L-128H", 2, 8, 128, 64, 64);
    check(n_bad == 0, "Datamover commands well formed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
