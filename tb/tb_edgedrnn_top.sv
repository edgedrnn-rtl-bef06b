// tb_edgedrnn_top -- end-to-end test of the accelerator at reduced size.
//
// A two-layer delta-GRU (input 12, hidden 32) is configured over AXI4-Lite,
// initialised, and run for NSTEP time steps.  The weights come from the
// Datamover/DRAM model, which answers the accelerator's 80-bit commands with
// weight columns after a latency and with random stalls.  Inputs follow a
// random walk in which some elements stay unchanged (zero deltas), some move
// by less than the threshold and some by more.  For every step the testbench
// compares
//   - the sequence of weight-column commands (layer and column) with the
//     columns the reference model sends,
//   - h_t streamed out on m_data_axis with the reference model, bit for bit,
//   - the length of the activation pass, 5*(H/K)+6 cycles,
// and at the end the STEPS register.  Small FIFOs (D-FIFO 8 entries) and a
// randomly stalling output port make every mechanism happen; each one is
// counted and a mechanism that never happened is a failure:
//   threshold skip, zero skip, bias column at t = 0 only, D-FIFO almost-full
//   stall, PE array waiting for weights, command back-pressure, input stream
//   gaps, layer-2 input read from the output buffer, overlap of the first and
//   last activation stages (time-division reuse), output back-pressure, init.
module tb_edgedrnn_top;
  import edgedrnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 2, NI = 32, NH = 32;
  localparam int L = 2, I = 12, H = 32;
  localparam int NSTEP = 6;
  localparam longint WB0 = 64'h00_0000_1000;
  localparam longint WB1 = 64'h12_3400_0000;
  localparam int THX0 = 24, THH0 = 12, THX1 = 12, THH1 = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ DUT
  logic [7:0]  awaddr, araddr;
  logic        awvalid = 0, wvalid = 0, arvalid = 0;
  logic [31:0] wdata, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [15:0] x_tdata;
  logic        x_tvalid = 0, x_tready;
  logic [15:0] y_tdata;
  logic        y_tvalid, y_tready, y_tlast;
  logic [79:0] inst;
  logic        inst_valid, inst_ready;
  logic [63:0] w_tdata;
  logic        w_tvalid, w_tready;
  logic        step_done;

  edgedrnn_top #(.NL(NL), .NI(NI), .NH(NH), .DQ_DEP(8), .WQ_DEP(16)) u_dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hf), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b1),
    .s_data_axis_tdata(x_tdata), .s_data_axis_tvalid(x_tvalid), .s_data_axis_tready(x_tready),
    .s_data_axis_tlast(1'b0),
    .m_data_axis_tdata(y_tdata), .m_data_axis_tvalid(y_tvalid), .m_data_axis_tready(y_tready),
    .m_data_axis_tlast(y_tlast),
    .m_inst_axis_tdata(inst), .m_inst_axis_tvalid(inst_valid), .m_inst_axis_tready(inst_ready),
    .s_w_axis_tdata(w_tdata), .s_w_axis_tvalid(w_tvalid), .s_w_axis_tready(w_tready),
    .step_done
  );

  int n_cmd, n_bad, n_beats;
  axi_datamover_model #(.LAT(6), .QMAX(4), .STALL_PCT(20)) u_dm (
    .clk, .rst_n,
    .s_cmd_tdata(inst), .s_cmd_tvalid(inst_valid), .s_cmd_tready(inst_ready),
    .m_data_tdata(w_tdata), .m_data_tvalid(w_tvalid), .m_data_tready(w_tready),
    .n_cmd, .n_bad, .n_beats
  );

  // ------------------------------------------------------------ mechanism counters
  int m_dq_afull, m_w_wait, m_cmd_bp, m_x_gap, m_ob_rd, m_overlap, m_y_bp, m_init;
  int m_thr_skip, m_zero_skip, m_bias_t0, m_bias_late;
  logic rnd_ready;
  assign y_tready = rnd_ready;
  always @(posedge clk) if (rst_n) begin
    rnd_ready <= ($urandom_range(99) < 70);
    if (u_dut.dq_afull && !u_dut.du_ready) m_dq_afull++;
    if (u_dut.u_pea.col_act && !u_dut.wq_valid) m_w_wait++;
    if (inst_valid && !inst_ready) m_cmd_bp++;
    if (u_dut.ob_rd_en) m_ob_rd++;
    if (u_dut.u_pea.g_pe[0].u_pe.sv[0] && u_dut.u_pea.g_pe[0].u_pe.sv[5]) m_overlap++;
    if (y_tvalid && !y_tready) m_y_bp++;
  end else rnd_ready <= 1'b0;

  // ------------------------------------------------------------ AXI-Lite host
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

  // ------------------------------------------------------------ command monitor
  int cmd_log[$];
  always @(posedge clk) if (rst_n && inst_valid && inst_ready) begin
    longint a, wb;
    int     btt, lay, col;
    btt = int'(inst[22:0]);
    a   = longint'(inst[71:32]);
    lay = (a >= WB1) ? 1 : 0;
    wb  = lay ? WB1 : WB0;
    col = int'((a - wb) / btt);
    check(btt == 3 * H, "BTT is 3H bytes");
    check((a - wb) % btt == 0, "command address on a column boundary");
    check(int'(inst[75:72]) == (col & 15), "TAG is pcol[3:0]");
    cmd_log.push_back((lay << 16) | col);
  end

  // ------------------------------------------------------------ activation timing
  longint act_t0;
  int     n_act;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.act_start) act_t0 = cyc;
    if (u_dut.act_done) begin
      n_act++;
      check(cyc - act_t0 == longint'(5 * (H / K) + 6), $sformatf(
            "activation pass %0d cycles, expected %0d", cyc - act_t0, 5 * (H / K) + 6));
    end
  end

  // ------------------------------------------------------------ output monitor
  int y_got[$];
  int y_last_ok;
  always @(posedge clk) if (rst_n && y_tvalid && y_tready) begin
    y_got.push_back(int'($signed(y_tdata)));
    if (y_tlast != (y_got.size() % H == 0)) y_last_ok++;
  end

  // ------------------------------------------------------------ stimulus
  DeltaGruRef ref_m;
  int x[];
  int yref[];

  initial begin
    logic [31:0] r;
    ref_m = new(L, I, H);
    ref_m.wbase[0] = WB0; ref_m.wbase[1] = WB1;
    ref_m.thx[0] = THX0; ref_m.thh[0] = THH0;
    ref_m.thx[1] = THX1; ref_m.thh[1] = THH1;
    x = new[I];
    foreach (x[i]) x[i] = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    axil_write(8'h08, L);
    axil_write(8'h0C, I);
    axil_write(8'h10, H);
    axil_write(8'h40, 32'(WB0));      axil_write(8'h44, 32'(WB0 >> 32));
    axil_write(8'h48, THX0);          axil_write(8'h4C, THH0);
    axil_write(8'h50, 32'(WB1));      axil_write(8'h54, 32'(WB1 >> 32));
    axil_write(8'h58, THX1);          axil_write(8'h5C, THH1);
    axil_read(8'h54, r);
    check(r == 32'(WB1 >> 32), "read back of WBASE_HI");
    axil_write(8'h00, 1);             // init
    do axil_read(8'h04, r); while (r[0]);
    m_init++;

    for (int t = 0; t < NSTEP; t++) begin
      int nz0, nbel0;
      // random walk of the input
      foreach (x[i]) begin
        int k;
        k = $urandom_range(3);
        if (t == 0) x[i] = int'($urandom_range(512)) - 256;
        else if (k == 1) x[i] += int'($urandom_range(2 * THX0 - 2)) - (THX0 - 1);
        else if (k >= 2) x[i] += int'($urandom_range(200)) - 100;
      end
      nz0 = ref_m.n_zero; nbel0 = ref_m.n_below;
      ref_m.step(x, yref);
      m_zero_skip += ref_m.n_zero - nz0;
      m_thr_skip  += ref_m.n_below - nbel0;
      // drive the input stream with gaps
      for (int i = 0; i < I; i++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin
          x_tvalid = 0;
          m_x_gap++;
          @(negedge clk);
        end
        x_tdata = 16'(x[i]); x_tvalid = 1;
        do @(posedge clk); while (!x_tready);
      end
      @(negedge clk) x_tvalid = 0;
      @(posedge step_done);
      @(negedge clk);
      // compare the command sequence
      check(cmd_log.size() == ref_m.sent_col.size(),
            $sformatf("step %0d: %0d commands, expected %0d", t, cmd_log.size(), ref_m.sent_col.size()));
      for (int i = 0; i < ref_m.sent_col.size() && i < cmd_log.size(); i++)
        check(cmd_log[i] == ref_m.sent_col[i], $sformatf("step %0d command %0d: %h expected %h",
              t, i, cmd_log[i], ref_m.sent_col[i]));
      foreach (cmd_log[i]) begin
        if ((cmd_log[i] & 16'hffff) == 0) begin
          if (t == 0) m_bias_t0++; else m_bias_late++;
        end
      end
      cmd_log.delete();
      // compare h_t
      check(y_got.size() == H, $sformatf("step %0d: %0d outputs", t, y_got.size()));
      for (int j = 0; j < H && j < y_got.size(); j++)
        check(y_got[j] == yref[j], $sformatf("step %0d h[%0d] = %0d expected %0d",
              t, j, y_got[j], yref[j]));
      y_got.delete();
    end
    axil_read(8'h14, r);
    check(r == NSTEP, "STEPS register");
    axil_read(8'h04, r);
    check(r[1] == 1'b1, "STATUS done flag");
    check(n_bad == 0, "Datamover commands well formed");
    check(y_last_ok == 0, "tlast on the last element of h_t");
    check(n_act == L * NSTEP, "one activation pass per layer and step");
    check(m_bias_late == 0, "bias column only sent at t = 0");

    $display("mechanisms: thr_skip=%0d zero_skip=%0d bias_t0=%0d dq_afull=%0d w_wait=%0d cmd_bp=%0d",
             m_thr_skip, m_zero_skip, m_bias_t0, m_dq_afull, m_w_wait, m_cmd_bp);
    $display("            x_gap=%0d ob_rd=%0d overlap=%0d y_bp=%0d init=%0d",
             m_x_gap, m_ob_rd, m_overlap, m_y_bp, m_init);
    check(m_thr_skip > 0, "threshold skip happened");
    check(m_zero_skip > 0, "zero skip happened");
    check(m_bias_t0 == L, "bias column sent once per layer at t = 0");
    check(m_dq_afull > 0, "D-FIFO almost-full stall happened");
    check(m_w_wait > 0, "PE array waited for weights");
    check(m_cmd_bp > 0, "command back-pressure happened");
    check(m_x_gap > 0, "input stream gap happened");
    check(m_ob_rd > 0, "layer-2 input read from the output buffer");
    check(m_overlap > 0, "activation stages S0 and S5 overlapped");
    check(m_y_bp > 0, "output back-pressure happened");
    check(m_init > 0, "init happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
