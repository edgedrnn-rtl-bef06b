// tb_ctrl -- test of the controller: time-step sequencing and the 80-bit
// weight-fetch commands.
//
// The neighbours are modelled: a Delta Unit that, after start, pushes a random
// list of column pointers (respecting pc_afull) and then pulses done; a PE
// array whose init, activation and MxV-idle answers come after random delays;
// an output buffer that ends its stream after a delay; a command sink with
// random tready.  The testbench checks
//   - every command: BTT = 3H bytes, TYPE 1, DSA 0, EOF 1, DRR 0,
//     SADDR = wbase[layer] + pcol * 3H, TAG = pcol[3:0], in push order, held
//     stable while not accepted;
//   - no activation starts before the Delta Unit is done, all commands have
//     left and the array is idle;
//   - the order init -> (layer 0, layer 1) -> output -> step_done, with the
//     right layer index, x_dim and thresholds per layer, and busy meanwhile.
module tb_ctrl;
  import edgedrnn_pkg::*;
  localparam int H = 64, I = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  cfg_t        cfg;
  logic        init_req = 0, busy, step_done, x_valid = 0;
  logic        du_start, du_done = 0, du_init_start, du_init_done = 0;
  logic        layer;
  logic [15:0] x_dim;
  act_t        th_x, th_h;
  logic        pc_push = 0, pc_afull;
  logic [15:0] pc_data;
  logic        dq_empty = 1, dq_clr_stat, mxv_idle = 1;
  logic        pe_init_start, pe_init_done = 0, act_start, act_done = 0;
  logic        out_start, out_done = 0;
  logic [79:0] inst;
  logic        inst_valid, inst_ready;

  ctrl #(.NL(2)) u_dut (
    .clk, .rst_n, .cfg_i(cfg), .init_req, .busy, .step_done, .x_valid,
    .du_start, .layer, .x_dim, .th_x, .th_h, .du_done, .du_init_start, .du_init_done,
    .pc_push, .pc_data, .pc_afull, .dq_empty, .dq_clr_stat, .mxv_idle,
    .pe_init_start, .pe_init_done, .act_start, .act_done, .out_start, .out_done,
    .m_inst_axis_tdata(inst), .m_inst_axis_tvalid(inst_valid), .m_inst_axis_tready(inst_ready));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  int  pq[$];               // (layer << 16) | pcol pushed, awaiting command
  bit  du_fin;
  int  ev[$];               // event log: 1 du_start(l) 2 act_start 3 out_start 4 step_done
  int  n_cmd, n_hold;
  logic [79:0] inst_q;
  logic        pend_q = 0;
  bit          mxv_ok_q = 0;

  always @(posedge clk) if (rst_n) begin
    inst_ready <= ($urandom_range(2) != 0);
    // hold rule
    if (pend_q) begin
      check(inst_valid && inst == inst_q, "command held until accepted");
      n_hold++;
    end
    pend_q <= inst_valid && !inst_ready;
    inst_q <= inst;
    if (inst_valid && inst_ready) begin
      int e, l, pc;
      longint a;
      n_cmd++;
      e  = (pq.size() > 0) ? pq.pop_front() : -1;
      l  = e >> 16; pc = e & 16'hffff;
      a  = longint'(cfg.wbase[l]) + longint'(pc) * 3 * H;
      check(inst[22:0] == 23'(3 * H), "BTT");
      check(inst[23] && inst[29:24] == 0 && inst[30] && !inst[31], "TYPE/DSA/EOF/DRR");
      check(inst[71:32] == 40'(a), $sformatf("SADDR %h expected %h", inst[71:32], a));
      check(inst[75:72] == 4'(pc) && inst[79:76] == 0, "TAG");
    end
    if (act_start) begin
      check(mxv_ok_q, "activation starts after MxV");
      ev.push_back(2);
    end
    if (du_start) begin
      check(x_dim == (layer ? 16'(H) : 16'(I)), "x_dim per layer");
      check(th_x == act_t'(cfg.th_x[layer]) && th_h == act_t'(cfg.th_h[layer]), "thresholds per layer");
      ev.push_back(10 + int'(layer));
    end
    mxv_ok_q = du_fin && pq.size() == 0 && !inst_valid && mxv_idle;
    if (out_start) ev.push_back(3);
    if (step_done) ev.push_back(4);
  end

  // Delta Unit model
  initial begin
    forever begin
      @(posedge clk);
      if (du_start) begin
        int n, l;
        l = int'(layer);
        du_fin = 0;
        n = $urandom_range(40);
        for (int i = 0; i < n; i++) begin
          @(negedge clk);
          while (pc_afull) begin pc_push = 0; @(negedge clk); end
          pc_push = 1; pc_data = 16'($urandom_range(I + H));
          pq.push_back((l << 16) | int'(pc_data));
        end
        @(negedge clk) pc_push = 0;
        repeat ($urandom_range(5)) @(negedge clk);
        du_done = 1;
        @(negedge clk) du_done = 0;
        du_fin = 1;
      end
    end
  end

  // PE array / output buffer models
  initial begin
    forever begin
      @(posedge clk);
      if (pe_init_start) fork
        begin repeat (20) @(negedge clk); pe_init_done = 1; @(negedge clk) pe_init_done = 0; end
      join_none
      if (du_init_start) fork
        begin repeat (30) @(negedge clk); du_init_done = 1; @(negedge clk) du_init_done = 0; end
      join_none
      if (act_start) fork
        begin repeat (15) @(negedge clk); act_done = 1; @(negedge clk) act_done = 0; end
      join_none
      if (out_start) fork
        begin repeat (10) @(negedge clk); out_done = 1; @(negedge clk) out_done = 0; end
      join_none
    end
  end
  always @(negedge clk) mxv_idle = ($urandom_range(3) != 0);

  initial begin
    cfg = '0;
    cfg.num_layers = 2; cfg.i_dim = I; cfg.h_dim = H;
    cfg.wbase[0] = 40'h00_1234_0000; cfg.wbase[1] = 40'hA0_0000_0008;
    cfg.th_x[0] = 10; cfg.th_h[0] = 20; cfg.th_x[1] = 30; cfg.th_h[1] = 40;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) init_req = 1;
    @(negedge clk) init_req = 0;
    check(busy, "busy during init");
    while (busy) @(negedge clk);
    for (int t = 0; t < 5; t++) begin
      ev.delete();
      x_valid = 1;
      @(negedge clk);
      check(busy, "busy after the input arrives");
      x_valid = 0;
      while (!step_done) @(negedge clk);
      @(negedge clk);
      check(ev.size() == 6 && ev[0] == 10 && ev[1] == 2 && ev[2] == 11 && ev[3] == 2 &&
            ev[4] == 3 && ev[5] == 4, $sformatf("step %0d event order %p", t, ev));
      check(!busy, "idle after the step");
    end
    check(n_hold > 0 && n_cmd > 50, "commands held and accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
