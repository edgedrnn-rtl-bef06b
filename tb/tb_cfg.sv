// tb_cfg -- test of the AXI4-Lite configuration registers.
//
// A host model writes every register in random order, with the address and
// the data phase sometimes offered in different cycles and with random
// bready/rready delays, and reads every register back.  The testbench checks
// the read data, the cfg_o fields seen by the datapath, the one-cycle init
// request of a CONTROL write, the busy bit, the step-done flag (set by
// step_done, cleared by writing 1) and the STEPS counter.
module tb_cfg;
  import edgedrnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_init = 0;

  logic [7:0]  awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  cfg_t        cfg_o;
  logic        init_req, busy = 0, step_done = 0;

  cfg #(.AXW(8)) u_dut (
    .clk, .rst_n, .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hf), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg_o, .init_req, .busy, .step_done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n && init_req) n_init++;

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    bit aw_done, w_done;
    @(negedge clk);
    awaddr = a; wdata = d;
    awvalid = ($urandom_range(1) == 1); wvalid = !awvalid || ($urandom_range(1) == 1);
    aw_done = 0; w_done = 0;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (awvalid && awready) aw_done = 1;
      if (wvalid && wready) w_done = 1;
      @(negedge clk);
      awvalid = !aw_done; wvalid = !w_done;
    end
    awvalid = 0; wvalid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
    check(bvalid && bresp == 2'b00, "write response");
    bready = 1;
    @(negedge clk) bready = 0;
    check(!bvalid, "write response taken");
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk) arvalid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
    check(rvalid && rresp == 2'b00, "read response");
    d = rdata;
    rready = 1;
    @(negedge clk) rready = 0;
  endtask

  initial begin
    logic [31:0] r, v[int];
    int addrs[$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    v[8'h08] = 2; v[8'h0C] = 40; v[8'h10] = 768;
    for (int l = 0; l < MAX_L; l++) begin
      v[8'h40 + 16 * l] = $urandom;
      v[8'h44 + 16 * l] = $urandom_range(255);
      v[8'h48 + 16 * l] = $urandom_range(65535);
      v[8'h4C + 16 * l] = $urandom_range(65535);
    end
    foreach (v[a]) addrs.push_back(a);
    addrs.shuffle();
    foreach (addrs[i]) wr(8'(addrs[i]), v[addrs[i]]);
    foreach (v[a]) begin
      rd(8'(a), r);
      check(r == v[a], $sformatf("register %h = %h expected %h", a, r, v[a]));
    end
    check(cfg_o.num_layers == 2 && cfg_o.i_dim == 40 && cfg_o.h_dim == 768, "sizes on cfg_o");
    for (int l = 0; l < MAX_L; l++) begin
      check(cfg_o.wbase[l] == {v[8'h44 + 16 * l][7:0], v[8'h40 + 16 * l]}, "wbase on cfg_o");
      check(cfg_o.th_x[l] == v[8'h48 + 16 * l][15:0] && cfg_o.th_h[l] == v[8'h4C + 16 * l][15:0],
            "thresholds on cfg_o");
    end
    check(n_init == 0, "no init request yet");
    wr(8'h00, 1);
    check(n_init == 1, "one init request per CONTROL write");
    busy = 1;
    rd(8'h04, r);
    check(r[1:0] == 2'b01, "STATUS busy");
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) step_done = 1;
      @(negedge clk) step_done = 0;
    end
    busy = 0;
    rd(8'h04, r);
    check(r[1:0] == 2'b10, "STATUS done");
    rd(8'h14, r);
    check(r == 3, "STEPS counts step_done");
    wr(8'h04, 2);
    rd(8'h04, r);
    check(r[1] == 1'b0, "done flag cleared by writing 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
