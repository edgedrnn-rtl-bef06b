// tb_obuf -- test of the output buffer.
//
// For h_dim 32 and 16 (K = 8): the PE array side writes H/K random words
// (pw_*).  Random element reads (rd_*) must return the addressed element one cycle
// later.  Then h_t is streamed out: once with tready always high, which must
// take H + H/K cycles from out_start to out_done, and once with random
// tready; the elements must come in order with tlast on the last one only.
module tb_obuf;
  import edgedrnn_pkg::*;
  localparam int NPE = 8, NH = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [15:0] h_dim, rd_addr;
  logic        pw_valid = 0, rd_en = 0, out_start = 0, out_done;
  logic [1:0]  pw_addr;
  act_t        pw_data [NPE];
  act_t        rd_data, tdata;
  logic        tvalid, tready, tlast;

  obuf #(.NPE(NPE), .NH(NH)) u_dut (
    .clk, .rst_n, .h_dim, .pw_valid, .pw_addr, .pw_data,
    .rd_en, .rd_addr, .rd_data, .out_start, .out_done,
    .m_data_axis_tdata(tdata), .m_data_axis_tvalid(tvalid), .m_data_axis_tready(tready),
    .m_data_axis_tlast(tlast));

  int  h [NH];
  int  got[$];
  bit  rnd;
  int  n_last;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    tready <= !rnd || ($urandom_range(2) != 0);
    if (tvalid && tready) begin
      got.push_back(int'(tdata));
      if (tlast) n_last++;
      check(tlast == (got.size() == int'(h_dim)), "tlast on the last element only");
    end
  end else tready <= 1'b1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int hd;
      longint t0;
      hd = (round % 2) ? 16 : 32;
      h_dim = 16'(hd);
      rnd = (round >= 2);
      for (int g = 0; g < hd / NPE; g++) begin
        pw_valid = 1; pw_addr = 2'(g);
        for (int k = 0; k < NPE; k++) begin
          h[g * NPE + k] = int'($signed(16'($urandom)));
          pw_data[k] = act_t'(h[g * NPE + k]);
        end
        @(negedge clk);
      end
      pw_valid = 0;
      for (int i = 0; i < 20; i++) begin
        int a;
        a = $urandom_range(hd - 1);
        rd_en = 1; rd_addr = 16'(a);
        @(negedge clk);
        rd_en = 0;
        check(int'(rd_data) == h[a], $sformatf("element %0d read %0d expected %0d", a, rd_data, h[a]));
      end
      got.delete(); n_last = 0;
      out_start = 1; t0 = cyc;
      @(negedge clk) out_start = 0;
      while (!out_done) @(negedge clk);
      if (!rnd) check(cyc - t0 == hd + hd / NPE + 1, $sformatf("stream took %0d cycles", cyc - t0));
      check(got.size() == hd && n_last == 1, "element count and one tlast");
      for (int j = 0; j < hd && j < got.size(); j++)
        check(got[j] == h[j], $sformatf("element %0d = %0d expected %0d", j, got[j], h[j]));
    end
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
