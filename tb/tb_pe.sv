// tb_pe -- test of one processing element: MxV accumulation and the GRU
// activation pipeline.
//
// Each round first runs a burst of random multiply-accumulate operations
// (random 8-bit weights, 16-bit deltas, banks and addresses; the same word
// never twice in a row, as the array guarantees) against a shadow copy of the
// delta memories, then starts the activation of every word with a random gap of
// at least 5 cycles between neurons (5 = the initiation interval at which S0-S2
// of one neuron overlap S5-S7 of the previous one).  Every new hidden state is
// compared bit for bit with tb_ref_pkg::gru_cell(), and must appear exactly
// 9 cycles after its act_rd.  The memories are cleared first with mac_clear,
// the way the array initialises them.
module tb_pe;
  import edgedrnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int DEPTH = 12, AW = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_overlap = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic          mac_valid = 0, mac_clear = 0, act_rd = 0;
  mbank_e        mac_bank;
  logic [AW-1:0] mac_addr, act_addr;
  wgt_t          mac_w;
  act_t          mac_delta, hprev;
  logic          h_valid;
  act_t          h_out;

  pe #(.DEPTH(DEPTH)) u_dut (.clk, .rst_n, .mac_valid, .mac_clear, .mac_bank, .mac_addr,
                             .mac_w, .mac_delta, .act_rd, .act_addr, .hprev, .h_valid, .h_out);

  int     m [4][DEPTH];
  int     hp [DEPTH];
  longint t_q[$];
  int     e_q[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // latency and value monitor
  always @(posedge clk) if (rst_n) begin
    if (act_rd) t_q.push_back(cyc);
    if (u_dut.sv[0] && u_dut.sv[5]) n_overlap++;
    if (h_valid) begin
      longint t0;
      int     e;
      t0 = t_q.pop_front();
      e  = e_q.pop_front();
      check(cyc - t0 == 9, $sformatf("h_valid %0d cycles after act_rd", cyc - t0));
      check(int'(h_out) == e, $sformatf("h = %0d expected %0d", h_out, e));
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // clear
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        mac_valid = 1; mac_clear = 1; mac_bank = mbank_e'(b); mac_addr = AW'(a);
        mac_w = wgt_t'($urandom); mac_delta = '0;
        m[b][a] = 0;
      end
    @(negedge clk) begin mac_valid = 0; mac_clear = 0; end
    foreach (hp[a]) hp[a] = int'($urandom_range(512)) - 256;
    for (int round = 0; round < 6; round++) begin
      int lb, la;
      lb = -1; la = -1;
      for (int i = 0; i < 60; i++) begin
        int b, a;
        @(negedge clk);
        do begin
          b = $urandom_range(3);
          a = $urandom_range(DEPTH - 1);
        end while (b == lb && a == la);
        lb = b; la = a;
        mac_valid = ($urandom_range(4) != 0);
        mac_bank  = mbank_e'(b);
        mac_addr  = AW'(a);
        mac_w     = wgt_t'($urandom);
        mac_delta = act_t'(int'($urandom_range(600)) - 300);
        if (mac_valid) m[b][a] += int'(mac_w) * int'(mac_delta);
        else lb = -1;
      end
      @(negedge clk) mac_valid = 0;
      @(negedge clk);
      for (int a = 0; a < DEPTH; a++) begin
        act_rd = 1; act_addr = AW'(a);
        e_q.push_back(gru_cell(m[0][a], m[1][a], m[2][a], m[3][a], hp[a]));
        @(negedge clk);
        act_rd = 0; hprev = act_t'(hp[a]);
        repeat (($urandom_range(2) == 0) ? 4 + $urandom_range(4) : 3) @(negedge clk);
        @(negedge clk);
      end
      repeat (12) @(negedge clk);
      foreach (hp[a]) hp[a] = int'($urandom_range(2000)) - 1000;
    end
    check(t_q.size() == 0, "every activation produced a result");
    check(n_overlap > 0, "S0 of one neuron overlapped S5 of the previous one");
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
