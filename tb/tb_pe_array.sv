// tb_pe_array -- test of the PE array with its MxV and activation sequencers.
//
// Two layers of H = 32 neurons (K = 8 PEs, 4 groups) share the array.  After
// the initialisation pass (which must take 4*DEPTH cycles), each round pushes
// random delta elements (input or hidden part) with random weight columns of
// 3H weights for one layer, waits until mxv_idle, and runs the activation
// pass.  The weight stream is either continuous (then the array must take
// exactly one cycle per beat) or randomly interrupted.  h_{t-1} is served one
// cycle after hrd_en from a testbench copy.  Each output word must carry
// tb_ref_pkg::gru_cell() of the shadow delta memories for its K neurons, and
// the activation pass must take 5*(H/K)+6 cycles from act_start to act_done.
module tb_pe_array;
  import edgedrnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NPE = 8, NL = 2, HGM = 4, H = 32, HG = H / NPE;
  localparam int DEPTH = NL * HGM;
  localparam int BEATS = 3 * H / NPE;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic        layer;
  logic        dq_valid, dq_pop, wq_valid, wq_pop, mxv_idle;
  dfifo_t      dq_data;
  logic [63:0] wq_data;
  logic        init_start = 0, init_done, act_start = 0, act_done;
  logic        hrd_en, hw_valid;
  logic [1:0]  hrd_addr, hw_addr;
  act_t        hrd_data [NPE];
  act_t        hw_data [NPE];

  pe_array #(.NPE(NPE), .NL(NL), .HGM(HGM)) u_dut (
    .clk, .rst_n, .h_dim(16'(H)), .layer,
    .dq_valid, .dq_data, .dq_pop, .wq_valid, .wq_data, .wq_pop, .mxv_idle,
    .init_start, .init_done, .act_start, .act_done,
    .hrd_en, .hrd_addr, .hrd_data, .hw_valid, .hw_addr, .hw_data);

  dfifo_t      dq[$];
  logic [63:0] wq[$];
  bit          w_gaps;
  int          m [NL][4][H];
  int          hp [NL][H];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // FIFO models (first word fall through)
  logic wv_rand;
  assign dq_valid = dq.size() > 0;
  assign dq_data  = dq_valid ? dq[0] : '0;
  assign wq_valid = wq.size() > 0 && wv_rand;
  assign wq_data  = wq.size() > 0 ? wq[0] : '0;
  always @(posedge clk) begin
    if (dq_pop) void'(dq.pop_front());
    if (wq_pop) void'(wq.pop_front());
    wv_rand <= !w_gaps || ($urandom_range(3) != 0);
  end

  // h_{t-1} server and output checker
  int exp_h [H];
  always @(posedge clk) begin
    if (hrd_en) for (int k = 0; k < NPE; k++) hrd_data[k] <= act_t'(hp[layer][int'(hrd_addr) * NPE + k]);
    if (hw_valid) begin
      for (int k = 0; k < NPE; k++)
        check(int'(hw_data[k]) == exp_h[int'(hw_addr) * NPE + k],
              $sformatf("h[%0d] = %0d expected %0d", int'(hw_addr) * NPE + k,
                        hw_data[k], exp_h[int'(hw_addr) * NPE + k]));
    end
  end

  initial begin
    longint t0;
    int     n_cont, n_gap;
    repeat (3) @(negedge clk);
    rst_n = 1; layer = 0; w_gaps = 0;
    @(negedge clk) init_start = 1;
    t0 = cyc;
    @(negedge clk) init_start = 0;
    while (!init_done) @(negedge clk);
    check(cyc - t0 == 4 * DEPTH + 1, $sformatf("init took %0d cycles", cyc - t0));
    foreach (m[l, b, j]) m[l][b][j] = 0;
    foreach (hp[l, j]) hp[l][j] = int'($urandom_range(512)) - 256;
    for (int round = 0; round < 8; round++) begin
      int ncol;
      longint tm;
      layer  = round % 2;
      w_gaps = (round % 4) >= 2;
      ncol   = 1 + $urandom_range(6);
      for (int c = 0; c < ncol; c++) begin
        dfifo_t d;
        d.is_h  = $urandom_range(1);
        d.delta = act_t'(int'($urandom_range(1000)) - 500);
        dq.push_back(d);
        for (int b = 0; b < BEATS; b++) begin
          logic [63:0] beat;
          for (int k = 0; k < NPE; k++) begin
            int n, g, j, bk;
            wgt_t w;
            w = wgt_t'($urandom);
            beat[8*k +: 8] = w;
            n  = b * NPE + k; g = n / H; j = n % H;
            bk = (g == 0) ? 0 : (g == 2) ? 1 : (d.is_h ? 3 : 2);
            m[layer][bk][j] += int'(w) * int'(d.delta);
          end
          wq.push_back(beat);
        end
      end
      tm = cyc;
      @(negedge clk);
      while (!(mxv_idle && dq.size() == 0)) @(negedge clk);
      if (!w_gaps) begin
        n_cont++;
        check(cyc - tm == longint'(ncol * BEATS + 2),
              $sformatf("MxV of %0d columns took %0d cycles, expected %0d", ncol, cyc - tm, ncol * BEATS + 2));
      end else n_gap++;
      for (int j = 0; j < H; j++) exp_h[j] = gru_cell(m[layer][0][j], m[layer][1][j],
                                                     m[layer][2][j], m[layer][3][j], hp[layer][j]);
      act_start = 1; t0 = cyc;
      @(negedge clk) act_start = 0;
      while (!act_done) @(negedge clk);
      check(cyc - t0 == 5 * HG + 6, $sformatf("activation took %0d cycles", cyc - t0));
      foreach (exp_h[j]) hp[layer][j] = exp_h[j];
    end
    check(n_cont > 0 && n_gap > 0, "both continuous and interrupted weight streams ran");
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
