// tb_delta_unit -- test of the delta encoder and its state memories.
//
// Two layers (input 16 and 8, hidden 16, K = 8).  For every pass the
// testbench writes a new h_{t-1} into the unit through hw_* (as the output
// buffer does), picks the input of the layer (stream for layer 0, an output
// buffer model with one-cycle read latency for layer 1), and predicts with its
// own copy of s_hat which elements must be sent: delta = s - s_hat (clipped to
// 16 bits), sent when nonzero and |delta| >= threshold (th_x for the input
// part, th_h for the hidden part, threshold 0 included).  The (delta, is_h)
// entries and the column pointers must match that prediction in order.  With
// no back-pressure a vector of D elements must take D+2 cycles from the
// clock that samples start to done (one element per cycle); other passes stall the unit with almost-full
// and input gaps at random.  The h read port (hrd_*) is checked against the
// written words, and init must clear s_hat and h.
module tb_delta_unit;
  import edgedrnn_pkg::*;
  localparam int NL = 2, NI = 16, NH = 16, NPE = 8, HG = NH / NPE;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic        start = 0, layer = 0, done, ready, init_start = 0, init_done;
  logic [15:0] x_dim;
  act_t        th_x, th_h;
  act_t        x_tdata;
  logic        x_tvalid = 0, x_tready;
  logic        ob_rd_en, dq_push, pc_push, dq_afull = 0, pc_afull = 0;
  logic [15:0] ob_rd_addr, pc_data;
  act_t        ob_rd_data;
  dfifo_t      dq_data;
  logic        hrd_en = 0, hw_en = 0;
  logic [0:0]  hrd_addr, hw_addr;
  act_t        hrd_data [NPE];
  act_t        hw_data [NPE];

  delta_unit #(.NL(NL), .NI(NI), .NH(NH), .NPE(NPE)) u_dut (
    .clk, .rst_n, .start, .layer, .x_dim, .h_dim(16'(NH)), .th_x, .th_h, .done, .ready,
    .init_start, .init_done,
    .s_data_axis_tdata(x_tdata), .s_data_axis_tvalid(x_tvalid), .s_data_axis_tready(x_tready),
    .ob_rd_en, .ob_rd_addr, .ob_rd_data, .dq_push, .dq_data, .dq_afull,
    .pc_push, .pc_data, .pc_afull, .hrd_en, .hrd_addr, .hrd_data, .hw_en, .hw_addr, .hw_data);

  int shat [NL][NI + 1 + NH];
  int obm [NH];
  int exp_q[$];        // (is_h << 31) | (col << 16) | delta[15:0]
  int n_push;
  bit stall;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // output buffer model and push checker
  always @(posedge clk) begin
    if (ob_rd_en) ob_rd_data <= act_t'(obm[ob_rd_addr]);
    if (stall) begin
      dq_afull <= ($urandom_range(3) == 0);
      pc_afull <= ($urandom_range(4) == 0);
    end else begin
      dq_afull <= 1'b0;
      pc_afull <= 1'b0;
    end
    check(dq_push == pc_push, "delta and pcol pushed together");
    if (dq_push) begin
      int e;
      n_push++;
      e = (exp_q.size() > 0) ? exp_q.pop_front() : -1;
      check({dq_data.is_h, pc_data, dq_data.delta} == {e[31], 1'b0, e[30:16], e[15:0]},
            $sformatf("push is_h=%0d col=%0d delta=%0d, expected %h", dq_data.is_h, pc_data,
                      dq_data.delta, e));
    end
  end

  task automatic write_h(input int l, input int h[NH]);
    @(negedge clk);
    layer = l[0];
    for (int g = 0; g < HG; g++) begin
      hw_en = 1; hw_addr = 1'(g);
      for (int k = 0; k < NPE; k++) hw_data[k] = act_t'(h[g * NPE + k]);
      @(negedge clk);
    end
    hw_en = 0;
    for (int g = 0; g < HG; g++) begin
      hrd_en = 1; hrd_addr = 1'(g);
      @(negedge clk);
      hrd_en = 0;
      for (int k = 0; k < NPE; k++)
        check(int'(hrd_data[k]) == h[g * NPE + k], "h memory read back");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) init_start = 1;
    @(negedge clk) init_start = 0;
    while (!init_done) @(negedge clk);
    foreach (shat[l, i]) shat[l][i] = 0;
    for (int p = 0; p < 16; p++) begin
      int l, xd, s[], h[NH], x[];
      longint t0;
      l  = p % 2;
      xd = l ? 8 : NI;
      stall = (p >= 8) && (p % 4 >= 2);
      th_x = act_t'((p % 3 == 0) ? 0 : $urandom_range(60));
      th_h = act_t'((p % 3 == 0) ? 0 : $urandom_range(60));
      x = new[xd];
      foreach (x[i]) x[i] = ($urandom_range(3) == 0) ? shat[l][1 + i] :
                            shat[l][1 + i] + int'($urandom_range(160)) - 80;
      if (p == 4) x[0] = 32767;                 // clipped difference on the next pass
      if (p == 6) x[0] = -32768;
      foreach (h[j]) h[j] = ($urandom_range(3) == 0) ? shat[l][1 + xd + j] :
                            int'($urandom_range(1000)) - 500;
      if (p >= 14) foreach (h[j]) h[j] = 0;    // after init-like state
      write_h(l, h);
      if (l == 1) foreach (x[i]) obm[i] = x[i];
      // prediction
      s = new[xd + 1 + NH];
      s[0] = 256;
      foreach (x[i]) s[1 + i] = x[i];
      foreach (h[j]) s[1 + xd + j] = h[j];
      foreach (s[e]) begin
        int d, th;
        d  = s[e] - shat[l][e];
        d  = (d > 32767) ? 32767 : (d < -32768) ? -32768 : d;
        th = (e > xd) ? int'(th_h) : int'(th_x);
        if (d != 0 && (d < 0 ? -d : d) >= th) begin
          exp_q.push_back(((e > xd) ? 32'h8000_0000 : 0) | (e << 16) | (d & 16'hffff));
          shat[l][e] += d;
        end
      end
      // run
      x_dim = 16'(xd);
      @(negedge clk) start = 1; t0 = cyc;
      fork
        if (l == 0) begin
          for (int i = 0; i < xd; i++) begin
            while (stall && $urandom_range(2) == 0) begin x_tvalid = 0; @(negedge clk); end
            x_tdata = act_t'(x[i]); x_tvalid = 1;
            do @(posedge clk); while (!x_tready);
            @(negedge clk);
          end
          x_tvalid = 0;
        end
        begin
          @(negedge clk) start = 0;
          while (!done) @(negedge clk);
        end
      join
      while (!ready) @(negedge clk);
      if (!stall && l == 1)
        check(cyc - t0 == xd + 1 + NH + 3,   // start is sampled one clock after t0
 $sformatf("pass of %0d elements took %0d cycles",
              xd + 1 + NH, cyc - t0));
      check(exp_q.size() == 0, $sformatf("pass %0d: %0d expected pushes missing", p, exp_q.size()));
      exp_q.delete();
    end
    // init clears s_hat and h
    @(negedge clk) init_start = 1;
    @(negedge clk) init_start = 0;
    while (!init_done) @(negedge clk);
    for (int g = 0; g < HG; g++) begin
      hrd_en = 1; hrd_addr = 1'(g);
      @(negedge clk);
      hrd_en = 0;
      for (int k = 0; k < NPE; k++) check(hrd_data[k] == '0, "h cleared by init");
    end
    check(n_push > 0, "pushes happened");
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
