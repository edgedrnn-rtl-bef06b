// tb_d_fifo -- random test of the D-FIFO (16 entries here).
//
// A producer pushes random (delta, is_h) entries whenever almost_full is low,
// plus, at random, one more push in the cycle after it rises (the Delta Unit
// has writes in flight), and a consumer pops at random.  A queue model
// predicts the head entry, empty and almost_full (two or fewer free entries)
// every cycle; n_written must count the pushes since the last clr_stat.  Both
// the full and the empty end are reached.
module tb_d_fifo;
  import edgedrnn_pkg::*;
  localparam int DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_afull = 0, n_empty = 0;

  logic        clr_stat = 0, push = 0, pop = 0, empty, almost_full;
  dfifo_t      din, dout;
  logic [15:0] n_written;

  d_fifo #(.DEPTH(DEPTH)) u_dut (.clk, .rst_n, .clr_stat, .push, .din, .pop, .dout,
                                  .empty, .almost_full, .n_written);

  dfifo_t q[$];
  int     nw;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic af_q;
    repeat (3) @(negedge clk);
    rst_n = 1;
    af_q = 0;
    nw = 0;
    for (int i = 0; i < 4000; i++) begin
      int phase;
      @(negedge clk);
      phase = (i / 500) % 2;             // fill-biased and drain-biased phases
      check(empty == (q.size() == 0), "empty flag");
      check(almost_full == (q.size() > DEPTH - 2), $sformatf("almost_full with %0d entries", q.size()));
      check(int'(n_written) == nw, "n_written");
      if (q.size() > 0) check(dout == q[0], "head entry");
      if (almost_full) n_afull++;
      if (empty) n_empty++;
      push = (!almost_full || (!af_q && q.size() < DEPTH)) &&
             ($urandom_range(9) < (phase ? 3 : 8));
      pop  = !empty && ($urandom_range(9) < (phase ? 8 : 3));
      clr_stat = ($urandom_range(199) == 0);
      din.is_h  = $urandom_range(1);
      din.delta = act_t'($urandom);
      af_q = almost_full;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      nw = clr_stat ? 0 : nw + int'(push);
    end
    check(n_afull > 0 && n_empty > 0, "both ends reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
