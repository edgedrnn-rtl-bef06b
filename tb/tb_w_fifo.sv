// tb_w_fifo -- random test of the W-FIFO (16 beats here).
//
// An AXI4-Stream source offers random 64-bit beats with random gaps and holds
// each beat until tready; a consumer pops at random, in phases that fill and
// drain the FIFO.  A queue model predicts tready (room left), valid and the
// head beat every cycle, and the order of the beats is checked.
module tb_w_fifo;
  localparam int DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_full = 0;

  logic [63:0] tdata, dout;
  logic        tvalid = 0, tready, valid, pop = 0;

  w_fifo #(.DEPTH(DEPTH)) u_dut (.clk, .rst_n, .s_w_axis_tdata(tdata), .s_w_axis_tvalid(tvalid),
                                  .s_w_axis_tready(tready), .valid, .dout, .pop);

  logic [63:0] q[$];
  bit          took_q = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int phase;
      bit took;
      @(negedge clk);
      phase = (i / 400) % 2;
      check(tready == (q.size() < DEPTH), "tready while room is left");
      check(valid == (q.size() > 0), "valid");
      if (q.size() > 0) check(dout == q[0], "head beat");
      if (!tready) n_full++;
      if (!tvalid || took_q) begin              // a new beat may be offered
        tvalid = ($urandom_range(9) < (phase ? 3 : 8));
        tdata  = {$urandom, $urandom};
      end
      pop = valid && ($urandom_range(9) < (phase ? 8 : 3));
      took = tvalid && tready;
      took_q = took;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (took) q.push_back(tdata);
    end
    check(n_full > 0, "full reached");
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
