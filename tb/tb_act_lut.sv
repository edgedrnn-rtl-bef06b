// tb_act_lut -- exhaustive test of the sigmoid and tanh tables.
//
// Every one of the 65536 Q8.8 inputs is applied to a sigmoid and a tanh
// instance with the default 5-bit (Q1.4) output, and to a tanh instance with
// the widest 9-bit (Q1.8) output.  The expected value is computed from $exp in
// real arithmetic and rounded half up (tanh clipped to 1 - 2^-F), independent
// of the breakpoint construction inside the module.  The tables are
// combinational; one input is applied per clock.
module tb_act_lut;
  import edgedrnn_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  act_t       x;
  logic [4:0] ys, yt;
  logic [8:0] yt9;

  act_lut #(.IS_TANH(1'b0), .OUT_W(5)) u_sig  (.x, .y(ys));
  act_lut #(.IS_TANH(1'b1), .OUT_W(5)) u_tanh (.x, .y(yt));
  act_lut #(.IS_TANH(1'b1), .OUT_W(9)) u_t9   (.x, .y(yt9));

  function automatic int ref_f(input bit is_tanh, input int xi, input int f);
    real xr, y;
    int  q;
    xr = real'(xi) / 256.0;
    if (is_tanh) y = (xr > 20.0) ? 1.0 : (xr < -20.0) ? -1.0 :
                     ($exp(2.0 * xr) - 1.0) / ($exp(2.0 * xr) + 1.0);
    else         y = 1.0 / (1.0 + $exp(-xr));
    q = $rtoi($floor(y * real'(1 << f) + 0.5));
    if (is_tanh && q > (1 << f) - 1) q = (1 << f) - 1;
    return q;
  endfunction

  initial begin
    for (int i = -32768; i < 32768; i++) begin
      x = act_t'(i);
      @(posedge clk);
      checks += 3;
      if (int'(ys) != ref_f(0, i, 4)) begin
        failures++;
        if (failures < 10) $display("FAIL sig(%0d) = %0d expected %0d", i, ys, ref_f(0, i, 4));
      end
      if (int'($signed(yt)) != ref_f(1, i, 4)) begin
        failures++;
        if (failures < 10) $display("FAIL tanh5(%0d) = %0d expected %0d", i, $signed(yt), ref_f(1, i, 4));
      end
      if (int'($signed(yt9)) != ref_f(1, i, 8)) begin
        failures++;
        if (failures < 10) $display("FAIL tanh9(%0d) = %0d expected %0d", i, $signed(yt9), ref_f(1, i, 8));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (70000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
