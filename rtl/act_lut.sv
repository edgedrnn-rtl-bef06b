// act_lut -- sigmoid or tanh look-up table of a processing element.
//
// The input is a 16-bit Q8.8 value; the output has LUT_W bits, of which
// LUT_W-1 are fractional (LUT_W = 5 gives Q1.4, the setting used for all
// results of the paper; 5..9 are allowed).  Sigmoid output is unsigned in
// [0, 1]; tanh output is two's complement in [-1, 1 - 2^-(LUT_W-1)].
//
// A table indexed by all 16 input bits would have 65536 entries, yet its
// output takes only 2^LUT_W values.  This module therefore stores the table as
// its breakpoints: output level k is reached at the smallest Q8.8 input x with
//   sigmoid(x/256) * 2^F >= k - 1/2          (F = LUT_W-1, k = 1 .. 2^F)
//   tanh(x/256)    * 2^F >= k - 2^F - 1/2    (k = 1 .. 2^(F+1)-1)
// i.e. the output is round-half-up of the exact function, computed as a count
// of passed breakpoints.  The breakpoints are elaborated from the formula
// (logit / atanh), so the same table results for any LUT_W.  Purely
// combinational; the PE registers the result in the following stage.
// The paper fixes the 16-bit input and the 5..9-bit output; the breakpoint
// form of the table and the rounding are this design's choice.
module act_lut
  import edgedrnn_pkg::*;
#(
  parameter bit IS_TANH = 1'b0,           // 0: sigmoid, 1: tanh
  parameter int OUT_W   = edgedrnn_pkg::LUT_W
) (
  input  act_t             x,
  output logic [OUT_W-1:0] y
);
  localparam int F      = OUT_W - 1;
  localparam int NLEVEL = IS_TANH ? (2 ** (F + 1)) - 1 : 2 ** F;

  // Smallest Q8.8 input that reaches output level k, clipped to the 16-bit range.
  function automatic int breakpoint(input int k);
    real p, z;
    if (IS_TANH) begin
      p = (real'(k) - real'(2 ** F) - 0.5) / real'(2 ** F);
      z = 0.5 * $ln((1.0 + p) / (1.0 - p));
    end else begin
      p = (real'(k) - 0.5) / real'(2 ** F);
      z = $ln(p / (1.0 - p));
    end
    z = $ceil(z * real'(2 ** ACT_FRAC));
    if (z > 32767.0)  z = 32767.0;
    if (z < -32768.0) z = -32768.0;
    return $rtoi(z);
  endfunction

  logic [NLEVEL-1:0] passed;
  for (genvar k = 1; k <= NLEVEL; k++) begin : g_bp
    localparam int BP = breakpoint(k);
    assign passed[k-1] = (int'(x) >= BP);
  end

  always_comb begin
    logic [OUT_W:0] cnt;
    cnt = '0;
    for (int i = 0; i < NLEVEL; i++) cnt = cnt + (OUT_W+1)'(passed[i]);
    if (IS_TANH) y = OUT_W'(cnt) - OUT_W'(2 ** F);
    else         y = OUT_W'(cnt);
  end

endmodule
