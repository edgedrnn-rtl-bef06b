// pe -- EdgeDRNN processing element.
//
// One PE owns the neurons n = a*K + index (a = 0 .. H/K-1) of every layer;
// the array selects the layer's region of the accumulation memory.  It contains one 16x16-bit multiplier MUL, a 32-bit adder ADD0, a
// 16-bit adder ADD1, a sigmoid and a tanh LUT and the accumulation memory
// (acc_mem).  All of them serve two jobs, which never overlap:
//
// MxV (mac_valid): MUL forms weight x delta, ADD0 adds it to the addressed
//   delta-memory word, and the sum is written back: a read-modify-write that
//   accepts one weight per cycle.  The read is issued in the cycle the operands
//   arrive and the write follows one cycle later, so the same word must not be
//   presented again in the next cycle (the array never does: a column visits
//   every word once and has at least three words).  With mac_clear the operand
//   below ADD0 is 0 instead of the memory word; the array uses this with a zero
//   delta to initialise the memory.
//
// Activation (act_rd): the four delta memories of one neuron are read and the
//   new hidden state is produced in 8 stages S0..S7 by the shared units:
//     S0 r = SIG(M_r)            S4 uh = MUL(u, h_{t-1});  c = TANH(pre)
//     S1 (registers only)        S5 MUL((1-u), c);  ADD0(uh + 0)
//     S2 u = SIG(M_u); MUL(r, M_hc)   S6 ADD0((1-u)c + 0)
//     S3 pre = ADD0(M_xc + r M_hc);  ADD1(1 - u)   S7 h = ADD1(uh + (1-u)c)
//   A new neuron may start every 5 cycles: S0..S2 of one neuron then run in
//   the same cycles as S5..S7 of the previous one and no unit is asked for
//   twice in a cycle (checked by assertions).  h_valid/h_out appear 9 cycles
//   after act_rd.  The h_{t-1} input is sampled one cycle after act_rd.
//
// Units, stages, the TDM reuse and the '0' operand below ADD0 follow the
// paper; the fixed-point scaling between stages (edgedrnn_pkg), the 5-cycle
// initiation interval that makes the overlap conflict-free and the exact
// operand multiplexers are this design's choices.
module pe
  import edgedrnn_pkg::*;
#(
  parameter int DEPTH = edgedrnn_pkg::MAX_L * edgedrnn_pkg::MAX_H / edgedrnn_pkg::K,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // MxV / initialisation
  input  logic          mac_valid,
  input  logic          mac_clear,
  input  mbank_e        mac_bank,
  input  logic [AW-1:0] mac_addr,
  input  wgt_t          mac_w,
  input  act_t          mac_delta,
  // activation
  input  logic          act_rd,
  input  logic [AW-1:0] act_addr,
  input  act_t          hprev,
  output logic          h_valid,
  output act_t          h_out
);
  localparam int F = LUT_W - 1;
  typedef logic signed [LUT_W:0] lutv_t;    // LUT value, one extra sign bit

  // ---------------------------------------------------------------- ACC Mem
  acc_t            acc_rd [4];
  logic            acc_we;
  acc_t            acc_wd;
  logic            m_v, m_clr;
  mbank_e          m_bank;
  logic [AW-1:0]   m_addr;

  acc_mem #(.DEPTH(DEPTH), .AW(AW)) u_acc (
    .clk     (clk),
    .wr_en   (acc_we),
    .wr_bank (m_bank),
    .wr_addr (m_addr),
    .wr_data (acc_wd),
    .rd_en   (mac_valid | act_rd),
    .rd_addr (act_rd ? act_addr : mac_addr),
    .rd_data (acc_rd)
  );

  // ---------------------------------------------------------------- stage valids
  logic [7:0] sv;        // sv[k]: a neuron is in stage Sk this cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sv <= '0;
    else        sv <= {sv[6:0], act_rd};
  end

  // ---------------------------------------------------------------- pipeline registers
  act_t  s1_mu, s1_mhc, s1_mxc, s1_hp;  lutv_t s1_r;       // after S0
  act_t  s2_mu, s2_mhc, s2_mxc, s2_hp;  lutv_t s2_r;       // after S1
  act_t  s3_mxc, s3_hp;  acc_t s3_rm;   lutv_t s3_u;       // after S2
  act_t  s4_pre, s4_hp;  lutv_t s4_u, s4_omu;              // after S3
  act_t  s5_uh;  lutv_t s5_c, s5_omu;                      // after S4
  acc_t  s6_uh, s6_omuc;                                   // after S5
  act_t  s7_uh, s7_omuc;                                   // after S6

  // ---------------------------------------------------------------- shared units
  logic signed [15:0] mul_a, mul_b;
  acc_t               mul_p;
  acc_t               add0_a, add0_b, add0_s;
  logic signed [15:0] add1_a, add1_b;
  logic signed [16:0] add1_s;
  act_t               sig_in, tanh_in;
  logic [LUT_W-1:0]   sig_out, tanh_out;

  act_lut #(.IS_TANH(1'b0), .OUT_W(LUT_W)) u_sig  (.x(sig_in),  .y(sig_out));
  act_lut #(.IS_TANH(1'b1), .OUT_W(LUT_W)) u_tanh (.x(tanh_in), .y(tanh_out));

  assign mul_p  = ACC_W'(mul_a) * ACC_W'(mul_b);
  assign add0_s = add0_a + add0_b;
  assign add1_s = 17'(add1_a) + 17'(add1_b);

  // MAC operand registers (MUL result registered, ADD0 in the next cycle)
  acc_t mac_p;

  always_comb begin
    // MUL operand multiplexers
    mul_a = 16'(mac_w);
    mul_b = mac_delta;
    if (sv[2]) begin
      mul_a = 16'(s2_r);   mul_b = s2_mhc;
    end else if (sv[4]) begin
      mul_a = 16'(s4_u);   mul_b = s4_hp;
    end else if (sv[5]) begin
      mul_a = 16'(s5_omu); mul_b = 16'(s5_c);
    end
    // ADD0 operands: MAC accumulate, or an activation step
    add0_a = mac_p;
    add0_b = m_clr ? '0 : acc_rd[m_bank];
    if (sv[3]) begin
      add0_a = ACC_W'(s3_mxc); add0_b = s3_rm;
    end else if (sv[5]) begin
      add0_a = ACC_W'(s5_uh);  add0_b = '0;
    end else if (sv[6]) begin
      add0_a = s6_omuc;        add0_b = '0;
    end
    // ADD1 operands
    add1_a = 16'(2 ** F);
    add1_b = -16'(s4_u);
    if (sv[3]) begin
      add1_a = 16'(2 ** F);    add1_b = -16'(s3_u);
    end else if (sv[7]) begin
      add1_a = s7_uh;          add1_b = s7_omuc;
    end
    // LUT inputs
    sig_in  = sv[2] ? s2_mu : acc_to_act(acc_rd[M_R]);
    tanh_in = s4_pre;
  end

  // ---------------------------------------------------------------- MxV path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_v <= 1'b0;
    end else begin
      m_v <= mac_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (mac_valid) begin
      mac_p  <= mul_p;
      m_clr  <= mac_clear;
      m_bank <= mac_bank;
      m_addr <= mac_addr;
    end
  end

  assign acc_we = m_v && rst_n;         // no writes while in reset
  assign acc_wd = add0_s;

  // ---------------------------------------------------------------- activation path
  // product of two LUT values (2F fractional bits) to Q8.8
  function automatic acc_t lutprod_to_act(input acc_t p);
    return p >>> (2 * F - ACT_FRAC);
  endfunction

  always_ff @(posedge clk) begin
    // S0
    s1_r   <= lutv_t'({1'b0, sig_out});
    s1_mu  <= acc_to_act(acc_rd[M_U]);
    s1_mhc <= acc_to_act(acc_rd[M_HC]);
    s1_mxc <= acc_to_act(acc_rd[M_XC]);
    s1_hp  <= hprev;
    // S1
    s2_r   <= s1_r;   s2_mu <= s1_mu;  s2_mhc <= s1_mhc;
    s2_mxc <= s1_mxc; s2_hp <= s1_hp;
    // S2
    s3_u   <= lutv_t'({1'b0, sig_out});
    s3_rm  <= mul_p >>> F;
    s3_mxc <= s2_mxc; s3_hp <= s2_hp;
    // S3
    s4_pre <= sat_act((ACC_W+2)'(add0_s));
    s4_omu <= lutv_t'(add1_s);
    s4_u   <= s3_u;   s4_hp <= s3_hp;
    // S4
    s5_uh  <= act_t'(mul_p >>> F);
    s5_c   <= lutv_t'(signed'(tanh_out));
    s5_omu <= s4_omu;
    // S5
    s6_uh   <= add0_s;
    s6_omuc <= lutprod_to_act(mul_p);
    // S6
    s7_omuc <= act_t'(add0_s);
    s7_uh   <= act_t'(s6_uh);
    // S7
    h_out   <= sat_act((ACC_W+2)'(add1_s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) h_valid <= 1'b0;
    else        h_valid <= sv[7];
  end

  // ---------------------------------------------------------------- rules
  a_mul_once:  assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({sv[2], sv[4], sv[5], mac_valid}));
  a_add0_once: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({sv[3], sv[5], sv[6], m_v}));
  a_add1_once: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({sv[3], sv[7]}));
  a_sig_once:  assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({sv[0], sv[2]}));
  a_rd_once:   assert property (@(posedge clk) disable iff (!rst_n)
                                !(act_rd && mac_valid));
endmodule
