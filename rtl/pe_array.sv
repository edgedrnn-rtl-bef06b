// pe_array -- the vector of K processing elements and its sequencer.
//
// MxV: every nonzero delta element popped from the D-FIFO selects one column
// of the layer's concatenated weight matrix.  The column (3H weights, r, c and
// u gate blocks) arrives from the W-FIFO as 3H/K beats of K weights; weight k
// of a beat (bits 8k+7:8k) goes to PE k, so row n of the column is handled by
// PE n mod K.  All PEs multiply their weight by the same delta element, which
// is why one delta buffer suffices.  Beat b updates word b mod (H/K) of bank
// M_r, M_c or M_u for b / (H/K) = 0, 1, 2, where the c block goes to M_hc for
// hidden-state columns and to M_xc for input columns.  The next column is
// popped together with the last beat, so back-to-back columns take one cycle
// per beat; the array stalls only when the W-FIFO is empty.
//
// Activation (act_start): for each group g = 0 .. H/K-1 the array reads the
// delta memories of neurons g*K .. g*K+K-1 (one per PE) and h_{t-1} of the
// same neurons from the Delta Unit (hrd_*), one group every 5 cycles, and
// returns the K new hidden states as one word on hw_* (address g).  act_done
// pulses after the last word; the whole pass takes 5*(H/K) + 6 cycles from
// act_start to act_done.
//
// The accumulation memories keep the delta memories of every layer (they
// carry over from one time step to the next); layer selects the region.
// Initialisation (init_start) writes zero to every word of all four banks of
// every PE through the '0' operand below ADD0 (4*DEPTH cycles).
//
// h_dim must be a multiple of K and at most K*HGM.  The row interleaving,
// the shared delta and the PE reuse for the activation follow the paper; beat
// packing, the 5-cycle group spacing and the sequencing are this design's.
module pe_array
  import edgedrnn_pkg::*;
#(
  parameter int NPE   = edgedrnn_pkg::K,
  parameter int NL    = edgedrnn_pkg::MAX_L,
  parameter int HGM   = edgedrnn_pkg::MAX_H / edgedrnn_pkg::K,   // groups per layer
  parameter int LW    = (NL > 1) ? $clog2(NL) : 1,
  parameter int HGW   = $clog2(HGM),
  parameter int DEPTH = NL * HGM,                                // words per bank
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [15:0]         h_dim,
  input  logic [LW-1:0]       layer,
  // D-FIFO read side
  input  logic                dq_valid,
  input  dfifo_t              dq_data,
  output logic                dq_pop,
  // W-FIFO read side
  input  logic                wq_valid,
  input  logic [NPE*W_W-1:0]  wq_data,
  output logic                wq_pop,
  output logic                mxv_idle,
  // initialisation
  input  logic                init_start,
  output logic                init_done,
  // activation
  input  logic                act_start,
  output logic                act_done,
  output logic                hrd_en,
  output logic [HGW-1:0]      hrd_addr,
  input  act_t                hrd_data [NPE],
  output logic                hw_valid,
  output logic [HGW-1:0]      hw_addr,
  output act_t                hw_data [NPE]
);
  localparam int NB_W = $clog2(4 * DEPTH + 1);

  logic [AW:0] hg;                        // groups per gate block = H/K
  logic [AW-1:0] lbase;                   // first ACC Mem word of this layer
  assign hg    = (AW+1)'(h_dim / 16'(NPE));
  assign lbase = AW'(int'(layer) * HGM);

  // ------------------------------------------------------------ MxV sequencer
  logic       col_act;                    // a column is being multiplied
  act_t       col_delta;
  logic       col_is_h;
  logic [AW:0] grp;                       // word within the gate block
  logic [1:0] gate;                       // 0 r, 1 c, 2 u
  logic       beat_go, last_beat;

  assign beat_go   = col_act && wq_valid;
  assign last_beat = (grp == hg - 1'b1) && (gate == 2'd2);
  assign wq_pop    = beat_go;
  assign dq_pop    = dq_valid && (!col_act || (beat_go && last_beat));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_act <= 1'b0;
      grp     <= '0;
      gate    <= '0;
    end else begin
      if (beat_go) begin
        if (grp == hg - 1'b1) begin
          grp  <= '0;
          gate <= (gate == 2'd2) ? 2'd0 : gate + 2'd1;
        end else begin
          grp <= grp + 1'b1;
        end
        if (last_beat && !dq_valid) col_act <= 1'b0;
      end
      if (dq_pop) col_act <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (dq_pop) begin
      col_delta <= dq_data.delta;
      col_is_h  <= dq_data.is_h;
    end
  end

  mbank_e beat_bank;
  always_comb begin
    unique case (gate)
      2'd0:    beat_bank = M_R;
      2'd1:    beat_bank = col_is_h ? M_HC : M_XC;
      default: beat_bank = M_U;
    endcase
  end

  // ------------------------------------------------------------ initialisation
  logic            init_act;
  logic [NB_W-1:0] init_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_act  <= 1'b0;
      init_cnt  <= '0;
      init_done <= 1'b0;
    end else begin
      init_done <= 1'b0;
      if (init_start) begin
        init_act <= 1'b1;
        init_cnt <= '0;
      end else if (init_act) begin
        if (init_cnt == NB_W'(4 * DEPTH - 1)) begin
          init_act  <= 1'b0;
          init_done <= 1'b1;
        end
        init_cnt <= init_cnt + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ activation sequencer
  logic        act_act;
  logic [AW:0] act_grp;                   // next group to read
  logic [2:0]  act_sp;                    // cycles until the next group may start
  logic [AW:0] out_grp;
  logic        act_issue;

  assign act_issue = act_act && (act_sp == 3'd0) && (act_grp < hg);
  assign hrd_en    = act_issue;
  assign hrd_addr  = HGW'(act_grp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_act  <= 1'b0;
      act_grp  <= '0;
      act_sp   <= '0;
      out_grp  <= '0;
      act_done <= 1'b0;
    end else begin
      act_done <= 1'b0;
      if (act_start) begin
        act_act <= 1'b1;
        act_grp <= '0;
        act_sp  <= '0;
        out_grp <= '0;
      end else if (act_act) begin
        act_sp <= (act_sp == 3'd4) ? 3'd0 : act_sp + 3'd1;
        if (act_issue) act_grp <= act_grp + 1'b1;
        if (hw_valid) begin
          out_grp <= out_grp + 1'b1;
          if (out_grp == hg - 1'b1) begin
            act_act  <= 1'b0;
            act_done <= 1'b1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ the PEs
  logic            pe_mac_valid, pe_mac_clear;
  mbank_e          pe_bank;
  logic [AW-1:0]   pe_addr;
  act_t            pe_delta;
  logic [NPE-1:0]  pe_hv;

  always_comb begin
    pe_mac_valid = beat_go | init_act;
    pe_mac_clear = init_act;
    pe_bank      = init_act ? mbank_e'(init_cnt / NB_W'(DEPTH)) : beat_bank;
    pe_addr      = init_act ? AW'(init_cnt % NB_W'(DEPTH)) : lbase + AW'(grp);
    pe_delta     = init_act ? '0 : col_delta;
  end

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    pe #(.DEPTH(DEPTH), .AW(AW)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .mac_valid (pe_mac_valid),
      .mac_clear (pe_mac_clear),
      .mac_bank  (pe_bank),
      .mac_addr  (pe_addr),
      .mac_w     (wgt_t'(wq_data[k*W_W +: W_W])),
      .mac_delta (pe_delta),
      .act_rd    (act_issue),
      .act_addr  (lbase + AW'(act_grp)),
      .hprev     (hrd_data[k]),
      .h_valid   (pe_hv[k]),
      .h_out     (hw_data[k])
    );
  end

  assign hw_valid = pe_hv[0];
  assign hw_addr  = HGW'(out_grp);

  // the MAC pipeline of the PEs is one cycle deep
  logic mac_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mac_q <= 1'b0;
    else        mac_q <= beat_go;
  end
  assign mxv_idle = !col_act && !mac_q;

  // ------------------------------------------------------------ rules
  a_lockstep:  assert property (@(posedge clk) disable iff (!rst_n)
                                pe_hv == '0 || pe_hv == '1);
  a_one_job:   assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({col_act, init_act, act_act}));
  a_hdim:      assert property (@(posedge clk) disable iff (!rst_n)
                                (act_start || init_start || dq_pop) |->
                                  (h_dim % 16'(NPE) == 0 && h_dim != 0 &&
                                   h_dim <= 16'(NPE * HGM) && int'(layer) < NL));
endmodule
