// axi_datamover_model -- behavioural model of the DRAM read path seen by the
// accelerator: an AXI Datamover (MM2S channel) in front of the weight DRAM.
//
// Commands arrive on s_cmd (80-bit, 40-bit address layout: BTT [22:0],
// TYPE [23], DSA [29:24], EOF [30], DRR [31], SADDR [71:32], TAG [75:72]).
// For each accepted command the model waits LAT cycles, then streams BTT/8
// beats of 64 bits on m_data, byte k of a beat being the byte at address
// SADDR + 8*beat + k of a DRAM whose contents are tb_ref_pkg::weight_at().
// Commands are queued (up to QMAX); s_cmd_ready is dropped when the queue is
// full and, at random, STALL_PCT percent of the time.  m_data_tvalid is also
// withheld at random STALL_PCT percent of the cycles, and data is held while
// m_data_tready is low (AXI4-Stream rules).  Malformed commands (BTT not a
// multiple of 8, TYPE 0, EOF 0, DSA or DRR set, unaligned address) are
// counted in n_bad.  The model is not synthesizable and stands in for vendor
// IP and an external memory; it is used by the testbenches only.
module axi_datamover_model
  import tb_ref_pkg::*;
#(
  parameter int LAT       = 6,
  parameter int QMAX      = 4,
  parameter int STALL_PCT = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [79:0] s_cmd_tdata,
  input  logic        s_cmd_tvalid,
  output logic        s_cmd_tready,
  output logic [63:0] m_data_tdata,
  output logic        m_data_tvalid,
  input  logic        m_data_tready,
  output int          n_cmd,
  output int          n_bad,
  output int          n_beats
);
  typedef struct {
    longint addr;
    int     beats;
    longint t_ready;
  } cmd_t;

  cmd_t   q[$];
  longint cyc;
  int     beat;
  logic   rdy_rand, vld_rand;

  function automatic logic [63:0] beat_data(longint addr);
    logic [63:0] d;
    for (int k = 0; k < 8; k++) d[8*k +: 8] = 8'(weight_at(addr + k));
    return d;
  endfunction

  assign s_cmd_tready = rst_n && rdy_rand && (q.size() < QMAX);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q.delete();
      cyc           = 0;
      beat          = 0;
      n_cmd         = 0;
      n_bad         = 0;
      n_beats       = 0;
      m_data_tvalid <= 1'b0;
      m_data_tdata  <= '0;
      rdy_rand      <= 1'b1;
      vld_rand      <= 1'b1;
    end else begin
      cyc = cyc + 1;
      // data channel
      if (m_data_tvalid && m_data_tready) begin
        n_beats++;
        beat++;
        if (beat == q[0].beats) begin
          void'(q.pop_front());
          beat = 0;
        end
      end
      // command channel (sampled with the ready of this cycle)
      if (s_cmd_tvalid && s_cmd_tready) begin
        cmd_t c;
        logic [22:0] btt;
        btt = s_cmd_tdata[22:0];
        n_cmd++;
        if (btt == 0 || btt[2:0] != 0 || !s_cmd_tdata[23] || s_cmd_tdata[29:24] != 0 ||
            !s_cmd_tdata[30] || s_cmd_tdata[31] || s_cmd_tdata[34:32] != 0) n_bad++;
        c.addr    = longint'(s_cmd_tdata[71:32]);
        c.beats   = int'(btt) / 8;
        c.t_ready = cyc + LAT;
        q.push_back(c);
      end
      rdy_rand <= ($urandom_range(99) >= STALL_PCT);
      vld_rand  = ($urandom_range(99) >= STALL_PCT);
      if (!(m_data_tvalid && !m_data_tready)) begin
        if (q.size() > 0 && q[0].t_ready <= cyc && vld_rand) begin
          m_data_tvalid <= 1'b1;
          m_data_tdata  <= beat_data(q[0].addr + 8 * beat);
        end else begin
          m_data_tvalid <= 1'b0;
        end
      end
    end
  end
endmodule
