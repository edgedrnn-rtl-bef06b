// acc_mem -- accumulation memory (ACC Mem) of one processing element.
//
// Holds this PE's share of the four delta-memory vectors M_r, M_u, M_xc and
// M_hc of every layer: one bank per vector, DEPTH words of 32 bits each
// (H/K words per layer).  A PE owns the neurons n with n mod K equal to its
// index, so word l*H/K + a of every bank belongs to neuron a*K + pe_index of
// layer l.
//
// Interface: one write port (bank, address, data) and one read port that
// returns the word at the same address of all four banks, so the MxV
// read-modify-write uses one bank while the activation pipeline reads the four
// M values of a neuron together.  Reads are registered (one cycle latency), as
// in a block RAM; a read of a word written in the same cycle returns the old
// value.  The contents are not reset; the PE clears them with its
// initialisation pass.  The paper names the memory and what it accumulates;
// the banked organisation is this design's choice.
module acc_mem
  import edgedrnn_pkg::*;
#(
  parameter int DEPTH = edgedrnn_pkg::MAX_L * edgedrnn_pkg::MAX_H / edgedrnn_pkg::K,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  mbank_e        wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  acc_t          wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output acc_t          rd_data [4]
);
  acc_t bank_r  [DEPTH];
  acc_t bank_u  [DEPTH];
  acc_t bank_xc [DEPTH];
  acc_t bank_hc [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_bank)
        M_R:  bank_r[wr_addr]  <= wr_data;
        M_U:  bank_u[wr_addr]  <= wr_data;
        M_XC: bank_xc[wr_addr] <= wr_data;
        M_HC: bank_hc[wr_addr] <= wr_data;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data[M_R]  <= bank_r[rd_addr];
      rd_data[M_U]  <= bank_u[rd_addr];
      rd_data[M_XC] <= bank_xc[rd_addr];
      rd_data[M_HC] <= bank_hc[rd_addr];
    end
  end

  a_wr_range: assert property (@(posedge clk) wr_en |-> int'(wr_addr) < DEPTH);
  a_rd_range: assert property (@(posedge clk) rd_en |-> int'(rd_addr) < DEPTH);
endmodule
