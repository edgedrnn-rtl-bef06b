// tb_acc_mem -- random test of the four-bank accumulation memory.
//
// After every word of every bank has been written once (the memory has no
// reset), random writes and reads are issued, writes and reads to the same
// word in the same cycle included.  A shadow array predicts the read data,
// which must appear one cycle after rd_en (read-before-write for a same-cycle
// write) and must hold while rd_en is low.
module tb_acc_mem;
  import edgedrnn_pkg::*;
  localparam int DEPTH = 24, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          wr_en = 0, rd_en = 0;
  mbank_e        wr_bank;
  logic [AW-1:0] wr_addr, rd_addr;
  acc_t          wr_data;
  acc_t          rd_data [4];

  acc_mem #(.DEPTH(DEPTH)) u_dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_data,
                                  .rd_en, .rd_addr, .rd_data);

  acc_t shadow [4][DEPTH];
  acc_t exp_q [4];

  initial begin
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = mbank_e'(b); wr_addr = AW'(a); wr_data = acc_t'($urandom);
        shadow[b][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(1) == 1);
      wr_bank = mbank_e'($urandom_range(3));
      wr_addr = AW'($urandom_range(DEPTH - 1));
      wr_data = acc_t'($urandom);
      rd_en   = (i == 0) || ($urandom_range(2) != 0);
      rd_addr = ($urandom_range(3) == 0) ? wr_addr : AW'($urandom_range(DEPTH - 1));
      if (rd_en) for (int b = 0; b < 4; b++) exp_q[b] = shadow[b][rd_addr];
      @(posedge clk);
      if (wr_en) shadow[wr_bank][wr_addr] = wr_data;
      #1;
      if (i > 0) for (int b = 0; b < 4; b++) begin
        checks++;
        if (rd_data[b] != exp_q[b]) begin
          failures++;
          if (failures < 10) $display("FAIL %0d bank %0d: %h expected %h", i, b, rd_data[b], exp_q[b]);
        end
      end
    end
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
