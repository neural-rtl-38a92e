// tb_spiking_buffer -- self-checking testbench of the spike map buffers.
//
// Random masked writes to the spikemap and shortcut arrays (sometimes both
// in one cycle) and random reads, checked against a model of both arrays:
// read data appears one cycle after rd_en, only the bits set in wr_mask
// change, and the shortcut array uses the low address bits.
module tb_spiking_buffer;
  import neural_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rd_en, rd_sc, wr_sm, wr_sc;
  logic [11:0] rd_addr, wr_addr;
  logic [31:0] rd_data, wr_mask, wr_data;

  logic [31:0] sm [4096];
  logic [31:0] sc [2048];
  int checks = 0, failures = 0;

  spiking_buffer dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] expd;
    bit          pend;
    rd_en = 0; rd_sc = 0; wr_sm = 0; wr_sc = 0; rd_addr = '0; wr_addr = '0; wr_mask = '0; wr_data = '0;
    // initialise both arrays through the write port
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      wr_sm = 1'b1; wr_sc = (a < 2048); wr_addr = 12'(a); wr_mask = '1; wr_data = $urandom;
      sm[a] = wr_data;
      if (a < 2048) sc[a] = wr_data;
    end
    pend = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rd_data != expd) begin
          failures++;
          if (failures < 10) $display("cycle %0d read %h expected %h", i, rd_data, expd);
        end
      end
      // pick a small address range so reads often hit recent writes
      rd_en   = ($urandom % 4 != 0);
      rd_sc   = $urandom % 2;
      rd_addr = 12'($urandom % 64 + (($urandom % 2) ? 2048 : 0));
      wr_sm   = ($urandom % 2);
      wr_sc   = ($urandom % 3 == 0);
      wr_addr = 12'($urandom % 64 + (($urandom % 2) ? 2048 : 0));
      wr_mask = $urandom;
      wr_data = $urandom;
      // read sees the old contents (read and write in the same cycle)
      if (rd_en) expd = rd_sc ? sc[rd_addr[10:0]] : sm[rd_addr];
      pend = rd_en;
      if (wr_sm) sm[wr_addr] = (sm[wr_addr] & ~wr_mask) | (wr_data & wr_mask);
      if (wr_sc) sc[wr_addr[10:0]] = (sc[wr_addr[10:0]] & ~wr_mask) | (wr_data & wr_mask);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
