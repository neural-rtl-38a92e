// tb_qkformer_unit -- self-checking testbench of the attention write-back unit.
//
// Random sequences of Q, K and normal rows on random channels. The model
// keeps one attention bit per channel: a Q row ORs its masked spikes into the
// bit and produces no output row; a K row is passed when the bit is set and
// replaced by zeros otherwise; a normal row is passed unchanged. Outputs are
// checked one cycle after the input, atten_clr clears every bit, and the
// test requires both kept and masked K rows to have occurred.
module tb_qkformer_unit;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  wb_mode_e    mode;
  logic        atten_clr, in_valid, out_valid, masked_any;
  logic [8:0]  in_ch;
  logic [11:0] in_addr, out_addr;
  logic [31:0] in_mask, in_data, out_mask, out_data;
  logic [511:0] atten_reg;

  bit  att [512];
  int  checks = 0, failures = 0, kept = 0, masked = 0;

  qkformer_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit          e_valid, e_masked;
    logic [11:0] e_addr;
    logic [31:0] e_mask, e_data;
    mode = WB_NORMAL; atten_clr = 0; in_valid = 0; in_ch = '0; in_addr = '0; in_mask = '0; in_data = '0;
    foreach (att[i]) att[i] = 0;
    e_valid = 0; e_masked = 0; e_addr = '0; e_mask = '0; e_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 30000; i++) begin
      @(negedge clk);
      // outputs of the previous input
      checks++;
      if (out_valid != e_valid || masked_any != e_masked ||
          (e_valid && (out_addr != e_addr || out_mask != e_mask || out_data != e_data))) begin
        failures++;
        if (failures < 10) $display("cycle %0d: valid %0b/%0b data %h/%h", i, out_valid, e_valid, out_data, e_data);
      end
      for (int c = 0; c < 512; c++) if (atten_reg[c] != att[c]) begin
        checks++; failures++;
      end
      // phases of 2000 cycles: Q rows, then K rows, with normal rows mixed in
      mode      = ((i / 2000) % 2 == 0) ? WB_Q : WB_K;
      if ($urandom % 8 == 0) mode = WB_NORMAL;
      atten_clr = (i % 2000 == 0) && ((i / 2000) % 2 == 0);
      in_valid  = ($urandom % 4 != 0);
      in_ch     = 9'($urandom % 40);
      in_addr   = 12'($urandom);
      in_mask   = ($urandom % 2) ? '1 : 32'($urandom);
      in_data   = ($urandom % 3 == 0) ? 32'($urandom) & 32'($urandom) & 32'($urandom) : '0;
      // channels 20 and up never see a Q spike, so their K rows are masked
      if (mode == WB_Q && in_ch >= 20) in_data = '0;
      // model
      e_valid  = in_valid && !atten_clr && mode != WB_Q;
      e_addr   = in_addr;
      e_mask   = in_mask;
      e_masked = 0;
      if (atten_clr) begin
        foreach (att[c]) att[c] = 0;
        e_valid = in_valid && mode != WB_Q;
      end
      e_data = in_data;
      if (mode == WB_K) begin
        if (att[in_ch]) begin
          if (in_valid && (in_data & in_mask) != 0) kept++;
        end else begin
          e_data = '0;
          e_masked = in_valid && ((in_data & in_mask) != 0);
          if (e_masked) masked++;
        end
      end
      if (mode == WB_Q && in_valid && !atten_clr) att[in_ch] = att[in_ch] | ((in_data & in_mask) != 0);
    end
    checks++;
    if (kept == 0 || masked == 0) begin failures++; $display("kept %0d masked %0d", kept, masked); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
