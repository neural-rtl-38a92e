// tb_fcu -- self-checking testbench of the temporal FC unit.
//
// A testbench weight memory (one-cycle read latency) holds random signed
// 8-bit rows for 100 classes. Random windows (feature, vld_cnt) are offered
// with random gaps; for each accepted window every class potential must grow
// by vld_cnt times the feature's weight, the unit being busy for vld_cnt + 1
// cycles (time reuse of one weight read). logit must be the potential shifted
// right by scale_shift, and clr must zero the potentials.
module tb_fcu;
  import neural_pkg::*;

  localparam int NC = 100;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clr, i_vld, i_ready, w_rd_en, busy;
  logic [11:0] feat, w_rd_addr;
  logic [6:0]  vld_cnt;
  logic [2:0]  scale_shift;
  logic [NC-1:0][7:0] w_rd_data;
  logic signed [23:0] acc [NC], logit [NC];

  logic [NC-1:0][7:0] wmem [4096];
  int model [NC];
  int checks = 0, failures = 0;

  fcu dut (.*);

  always_ff @(posedge clk) if (w_rd_en) w_rd_data <= wmem[w_rd_addr];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; i_vld = 0; feat = '0; vld_cnt = '0; scale_shift = '0; w_rd_data = '0;
    for (int a = 0; a < 4096; a++)
      for (int k = 0; k < NC; k++) wmem[a][k] = 8'($urandom);
    foreach (model[k]) model[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      automatic int f = $urandom % 4096;
      automatic int c = 1 + $urandom % 16;
      automatic int cyc = 0;
      @(negedge clk);
      if (n % 500 == 0) begin
        clr = 1'b1;
        @(negedge clk);
        clr = 1'b0;
        foreach (model[k]) model[k] = 0;
      end
      repeat ($urandom % 3) @(negedge clk);
      i_vld = 1'b1; feat = 12'(f); vld_cnt = 7'(c); scale_shift = 3'(2 * ($urandom % 3));
      #1;
      checks++;
      if (!i_ready) begin failures++; $display("not ready while idle"); end
      @(negedge clk);
      i_vld = 1'b0; feat = '0;
      for (int k = 0; k < NC; k++) model[k] += c * int'($signed(wmem[f][k]));
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != c + 1) begin failures++; if (failures < 10) $display("busy %0d cycles for vld_cnt %0d", cyc, c); end
      for (int k = 0; k < NC; k++) begin
        checks++;
        if (int'(acc[k]) != model[k] || int'(logit[k]) != (model[k] >>> int'(scale_shift))) begin
          failures++;
          if (failures < 10) $display("window %0d class %0d acc %0d expected %0d", n, k, acc[k], model[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
