// tb_wtfc -- self-checking testbench of the W2TTFS + FC classifier.
//
// Loads random signed 8-bit weights for 100 classes and 512 features through
// the load port, then classifies random spike maps (up to 512 windows) fed
// row by row with random gaps. Expected result: for every class, the sum over
// windows of spike count times weight, logit = that sum shifted right by
// 2*log_ws (unit scale 1/ws^2), class_idx = the lowest index of the largest
// sum. Also requires that empty windows were skipped at least once.
module tb_wtfc;
  import neural_pkg::*;

  localparam int NC = 100, FI = 512;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic fcw_we, start, in_valid, in_ready, done, feature_skip;
  logic [8:0]  fcw_addr;
  logic [NC-1:0][7:0] fcw_data;
  logic [9:0]  n_ch;
  logic [5:0]  img_h, img_w;
  logic [1:0]  log_ws;
  logic [31:0] in_row;
  logic [6:0]  class_idx;
  logic signed [23:0] logit [NC];

  logic [NC-1:0][7:0] wmem [FI];
  logic [31:0] rows[$];
  int checks = 0, failures = 0, skips = 0;

  wtfc dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    in_valid = (rows.size() > 0) && ($urandom % 4 != 0);
    in_row   = (rows.size() > 0) ? rows[0] : '0;
  end
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(rows.pop_front());
    if (feature_skip) skips++;
  end

  initial begin
    fcw_we = 0; fcw_addr = '0; fcw_data = '0; start = 0; n_ch = '0; img_h = '0; img_w = '0; log_ws = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < FI; a++) begin
      @(negedge clk);
      for (int k = 0; k < NC; k++) wmem[a][k] = 8'($urandom);
      fcw_we = 1'b1; fcw_addr = 9'(a); fcw_data = wmem[a];
    end
    @(negedge clk);
    fcw_we = 1'b0;
    for (int run = 0; run < 20; run++) begin
      // e.g. 512 channels of 1x1 windows, or 32 channels of a 4x4 map
      automatic int lws = $urandom % 3;
      automatic int ws = 1 << lws;
      automatic int wo = 1 + $urandom % 4, ho = 1 + $urandom % 4;
      automatic int nc = FI / (wo * ho);
      automatic int h = ho * ws, w = wo * ws;
      automatic int sum [NC];
      automatic int best = 0;
      foreach (sum[k]) sum[k] = 0;
      for (int c = 0; c < nc; c++)
        for (int wy = 0; wy < ho; wy++) begin
          automatic logic [31:0] r [4];
          for (int i = 0; i < ws; i++) r[i] = '0;
          for (int wx = 0; wx < wo; wx++) begin
            automatic int n = 0;
            for (int i = 0; i < ws; i++)
              for (int x = 0; x < ws; x++) begin
                r[i][wx*ws + x] = ($urandom % 6 == 0);
                n += r[i][wx*ws + x];
              end
            for (int k = 0; k < NC; k++) sum[k] += n * int'($signed(wmem[c*ho*wo + wy*wo + wx][k]));
          end
          for (int i = 0; i < ws; i++) rows.push_back(r[i]);
        end
      for (int k = 1; k < NC; k++) if (sum[k] > sum[best]) best = k;
      @(negedge clk);
      n_ch = 10'(nc); img_h = 6'(h); img_w = 6'(w); log_ws = 2'(lws);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (int'(class_idx) != best) begin failures++; $display("run %0d class %0d expected %0d", run, class_idx, best); end
      for (int k = 0; k < NC; k++) begin
        checks++;
        if (int'(logit[k]) != (sum[k] >>> (2 * lws))) begin
          failures++;
          if (failures < 10) $display("run %0d class %0d logit %0d expected %0d", run, k, logit[k], sum[k] >>> (2 * lws));
        end
      end
    end
    checks++;
    if (skips == 0) begin failures++; $display("no empty window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
