// tb_ttfs_filter -- self-checking testbench of the W2TTFS filter.
//
// Random spike maps (1..6 channels, 4x4 to 32x32, window sizes 1, 2, 4 with
// at most 8 windows per row) are fed row by row with random gaps; the FC side
// takes windows with random back-pressure. The model lists, in channel,
// window-row, window-column order, every window with at least one spike and
// its spike count; the filter must send exactly that list with feature index
// ch*Ho*Wo + wy*Wo + wx and scale_shift = 2*log_ws, mark each empty window
// with skip, and pulse done once at the end.
module tb_ttfs_filter;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, done, in_valid, in_ready, i_vld, i_ready, skip;
  logic [9:0]  n_ch;
  logic [5:0]  img_h, img_w;
  logic [1:0]  log_ws;
  logic [31:0] in_row;
  logic [11:0] feat;
  logic [6:0]  vld_cnt;
  logic [2:0]  scale_shift;

  int checks = 0, failures = 0, skips = 0, dones = 0, skips_exp = 0;
  int ef[$], ec[$];
  logic [31:0] rows[$];

  ttfs_filter dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // row source with random gaps
  always @(negedge clk) begin
    in_valid = (rows.size() > 0) && ($urandom % 4 != 0);
    in_row   = (rows.size() > 0) ? rows[0] : '0;
    i_ready  = ($urandom % 3 != 0);
  end
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(rows.pop_front());
    if (skip) skips++;
    if (done) dones++;
    if (i_vld && i_ready) begin
      checks++;
      if (ef.size() == 0 || int'(feat) != ef[0] || int'(vld_cnt) != ec[0] || int'(scale_shift) != 2 * int'(log_ws)) begin
        failures++;
        if (failures < 10) $display("window feat %0d cnt %0d, expected %0d %0d", feat, vld_cnt,
                                    ef.size() ? ef[0] : -1, ec.size() ? ec[0] : -1);
      end
      if (ef.size()) begin void'(ef.pop_front()); void'(ec.pop_front()); end
    end
  end

  initial begin
    start = 0; n_ch = '0; img_h = '0; img_w = '0; log_ws = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 60; run++) begin
      automatic int lws = $urandom % 3;
      automatic int ws = 1 << lws;
      automatic int wo = 1 + $urandom % 8;
      automatic int ho = 1 + $urandom % (32 / ws);
      automatic int h = ho * ws, w = wo * ws;
      automatic int nc = 1 + $urandom % 6;
      automatic int dens = $urandom % 4;
      automatic bit m [6][32][32];
      if (w > 32) begin wo = 32 / ws; w = wo * ws; end
      for (int c = 0; c < nc; c++)
        for (int r = 0; r < h; r++) begin
          automatic logic [31:0] row = '0;
          for (int x = 0; x < w; x++) begin
            m[c][r][x] = ($urandom % 8 < dens);
            row[x] = m[c][r][x];
          end
          for (int x = w; x < 32; x++) row[x] = $urandom % 2;  // beyond the width: ignored
          rows.push_back(row);
        end
      for (int c = 0; c < nc; c++)
        for (int wy = 0; wy < ho; wy++)
          for (int wx = 0; wx < wo; wx++) begin
            automatic int n = 0;
            for (int r = 0; r < ws; r++)
              for (int x = 0; x < ws; x++) n += m[c][wy*ws + r][wx*ws + x];
            if (n != 0) begin ef.push_back(c*ho*wo + wy*wo + wx); ec.push_back(n); end
            else skips_exp++;
          end
      @(negedge clk);
      n_ch = 10'(nc); img_h = 6'(h); img_w = 6'(w); log_ws = 2'(lws);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (dones <= run) @(negedge clk);
      checks++;
      if (ef.size() != 0 || rows.size() != 0) begin
        failures++;
        $display("run %0d: %0d windows and %0d rows left", run, ef.size(), rows.size());
        ef.delete(); ec.delete(); rows.delete();
      end
    end
    checks++;
    if (skips != skips_exp || skips == 0) begin failures++; $display("skips %0d expected %0d", skips, skips_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
