// tb_pipesda -- self-checking testbench of the pipelined sparse detection array.
//
// Random spike maps in a testbench memory (one-cycle read latency). For each
// job (one channel, one 8x8 output tile) the window word must hold, for every
// output position (y, x), the taps ky*3+kx, in ascending order, of all input
// pixels (y+ky-1, x+kx-1) inside the image that carry a spike: exactly the
// non-zero terms of a 3x3, stride-1, zero-padded convolution. Random
// win_ready back-pressure exercises the freeze; the cycle count of each job is
// checked against 1 per row (reads overlap the scan) + 1 per spike
// + a small constant.
module tb_pipesda;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, idle, rd_en, win_valid, win_ready, cp_fire;
  logic [11:0] row_base, rd_addr;
  logic [5:0]  img_h, img_w, ty0, tx0;
  logic [31:0] rd_data;
  event_list_t [63:0] window;

  logic [31:0] mem [4096];
  int checks = 0, failures = 0, stalls = 0, maps = 0;

  pipesda dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit px(input int base, input int h, input int w, input int r, input int c);
    if (r < 0 || r >= h || c < 0 || c >= w) return 0;
    return mem[base + r][c];
  endfunction

  initial begin
    start = 0; win_ready = 0; row_base = '0; img_h = '0; img_w = '0; ty0 = '0; tx0 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int job = 0; job < 150; job++) begin
      automatic int h = (job % 3 == 0) ? 32 : 4 + $urandom % 29;
      automatic int w = (job % 3 == 0) ? 32 : 4 + $urandom % 29;
      automatic int base = $urandom % 2048;
      automatic int oy = 8 * ($urandom % ((h + 7) / 8));
      automatic int ox = 8 * ($urandom % ((w + 7) / 8));
      automatic int dens = 1 + $urandom % 4;
      automatic int nsp = 0, nrows = 0, cyc = 0;
      for (int r = 0; r < h; r++)
        for (int c = 0; c < 32; c++) mem[base + r][c] = ($urandom % 10 < dens);
      for (int r = -1; r <= 8; r++) begin
        if (oy + r >= 0 && oy + r < h) nrows++;
        for (int c = -1; c <= 8; c++) nsp += px(base, h, w, oy + r, ox + c);
      end
      @(negedge clk);
      row_base = 12'(base); img_h = 6'(h); img_w = 6'(w); ty0 = 6'(oy); tx0 = 6'(ox);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!win_valid) begin @(negedge clk); cyc++; end
      // hold the window for a few cycles: the SDUs must keep it
      repeat ($urandom % 4) begin @(negedge clk); stalls++; end
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) begin
          automatic int lst[$];
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              if (px(base, h, w, oy + y + ky - 1, ox + x + kx - 1)) lst.push_back(ky * 3 + kx);
          checks++;
          if (int'(window[y*8 + x].cnt) != lst.size()) begin
            failures++;
            if (failures < 10) $display("job %0d pos (%0d,%0d) cnt %0d exp %0d", job, y, x, window[y*8+x].cnt, lst.size());
          end else
            foreach (lst[i]) if (int'(window[y*8 + x].idx[i]) != lst[i]) begin
              failures++;
              if (failures < 10) $display("job %0d pos (%0d,%0d) idx %0d", job, y, x, i);
            end
        end
      checks++;
      if (cyc > 10 + nsp + 8) begin
        failures++;
        $display("job %0d took %0d cycles for %0d rows, %0d spikes", job, cyc, nrows, nsp);
      end
      maps++;
      win_ready = 1'b1;
      @(negedge clk);
      win_ready = 1'b0;
      checks++;
      if (!idle && job >= 0) begin
        @(negedge clk);
        if (!idle) failures++;
      end
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
