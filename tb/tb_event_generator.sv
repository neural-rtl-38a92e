// tb_event_generator -- self-checking testbench of index generation.
//
// A random spike map (random size up to 32x32) sits in a testbench memory
// with one-cycle read latency. For random tile origins the generator must list
// every spike of the tile's halo region (rows and columns -1..8 relative to
// the origin, inside the image) in raster order, followed by one end marker,
// under random back-pressure. Also checks that an empty region costs about one
// cycle per row (no index cycles).
module tb_event_generator;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, idle, rd_en, ev_valid, ev_ready, ev_last;
  logic [11:0] row_base, rd_addr;
  logic [5:0]  img_h, img_w, ty0, tx0;
  logic [31:0] rd_data;
  logic signed [COORD_BITS-1:0] ev_r, ev_c;

  logic [31:0] mem [4096];

  int checks = 0, failures = 0, spikes_total = 0;

  event_generator dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_r[$], exp_c[$];
  int got, cyc;

  initial begin
    start = 0; ev_ready = 0; row_base = '0; img_h = '0; img_w = '0; ty0 = '0; tx0 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int job = 0; job < 200; job++) begin
      automatic int h = (job % 4 == 0) ? 32 : 4 + $urandom % 29;
      automatic int w = (job % 4 == 0) ? 32 : 4 + $urandom % 29;
      automatic int dens = (job % 10 == 0) ? 0 : 1 + $urandom % 5;
      automatic int base = $urandom % 1024;
      automatic int oy = 8 * ($urandom % ((h + 7) / 8));
      automatic int ox = 8 * ($urandom % ((w + 7) / 8));
      for (int r = 0; r < h; r++) begin
        mem[base + r] = '0;
        for (int c = 0; c < w; c++) mem[base + r][c] = (dens != 0) && ($urandom % 8 < dens);
        for (int c = w; c < 32; c++) mem[base + r][c] = $urandom % 2;  // junk beyond width
      end
      exp_r.delete(); exp_c.delete();
      for (int r = -1; r <= 8; r++)
        for (int c = -1; c <= 8; c++)
          if (oy + r >= 0 && oy + r < h && ox + c >= 0 && ox + c < w && mem[base + oy + r][ox + c]) begin
            exp_r.push_back(r); exp_c.push_back(c);
          end
      spikes_total += exp_r.size();
      @(negedge clk);
      row_base = 12'(base); img_h = 6'(h); img_w = 6'(w); ty0 = 6'(oy); tx0 = 6'(ox);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      got = 0; cyc = 0;
      forever begin
        ev_ready = (dens == 0) ? 1'b1 : ($urandom % 3 != 0);
        #1;
        if (ev_valid && ev_ready) begin
          if (ev_last) begin
            checks++;
            if (got != exp_r.size()) begin
              failures++;
              if (failures < 10) $display("job %0d: %0d spikes, expected %0d", job, got, exp_r.size());
            end
            @(negedge clk);
            break;
          end
          checks++;
          if (got >= exp_r.size() || int'(ev_r) != exp_r[got] || int'(ev_c) != exp_c[got]) begin
            failures++;
            if (failures < 10) $display("job %0d ev %0d: (%0d,%0d)", job, got, ev_r, ev_c);
          end
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      ev_ready = 1'b0;
      if (dens == 0) begin
        // empty region: one cycle per row plus a few
        checks++;
        if (cyc > 10 + 6) begin
          failures++;
          $display("empty region took %0d cycles", cyc);
        end
      end
      while (!idle) @(negedge clk);
    end
    checks++;
    if (spikes_total == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
