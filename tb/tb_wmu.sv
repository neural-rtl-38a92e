// tb_wmu -- self-checking testbench of the weight management unit.
//
// The off-chip memory model holds layers whose word at address a is tagged
// with a. For random layer shapes (groups, input channels, tiles) the W-FIFO
// stream must be, for each group g and each tile, the words
// base + g*(n_ic+1) + 0 .. n_ic in order (the last one a bias word), under
// random output back-pressure. Checks that every off-chip word is fetched once
// only and that the next group was fetched while the current one was being
// replayed (ping/pong overlap).
module tb_wmu;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, idle, mem_req, mem_req_ready, mem_rsp_valid, out_valid, out_ready, fetch_overlap;
  logic [23:0] w_base, mem_addr;
  logic [7:0]  n_groups, n_tiles;
  logic [10:0] n_ic;
  wword_t mem_rsp_data, out_data;

  int checks = 0, failures = 0, overlaps = 0, fetches = 0;

  wmu dut (.*);
  offchip_mem #(.LATENCY(3)) u_mem (.clk, .req(mem_req), .req_ready(mem_req_ready), .addr(mem_addr),
                                    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (fetch_overlap) overlaps++;
    if (mem_req && mem_req_ready) fetches++;
  end

  initial begin
    start = 0; out_ready = 0; w_base = '0; n_groups = '0; n_tiles = '0; n_ic = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 12; l++) begin
      automatic int ng = 1 + $urandom % 4;
      automatic int nic = 1 + $urandom % 40;
      automatic int nt = 1 + $urandom % 4;
      automatic int base = $urandom % 1000;
      automatic int f0 = fetches;
      if (l == 0) begin ng = 3; nic = 30; nt = 4; end
      // rewrite the layer's words: the last word of each group is a bias word
      for (int g = 0; g < ng; g++)
        for (int i = 0; i <= nic; i++) begin
          automatic wword_t w = '0;
          automatic int a = base + g * (nic + 1) + i;
          w.payload[23:0] = 24'(a);
          w.payload[200 +: 24] = 24'(a * 7);
          w.is_bias = (i == nic);
          u_mem.write(a, w);
        end
      @(negedge clk);
      w_base = 24'(base); n_groups = 8'(ng); n_ic = 11'(nic); n_tiles = 8'(nt);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int g = 0; g < ng; g++)
        for (int t = 0; t < nt; t++)
          for (int i = 0; i <= nic; i++) begin
            automatic int a = base + g * (nic + 1) + i;
            do begin
              out_ready = ($urandom % 3 != 0);
              #1;
              if (!(out_valid && out_ready)) @(negedge clk);
            end while (!(out_valid && out_ready));
            checks++;
            if (int'(out_data.payload[23:0]) != a || int'(out_data.payload[200 +: 24]) != a * 7 ||
                out_data.is_bias != (i == nic)) begin
              failures++;
              if (failures < 10) $display("layer %0d g %0d t %0d i %0d: got %0d exp %0d", l, g, t, i,
                                          out_data.payload[23:0], a);
            end
            @(negedge clk);
          end
      out_ready = 1'b0;
      repeat (3) @(negedge clk);
      checks++;
      if (!idle || fetches - f0 != ng * (nic + 1)) begin
        failures++;
        $display("layer %0d: idle %0b fetched %0d words, expected %0d", l, idle, fetches - f0, ng * (nic + 1));
      end
    end
    checks++;
    if (overlaps == 0) begin failures++; $display("no fetch during replay"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
