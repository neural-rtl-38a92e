// tb_pe -- self-checking testbench of one processing element.
//
// For random tiles of several input channels it loads nine random weights and
// a random event list per channel, waits for busy to fall, and checks that
// the PE took exactly vld_cnt cycles, that Vmem equals the sum of the selected
// weights (plus the bias at the end), and that the registered spike follows
// Vmem/2 >= Vth.
module tb_pe;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld, busy, tile_load, p_choose, bias_en, fire_en, spike_q;
  logic [KTAPS-1:0][7:0] weights_in;
  event_list_t events_in;
  logic signed [15:0] input_mp, bias, vth, next_mp, vmem;

  int checks = 0, failures = 0, spikes = 0, empties = 0;

  pe dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  int model, cyc, n;

  initial begin
    {ld, tile_load, p_choose, bias_en, fire_en} = '0;
    weights_in = '0; events_in = '0; input_mp = '0; bias = '0; vth = 16'sd40;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      // start the tile
      @(negedge clk);
      tile_load = 1'b1; p_choose = (t % 3 == 0); input_mp = 16'($urandom % 64) - 16'sd32;
      model = p_choose ? int'(input_mp) : 0;
      @(negedge clk);
      tile_load = 1'b0;
      for (int c = 0; c < 1 + ($urandom % 5); c++) begin
        for (int k = 0; k < 9; k++) weights_in[k] = 8'($urandom % 64) - 8'd20;
        n = $urandom % 10;
        if (n == 0) empties++;
        // ascending distinct taps, as the SDUs produce them
        events_in = '0;
        events_in.cnt = 4'(n);
        begin
          automatic int sel[$];
          for (int k = 0; k < 9; k++) sel.push_back(k);
          sel.shuffle();
          sel = sel[0:n-1];
          if (n == 0) sel.delete();
          sel.sort();
          foreach (sel[k]) begin
            events_in.idx[k] = 4'(sel[k]);
            model += int'($signed(weights_in[sel[k]]));
          end
        end
        ld = 1'b1;
        @(negedge clk);
        ld = 1'b0;
        cyc = 0;
        while (busy) begin cyc++; @(negedge clk); end
        check(cyc == n, $sformatf("cycles %0d != vld_cnt %0d", cyc, n));
        check(vmem == 16'(model), $sformatf("vmem %0d != %0d", vmem, model));
      end
      // bias and fire
      bias = 16'($urandom % 40) - 16'sd10;
      bias_en = 1'b1;
      @(negedge clk);
      bias_en = 1'b0;
      model += int'(bias);
      check(vmem == 16'(model), "vmem after bias");
      fire_en = 1'b1;
      @(negedge clk);
      fire_en = 1'b0;
      check(spike_q == ((model >>> 1) >= 40), $sformatf("spike for vmem %0d", model));
      if (spike_q) spikes++;
      check(vmem == (spike_q ? 16'sd0 : 16'(model)), "reset after fire");
    end
    check(spikes > 0 && spikes < 200 && empties > 0, "coverage of spikes and empty lists");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
