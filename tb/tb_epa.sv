// tb_epa -- self-checking testbench of the elastic PE array (256 PEs).
//
// The testbench plays the heads of the S-FIFO and W-FIFO, each with its own
// random gaps, so the array sees weights without windows and windows without
// weights. Every tile has 1..4 input channels of random 3x3 kernels (4 output
// channels) and random event lists (64 positions), then a bias word. The
// model sums, per PE, the weights selected by its event list plus input_mp
// (on tiles with p_choose) plus the bias, and expects spike = sum/2 >= Vth and
// next_mp = spike ? 0 : sum. It also checks that each input channel occupies
// the array for 1 + max(vld_cnt) cycles and that both stall kinds happened.
module tb_epa;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NP = 64, OC = 4;

  logic s_valid, s_pop, w_valid, w_pop, w_is_bias, p_choose, spk_valid, spk_ready, mp_valid;
  logic stall_no_spikes, stall_no_weights, busy_any;
  event_list_t [NP-1:0] s_window;
  logic [OC*9*8-1:0] w_payload;
  logic signed [15:0] vth;
  logic signed [OC*NP-1:0][15:0] input_mp, next_mp;
  logic [OC-1:0][NP-1:0] spikes;

  int checks = 0, failures = 0, n_nospk = 0, n_nowt = 0, fired = 0;

  epa dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // queues of FIFO words
  event_list_t [NP-1:0] sq[$];
  logic [OC*9*8:0]      wq[$];   // {is_bias, payload}
  int                   maxcnt_q[$];
  int                   exp_sum [OC*NP];
  int                   tiles_exp[$];

  always @(posedge clk) begin
    if (stall_no_spikes)  n_nospk++;
    if (stall_no_weights) n_nowt++;
  end

  // head drivers with random gaps
  bit s_gap, w_gap;
  always @(negedge clk) begin
    s_gap = ($urandom % 4 == 0);
    w_gap = ($urandom % 4 == 0);
    s_valid   = (sq.size() > 0) && !s_gap;
    s_window  = (sq.size() > 0) ? sq[0] : '0;
    w_valid   = (wq.size() > 0) && !w_gap;
    {w_is_bias, w_payload} = (wq.size() > 0) ? wq[0] : '0;
  end
  always @(posedge clk) begin
    if (s_pop) void'(sq.pop_front());
    if (w_pop) void'(wq.pop_front());
  end

  // per-channel occupancy check: cycles from a load to the next possible load
  int ld_time, ld_max[$];
  always @(posedge clk) if (rst_n) begin
    if (s_pop) begin
      ld_time = 0;
      ld_max.push_back(maxcnt_q.pop_front());
    end
  end
  always @(negedge clk) if (ld_max.size() > 0) begin
    if (busy_any) ld_time++;
    else begin
      checks++;
      if (ld_time != ld_max[0]) begin
        failures++;
        if (failures < 10) $display("busy for %0d cycles, max vld_cnt %0d", ld_time, ld_max[0]);
      end
      void'(ld_max.pop_front());
    end
  end

  initial begin
    spk_ready = 0; p_choose = 0; vth = 16'sd30; input_mp = '0;
    s_valid = 0; w_valid = 0; s_window = '0; w_payload = '0; w_is_bias = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      automatic int nic = 1 + $urandom % 4;
      automatic logic [OC*9*8-1:0] pay;
      // the array loads input_mp at the start of this tile
      for (int p = 0; p < OC*NP; p++) begin
        input_mp[p] = 16'($urandom % 32) - 16'sd16;
        exp_sum[p] = p_choose ? int'($signed(input_mp[p])) : 0;
      end
      for (int c = 0; c < nic; c++) begin
        automatic event_list_t [NP-1:0] win;
        automatic int mx = 0;
        pay = '0;
        for (int i = 0; i < OC*9; i++) pay[i*8 +: 8] = 8'($urandom % 24) - 8'd8;
        for (int p = 0; p < NP; p++) begin
          automatic int n = ($urandom % 3 == 0) ? 0 : $urandom % 10;
          automatic int k = 0;
          win[p] = '0;
          for (int tap = 0; tap < 9 && k < n; tap++)
            if ($urandom % 2) begin win[p].idx[k] = 4'(tap); k++; end
          win[p].cnt = 4'(k);
          if (k > mx) mx = k;
          for (int o = 0; o < OC; o++)
            for (int e = 0; e < k; e++)
              exp_sum[o*NP + p] += int'($signed(pay[(o*9 + int'(win[p].idx[e]))*8 +: 8]));
        end
        sq.push_back(win);
        wq.push_back({1'b0, pay});
        maxcnt_q.push_back(mx);
      end
      pay = '0;
      for (int o = 0; o < OC; o++) begin
        automatic logic signed [15:0] b = 16'($urandom % 20) - 16'sd10;
        pay[o*16 +: 16] = b;
        for (int p = 0; p < NP; p++) exp_sum[o*NP + p] += int'(b);
      end
      wq.push_back({1'b1, pay});
      // wait for the tile
      @(negedge clk);
      while (!mp_valid) @(negedge clk);
      for (int p = 0; p < OC*NP; p++) begin
        automatic bit s = (exp_sum[p] >>> 1) >= 30;
        checks++;
        if (next_mp[p] != (s ? 16'sd0 : 16'(exp_sum[p]))) begin
          failures++;
          if (failures < 10) $display("tile %0d pe %0d next_mp %0d sum %0d", t, p, next_mp[p], exp_sum[p]);
        end
      end
      @(negedge clk);
      while (!spk_valid) @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      for (int p = 0; p < OC*NP; p++) begin
        automatic bit s = (exp_sum[p] >>> 1) >= 30;
        checks++;
        if (spikes[p / NP][p % NP] != s) failures++;
        if (s) fired++;
      end
      spk_ready = 1'b1;
      @(negedge clk);
      spk_ready = 1'b0;
      p_choose = (t % 2 == 0);
    end
    checks++;
    if (n_nospk == 0 || n_nowt == 0 || fired == 0) begin
      failures++;
      $display("coverage: no-spike stalls %0d, no-weight stalls %0d, spikes %0d", n_nospk, n_nowt, fired);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
