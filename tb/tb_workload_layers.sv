// tb_workload_layers -- layers of the evaluated networks at their real sizes.
//
// Runs the accelerator at its default parameters on single layers shaped like
// those of the CIFAR networks (32x32 images; channel counts from the usual
// VGG-11 / ResNet-11 definitions), checks every output bit against a golden
// 3x3 convolution and reports the cycles each layer takes:
//   W1  VGG-11 style layer, 16x16, 64 -> 128 channels;
//   W2  residual layer, 16x16, 64 channels + 64 shortcut channels -> 64;
//   W3  QKFormer Q and K layers, 16x16, 64 -> 64 channels;
//   FC  classifier on 512 channels of 2x2 (one 2x2 window each, 512 features),
//       10 classes used of the 100 built.
// Inputs are random spike maps of about 30 % density; the weights are random.
module tb_workload_layers;
  import neural_pkg::*;

  localparam int NC = 100, FI = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        host_wr_en, host_wr_sc, host_rd_en, host_rd_sc;
  logic [11:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  layer_cfg_t  cfg;
  logic        layer_start, layer_done, busy;
  logic        mem_req, mem_req_ready, mem_rsp_valid;
  logic [23:0] mem_addr;
  wword_t      mem_rsp_data;
  logic        p_choose, mp_valid;
  logic signed [PE_NUM-1:0][MP_BITS-1:0] input_mp, next_mp;
  logic        fcw_we, fc_start, fc_done;
  logic [8:0]  fcw_addr;
  logic [NC-1:0][7:0] fcw_data;
  logic [9:0]  fc_n_ch;
  logic [5:0]  fc_img_h, fc_img_w;
  logic [1:0]  fc_log_ws;
  logic [11:0] fc_src_base;
  logic [6:0]  class_idx;
  logic signed [23:0] logit [NC];
  stats_t      stats;

  neural_top dut (.*);
  offchip_mem #(.LATENCY(6)) u_mem (.clk, .req(mem_req), .req_ready(mem_req_ready), .addr(mem_addr),
                                    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0, mp_events = 0;
  logic [31:0] sm [4096];   // model of the spikemap buffer
  logic [31:0] sc [2048];   // model of the shortcutmap buffer
  bit          att [512];   // model of the attention register
  int          wptr = 0;    // next free off-chip word

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (mp_valid) mp_events++;

  task automatic host_write(input bit to_sc, input int a, input logic [31:0] d);
    @(negedge clk);
    host_wr_en = 1'b1; host_wr_sc = to_sc; host_addr = 12'(a); host_wdata = d;
    @(negedge clk);
    host_wr_en = 1'b0;
    if (to_sc) sc[a % 2048] = d; else sm[a] = d;
  endtask

  // random input channels written by the host
  task automatic host_map(input int base, input int n_ch, input int h, input int dens);
    for (int r = 0; r < n_ch * h; r++) begin
      automatic logic [31:0] d = '0;
      for (int b = 0; b < 32; b++) d[b] = ($urandom % 10 < dens);
      host_write(1'b0, base + r, d);
    end
  endtask

  function automatic bit in_px(input bit from_sc, input int base, input int h, input int w,
                               input int ch, input int r, input int c);
    if (r < 0 || r >= h || c < 0 || c >= w) return 0;
    return from_sc ? sc[(base + ch * h + r) % 2048][c] : sm[base + ch * h + r][c];
  endfunction

  // runs one convolution layer on the accelerator and on the model
  task automatic conv_layer(input string name, input int h, input int w,
                            input int n_main, input int src, input int n_sc, input int scb,
                            input int n_oc, input int dst, input bit wr_sc, input int vth,
                            input wb_mode_e mode, input bit clr, input int neg_from);
    automatic int ngrp = (n_oc + 3) / 4;
    automatic int nic = n_main + n_sc;
    automatic int wbase = wptr;
    automatic int tiles = ngrp * ((h + 7) / 8) * ((w + 7) / 8);
    automatic int t0 = stats.tiles, w0 = stats.windows;
    automatic logic signed [7:0]  wt [][][];   // [oc][ic][tap]
    automatic logic signed [15:0] bias [];
    automatic int errs = 0, spk = 0, cyc = 0;
    wt = new[ngrp * 4];
    bias = new[ngrp * 4];
    foreach (wt[o]) begin
      wt[o] = new[nic];
      foreach (wt[o][i]) begin
        wt[o][i] = new[9];
        foreach (wt[o][i][t])
          wt[o][i][t] = (o >= neg_from) ? -8'sd1 - 8'($urandom % 20) : 8'($urandom % 40) - 8'sd18;
      end
      bias[o] = 16'($urandom % 16) - 16'sd8;
    end
    // weight words: per group, one word per input channel, then the bias word
    for (int g = 0; g < ngrp; g++) begin
      for (int i = 0; i < nic; i++) begin
        automatic wword_t ww = '0;
        for (int o = 0; o < 4; o++)
          for (int t = 0; t < 9; t++) ww.payload[(o * 9 + t) * 8 +: 8] = wt[g * 4 + o][i][t];
        u_mem.write(wptr++, ww);
      end
      begin
        automatic wword_t ww = '0;
        ww.is_bias = 1'b1;
        for (int o = 0; o < 4; o++) ww.payload[o * 16 +: 16] = bias[g * 4 + o];
        u_mem.write(wptr++, ww);
      end
    end
    // golden result
    for (int o = 0; o < n_oc; o++)
      for (int y = 0; y < h; y++) begin
        automatic logic [31:0] row = sm[dst + o * h + y];
        automatic bit any = 0;
        for (int x = 0; x < w; x++) begin
          automatic int s = int'(bias[o]);
          automatic bit f;
          for (int i = 0; i < nic; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                if ((i < n_main) ? in_px(0, src, h, w, i, y + ky - 1, x + kx - 1)
                                 : in_px(1, scb, h, w, i - n_main, y + ky - 1, x + kx - 1))
                  s += int'(wt[o][i][ky * 3 + kx]);
          f = (s >>> 1) >= vth;
          any |= f;
          row[x] = f;
        end
        if (mode == WB_Q) begin
          att[o] = att[o] | any;
        end else begin
          if (mode == WB_K && !att[o]) for (int x = 0; x < w; x++) row[x] = 1'b0;
          for (int x = 0; x < w; x++) spk += row[x];
          sm[dst + o * h + y] = row;
          if (wr_sc) sc[(dst + o * h + y) % 2048] = row;
        end
      end
    // run it
    @(negedge clk);
    cfg = '0;
    cfg.img_h = 6'(h); cfg.img_w = 6'(w); cfg.n_ic_main = 10'(n_main); cfg.n_ic_sc = 10'(n_sc);
    cfg.n_oc = 10'(n_oc); cfg.src_base = 12'(src); cfg.sc_base = 12'(scb); cfg.dst_base = 12'(dst);
    cfg.wr_sc = wr_sc; cfg.vth = 16'(vth); cfg.mode = mode; cfg.atten_clr = clr; cfg.w_base = 24'(wbase);
    layer_start = 1'b1;
    @(negedge clk);
    layer_start = 1'b0;
    cyc = 1;
    while (!layer_done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (stats.tiles - t0 != tiles || stats.windows - w0 != tiles * nic) begin
      failures++;
      $display("%s: %0d tiles, %0d windows; expected %0d, %0d", name, stats.tiles - t0,
               stats.windows - w0, tiles, tiles * nic);
    end
    // read back everything the layer may have written (or, for Q, must not have)
    for (int o = 0; o < n_oc; o++)
      for (int y = 0; y < h; y++) begin
        automatic int a = dst + o * h + y;
        for (int s2 = 0; s2 < (wr_sc ? 2 : 1); s2++) begin
          @(negedge clk);
          host_rd_en = 1'b1; host_rd_sc = (s2 == 1); host_addr = 12'(a);
          @(negedge clk);
          host_rd_en = 1'b0;
          for (int x = 0; x < w; x++) begin
            automatic bit e = (s2 == 1) ? sc[a % 2048][x] : sm[a][x];
            checks++;
            if (host_rdata[x] != e) begin
              failures++; errs++;
              if (errs < 5) $display("%s: ch %0d row %0d col %0d (%s) got %0b expected %0b", name, o, y, x,
                                     s2 ? "shortcut" : "spikemap", host_rdata[x], e);
            end
          end
        end
      end
    $display("%s: %0d tiles, %0d jobs, %0d output spikes, %0d cycles, %0d mismatches", name, tiles,
             tiles * nic, spk, cyc, errs);
  endtask

  initial begin
    host_wr_en = 0; host_wr_sc = 0; host_rd_en = 0; host_rd_sc = 0; host_addr = '0; host_wdata = '0;
    cfg = '0; layer_start = 0; p_choose = 0; input_mp = '0;
    fcw_we = 0; fcw_addr = '0; fcw_data = '0; fc_start = 0; fc_n_ch = '0; fc_img_h = '0; fc_img_w = '0;
    fc_log_ws = '0; fc_src_base = '0;
    foreach (sm[a]) sm[a] = '0;
    foreach (sc[a]) sc[a] = '0;
    foreach (att[i]) att[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 4096; a++) host_write(1'b0, a, '0);
    for (int a = 0; a < 2048; a++) host_write(1'b1, a, '0);

    host_map(0, 64, 16, 3);
    conv_layer("W1 VGG 64->128 16x16", 16, 16, 64, 0, 0, 0, 128, 2048, 1'b0, 100, WB_NORMAL, 1'b0, 999);
    for (int r = 0; r < 64 * 16; r++) begin
      automatic logic [31:0] d = '0;
      for (int b = 0; b < 16; b++) d[b] = ($urandom % 10 < 3);
      host_write(1'b1, r, d);
    end
    conv_layer("W2 residual 64+64->64 16x16", 16, 16, 64, 2048, 64, 0, 64, 0, 1'b0, 150, WB_NORMAL, 1'b0, 999);
    conv_layer("W3 Q 64->64 16x16", 16, 16, 64, 0, 0, 0, 64, 1024, 1'b0, 80, WB_Q, 1'b1, 32);
    conv_layer("W3 K 64->64 16x16", 16, 16, 64, 0, 0, 0, 64, 1024, 1'b0, 60, WB_K, 1'b0, 999);

    // classifier: 512 channels of 2x2 at row 2048, one window per channel
    begin
      automatic logic [NC-1:0][7:0] fw [FI];
      automatic int sum [NC];
      automatic int best = 0, errs = 0, cyc = 0;
      host_map(2048, 512, 2, 3);
      foreach (sum[k]) sum[k] = 0;
      for (int a = 0; a < FI; a++) begin
        @(negedge clk);
        for (int k = 0; k < NC; k++) fw[a][k] = (k < 10) ? 8'($urandom) : 8'h80;
        fcw_we = 1'b1; fcw_addr = 9'(a); fcw_data = fw[a];
      end
      @(negedge clk);
      fcw_we = 1'b0;
      for (int c = 0; c < 512; c++) begin
        automatic int n = 0;
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++) n += sm[2048 + c * 2 + i][j];
        for (int k = 0; k < NC; k++) sum[k] += n * int'($signed(fw[c][k]));
      end
      for (int k = 1; k < NC; k++) if (sum[k] > sum[best]) best = k;
      fc_n_ch = 10'd512; fc_img_h = 6'd2; fc_img_w = 6'd2; fc_log_ws = 2'd1; fc_src_base = 12'd2048;
      fc_start = 1'b1;
      @(negedge clk);
      fc_start = 1'b0;
      while (!fc_done) begin @(negedge clk); cyc++; end
      checks++;
      if (int'(class_idx) != best || best >= 10) begin
        failures++; $display("FC class %0d expected %0d", class_idx, best);
      end
      for (int k = 0; k < NC; k++) begin
        checks++;
        if (int'(logit[k]) != (sum[k] >>> 2)) begin
          failures++; errs++;
          if (errs < 5) $display("FC logit %0d = %0d expected %0d", k, logit[k], sum[k] >>> 2);
        end
      end
      $display("FC 512 features: class %0d, %0d cycles, %0d logit mismatches", class_idx, cyc, errs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
