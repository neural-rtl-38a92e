// tb_neural_top -- end-to-end testbench of the NEURAL accelerator (full size).
//
// Runs a small network through the top level at its default parameters
// (256 PEs, 64 SDUs, 640 B S-FIFO, 1 KB W-FIFO, 100-class FC core), comparing
// every output spike with a golden model kept in the testbench:
//   L1  normal 3x3 layer, 32x32, 3 -> 6 channels, also copied to the
//       shortcutmap buffer; weights arrive slowly so the PE array starves
//       and the S-FIFO fills up;
//   L2  residual layer: 6 new channels from the spikemap plus the 6 shortcut
//       channels of L1, 32x32 -> 4 channels;
//   L3  normal layer on a 20x12 map (partial tiles), 2 -> 5 channels;
//   L4  QKFormer Q layer, 16x16, 2 -> 8 channels: writes nothing, fills the
//       attention register (half of the channels have negative weights and
//       never fire);
//   L5  QKFormer K layer on the same input: rows of channels without a Q
//       spike are written as zeros;
//   FC  W2TTFS + FC on the K output (8 channels of 8x8 windows of 2x2 = 512
//       features), checked for all 100 logits and the class index.
// The golden convolution is 3x3, stride 1, zero padding, taps ky*3+kx,
// spike = (sum of weights of spiking inputs + bias) / 2 >= Vth.
// At the end every mechanism must have happened at least once: windows,
// events, S-FIFO full, PE array waiting for spikes and for weights, weight
// fetch overlapping replay, masked K rows, skipped empty FC windows, and the
// membrane-potential port.
module tb_neural_top;
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
    repeat (2000000) @(posedge clk);
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
    automatic int errs = 0, spk = 0;
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
    while (!layer_done) @(negedge clk);
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
    $display("%s: %0d tiles, %0d output spikes, %0d mismatches", name, tiles, spk, errs);
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
    // clear both buffers so that the model and the hardware start equal
    for (int a = 0; a < 4096; a++) host_write(1'b0, a, '0);
    for (int a = 0; a < 2048; a++) host_write(1'b1, a, '0);

    // L1: slow weight memory -> the PE array waits for weights, the S-FIFO fills
    host_map(0, 3, 32, 3);
    u_mem.extra_delay = 300;
    conv_layer("L1 normal", 32, 32, 3, 0, 0, 0, 6, 200, 1'b1, 8, WB_NORMAL, 1'b0, 99);
    u_mem.extra_delay = 0;
    // L2: residual; main input is a fresh map, the shortcut channels are L1's copy
    // in the shortcutmap buffer
    host_map(200, 6, 32, 3);   // overwrites L1's spikemap copy only
    conv_layer("L2 residual", 32, 32, 6, 200, 6, 200, 4, 600, 1'b0, 12, WB_NORMAL, 1'b0, 99);
    // L3: partial tiles
    host_map(1000, 2, 20, 4);
    conv_layer("L3 20x12", 20, 12, 2, 1000, 0, 0, 5, 1100, 1'b0, 4, WB_NORMAL, 1'b0, 99);
    // L4 / L5: QKFormer Q then K on the same 16x16 input
    host_map(1300, 2, 16, 4);
    conv_layer("L4 Q", 16, 16, 2, 1300, 0, 0, 8, 1400, 1'b0, 4, WB_Q, 1'b1, 4);
    conv_layer("L5 K", 16, 16, 2, 1300, 0, 0, 8, 1600, 1'b0, 2, WB_K, 1'b0, 99);

    // FC on the K output: 8 channels x 8x8 windows of 2x2 = 512 features
    begin
      automatic logic [NC-1:0][7:0] fw [FI];
      automatic int sum [NC];
      automatic int best = 0, errs = 0;
      foreach (sum[k]) sum[k] = 0;
      for (int a = 0; a < FI; a++) begin
        @(negedge clk);
        for (int k = 0; k < NC; k++) fw[a][k] = 8'($urandom);
        fcw_we = 1'b1; fcw_addr = 9'(a); fcw_data = fw[a];
      end
      @(negedge clk);
      fcw_we = 1'b0;
      for (int c = 0; c < 8; c++)
        for (int wy = 0; wy < 8; wy++)
          for (int wx = 0; wx < 8; wx++) begin
            automatic int n = 0;
            for (int i = 0; i < 2; i++)
              for (int j = 0; j < 2; j++) n += sm[1600 + c * 16 + wy * 2 + i][wx * 2 + j];
            for (int k = 0; k < NC; k++) sum[k] += n * int'($signed(fw[c * 64 + wy * 8 + wx][k]));
          end
      for (int k = 1; k < NC; k++) if (sum[k] > sum[best]) best = k;
      fc_n_ch = 10'd8; fc_img_h = 6'd16; fc_img_w = 6'd16; fc_log_ws = 2'd1; fc_src_base = 12'd1600;
      fc_start = 1'b1;
      @(negedge clk);
      fc_start = 1'b0;
      while (!fc_done) @(negedge clk);
      checks++;
      if (int'(class_idx) != best) begin failures++; $display("FC class %0d expected %0d", class_idx, best); end
      for (int k = 0; k < NC; k++) begin
        checks++;
        if (int'(logit[k]) != (sum[k] >>> 2)) begin
          failures++; errs++;
          if (errs < 5) $display("FC logit %0d = %0d expected %0d", k, logit[k], sum[k] >>> 2);
        end
      end
      $display("FC: class %0d, %0d logit mismatches", class_idx, errs);
    end

    $display("stats: tiles %0d windows %0d events %0d sfifo_full %0d wait_spikes %0d wait_weights %0d",
             stats.tiles, stats.windows, stats.events, stats.sfifo_full, stats.wait_spikes, stats.wait_weights);
    $display("       fetch_overlap %0d masked_rows %0d fc_skips %0d mp_valid %0d",
             stats.fetch_overlap, stats.masked_rows, stats.fc_skips, mp_events);
    checks++;
    if (stats.windows == 0 || stats.events == 0 || stats.sfifo_full == 0 || stats.wait_spikes == 0 ||
        stats.wait_weights == 0 || stats.fetch_overlap == 0 || stats.masked_rows == 0 ||
        stats.fc_skips == 0 || mp_events == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
