// neural_top -- NEURAL spiking neural network accelerator, top level.
//
// NEURAL runs a single-time-step spiking CNN layer by layer. A convolution
// layer (3x3, stride 1, padding 1) is computed tile by tile: 8x8 output
// positions times 4 output channels at a time, accumulating over all input
// channels. Three parts work as a pipeline coupled only by elastic FIFOs:
//
//   PipeSDA (pipesda)  reads one input channel of the tile's input region
//                      from the spiking buffer, lists its spikes and builds
//                      the event list of every output position -> S-FIFO.
//   WMU (wmu)          fetches the weights of an output-channel group from
//                      off-chip memory into ping/pong buffers and replays
//                      them per tile -> W-FIFO.
//   EPA (epa)          starts an input channel as soon as both FIFOs hold a
//                      word; each PE updates its LIF neuron once per event.
//                      A bias word closes the tile: bias, fire, write-back.
//
// Spikes go back to the spiking buffer through writeback (row serialiser)
// and qkformer_unit (on-the-fly QKFormer: Q updates atten_reg, K is masked).
// Residual blocks read their shortcut input from the shortcutmap buffer as
// extra input channels of the same accumulation. After the last convolution
// the W2TTFS FC core (wtfc) reads the final spike map and classifies it.
//
// Host interface: spike buffer access while idle (host_*), a layer
// description (cfg, layer_t) with layer_start / layer_done, the FC weight
// load port and fc_start / fc_done, an off-chip weight memory port (mem_*),
// and the membrane-potential side port of the PE array (p_choose, input_mp,
// next_mp, mp_valid) for an external neuron buffer. stats counts the events
// of the data-event execution.
//
// The block structure and sizes follow the paper's architecture figure; the
// sequencing of tiles and channels, the layer description and the host
// interface are this implementation's own. Only stride-1 3x3 convolutions are
// supported (see the documentation for the other layer types).
module neural_top
  import neural_pkg::*;
#(
  parameter int unsigned NC    = 100,   // classes of the FC core
  parameter int unsigned FC_IN = 512    // FC input features
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host access to the spiking buffer (only while idle)
  input  logic                       host_wr_en,
  input  logic                       host_wr_sc,
  input  logic [11:0]                host_addr,
  input  logic [ROW_W-1:0]           host_wdata,
  input  logic                       host_rd_en,
  input  logic                       host_rd_sc,
  output logic [ROW_W-1:0]           host_rdata,
  // convolution layer
  input  layer_cfg_t                 cfg,
  input  logic                       layer_start,
  output logic                       layer_done,
  output logic                       busy,
  // off-chip weight memory
  output logic                       mem_req,
  input  logic                       mem_req_ready,
  output logic [23:0]                mem_addr,
  input  logic                       mem_rsp_valid,
  input  wword_t                     mem_rsp_data,
  // membrane potential side port of the PE array
  input  logic                       p_choose,
  input  logic signed [PE_NUM-1:0][MP_BITS-1:0] input_mp,
  output logic signed [PE_NUM-1:0][MP_BITS-1:0] next_mp,
  output logic                       mp_valid,
  // W2TTFS FC core
  input  logic                       fcw_we,
  input  logic [$clog2(FC_IN)-1:0]   fcw_addr,
  input  logic [NC-1:0][W_BITS-1:0]  fcw_data,
  input  logic                       fc_start,
  input  logic [9:0]                 fc_n_ch,
  input  logic [5:0]                 fc_img_h,
  input  logic [5:0]                 fc_img_w,
  input  logic [1:0]                 fc_log_ws,
  input  logic [11:0]                fc_src_base,
  output logic                       fc_done,
  output logic [$clog2(NC)-1:0]      class_idx,
  output logic signed [23:0]         logit [NC],
  // observation
  output stats_t                     stats
);

  localparam int unsigned AW = 12;

  // ------------------------------------------------------------------
  // layer sequencer: groups -> tile rows -> tile columns -> input channels
  // ------------------------------------------------------------------
  layer_cfg_t  cfg_q;
  logic        running;
  logic [7:0]  n_groups, grp;
  logic [2:0]  tiles_x, tiles_y, tx, ty;
  logic [10:0] n_ic, ic;
  logic        jobs_left, sda_start, sda_idle, rd_sc_q;
  logic [AW-1:0] job_base;
  logic        wb_done, wb_start, wmu_start, wb_armed;
  logic        qk_valid, wmu_idle;

  assign n_groups = 8'((cfg_q.n_oc + 10'(OC_PAR - 1)) / 10'(OC_PAR));
  assign tiles_x  = 3'((cfg_q.img_w + 6'(SDA_DIM - 1)) / 6'(SDA_DIM));
  assign tiles_y  = 3'((cfg_q.img_h + 6'(SDA_DIM - 1)) / 6'(SDA_DIM));
  assign n_ic     = 11'(cfg_q.n_ic_main) + 11'(cfg_q.n_ic_sc);
  assign job_base = (ic < 11'(cfg_q.n_ic_main))
                  ? cfg_q.src_base + AW'(ic) * AW'(cfg_q.img_h)
                  : cfg_q.sc_base  + AW'(ic - 11'(cfg_q.n_ic_main)) * AW'(cfg_q.img_h);
  assign sda_start = running && jobs_left && sda_idle;
  assign busy      = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0; running <= 1'b0; jobs_left <= 1'b0;
      grp <= '0; tx <= '0; ty <= '0; ic <= '0; rd_sc_q <= 1'b0;
      wb_start <= 1'b0; wmu_start <= 1'b0; layer_done <= 1'b0; wb_armed <= 1'b0;
    end else begin
      wb_start   <= 1'b0;
      wmu_start  <= 1'b0;
      layer_done <= 1'b0;
      if (!running) begin
        if (layer_start) begin
          cfg_q     <= cfg;
          running   <= 1'b1;
          jobs_left <= 1'b1;
          grp <= '0; tx <= '0; ty <= '0; ic <= '0;
          wb_start  <= 1'b1;
          wmu_start <= 1'b1;
        end
      end else begin
        if (sda_start) begin
          rd_sc_q <= (ic >= 11'(cfg_q.n_ic_main));
          if (ic != n_ic - 1'b1) ic <= ic + 1'b1;
          else begin
            ic <= '0;
            if (tx != tiles_x - 1'b1) tx <= tx + 1'b1;
            else begin
              tx <= '0;
              if (ty != tiles_y - 1'b1) ty <= ty + 1'b1;
              else begin
                ty <= '0;
                if (grp != n_groups - 1'b1) grp <= grp + 1'b1;
                else jobs_left <= 1'b0;
              end
            end
          end
        end
        if (wb_start) wb_armed <= 1'b1;
        // the layer ends once the last row has left the QKFormer register
        if (wb_armed && wb_done && !qk_valid && wmu_idle) begin
          wb_armed   <= 1'b0;
          running    <= 1'b0;
          layer_done <= 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // spiking buffer and its port multiplexing
  // ------------------------------------------------------------------
  logic          sda_rd_en, fc_rd_en, rd_en, rd_sc;
  logic [AW-1:0] sda_rd_addr, fc_rd_addr, rd_addr;
  logic [ROW_W-1:0] rd_data;
  logic [AW-1:0] qk_addr;
  logic [ROW_W-1:0] qk_mask, qk_data;
  logic          wr_sm, wr_sc;
  logic [AW-1:0] wr_addr;
  logic [ROW_W-1:0] wr_mask, wr_data;
  logic          fc_running;

  always_comb begin
    if (running) begin
      rd_en = sda_rd_en;  rd_sc = rd_sc_q;     rd_addr = sda_rd_addr;
    end else if (fc_running) begin
      rd_en = fc_rd_en;   rd_sc = 1'b0;        rd_addr = fc_rd_addr;
    end else begin
      rd_en = host_rd_en; rd_sc = host_rd_sc;  rd_addr = host_addr;
    end
    if (running) begin
      wr_sm   = qk_valid;
      wr_sc   = qk_valid && cfg_q.wr_sc;
      wr_addr = qk_addr;  wr_mask = qk_mask;   wr_data = qk_data;
    end else begin
      wr_sm   = host_wr_en && !host_wr_sc;
      wr_sc   = host_wr_en && host_wr_sc;
      wr_addr = host_addr; wr_mask = '1;       wr_data = host_wdata;
    end
  end
  assign host_rdata = rd_data;

  spiking_buffer #(.AW(AW)) u_sbuf (
    .clk, .rd_en, .rd_sc, .rd_addr, .rd_data,
    .wr_sm, .wr_sc, .wr_addr, .wr_mask, .wr_data
  );

  // ------------------------------------------------------------------
  // PipeSDA -> S-FIFO
  // ------------------------------------------------------------------
  logic                          win_valid, win_ready, cp_fire;
  event_list_t [SDU_NUM-1:0]     window, s_window;
  logic                          s_valid, s_pop;

  pipesda #(.AW(AW)) u_sda (
    .clk, .rst_n,
    .start    (sda_start),
    .idle     (sda_idle),
    .row_base (job_base),
    .img_h    (cfg_q.img_h),
    .img_w    (cfg_q.img_w),
    .ty0      (6'(ty) * 6'(SDA_DIM)),
    .tx0      (6'(tx) * 6'(SDA_DIM)),
    .rd_en    (sda_rd_en),
    .rd_addr  (sda_rd_addr),
    .rd_data,
    .win_valid, .win_ready, .window, .cp_fire
  );

  elastic_fifo #(.WIDTH(WINDOW_BITS), .DEPTH(S_FIFO_DEPTH)) u_sfifo (
    .clk, .rst_n,
    .in_valid  (win_valid), .in_ready (win_ready), .in_data (window),
    .out_valid (s_valid),   .out_ready(s_pop),     .out_data(s_window),
    .count     ()
  );

  // ------------------------------------------------------------------
  // WMU -> W-FIFO
  // ------------------------------------------------------------------
  logic   wmu_valid, wmu_ready, fetch_overlap;
  wword_t wmu_word, w_head;
  logic   w_valid, w_pop;

  wmu u_wmu (
    .clk, .rst_n,
    .start    (wmu_start),
    .idle     (wmu_idle),
    .w_base   (cfg_q.w_base),
    .n_groups,
    .n_ic,
    .n_tiles  (8'(tiles_x) * 8'(tiles_y)),
    .mem_req, .mem_req_ready, .mem_addr, .mem_rsp_valid, .mem_rsp_data,
    .out_valid (wmu_valid), .out_ready (wmu_ready), .out_data (wmu_word),
    .fetch_overlap
  );

  elastic_fifo #(.WIDTH(WWORD_BITS), .DEPTH(W_FIFO_DEPTH)) u_wfifo (
    .clk, .rst_n,
    .in_valid  (wmu_valid), .in_ready (wmu_ready), .in_data (wmu_word),
    .out_valid (w_valid),   .out_ready(w_pop),     .out_data(w_head),
    .count     ()
  );

  // ------------------------------------------------------------------
  // elastic PE array
  // ------------------------------------------------------------------
  logic                           spk_valid, spk_ready;
  logic [OC_PAR-1:0][SDU_NUM-1:0] spikes;
  logic                           wait_spikes, wait_weights, pe_busy;

  epa u_epa (
    .clk, .rst_n,
    .s_valid, .s_pop, .s_window,
    .w_valid, .w_pop, .w_is_bias (w_head.is_bias), .w_payload (w_head.payload),
    .vth      (cfg_q.vth),
    .p_choose, .input_mp,
    .spk_valid, .spk_ready, .spikes,
    .mp_valid, .next_mp,
    .stall_no_spikes  (wait_spikes),
    .stall_no_weights (wait_weights),
    .busy_any         (pe_busy)
  );

  // ------------------------------------------------------------------
  // write-back path with on-the-fly QKFormer
  // ------------------------------------------------------------------
  logic             row_valid;
  logic [8:0]       row_ch;
  logic [AW-1:0]    row_addr;
  logic [ROW_W-1:0] row_mask, row_data;
  logic             masked_any;

  writeback #(.AW(AW)) u_wb (
    .clk, .rst_n,
    .start    (wb_start),
    .dst_base (cfg_q.dst_base),
    .img_h    (cfg_q.img_h),
    .img_w    (cfg_q.img_w),
    .n_oc     (cfg_q.n_oc),
    .n_groups, .tiles_x, .tiles_y,
    .done     (wb_done),
    .spk_valid, .spk_ready, .spikes,
    .row_valid, .row_ch, .row_addr, .row_mask, .row_data
  );

  qkformer_unit #(.AW(AW)) u_qk (
    .clk, .rst_n,
    .mode      (cfg_q.mode),
    .atten_clr (wb_start && cfg_q.atten_clr),
    .in_valid  (row_valid),
    .in_ch     (row_ch),
    .in_addr   (row_addr),
    .in_mask   (row_mask),
    .in_data   (row_data),
    .out_valid (qk_valid),
    .out_addr  (qk_addr),
    .out_mask  (qk_mask),
    .out_data  (qk_data),
    .atten_reg (),
    .masked_any
  );

  // ------------------------------------------------------------------
  // W2TTFS FC core, fed from the spikemap buffer
  // ------------------------------------------------------------------
  logic       fc_dv, fc_in_ready, fc_issue, fc_skip;
  logic [9:0] fc_ch;
  logic [5:0] fc_row;
  logic       fc_rows_left;
  logic [9:0] fc_nch_q;
  logic [5:0] fc_h_q;
  logic [AW-1:0] fc_base_q;

  assign fc_issue   = fc_running && fc_rows_left && (!fc_dv || fc_in_ready);
  assign fc_rd_en   = fc_issue;
  assign fc_rd_addr = fc_base_q + AW'(fc_ch) * AW'(fc_h_q) + AW'(fc_row);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fc_running <= 1'b0; fc_dv <= 1'b0; fc_rows_left <= 1'b0;
      fc_ch <= '0; fc_row <= '0; fc_nch_q <= '0; fc_h_q <= '0; fc_base_q <= '0;
    end else begin
      if (fc_start && !fc_running && !running) begin
        fc_running   <= 1'b1;
        fc_rows_left <= 1'b1;
        fc_ch <= '0; fc_row <= '0;
        fc_nch_q <= fc_n_ch; fc_h_q <= fc_img_h; fc_base_q <= fc_src_base;
      end
      if (fc_issue) begin
        if (fc_row != fc_h_q - 1'b1) fc_row <= fc_row + 1'b1;
        else begin
          fc_row <= '0;
          if (fc_ch != fc_nch_q - 1'b1) fc_ch <= fc_ch + 1'b1;
          else fc_rows_left <= 1'b0;
        end
      end
      if (fc_issue)         fc_dv <= 1'b1;
      else if (fc_in_ready) fc_dv <= 1'b0;
      if (fc_done) fc_running <= 1'b0;
    end
  end

  wtfc #(.NC(NC), .FC_IN(FC_IN)) u_wtfc (
    .clk, .rst_n,
    .fcw_we, .fcw_addr, .fcw_data,
    .start    (fc_start && !fc_running && !running),
    .n_ch     (fc_n_ch),
    .img_h    (fc_img_h),
    .img_w    (fc_img_w),
    .log_ws   (fc_log_ws),
    .in_valid (fc_dv),
    .in_ready (fc_in_ready),
    .in_row   (rd_data),
    .done     (fc_done),
    .class_idx,
    .logit,
    .feature_skip (fc_skip)
  );

  // the PE array has drained and all weights have been consumed at layer end
  a_drained_at_end: assert property (@(posedge clk) disable iff (!rst_n)
                                     layer_done |-> !pe_busy && !w_valid && !s_valid);

  // ------------------------------------------------------------------
  // event counters
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      if (spk_valid && spk_ready)   stats.tiles         <= stats.tiles + 1;
      if (win_valid && win_ready)   stats.windows       <= stats.windows + 1;
      if (cp_fire)                  stats.events        <= stats.events + 1;
      if (win_valid && !win_ready)  stats.sfifo_full    <= stats.sfifo_full + 1;
      if (wait_spikes)              stats.wait_spikes   <= stats.wait_spikes + 1;
      if (wait_weights)             stats.wait_weights  <= stats.wait_weights + 1;
      if (fetch_overlap)            stats.fetch_overlap <= stats.fetch_overlap + 1;
      if (masked_any)               stats.masked_rows   <= stats.masked_rows + 1;
      if (fc_skip)                  stats.fc_skips      <= stats.fc_skips + 1;
    end
  end

endmodule
