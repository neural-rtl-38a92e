// ttfs_filter -- window-to-time-to-first-spike (W2TTFS) filter.
//
// W2TTFS replaces the average pooling in front of the classifier. Instead of
// a real-valued average, each pooling window of the last spike map is
// reduced to vld_cnt, the number of spikes in it; the classifier then adds
// the unit-scaled weight (W / ws^2) vld_cnt times, which equals W times the
// window average without a multiplier or divider.
//
// The filter takes the spike map channel after channel, one row per beat
// (in_valid / in_ready, rows in order, n_ch channels of img_h x img_w), sums
// the spikes of each window column over ws = 2^log_ws rows and, at the end of
// every window row, offers the non-empty windows one at a time to the FC unit:
// feature index ch*(Ho*Wo) + wy*Wo + wx, vld_cnt, and scale_shift = 2*log_ws
// (the unit scale 1/ws^2 as a right shift). Windows with no spike are not
// sent. The handshake names i_vld / i_ready follow the paper's figure.
//
// From the paper: counting valid spikes per pooling window in channel order,
// the unit scale 1/ws^2 instead of tt/ws^2, and the i_vld / i_ready
// handshake with the FC unit. This implementation's own: the row interface,
// power-of-two window sizes and skipping empty windows.
module ttfs_filter
  import neural_pkg::*;
#(
  parameter int unsigned RW     = ROW_W,
  parameter int unsigned MAX_WO = 8,    // most windows per row
  parameter int unsigned FW     = 12    // feature index width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [9:0]        n_ch,
  input  logic [5:0]        img_h,
  input  logic [5:0]        img_w,
  input  logic [1:0]        log_ws,
  output logic              done,
  // spike rows in
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [RW-1:0]     in_row,
  // to the FC unit
  output logic              i_vld,
  input  logic              i_ready,
  output logic [FW-1:0]     feat,
  output logic [6:0]        vld_cnt,
  output logic [2:0]        scale_shift,
  output logic              skip          // an empty window is passed over
);

  typedef enum logic [1:0] {F_IDLE, F_ROWS, F_EMIT} fstate_e;
  fstate_e state;

  logic [9:0]   nch_q, ch;
  logic [5:0]   h_q, w_q, row;
  logic [1:0]   lws_q;
  logic [6:0]   cnt [MAX_WO];
  logic [3:0]   wx, wo;
  logic [$clog2(MAX_WO)-1:0] wxi;   // wx as an index of cnt
  logic [5:0]   wy, ho;
  logic [6:0]   add [MAX_WO];
  logic         win_row_end, last_row;

  assign wo          = 4'(w_q >> lws_q);
  assign ho          = h_q >> lws_q;
  assign wy          = row >> lws_q;
  assign win_row_end = ((row + 1'b1) & ((6'd1 << lws_q) - 1'b1)) == '0;
  assign last_row    = (row == h_q - 1'b1);
  assign in_ready    = (state == F_ROWS);
  assign wxi         = wx[$clog2(MAX_WO)-1:0];
  assign i_vld       = (state == F_EMIT) && (cnt[wxi] != '0);
  assign skip        = (state == F_EMIT) && (cnt[wxi] == '0);
  assign vld_cnt     = cnt[wxi];
  assign feat        = FW'(ch) * FW'(ho) * FW'(wo) + FW'(wy) * FW'(wo) + FW'(wx);
  assign scale_shift = {lws_q, 1'b0};

  // spikes of each window column in the incoming row
  always_comb begin
    for (int k = 0; k < int'(MAX_WO); k++) begin
      add[k] = '0;
      for (int b = 0; b < 8; b++)
        if (b < (1 << lws_q) && (k * (1 << lws_q) + b) < int'(RW) && k < int'(wo))
          add[k] = add[k] + 7'(in_row[k * (1 << lws_q) + b]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE; done <= 1'b0;
      nch_q <= '0; h_q <= '0; w_q <= '0; lws_q <= '0;
      ch <= '0; row <= '0; wx <= '0;
      for (int k = 0; k < int'(MAX_WO); k++) cnt[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        F_IDLE: if (start) begin
                  nch_q <= n_ch; h_q <= img_h; w_q <= img_w; lws_q <= log_ws;
                  ch <= '0; row <= '0; wx <= '0; done <= 1'b0;
                  for (int k = 0; k < int'(MAX_WO); k++) cnt[k] <= '0;
                  state <= F_ROWS;
                end
        F_ROWS: if (in_valid) begin
                  for (int k = 0; k < int'(MAX_WO); k++) cnt[k] <= cnt[k] + add[k];
                  if (win_row_end) begin
                    wx    <= '0;
                    state <= F_EMIT;
                  end else begin
                    row <= row + 1'b1;
                  end
                end
        F_EMIT: if (!i_vld || i_ready) begin
                  cnt[wxi] <= '0;
                  if (wx != wo - 1'b1) begin
                    wx <= wx + 1'b1;
                  end else begin
                    wx <= '0;
                    if (!last_row) begin
                      row   <= row + 1'b1;
                      state <= F_ROWS;
                    end else if (ch != nch_q - 1'b1) begin
                      row   <= '0;
                      ch    <= ch + 1'b1;
                      state <= F_ROWS;
                    end else begin
                      done  <= 1'b1;
                      state <= F_IDLE;
                    end
                  end
                end
        default: state <= F_IDLE;
      endcase
    end
  end

endmodule
