// pipesda -- pipelined sparse detection array (PipeSDA).
//
// PipeSDA turns one input channel of the input spike map into the
// convolution windows of one output tile, without touching the zeros: the
// event generator lists the spikes of the tile's input region (index
// generation), the event field generator converts each spike into the center
// position of its receptive field and broadcasts it (CP generation, CP map),
// and the TILE x TILE sparse detection units each keep the event list of their
// output position. When the channel is complete the lists of all SDUs leave
// as one window word (win_valid / win_ready, towards the S-FIFO) and the SDUs
// are cleared.
//
// Interface: start a job while idle (see event_generator for the job fields);
// the spike buffer read port has one cycle of latency. One job yields exactly
// one window word. Cost: about TILE+2 row reads plus one cycle per spike, and
// 3 cycles of pipeline latency.
//
// From the paper: the IG / CP generation / CP map stages, the SDU array of
// 64 units and its role of building the local convolution window for the
// PE array. This implementation's own: the job interface and the window word.
module pipesda
  import neural_pkg::*;
#(
  parameter int unsigned TILE = SDA_DIM,
  parameter int unsigned RW   = ROW_W,
  parameter int unsigned AW   = 12
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  output logic                             idle,
  input  logic [AW-1:0]                    row_base,
  input  logic [5:0]                       img_h,
  input  logic [5:0]                       img_w,
  input  logic [5:0]                       ty0,
  input  logic [5:0]                       tx0,
  output logic                             rd_en,
  output logic [AW-1:0]                    rd_addr,
  input  logic [RW-1:0]                    rd_data,
  output logic                             win_valid,
  input  logic                             win_ready,
  output event_list_t [TILE*TILE-1:0]      window,
  output logic                             cp_fire     // one spike mapped this cycle
);

  logic                         ev_valid, ev_ready, ev_last;
  logic signed [COORD_BITS-1:0] ev_r, ev_c;
  logic                         cp_valid, sdu_clr;
  logic signed [COORD_BITS-1:0] cp_y, cp_x;
  logic                         gen_idle;

  event_generator #(.TILE(TILE), .RW(RW), .AW(AW)) u_ig (
    .clk, .rst_n, .start, .idle(gen_idle),
    .row_base, .img_h, .img_w, .ty0, .tx0,
    .rd_en, .rd_addr, .rd_data,
    .ev_valid, .ev_ready, .ev_last, .ev_r, .ev_c
  );

  event_field_generator u_efg (
    .clk, .rst_n,
    .ev_valid, .ev_ready, .ev_last, .ev_r, .ev_c,
    .cp_valid, .cp_y, .cp_x,
    .win_valid, .win_ready, .sdu_clr
  );

  for (genvar y = 0; y < TILE; y++) begin : g_row
    for (genvar x = 0; x < TILE; x++) begin : g_col
      sdu #(.MY_Y(y), .MY_X(x)) u_sdu (
        .clk, .rst_n,
        .clr      (sdu_clr),
        .cp_valid,
        .cp_y,
        .cp_x,
        .events   (window[y*TILE + x])
      );
    end
  end

  // The detection array is idle once the generator is idle and no window is
  // still travelling down the pipeline.
  logic inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 inflight <= 1'b0;
    else if (start && gen_idle) inflight <= 1'b1;
    else if (sdu_clr)           inflight <= 1'b0;
  end
  assign idle    = gen_idle && !inflight;
  assign cp_fire = cp_valid;

endmodule
