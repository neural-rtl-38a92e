// event_field_generator -- CP generation and CP map stages of the pipelined
// sparse detection array.
//
// Stage 1 (CP generation) turns each spike index (r, c) from the index buffer
// into the center position of its receptive field, CP = (r-1, c-1); CPs may
// be negative. Stage 2 (CP map) broadcasts the CP to the SDU array (cp_valid,
// cp_y, cp_x), where the SDUs inside CP + {0,1,2}^2 append the event. Both
// stages are registers, so one spike is handled per cycle once the pipeline is
// full.
//
// The end marker of a window travels with the data. When it reaches stage 2,
// win_valid rises and the pipeline freezes until win_ready (room in the
// S-FIFO): in the cycle with win_valid && win_ready the SDU contents are
// pushed and cleared (sdu_clr). This back-pressure is what makes the S-FIFO
// elastic towards the detection side.
//
// From the paper: the IG -> CP generation -> CP map pipeline and the CP
// arithmetic printed in the detection data-flow figure. This
// implementation's own: two register stages and the freeze-on-full rule.
module event_field_generator
  import neural_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // from the index buffer
  input  logic                         ev_valid,
  output logic                         ev_ready,
  input  logic                         ev_last,
  input  logic signed [COORD_BITS-1:0] ev_r,
  input  logic signed [COORD_BITS-1:0] ev_c,
  // broadcast to the SDU array
  output logic                         cp_valid,
  output logic signed [COORD_BITS-1:0] cp_y,
  output logic signed [COORD_BITS-1:0] cp_x,
  // window hand-off to the S-FIFO
  output logic                         win_valid,
  input  logic                         win_ready,
  output logic                         sdu_clr
);

  logic                         v1, last1, v2, last2;
  logic signed [COORD_BITS-1:0] y1, x1, y2, x2;
  logic                         advance;

  assign win_valid = v2 && last2;
  assign advance   = !(win_valid && !win_ready);
  assign ev_ready  = advance;
  assign sdu_clr   = win_valid && win_ready;
  assign cp_valid  = v2 && !last2;
  assign cp_y      = y2;
  assign cp_x      = x2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last1 <= 1'b0; y1 <= '0; x1 <= '0;
      v2 <= 1'b0; last2 <= 1'b0; y2 <= '0; x2 <= '0;
    end else if (advance) begin
      // stage 1: CP generation
      v1    <= ev_valid;
      last1 <= ev_last;
      y1    <= ev_r - COORD_BITS'(1);
      x1    <= ev_c - COORD_BITS'(1);
      // stage 2: CP map (drives the broadcast)
      v2    <= v1;
      last2 <= last1;
      y2    <= y1;
      x2    <= x1;
    end
  end

endmodule
