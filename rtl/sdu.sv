// sdu -- sparse detection unit, one per output position of a tile.
//
// Each SDU owns one output position (MY_Y, MY_X) of the 8x8 tile and builds
// the convolution window of that position as an event list: the indexes of
// the 3x3 kernel taps whose input pixel carried a spike, in arrival order,
// followed by their count vld_cnt.
//
// The array broadcasts the center position (CP) of every input spike's
// receptive field, one per cycle (cp_valid, cp_y, cp_x, signed, tile
// relative). The CP of an input spike at (r, c) is (r-1, c-1), and the
// spike reaches the output positions CP + (dy, dx), dy, dx in 0..2. The
// SDU's comparator tests whether its own position lies in that region (the
// "diffusion" of the CP to its neighbours) and, if so, appends kernel tap
// (2-dy)*3 + (2-dx), i.e. weight w[ky][kx] with ky = r - y + 1. clr empties
// the list (one cycle, when the window has been handed to the S-FIFO).
// An SDU whose position is outside the tile never exists as hardware: a CP
// off the tile edge simply matches no physical SDU, which plays the role of
// the paper's virtual SDUs.
//
// From the paper: the comparator, the event FIFO ending in vld_cnt, and the
// CP numbers of the detection data-flow figure ((0,1) -> (-1,0),
// (0,4) -> (-1,3), (1,3) -> (0,2), (3,2) -> (2,1)). This implementation's
// own: the tap numbering and the range test as the comparator's function.
module sdu
  import neural_pkg::*;
#(
  parameter int MY_Y = 0,
  parameter int MY_X = 0
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          cp_valid,
  input  logic signed [COORD_BITS-1:0]  cp_y,
  input  logic signed [COORD_BITS-1:0]  cp_x,
  output event_list_t                   events
);

  logic signed [COORD_BITS:0] dy, dx;
  logic                       hit;
  logic [KIDX_BITS-1:0]       tap;

  always_comb begin
    dy  = (COORD_BITS+1)'(MY_Y) - (COORD_BITS+1)'(cp_y);
    dx  = (COORD_BITS+1)'(MY_X) - (COORD_BITS+1)'(cp_x);
    hit = cp_valid && (dy >= 0) && (dy <= 2) && (dx >= 0) && (dx <= 2);
    tap = KIDX_BITS'(((COORD_BITS+1)'(2) - dy) * (COORD_BITS+1)'(3) + ((COORD_BITS+1)'(2) - dx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      events <= '0;
    end else if (clr) begin
      events <= '0;
    end else if (hit && (events.cnt < KCNT_BITS'(KTAPS))) begin
      events.idx[events.cnt] <= tap;
      events.cnt             <= events.cnt + 1'b1;
    end
  end

endmodule
