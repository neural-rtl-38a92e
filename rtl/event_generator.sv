// event_generator -- index generation (IG), first stage of the pipelined
// sparse detection array.
//
// For one input channel of one output tile it reads the rows of the input
// spike map that the tile's 3x3 receptive fields touch (tile rows -1..T, T =
// TILE, with a one-pixel halo, zero outside the image), and lists the
// coordinates of every spike in raster order into the index buffer, one spike
// per cycle. Reading and scanning overlap: the next row is read while the
// last spike of the current one is listed, so a job costs about one cycle per
// row plus one per spike. After the last spike an end marker (last = 1) is
// queued, so later stages know the window is complete.
//
// Interface: start with the job (row_base = buffer address of image row 0 of
// this channel, img_h / img_w, tile origin ty0 / tx0) while idle is high. The
// spike buffer read port has a latency of one cycle (rd_en, rd_addr ->
// rd_data). The index buffer output is valid/ready: ev_r / ev_c are tile
// relative, signed, -1..TILE.
//
// From the paper: generating the index of all valid spikes of the input
// spiking image and storing them in a buffer. This implementation's own: the
// row-wise scan with a one-spike-per-cycle priority encoder, the halo
// handling, the index buffer depth and the end marker.
module event_generator
  import neural_pkg::*;
#(
  parameter int unsigned TILE      = SDA_DIM,
  parameter int unsigned RW        = ROW_W,
  parameter int unsigned AW        = 12,
  parameter int unsigned IBUF_DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         idle,
  input  logic [AW-1:0]                row_base,
  input  logic [5:0]                   img_h,
  input  logic [5:0]                   img_w,
  input  logic [5:0]                   ty0,
  input  logic [5:0]                   tx0,
  // spike buffer read port
  output logic                         rd_en,
  output logic [AW-1:0]                rd_addr,
  input  logic [RW-1:0]                rd_data,
  // index buffer output
  output logic                         ev_valid,
  input  logic                         ev_ready,
  output logic                         ev_last,
  output logic signed [COORD_BITS-1:0] ev_r,
  output logic signed [COORD_BITS-1:0] ev_c
);

  localparam int unsigned SEG = TILE + 2;  // tile columns plus halo

  typedef struct packed {
    logic                         last;
    logic signed [COORD_BITS-1:0] r;
    logic signed [COORD_BITS-1:0] c;
  } ev_t;

  typedef enum logic [1:0] {G_IDLE, G_RUN, G_END} gstate_e;
  gstate_e state;

  logic [AW-1:0]               base_q;
  logic [5:0]                  h_q, w_q, ty_q, tx_q;
  logic signed [COORD_BITS-1:0] rrow;    // next row to read, tile relative, -1..TILE+1
  logic signed [COORD_BITS-1:0] prow;    // row whose data arrives this cycle
  logic signed [COORD_BITS-1:0] srow;    // row being scanned
  logic                        pend;     // a read was issued last cycle
  logic [SEG-1:0]              seg, seg_left;
  logic                        push, push_ready;
  ev_t                         push_d, pop_d;
  logic signed [7:0]           img_row;
  logic                        rows_left, row_in_img, issue;
  logic [$clog2(SEG)-1:0]      first;
  logic [SEG-1:0]              seg_in;

  assign idle       = (state == G_IDLE);
  assign rows_left  = (rrow <= $signed(COORD_BITS'(TILE)));
  assign img_row    = 8'(signed'({2'b00, ty_q})) + 8'(rrow);
  assign row_in_img = (img_row >= 0) && (img_row < 8'(signed'({2'b00, h_q})));
  // A row is read only when the scanner is sure to be free when its data
  // arrives: the current segment empties this cycle and no non-empty row is
  // being loaded.
  assign issue      = (state == G_RUN) && rows_left && row_in_img &&
                      (seg_left == '0) && !(pend && seg_in != '0);
  assign rd_en      = issue;
  assign rd_addr    = base_q + AW'(img_row);

  // Halo-extended row segment, zero outside the image.
  always_comb begin
    for (int j = 0; j < int'(SEG); j++) begin
      automatic int x = int'(tx_q) - 1 + j;
      seg_in[j] = (x >= 0) && (x < int'(w_q)) && (x < int'(RW)) ? rd_data[x] : 1'b0;
    end
  end

  // Lowest set bit of the remaining segment.
  always_comb begin
    first = '0;
    for (int j = int'(SEG) - 1; j >= 0; j--) if (seg[j]) first = ($clog2(SEG))'(j);
  end

  always_comb begin
    push   = 1'b0;
    push_d = '0;
    if (state == G_RUN && seg != '0) begin
      push     = 1'b1;
      push_d.r = srow;
      push_d.c = COORD_BITS'(first) - COORD_BITS'(1);
    end else if (state == G_END) begin
      push        = 1'b1;
      push_d.last = 1'b1;
    end
  end

  // segment left after this cycle's push
  always_comb begin
    seg_left = seg;
    if (push && !push_d.last && push_ready) seg_left[first] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= G_IDLE;
      base_q <= '0; h_q <= '0; w_q <= '0; ty_q <= '0; tx_q <= '0;
      rrow   <= '0; prow <= '0; srow <= '0; pend <= 1'b0;
      seg    <= '0;
    end else begin
      unique case (state)
        G_IDLE: if (start) begin
                  base_q <= row_base; h_q <= img_h; w_q <= img_w;
                  ty_q   <= ty0;      tx_q <= tx0;
                  rrow   <= -COORD_BITS'(1);
                  pend   <= 1'b0;
                  seg    <= '0;
                  state  <= G_RUN;
                end
        G_RUN: begin
                 // reader: rows outside the image are passed over in one cycle
                 if (rows_left && (!row_in_img || issue)) rrow <= rrow + 1'b1;
                 pend <= issue;
                 if (issue) prow <= rrow;
                 // scanner
                 if (pend) begin
                   seg  <= seg_in;          // seg_left is empty here
                   srow <= prow;
                 end else begin
                   seg  <= seg_left;
                 end
                 if (!rows_left && !pend && seg == '0) state <= G_END;
               end
        G_END:  if (push_ready) state <= G_IDLE;
        default: state <= G_IDLE;
      endcase
    end
  end

  // Index buffer between index generation and CP generation.
  elastic_fifo #(.WIDTH($bits(ev_t)), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .in_valid  (push),
    .in_ready  (push_ready),
    .in_data   (push_d),
    .out_valid (ev_valid),
    .out_ready (ev_ready),
    .out_data  (pop_d),
    .count     ()
  );

  assign ev_last = pop_d.last;
  assign ev_r    = pop_d.r;
  assign ev_c    = pop_d.c;

endmodule
