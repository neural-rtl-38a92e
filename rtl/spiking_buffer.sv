// spiking_buffer -- on-chip store of binary spike feature maps.
//
// Two memories of ROW_W-bit words, one word per feature-map row of one
// channel (address = region base + channel * height + row; bit x is column
// x). The spikemap buffer holds the input and the output map of the layer in
// progress, in two regions chosen by the address; the shortcutmap buffer keeps
// the input of a residual block for its shortcut convolution while the block's
// main path overwrites the spikemap buffer.
//
// Ports: one read port (rd_en, rd_sc selects the shortcutmap buffer, rd_addr;
// rd_data one cycle later) and one write port with a bit mask (wr_mask), so a
// tile only changes its own columns. wr_sm and wr_sc choose the target(s); the
// shortcutmap buffer uses the low address bits.
//
// From the paper: the Spiking Buffer with a Spikemap Buffer and a
// Shortcutmap Buffer feeding the detection array and written back from the PE
// array. This implementation's own: the row-per-word layout, the sizes and
// the bit-masked write.
module spiking_buffer
  import neural_pkg::*;
#(
  parameter int unsigned RW       = ROW_W,
  parameter int unsigned SM_DEPTH = 4096,  // 2 regions of 64 channels x 32 rows
  parameter int unsigned SC_DEPTH = 2048,  // 64 channels x 32 rows
  parameter int unsigned AW       = $clog2(SM_DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic          rd_sc,
  input  logic [AW-1:0] rd_addr,
  output logic [RW-1:0] rd_data,
  input  logic          wr_sm,
  input  logic          wr_sc,
  input  logic [AW-1:0] wr_addr,
  input  logic [RW-1:0] wr_mask,
  input  logic [RW-1:0] wr_data
);

  localparam int unsigned SCW = $clog2(SC_DEPTH);

  logic [RW-1:0] spikemap  [SM_DEPTH];
  logic [RW-1:0] shortcut  [SC_DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= rd_sc ? shortcut[rd_addr[SCW-1:0]] : spikemap[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_sm)
      for (int b = 0; b < int'(RW); b++)
        if (wr_mask[b]) spikemap[wr_addr][b] <= wr_data[b];
    if (wr_sc)
      for (int b = 0; b < int'(RW); b++)
        if (wr_mask[b]) shortcut[wr_addr[SCW-1:0]][b] <= wr_data[b];
  end

endmodule
