// writeback -- serialises the spikes of a finished tile into spike buffer rows.
//
// The PE array ends a tile with OCP x TILE*TILE spikes at once. This helper
// walks them one row per cycle (output channel oc of the group, tile row y)
// and issues row writes for the spiking buffer: address dst_base + ch*img_h +
// ty0 + y with ch = group*OCP + oc, the TILE-bit row shifted to column tx0,
// and a bit mask that covers only this tile's columns inside the image. Rows
// of channels beyond n_oc or below the image are skipped. It follows the
// array's tile order (groups outer, then tile rows, then tile columns), so it
// needs no tile address from the array. spk_ready is pulsed when all rows of a
// tile have been issued; done rises after the last tile of the layer.
//
// The whole of this helper is this implementation's own: the paper only says
// that spikes generated by the PEs are written back to the spiking buffer.
module writeback
  import neural_pkg::*;
#(
  parameter int unsigned TILE   = SDA_DIM,
  parameter int unsigned OCP    = OC_PAR,
  parameter int unsigned RW     = ROW_W,
  parameter int unsigned AW     = 12,
  parameter int unsigned CHW    = 9
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [AW-1:0]            dst_base,
  input  logic [5:0]               img_h,
  input  logic [5:0]               img_w,
  input  logic [CHW:0]             n_oc,
  input  logic [7:0]               n_groups,
  input  logic [2:0]               tiles_x,
  input  logic [2:0]               tiles_y,
  output logic                     done,
  input  logic                     spk_valid,
  output logic                     spk_ready,
  input  logic [OCP-1:0][TILE*TILE-1:0] spikes,
  output logic                     row_valid,
  output logic [CHW-1:0]           row_ch,
  output logic [AW-1:0]            row_addr,
  output logic [RW-1:0]            row_mask,
  output logic [RW-1:0]            row_data
);

  logic [7:0]             grp;
  logic [2:0]             tx, ty;
  logic [$clog2(OCP)-1:0] oc;
  logic [$clog2(TILE)-1:0] y;
  logic                   active;
  logic [CHW:0]           ch;
  logic [6:0]             row_img, x0;
  logic [TILE-1:0]        bits;
  logic                   last_row;

  assign ch       = (CHW+1)'(grp) * (CHW+1)'(OCP) + (CHW+1)'(oc);
  assign row_img  = 7'(ty) * 7'(TILE) + 7'(y);
  assign x0       = 7'(tx) * 7'(TILE);
  assign last_row = (oc == ($clog2(OCP))'(OCP - 1)) && (y == ($clog2(TILE))'(TILE - 1));
  assign spk_ready = active && spk_valid && last_row;

  always_comb begin
    for (int i = 0; i < int'(TILE); i++) bits[i] = spikes[oc][int'(y) * int'(TILE) + i];
    row_valid = active && spk_valid && (ch < n_oc) && (row_img < 7'(img_h));
    row_ch    = ch[CHW-1:0];
    row_addr  = dst_base + AW'(ch) * AW'(img_h) + AW'(row_img);
    row_mask  = '0;
    row_data  = '0;
    for (int i = 0; i < int'(TILE); i++) begin
      if ((int'(x0) + i < int'(img_w)) && (int'(x0) + i < int'(RW))) begin
        row_mask[int'(x0) + i] = 1'b1;
        row_data[int'(x0) + i] = bits[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0;
      grp <= '0; tx <= '0; ty <= '0; oc <= '0; y <= '0;
    end else if (start) begin
      active <= 1'b1; done <= 1'b0;
      grp <= '0; tx <= '0; ty <= '0; oc <= '0; y <= '0;
    end else if (active && spk_valid) begin
      if (y != ($clog2(TILE))'(TILE - 1)) begin
        y <= y + 1'b1;
      end else begin
        y <= '0;
        if (oc != ($clog2(OCP))'(OCP - 1)) begin
          oc <= oc + 1'b1;
        end else begin
          oc <= '0;
          if (tx != tiles_x - 1'b1) tx <= tx + 1'b1;
          else begin
            tx <= '0;
            if (ty != tiles_y - 1'b1) ty <= ty + 1'b1;
            else begin
              ty <= '0;
              if (grp != n_groups - 1'b1) grp <= grp + 1'b1;
              else begin
                active <= 1'b0;
                done   <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

endmodule
