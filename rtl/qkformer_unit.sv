// qkformer_unit -- on-the-fly QKFormer attention in the write-back path.
//
// The QKFormer block multiplies the K spike map by a mask derived from the Q
// spike map. NEURAL needs no attention engine for this: both Q and K are
// ordinary convolutions on the PE array, and the attention is applied to the
// spike rows on their way from the array to the spiking buffer.
//
//   WB_NORMAL : the row is written unchanged.
//   WB_Q      : the row is not written; atten_reg[ch] |= OR of its spikes, so
//               after the Q convolution atten_reg[ch] tells whether channel ch
//               of Q fired anywhere (the OR feedback of atten_reg).
//   WB_K      : the row is written as spikes when atten_reg[ch] = 1 and as
//               zeros otherwise (the K_conv? select feeding atten_reg[ch] or a
//               constant 1 into the select of the output multiplexer, whose
//               other input is 0).
//
// atten_clr empties atten_reg before a Q convolution. Interface: one row per
// cycle in (in_valid with its channel, address, mask and data), the same row
// one cycle later out (out_valid = write enable). Q rows produce no output.
//
// From the paper: the OR across spikes of a channel into atten_reg, the
// per-channel 0/1 mask applied to K during write-back, and the multiplexers
// with their printed 1 / 0 inputs. This implementation's own: the row
// interface, the register stage, clearing atten_reg by command, and
// MAX_CH = 512 (the paper gives no channel count for the QKFormer block).
module qkformer_unit
  import neural_pkg::*;
#(
  parameter int unsigned RW     = ROW_W,
  parameter int unsigned AW     = 12,
  parameter int unsigned MAX_CH = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  wb_mode_e                  mode,
  input  logic                      atten_clr,
  input  logic                      in_valid,
  input  logic [$clog2(MAX_CH)-1:0] in_ch,
  input  logic [AW-1:0]             in_addr,
  input  logic [RW-1:0]             in_mask,
  input  logic [RW-1:0]             in_data,
  output logic                      out_valid,
  output logic [AW-1:0]             out_addr,
  output logic [RW-1:0]             out_mask,
  output logic [RW-1:0]             out_data,
  output logic [MAX_CH-1:0]         atten_reg,
  output logic                      masked_any    // a K row lost spikes this cycle
);

  logic row_or, sel;

  assign row_or = |(in_data & in_mask);
  // select of the output multiplexer: atten_reg bit for K, constant 1 otherwise
  assign sel    = (mode == WB_K) ? atten_reg[in_ch] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      atten_reg <= '0;
    end else if (atten_clr) begin
      atten_reg <= '0;
    end else if (in_valid && mode == WB_Q) begin
      atten_reg[in_ch] <= atten_reg[in_ch] | row_or;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_addr    <= '0;
      out_mask    <= '0;
      out_data    <= '0;
      masked_any  <= 1'b0;
    end else begin
      out_valid   <= in_valid && (mode != WB_Q);
      out_addr    <= in_addr;
      out_mask    <= in_mask;
      out_data    <= sel ? in_data : '0;
      masked_any  <= in_valid && (mode == WB_K) && !sel && row_or;
    end
  end

endmodule
