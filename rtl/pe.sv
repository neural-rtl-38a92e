// pe -- processing element of the elastic PE array.
//
// A PE computes the membrane potential of one output neuron (one output
// position of one output channel). For each input channel it receives, in one
// cycle (ld), the nine 3x3 kernel weights (weight buffer a..i) and the event
// list of its output position: the kernel-tap indexes of the input spikes that
// hit its receptive field, plus their number vld_cnt. It then reads the event
// FIFO in order, one event per cycle, fetches weight[idx] from the weight
// buffer and hands it to the LIF unit, so an input channel costs vld_cnt
// cycles and a PE with vld_cnt = 0 does nothing. busy is high while events
// remain. Loading a new list while busy is not allowed (the array waits for
// all PEs to go idle).
//
// tile_load, bias_en and fire_en are broadcast by the array: tile_load starts
// an output tile (Vmem <= input_mp or 0), bias_en adds the bias, fire_en
// compares with the threshold and registers the spike in spike_q.
//
// The weight buffer of nine entries and the event FIFO that ends with vld_cnt
// follow the PE inset of the architecture figure (events 0,2,3,7 selecting
// weights a,c,d,h there). Loading a whole list in one cycle is this
// implementation's choice.
module pe
  import neural_pkg::*;
#(
  parameter int unsigned WB  = W_BITS,
  parameter int unsigned MPB = MP_BITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // one input channel: weights and event list
  input  logic                          ld,
  input  logic [KTAPS-1:0][WB-1:0]      weights_in,
  input  event_list_t                   events_in,
  output logic                          busy,
  // tile control, broadcast
  input  logic                          tile_load,
  input  logic                          p_choose,
  input  logic signed [MPB-1:0]         input_mp,
  input  logic                          bias_en,
  input  logic signed [MPB-1:0]         bias,
  input  logic                          fire_en,
  input  logic signed [MPB-1:0]         vth,
  output logic                          spike_q,
  output logic signed [MPB-1:0]         next_mp,
  output logic signed [MPB-1:0]         vmem
);

  logic [KTAPS-1:0][WB-1:0] wbuf;     // weight buffer a..i
  event_list_t              evfifo;   // event FIFO with vld_cnt at its end
  logic [KCNT_BITS-1:0]     rd_ptr;
  logic                     out_spike;
  logic [KIDX_BITS-1:0]     cur_idx;
  logic signed [WB-1:0]     cur_w;

  assign busy    = (rd_ptr < evfifo.cnt);
  assign cur_idx = evfifo.idx[rd_ptr[KIDX_BITS-1:0]];
  assign cur_w   = (cur_idx < KIDX_BITS'(KTAPS)) ? wbuf[cur_idx] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf   <= '0;
      evfifo <= '0;
      rd_ptr <= '0;
    end else if (ld) begin
      wbuf   <= weights_in;
      evfifo <= events_in;
      rd_ptr <= '0;
    end else if (busy) begin
      rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       spike_q <= 1'b0;
    else if (fire_en) spike_q <= out_spike;
  end

  lif #(.WB(WB), .MPB(MPB)) u_lif (
    .clk, .rst_n,
    .load_en  (tile_load),
    .p_choose,
    .input_mp,
    .acc_en   (busy | bias_en),
    .bias_sel (bias_en),
    .weight   (cur_w),
    .bias,
    .fire_en,
    .vth,
    .out_spike,
    .next_mp,
    .vmem
  );

endmodule
