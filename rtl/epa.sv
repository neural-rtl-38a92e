// epa -- elastic PE array.
//
// The array is a grid of OCP x NPOS processing elements: NPOS output positions
// (one per sparse detection unit, an 8x8 tile) times OCP output channels
// (256 PEs = 64 x 4 by default). PE number oc*NPOS + pos computes output
// channel oc of the current group at tile position pos.
//
// Execution is data driven. Spike windows arrive from the left through the
// S-FIFO, one word per input channel holding the event lists of all NPOS
// positions; weights arrive from the top through the W-FIFO. A weight word
// (is_bias = 0) holds the 3x3 kernels of the OCP output channels for one
// input channel. Whenever a weight word and a window are both at the FIFO
// heads and every PE is idle, both are popped and loaded into all PEs in one
// cycle; each PE then works through its own event list (event driven). A bias
// word (is_bias = 1, OCP biases of MPB bits in its low bits) closes the tile:
// the biases are added, the neurons fire, the OCP x NPOS spikes are offered on
// spk_valid/spk_ready and, once taken, the next tile is started by loading
// every Vmem with input_mp (p_choose = 1) or 0.
//
// Timing: one input channel costs 1 + max(vld_cnt) cycles, the tile end 3
// cycles plus the write-back wait. mp_valid marks the fire cycle, in which
// next_mp of every PE is valid.
//
// From the paper: the array fed by the S-FIFO on the left and the W-FIFO on
// top, starting as soon as both ends hold data; 256 PEs. This
// implementation's own: the position x channel arrangement, the lock-step
// wait for all PEs before the next load, and the bias word closing a tile.
module epa
  import neural_pkg::*;
#(
  parameter int unsigned NPOS = SDU_NUM,
  parameter int unsigned OCP  = OC_PAR,
  parameter int unsigned WB   = W_BITS,
  parameter int unsigned MPB  = MP_BITS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // S-FIFO head
  input  logic                                s_valid,
  output logic                                s_pop,
  input  event_list_t [NPOS-1:0]              s_window,
  // W-FIFO head
  input  logic                                w_valid,
  output logic                                w_pop,
  input  logic                                w_is_bias,
  input  logic [OCP*KTAPS*WB-1:0]             w_payload,
  // neuron parameters
  input  logic signed [MPB-1:0]               vth,
  input  logic                                p_choose,
  input  logic signed [OCP*NPOS-1:0][MPB-1:0] input_mp,
  // results of a tile
  output logic                                spk_valid,
  input  logic                                spk_ready,
  output logic [OCP-1:0][NPOS-1:0]            spikes,
  output logic                                mp_valid,
  output logic signed [OCP*NPOS-1:0][MPB-1:0] next_mp,
  // observation
  output logic                                stall_no_spikes,   // weights wait for a window
  output logic                                stall_no_weights,  // window waits for weights
  output logic                                busy_any
);

  typedef enum logic [2:0] {S_LOAD, S_RUN, S_BIAS, S_FIRE, S_OUT} state_e;
  state_e state;

  logic [OCP*NPOS-1:0] pe_busy;
  logic                ld, bias_en, fire_en, tile_load;
  logic signed [MPB-1:0] bias_v [OCP];

  assign busy_any  = |pe_busy;
  assign ld        = (state == S_RUN) && w_valid && !w_is_bias && s_valid && !busy_any;
  assign bias_en   = (state == S_BIAS);
  assign fire_en   = (state == S_FIRE);
  assign tile_load = (state == S_LOAD);
  assign s_pop     = ld;
  assign w_pop     = ld || ((state == S_RUN) && w_valid && w_is_bias && !busy_any);
  assign spk_valid = (state == S_OUT);
  assign mp_valid  = fire_en;

  assign stall_no_spikes  = (state == S_RUN) && w_valid && !w_is_bias && !s_valid && !busy_any;
  assign stall_no_weights = (state == S_RUN) && s_valid && !w_valid && !busy_any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      for (int o = 0; o < int'(OCP); o++) bias_v[o] <= '0;
    end else begin
      unique case (state)
        S_LOAD: state <= S_RUN;
        S_RUN:  if (w_pop && w_is_bias) begin
                  state <= S_BIAS;
                  for (int o = 0; o < int'(OCP); o++) bias_v[o] <= w_payload[o*MPB +: MPB];
                end
        S_BIAS: state <= S_FIRE;
        S_FIRE: state <= S_OUT;
        S_OUT:  if (spk_ready) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  for (genvar o = 0; o < OCP; o++) begin : g_oc
    for (genvar p = 0; p < NPOS; p++) begin : g_pos
      localparam int unsigned IDX = o * NPOS + p;
      pe #(.WB(WB), .MPB(MPB)) u_pe (
        .clk, .rst_n,
        .ld,
        .weights_in (w_payload[o*KTAPS*WB +: KTAPS*WB]),
        .events_in  (s_window[p]),
        .busy       (pe_busy[IDX]),
        .tile_load,
        .p_choose,
        .input_mp   (input_mp[IDX]),
        .bias_en,
        .bias       (bias_v[o]),
        .fire_en,
        .vth,
        .spike_q    (spikes[o][p]),
        .next_mp    (next_mp[IDX]),
        .vmem       ()
      );
    end
  end

  // A load may only happen when every PE has finished its previous list.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) ld |-> !busy_any);

endmodule
