// fcu -- fully connected computing unit of the W2TTFS classifier core.
//
// For every feature (one pooling window of one channel) sent by the TTFS
// filter, the FCU reads the feature's weight row (one 8-bit weight per class)
// and adds it into all NC class potentials at once, vld_cnt times, one
// addition per cycle ("time reuse"): a window with three spikes costs three
// cycles instead of a multiplication by 3/16. The unit scale 1/ws^2 is kept
// exact by giving the potentials scale_shift extra fractional bits: acc[k] is
// the class-k potential in units of 2^-scale_shift, and logit[k] = acc[k] >>>
// scale_shift is its integer part.
//
// Interface: clr zeroes the potentials. A feature is taken on i_vld && i_ready
// (i_ready is high only while the unit is idle). The weight memory read port
// has one cycle of latency. A feature costs 1 + vld_cnt cycles.
//
// From the paper: the FCU fed by the TTFS filter, accumulating W*scale over
// the time steps 0 .. vld_cnt-1 by repeating the unit summation. This
// implementation's own: the class-parallel datapath, the accumulator width
// and keeping the unit scale as fractional bits rather than shifting each
// weight.
module fcu
  import neural_pkg::*;
#(
  parameter int unsigned NC  = 100,  // classes
  parameter int unsigned FW  = 12,   // feature index width
  parameter int unsigned WB  = W_BITS,
  parameter int unsigned ACW = 24    // class potential width
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        i_vld,
  output logic                        i_ready,
  input  logic [FW-1:0]               feat,
  input  logic [6:0]                  vld_cnt,
  input  logic [2:0]                  scale_shift,
  // FC weight memory read port
  output logic                        w_rd_en,
  output logic [FW-1:0]               w_rd_addr,
  input  logic [NC-1:0][WB-1:0]       w_rd_data,
  // class potentials
  output logic signed [ACW-1:0]       acc   [NC],
  output logic signed [ACW-1:0]       logit [NC],
  output logic                        busy
);

  typedef enum logic [1:0] {U_IDLE, U_READ, U_ADD} ustate_e;
  ustate_e state;

  logic [6:0] left;
  logic [2:0] shift_q;

  assign i_ready   = (state == U_IDLE);
  assign busy      = (state != U_IDLE);
  assign w_rd_en   = i_vld && i_ready;
  assign w_rd_addr = feat;

  always_comb
    for (int k = 0; k < int'(NC); k++) logit[k] = acc[k] >>> shift_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= U_IDLE;
      left    <= '0;
      shift_q <= '0;
      for (int k = 0; k < int'(NC); k++) acc[k] <= '0;
    end else if (clr) begin
      state <= U_IDLE;
      for (int k = 0; k < int'(NC); k++) acc[k] <= '0;
    end else begin
      unique case (state)
        U_IDLE: if (i_vld) begin
                  left    <= vld_cnt;
                  shift_q <= scale_shift;
                  state   <= (vld_cnt == '0) ? U_IDLE : U_READ;
                end
        U_READ: state <= U_ADD;   // weight row arrives
        U_ADD: begin
                 for (int k = 0; k < int'(NC); k++)
                   acc[k] <= acc[k] + ACW'(signed'(w_rd_data[k]));
                 left <= left - 1'b1;
                 if (left == 7'd1) state <= U_IDLE;
               end
        default: state <= U_IDLE;
      endcase
    end
  end

endmodule
