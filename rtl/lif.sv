// lif -- leaky integrate-and-fire neuron of one processing element.
//
// The neuron holds one membrane potential, Vmem. It is updated only when an
// event arrives (acc_en), which is what makes the PE event driven: a PE whose
// receptive field saw no spike does no update at all.
//
//   load_en : Vmem <= p_choose ? input_mp : 0      start of an output tile
//   acc_en  : Vmem <= sat(Vmem + (bias_sel ? bias : weight))
//   fire_en : Vmem <= next_mp                       end of an output tile
//
// out_spike and next_mp are combinational on the current Vmem:
//   out_spike = (Vmem >>> LEAK_SHIFT) >= vth
//   next_mp   = out_spike ? 0 : Vmem                (hard reset to 0)
//
// From the paper: the LIF inset names input_mp, p_choose, weight, bias, an
// adder, the Vmem register, a shift (">>>"), a ">=?" compare against Vth, a
// multiplexer with a constant 0, and the outputs next_mp and out_spike; the
// decay of 0.5 gives LEAK_SHIFT = 1 (single time step: H = X / 2). This
// implementation's own choices: the order of the three operations, signed
// saturation of Vmem, which multiplexer input each select picks, and the
// reset-to-zero after a spike. Exactly one of load_en, acc_en, fire_en is
// expected per cycle (load has priority, then fire, then acc).
module lif
  import neural_pkg::*;
#(
  parameter int unsigned WB  = W_BITS,
  parameter int unsigned MPB = MP_BITS,
  parameter int unsigned LEAK_SHIFT = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load_en,
  input  logic                  p_choose,
  input  logic signed [MPB-1:0] input_mp,
  input  logic                  acc_en,
  input  logic                  bias_sel,
  input  logic signed [WB-1:0]  weight,
  input  logic signed [MPB-1:0] bias,
  input  logic                  fire_en,
  input  logic signed [MPB-1:0] vth,
  output logic                  out_spike,
  output logic signed [MPB-1:0] next_mp,
  output logic signed [MPB-1:0] vmem
);

  localparam logic signed [MPB:0] MAXV = (MPB+1)'(2**(MPB-1) - 1);
  localparam logic signed [MPB:0] MINV = -(MPB+1)'(2**(MPB-1));

  logic signed [MPB-1:0] addend;
  logic signed [MPB:0]   sum;
  logic signed [MPB-1:0] sum_sat;

  always_comb begin
    addend  = bias_sel ? bias : MPB'(weight);
    sum     = (MPB+1)'(vmem) + (MPB+1)'(addend);
    if (sum > MAXV)      sum_sat = MAXV[MPB-1:0];
    else if (sum < MINV) sum_sat = MINV[MPB-1:0];
    else                 sum_sat = sum[MPB-1:0];
    out_spike = (vmem >>> LEAK_SHIFT) >= vth;
    next_mp   = out_spike ? '0 : vmem;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       vmem <= '0;
    else if (load_en) vmem <= p_choose ? input_mp : '0;
    else if (fire_en) vmem <= next_mp;
    else if (acc_en)  vmem <= sum_sat;
  end

endmodule
