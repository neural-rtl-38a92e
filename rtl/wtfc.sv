// wtfc -- W2TTFS-based fully connected core.
//
// The classifier stage of NEURAL. It keeps the whole network spiking up to
// the output: the last spike map is not average-pooled into real values but
// passed, channel by channel, through the TTFS filter, which reduces each
// pooling window to its spike count; the FC unit then adds each window's
// weight row that many times into the class potentials. The FC weight memory
// holds one row of NC 8-bit weights per feature (feature = channel x window).
//
// Interface: load weights through the write port (fcw_we, fcw_addr,
// fcw_data) while the core is idle. start (with n_ch, img_h, img_w, log_ws)
// clears the class potentials and begins; rows of the spike map are then taken
// on in_valid / in_ready in channel order. done pulses when the last feature
// has been accumulated; class holds the index of the largest potential and
// logit the potentials (integer part).
//
// From the paper: TTFS filter, FCU and FC weight memory, the channel-order
// input and time reuse. This implementation's own: NC = 100 classes in
// parallel (enough for CIFAR-100 and CIFAR-10), FC_IN = 512 features, and the
// arg-max output.
module wtfc
  import neural_pkg::*;
#(
  parameter int unsigned NC    = 100,
  parameter int unsigned FC_IN = 512,
  parameter int unsigned RW    = ROW_W,
  parameter int unsigned WB    = W_BITS,
  parameter int unsigned ACW   = 24,
  parameter int unsigned FW    = $clog2(FC_IN)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // FC weight memory load port
  input  logic                   fcw_we,
  input  logic [FW-1:0]          fcw_addr,
  input  logic [NC-1:0][WB-1:0]  fcw_data,
  // run
  input  logic                   start,
  input  logic [9:0]             n_ch,
  input  logic [5:0]             img_h,
  input  logic [5:0]             img_w,
  input  logic [1:0]             log_ws,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [RW-1:0]          in_row,
  output logic                   done,
  output logic [$clog2(NC)-1:0]  class_idx,
  output logic signed [ACW-1:0]  logit [NC],
  output logic                   feature_skip   // an empty window was filtered out
);

  logic [NC-1:0][WB-1:0] fc_mem [FC_IN];
  logic [NC-1:0][WB-1:0] w_rd_data;
  logic                  w_rd_en;
  logic [FW-1:0]         w_rd_addr;

  logic                  i_vld, i_ready, f_done, fcu_busy, pend;
  logic [FW-1:0]         feat;
  logic [6:0]            vld_cnt;
  logic [2:0]            scale_shift;
  logic signed [ACW-1:0] acc [NC];

  always_ff @(posedge clk) begin
    if (fcw_we)  fc_mem[fcw_addr] <= fcw_data;
    if (w_rd_en) w_rd_data <= fc_mem[w_rd_addr];
  end

  ttfs_filter #(.RW(RW), .FW(FW)) u_filter (
    .clk, .rst_n, .start, .n_ch, .img_h, .img_w, .log_ws,
    .done(f_done),
    .in_valid, .in_ready, .in_row,
    .i_vld, .i_ready, .feat, .vld_cnt, .scale_shift, .skip(feature_skip)
  );

  fcu #(.NC(NC), .FW(FW), .WB(WB), .ACW(ACW)) u_fcu (
    .clk, .rst_n, .clr(start),
    .i_vld, .i_ready, .feat, .vld_cnt, .scale_shift,
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .acc, .logit, .busy(fcu_busy)
  );

  // done once the filter has finished and the FCU has drained its last feature
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      pend <= 1'b0;
    else if (start)  pend <= 1'b0;
    else if (f_done) pend <= 1'b1;
    else if (done)   pend <= 1'b0;
  end
  assign done = pend && !fcu_busy;

  always_comb begin
    class_idx = '0;
    for (int k = 1; k < int'(NC); k++)
      if (acc[k] > acc[class_idx]) class_idx = ($clog2(NC))'(k);
  end

endmodule
