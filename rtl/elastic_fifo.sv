// elastic_fifo -- the elastic FIFO that decouples producers from the PE array.
//
// NEURAL places two of these in front of the PE array: the S-FIFO carries the
// event windows built by the sparse detection array (640 bytes) and the
// W-FIFO carries the weights streamed by the weight management unit (1 kbyte).
// Because each side only waits for "not full" / "not empty", the array starts
// work as soon as both of its inputs hold data, with no central scheduler.
//
// Interface: valid/ready on both sides. A word is written when in_valid and
// in_ready are both high at a clock edge, and read when out_valid and
// out_ready are both high. out_data shows the oldest word (first-word
// fall-through). count is the number of words held. Storage is a plain array
// of DEPTH words; a push and a pop may happen in the same cycle.
//
// The FIFO sizes are the paper's; the valid/ready handshake and the
// first-word fall-through read are this implementation's choices.
module elastic_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid  && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  // A valid word offered while the FIFO is full must be held until accepted.
  property p_hold_when_full;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_hold_when_full: assert property (p_hold_when_full);

endmodule
