// offchip_mem -- behavioural model of the off-chip weight memory.
//
// Not part of the design: the accelerator reads its weights from an external
// memory that it does not contain. This model answers valid/ready read
// requests in order after a fixed latency plus random extra delay (plus
// extra_delay, which a testbench may raise to starve the reader), and refuses
// requests at random to exercise back-pressure. Word a holds the value given
// by the testbench through the write task.
module offchip_mem
  import neural_pkg::*;
#(
  parameter int unsigned LATENCY = 4,
  parameter int unsigned WORDS   = 4096
) (
  input  logic        clk,
  input  logic        req,
  output logic        req_ready,
  input  logic [23:0] addr,
  output logic        rsp_valid,
  output wword_t      rsp_data
);

  wword_t mem [WORDS];
  int     due[$];
  wword_t dat[$];
  int     now = 0;
  int     extra_delay = 0;   // set by the testbench to starve the reader

  task automatic write(input int a, input wword_t w);
    mem[a] = w;
  endtask

  initial begin
    req_ready = 1'b0;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    now++;
    if (req && req_ready) begin
      due.push_back(now + int'(LATENCY) + extra_delay + (($urandom % 4 == 0) ? 3 : 0));
      dat.push_back(mem[addr % WORDS]);
    end
  end

  always @(negedge clk) begin
    req_ready = ($urandom % 5 != 0);
    if (due.size() > 0 && due[0] <= now) begin
      rsp_valid = 1'b1;
      rsp_data  = dat[0];
      void'(due.pop_front());
      void'(dat.pop_front());
    end else begin
      rsp_valid = 1'b0;
    end
  end

endmodule
