// tb_elastic_fifo -- self-checking testbench of the elastic FIFO.
//
// Pushes and pops with random valid / ready patterns against a queue model,
// at the S-FIFO depth (2) and at the W-FIFO depth (28); checks order, data,
// count, full back-pressure and that a word can pass through in one cycle.
module tb_elastic_fifo;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two instances: S-FIFO depth and W-FIFO depth
  logic        iv [2], ir [2], ov [2], orr [2];
  logic [15:0] id [2], od [2];
  logic [5:0]  cnt0, cnt1;

  elastic_fifo #(.WIDTH(16), .DEPTH(S_FIFO_DEPTH)) u_s (
    .clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]), .count(cnt0[1:0]));
  elastic_fifo #(.WIDTH(16), .DEPTH(W_FIFO_DEPTH)) u_w (
    .clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]), .count(cnt1[4:0]));
  assign cnt0[5:2] = '0;
  assign cnt1[5]   = '0;

  logic [15:0] q [2][$];
  int fulls [2];
  bit do_pop [2], do_push [2], hold [2] = '{0, 0};

  initial begin
    for (int f = 0; f < 2; f++) begin iv[f] = 0; orr[f] = 0; id[f] = '0; fulls[f] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      for (int f = 0; f < 2; f++) begin
        automatic int depth = (f == 0) ? int'(S_FIFO_DEPTH) : int'(W_FIFO_DEPTH);
        automatic int c = (f == 0) ? int'(cnt0) : int'(cnt1);
        // phases: fill, drain, mixed
        automatic int ph = (it / 500) % 3;
        checks++;
        if (c != q[f].size() || ir[f] != (q[f].size() < depth) || ov[f] != (q[f].size() > 0)) begin
          failures++;
          if (failures < 10) $display("fifo%0d count %0d model %0d", f, c, q[f].size());
        end
        if (ov[f]) begin
          checks++;
          if (od[f] !== q[f][0]) begin
            failures++;
            if (failures < 10) $display("fifo%0d data %h exp %h", f, od[f], q[f][0]);
          end
        end
        if (!hold[f]) begin   // hold a word that was refused
          iv[f] = (ph == 0) ? ($urandom % 4 != 0) : (ph == 1) ? ($urandom % 4 == 0) : ($urandom % 2);
          id[f] = 16'($urandom);
        end
        orr[f] = (ph == 0) ? ($urandom % 4 == 0) : (ph == 1) ? ($urandom % 4 != 0) : ($urandom % 2);
        if (!ir[f]) fulls[f]++;
        do_pop[f]  = ov[f] && orr[f];
        do_push[f] = iv[f] && ir[f];
        hold[f]    = iv[f] && !ir[f];
      end
      @(posedge clk);
      for (int f = 0; f < 2; f++) begin
        if (do_pop[f])  void'(q[f].pop_front());
        if (do_push[f]) q[f].push_back(id[f]);
      end
    end
    checks++;
    if (fulls[0] == 0 || fulls[1] == 0) begin
      failures++;
      $display("full never reached: %0d %0d", fulls[0], fulls[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
