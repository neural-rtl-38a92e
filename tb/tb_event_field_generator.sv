// tb_event_field_generator -- self-checking testbench of CP generation / map.
//
// First feeds the four spike indexes of the paper's detection example,
// (0,1) (0,4) (1,3) (3,2), and expects the CPs (-1,0) (-1,3) (0,2) (2,1) on
// the broadcast, in that order. Then streams random windows
// with end markers while win_ready is held low at random, and checks that
// the CP sequence is complete and in order, that nothing is broadcast while
// a finished window waits, and that sdu_clr comes exactly once per window.
module tb_event_field_generator;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ev_valid, ev_ready, ev_last, cp_valid, win_valid, win_ready, sdu_clr;
  logic signed [COORD_BITS-1:0] ev_r, ev_c, cp_y, cp_x;

  int checks = 0, failures = 0, waits = 0;

  event_field_generator dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus queue and expected broadcast queue
  int in_r[$], in_c[$], in_l[$];
  int ex_y[$], ex_x[$], ex_w[$];   // ex_w = 1 marks an end of window
  int windows_done = 0, windows_sent = 0;
  bit hold = 0;

  // consumer / checker at each negedge
  always @(negedge clk) if (rst_n) begin
    win_ready = ($urandom % 3 == 0);
    // producer
    if (!hold) begin
      if (in_r.size() > 0) begin
        ev_valid = 1'b1;
        ev_r = COORD_BITS'(in_r.pop_front());
        ev_c = COORD_BITS'(in_c.pop_front());
        ev_last = in_l.pop_front() != 0;
      end else ev_valid = 1'b0;
    end
    #1;
    hold = ev_valid && !ev_ready;
    // what the coming clock edge will see
    if (cp_valid) begin
      checks++;
      if (ex_y.size() == 0 || ex_w[0] != 0 || int'(cp_y) != ex_y[0] || int'(cp_x) != ex_x[0]) begin
        failures++;
        if (failures < 10) $display("CP (%0d,%0d) unexpected", cp_y, cp_x);
      end else begin
        void'(ex_y.pop_front()); void'(ex_x.pop_front()); void'(ex_w.pop_front());
      end
    end
    if (win_valid && !win_ready) waits++;
    if (sdu_clr) begin
      checks++;
      if (ex_w.size() == 0 || ex_w[0] != 1) failures++;
      else begin void'(ex_y.pop_front()); void'(ex_x.pop_front()); void'(ex_w.pop_front()); end
      windows_done++;
    end
    if (win_valid && cp_valid) begin checks++; failures++; end
  end

  task automatic add_spike(input int r, input int c);
    in_r.push_back(r); in_c.push_back(c); in_l.push_back(0);
    ex_y.push_back(r - 1); ex_x.push_back(c - 1); ex_w.push_back(0);
  endtask
  task automatic add_end();
    in_r.push_back(0); in_c.push_back(0); in_l.push_back(1);
    ex_y.push_back(0); ex_x.push_back(0); ex_w.push_back(1);
    windows_sent++;
  endtask

  initial begin
    ev_valid = 0; ev_last = 0; ev_r = '0; ev_c = '0; win_ready = 0;
    repeat (3) @(posedge clk);
    // the paper's example
    add_spike(0, 1); add_spike(0, 4); add_spike(1, 3); add_spike(3, 2); add_end();
    rst_n = 1'b1;
    for (int w = 0; w < 300; w++) begin
      for (int r = -1; r <= 8; r++)
        for (int c = -1; c <= 8; c++)
          if ($urandom % 9 == 0) add_spike(r, c);
      add_end();
    end
    while (windows_done < windows_sent) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (ex_y.size() != 0 || waits == 0) begin
      failures++;
      $display("left %0d, waits %0d", ex_y.size(), waits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
