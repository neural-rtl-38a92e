// tb_sdu -- self-checking testbench of the sparse detection unit.
//
// Two SDUs (at tile positions (3,4) and (0,0)) see the same random stream of
// center positions, including negative ones. Each keeps a list of the kernel
// taps (2-dy)*3 + (2-dx) for CPs with dy, dx in 0..2; the testbench model
// builds the same lists and compares them after every burst, then clears.
module tb_sdu;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clr, cp_valid;
  logic signed [COORD_BITS-1:0] cp_y, cp_x;
  event_list_t ev_a, ev_b;

  int checks = 0, failures = 0, hits = 0;

  sdu #(.MY_Y(3), .MY_X(4)) u_a (.clk, .rst_n, .clr, .cp_valid, .cp_y, .cp_x, .events(ev_a));
  sdu #(.MY_Y(0), .MY_X(0)) u_b (.clk, .rst_n, .clr, .cp_valid, .cp_y, .cp_x, .events(ev_b));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int la[$], lb[$];

  function automatic void model(input int my_y, input int my_x, input int y, input int x,
                                ref int l[$]);
    int dy = my_y - y, dx = my_x - x;
    if (dy >= 0 && dy <= 2 && dx >= 0 && dx <= 2 && l.size() < 9)
      l.push_back((2 - dy) * 3 + (2 - dx));
  endfunction

  task automatic compare(input event_list_t ev, input int l[$], input string who);
    checks++;
    if (int'(ev.cnt) != l.size()) begin
      failures++;
      if (failures < 10) $display("%s cnt %0d exp %0d", who, ev.cnt, l.size());
    end else begin
      foreach (l[i]) if (int'(ev.idx[i]) != l[i]) begin
        failures++;
        if (failures < 10) $display("%s idx[%0d] %0d exp %0d", who, i, ev.idx[i], l[i]);
      end
    end
  endtask

  initial begin
    clr = 0; cp_valid = 0; cp_y = '0; cp_x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 300; b++) begin
      la.delete(); lb.delete();
      // a raster-ordered burst of spikes of a 10x10 halo region
      for (int r = -1; r <= 8; r++)
        for (int c = -1; c <= 8; c++)
          if ($urandom % 6 == 0) begin
            @(negedge clk);
            cp_valid = 1'b1;
            cp_y = COORD_BITS'(r - 1);
            cp_x = COORD_BITS'(c - 1);
            model(3, 4, r - 1, c - 1, la);
            model(0, 0, r - 1, c - 1, lb);
          end
      @(negedge clk);
      cp_valid = 1'b0;
      hits += la.size();
      compare(ev_a, la, "sdu(3,4)");
      compare(ev_b, lb, "sdu(0,0)");
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      checks++;
      if (ev_a.cnt != 0 || ev_b.cnt != 0) failures++;
    end
    checks++;
    if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
