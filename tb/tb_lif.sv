// tb_lif -- self-checking testbench of the LIF neuron.
//
// Drives random sequences of load / accumulate (weight or bias) / fire and
// compares Vmem, out_spike and next_mp each cycle with a model kept in the
// testbench: saturating 16-bit accumulation, spike when Vmem/2 >= Vth, hard
// reset to zero after a spike.
module tb_lif;
  import neural_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load_en, p_choose, acc_en, bias_sel, fire_en;
  logic signed [15:0] input_mp, bias, vth, next_mp, vmem;
  logic signed [7:0]  weight;
  logic out_spike;

  int checks = 0, failures = 0;
  int spikes_seen = 0, sat_seen = 0;

  lif dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] sat(input int v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  int model;
  logic exp_spk;

  initial begin
    {load_en, p_choose, acc_en, bias_sel, fire_en} = '0;
    input_mp = '0; bias = '0; vth = 16'sd20; weight = '0;
    model = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      // check combinational outputs on the current state
      exp_spk = ((model >>> 1) >= int'(vth));
      checks++;
      if (vmem !== 16'(model) || out_spike !== exp_spk ||
          next_mp !== (exp_spk ? 16'sd0 : 16'(model))) begin
        failures++;
        if (failures < 10) $display("mismatch it=%0d vmem=%0d model=%0d spk=%0b", it, vmem, model, out_spike);
      end
      // choose the next operation
      {load_en, acc_en, fire_en, bias_sel} = '0;
      case ($urandom % 10)
        0: begin load_en = 1'b1; p_choose = $urandom % 2; input_mp = 16'($urandom % 200) - 16'sd100; end
        1: begin fire_en = 1'b1; end
        2: begin acc_en = 1'b1; bias_sel = 1'b1; bias = 16'($urandom % 64000) - 16'sd32000; end
        default: begin acc_en = 1'b1; weight = 8'($urandom); end
      endcase
      vth = 16'sd10 + 16'($urandom % 40);
      @(posedge clk);
      #1;
      if (load_en) model = p_choose ? int'(input_mp) : 0;
      else if (fire_en) begin
        if ((model >>> 1) >= int'(vth)) begin model = 0; spikes_seen++; end
      end else if (acc_en) begin
        automatic int s = model + (bias_sel ? int'(bias) : int'(weight));
        if (s > 32767 || s < -32768) sat_seen++;
        model = int'(sat(s));
      end
    end
    checks++;
    if (spikes_seen == 0 || sat_seen == 0) begin
      failures++;
      $display("coverage: spikes=%0d saturations=%0d", spikes_seen, sat_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
