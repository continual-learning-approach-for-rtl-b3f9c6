// tb_reward_unit: random interval totals; the expected reward is worked out from
// the OPC ratios in real arithmetic.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/reward_unit.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_reward_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sample, reward_valid;
  logic [31:0] ops;
  logic [15:0] cycles;
  logic signed [1:0] reward;
  logic [31:0] prev_ops_q;
  logic [15:0] prev_cycles_q;
  reward_unit dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real prev, cur;
    int exp_r;
    sample = 0; ops = 0; cycles = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    prev = -1.0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      sample = 1;
      cycles = 16'(100 + ($urandom % 4) * 50);
      ops    = (t % 5 == 3) ? 32'(prev * real'(cycles) + 0.0) : 32'($urandom % 400);
      if (t % 5 == 3 && prev >= 0) ops = 32'($rtoi(prev * real'(cycles)));
      cur = real'(ops) / real'(cycles);
      @(negedge clk); sample = 0;
      if (prev < 0) exp_r = 0;
      else if (ops * 64'(prev_cycles_q) > 64'(prev_ops_q) * cycles) exp_r = 1;
      else if (ops * 64'(prev_cycles_q) < 64'(prev_ops_q) * cycles) exp_r = -1;
      else exp_r = 0;
      checks++;
      if (!reward_valid || int'(reward) != exp_r) begin
        failures++; $display("FAIL t=%0d reward %0d expected %0d", t, reward, exp_r);
      end
      prev = cur; prev_ops_q = ops; prev_cycles_q = cycles;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
