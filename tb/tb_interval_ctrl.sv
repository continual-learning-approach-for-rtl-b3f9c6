// tb_interval_ctrl: measures the spacing of invocation pulses and checks the
// 100/125/167/250-cycle steps and their saturation under increase/decrease actions.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/interval_ctrl.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_interval_ctrl;
  import aimm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic act_valid, invoke;
  action_e action;
  logic [15:0] cur_interval;
  logic [1:0] idx;
  interval_ctrl dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic measure(input int expect_len);
    int n;
    // wait for a pulse, then count cycles to the next one
    do @(posedge clk); while (!invoke);
    n = 0;
    do begin @(posedge clk); n++; end while (!invoke);
    checks++;
    if (n != expect_len || cur_interval != 16'(expect_len)) begin
      failures++; $display("FAIL interval %0d expected %0d (cur %0d)", n, expect_len, cur_interval);
    end
  endtask

  task automatic act(input action_e a);
    @(negedge clk); act_valid = 1; action = a; @(negedge clk); act_valid = 0;
  endtask

  initial begin
    act_valid = 0; action = ACT_DEFAULT;
    repeat (2) @(posedge clk); rst_n = 1;
    measure(100);
    act(ACT_INC_INT); measure(125);
    act(ACT_INC_INT); measure(167);
    act(ACT_INC_INT); measure(250);
    act(ACT_INC_INT); measure(250);
    act(ACT_NEAR_DATA); measure(250);
    act(ACT_DEC_INT); measure(167);
    act(ACT_DEC_INT); act(ACT_DEC_INT); act(ACT_DEC_INT); measure(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
