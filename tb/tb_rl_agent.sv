// tb_rl_agent: with all weights zero except one advantage-head bias, the greedy
// action is known. Sends states with rewards and checks: the action, the global
// action history, the drop of a state that arrives during inference, and that the
// replay buffer holds exactly the samples (s_{t-1}, a_{t-1}, r_{t-1}, s_t).
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/rl_agent.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_rl_agent;
  import aimm_pkg::*;
  localparam int LANES = 16, RD = 16;
  localparam int SW = 2*STATE_LEN*FW + 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic st_valid, act_valid, act_explored, busy, w_we, draw_req, draw_valid;
  feat_t [STATE_LEN-1:0] state;
  logic signed [1:0] reward;
  action_e action;
  logic [HIST_K-1:0][2:0] gact_hist;
  logic [15:0] dropped, samples, w_addr;
  logic [3:0] w_lane;
  feat_t w_data;
  logic [SW-1:0] draw_sample;
  rl_agent #(.LANES(LANES), .RDEPTH(RD), .EPS_Q8(0)) dut (.*);

  localparam int HEAD_BIAS = 3984 + 31;   // weights 3984 words, head biases after 31 hidden-bias words

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int addr, input int lane, input int v);
    @(negedge clk); w_we = 1; w_addr = 16'(addr); w_lane = 4'(lane); w_data = feat_t'(v);
  endtask

  feat_t [STATE_LEN-1:0] hist_s[$];
  action_e hist_a[$];
  logic signed [1:0] hist_r[$];

  task automatic step(input action_e expect_a, input logic signed [1:0] r);
    @(negedge clk);
    for (int i = 0; i < STATE_LEN; i++) state[i] = feat_t'($urandom % 300);
    reward = r; st_valid = 1;
    hist_s.push_back(state); hist_r.push_back(r);
    @(negedge clk); st_valid = 0;
    // a second state during inference must be dropped
    @(negedge clk); st_valid = 1; @(negedge clk); st_valid = 0;
    while (!act_valid) @(negedge clk);
    checks++;
    if (action != expect_a) begin failures++; $display("FAIL action %0d expected %0d", action, expect_a); end
    checks++;
    if (gact_hist[0] != 3'(expect_a)) begin failures++; $display("FAIL history head %0d", gact_hist[0]); end
    hist_a.push_back(expect_a);
  endtask

  initial begin
    int ns, found;
    st_valid = 0; state = '0; reward = 0; w_we = 0; w_addr = 0; w_lane = 0; w_data = 0; draw_req = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a <= HEAD_BIAS; a++) for (int l = 0; l < LANES; l++) wr(a, l, 0);
    wr(HEAD_BIAS, 5, 256);     // A[5] = 1.0
    @(negedge clk); w_we = 0;
    step(ACT_SRC_COMP, 2'sd0);
    step(ACT_SRC_COMP, 2'sd1);
    wr(HEAD_BIAS, 5, 0); wr(HEAD_BIAS, 2, 300);   // A[2] = 1.17
    @(negedge clk); w_we = 0;
    step(ACT_FAR_DATA, -2'sd1);
    step(ACT_FAR_DATA, 2'sd1);
    checks++;
    if (dropped != 16'd4 || samples != 16'd3) begin failures++; $display("FAIL dropped %0d samples %0d", dropped, samples); end
    checks++;
    if (gact_hist[3:0] != {3'd5, 3'd5, 3'd2, 3'd2}) begin failures++; $display("FAIL global history"); end
    // draw until every stored sample was seen; each must equal one expected sample
    found = 0;
    for (int d = 0; d < 40; d++) begin
      @(negedge clk); draw_req = 1; @(negedge clk); draw_req = 0;
      checks++;
      ns = -1;
      for (int k = 1; k < 4; k++)
        if (draw_sample == {hist_s[k-1], 3'(hist_a[k-1]), hist_r[k], hist_s[k]}) ns = k;
      if (!draw_valid || ns < 0) begin failures++; $display("FAIL drawn sample matches none"); end
      else found |= (1 << ns);
    end
    checks++;
    if (found != 4'b1110) begin failures++; $display("FAIL samples seen %b", found); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
