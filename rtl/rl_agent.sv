// rl_agent: the reinforcement-learning agent (inference side and experience store).
//
// Step 1: a new state s_t and the reward r_{t-1} of the previous action arrive
// (st_valid) and are held in the info buffer. Step 2: if the info buffer holds a
// previous state and action, the sample (s_{t-1}, a_{t-1}, r_{t-1}, s_t) is written
// to the replay buffer; at the same time the Q network runs on s_t. Step 3: the
// epsilon-greedy choice a_t is stored back into the info buffer, shifted into the
// global action history and sent out (act_valid, one cycle). A state that arrives
// while an inference is running is dropped (counted in dropped). The replay draw
// port and the weight write port lead to the training logic, which lies outside
// this module. Sample layout: {s_{t-1}, a_{t-1}[2:0], r_{t-1}[1:0], s_t}.
// Steps and buffers follow the paper's agent block diagram; the drop rule and the
// sample layout are this design's choices.
module rl_agent
  import aimm_pkg::*;
#(
  parameter int unsigned LANES  = 256,
  parameter int unsigned RDEPTH = 120736,
  parameter int unsigned EPS_Q8 = 26
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      st_valid,
  input  feat_t [STATE_LEN-1:0]     state,
  input  logic signed [1:0]         reward,
  output logic                      act_valid,
  output action_e                   action,
  output logic                      act_explored,
  output logic [HIST_K-1:0][2:0]    gact_hist,
  output logic [15:0]               dropped,
  output logic [15:0]               samples,
  output logic                      busy,
  // weight load (training side)
  input  logic                      w_we,
  input  logic [$clog2(LANES)-1:0]  w_lane,
  input  logic [15:0]               w_addr,
  input  feat_t                     w_data,
  // replay draw (training side)
  input  logic                      draw_req,
  output logic                      draw_valid,
  output logic [2*STATE_LEN*FW+4:0] draw_sample
);
  localparam int unsigned SW = 2*STATE_LEN*FW + 5;

  feat_t [STATE_LEN-1:0] prev_state, cur_state;
  action_e               prev_action;
  logic                  prev_valid;
  logic                  dqn_start, dqn_busy, dqn_done;
  feat_t [N_ACTIONS-1:0] q;
  logic [15:0]           rnd;
  action_e               a_sel;
  logic                  expl;
  logic                  rb_wr;
  logic [SW-1:0]         rb_sample;
  logic [$clog2(RDEPTH)-1:0]   rb_idx;
  logic [$clog2(RDEPTH+1)-1:0] rb_count;

  wire accept = st_valid && !dqn_busy && !dqn_start;
  assign busy = dqn_busy || dqn_start;

  dqn_engine #(.LANES(LANES)) u_dqn (
    .clk, .rst_n, .w_we, .w_lane, .w_addr, .w_data,
    .start(dqn_start), .state(cur_state), .busy(dqn_busy), .done(dqn_done), .q);

  lfsr16 #(.SEED(16'h5EED)) u_rnd (.clk, .rst_n, .en(1'b1), .q(rnd));

  action_select #(.EPS_Q8(EPS_Q8)) u_sel (.q, .rnd, .action(a_sel), .explored(expl));

  replay_buffer #(.SW(SW), .DEPTH(RDEPTH)) u_rb (
    .clk, .rst_n, .wr_valid(rb_wr), .wr_sample(rb_sample),
    .draw_req, .draw_valid, .draw_sample, .draw_idx(rb_idx), .count(rb_count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_state <= '0; cur_state <= '0; prev_action <= ACT_DEFAULT; prev_valid <= 1'b0;
      dqn_start <= 1'b0; act_valid <= 1'b0; action <= ACT_DEFAULT; act_explored <= 1'b0;
      gact_hist <= '0; dropped <= '0; samples <= '0; rb_wr <= 1'b0; rb_sample <= '0;
    end else begin
      dqn_start <= 1'b0;
      act_valid <= 1'b0;
      rb_wr     <= 1'b0;
      if (st_valid && !accept) dropped <= dropped + 16'd1;
      if (accept) begin
        cur_state <= state;
        dqn_start <= 1'b1;
        if (prev_valid) begin
          rb_wr     <= 1'b1;
          rb_sample <= {prev_state, prev_action, reward, state};
          samples   <= samples + 16'd1;
        end
      end
      if (dqn_done) begin
        action       <= a_sel;
        act_explored <= expl;
        act_valid    <= 1'b1;
        prev_action  <= a_sel;
        prev_state   <= cur_state;
        prev_valid   <= 1'b1;
        gact_hist    <= {gact_hist[HIST_K-2:0], 3'(a_sel)};
      end
    end
  end
endmodule
