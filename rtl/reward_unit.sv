// reward_unit: reward from operations per cycle (OPC).
//
// At each agent invocation the MCs' operation count over the interval just ended
// (ops) and the interval length (cycles) are latched. The OPC of this interval is
// compared with the previous one by cross-multiplication, ops_t * cycles_{t-1}
// against ops_{t-1} * cycles_t, so no divider is needed: a higher OPC gives +1, a
// lower one -1, equal 0 (paper: unit positive/negative reward, otherwise zero).
// The first interval after reset has no predecessor and gives 0. reward is valid
// in the cycle after sample, alongside reward_valid.
module reward_unit (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sample,
  input  logic [31:0]       ops,
  input  logic [15:0]       cycles,
  output logic              reward_valid,
  output logic signed [1:0] reward
);
  logic [31:0] prev_ops;
  logic [15:0] prev_cycles;
  logic        have_prev;
  logic [47:0] lhs, rhs;

  assign lhs = ops * prev_cycles;
  assign rhs = prev_ops * cycles;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_ops <= '0; prev_cycles <= '0; have_prev <= 1'b0;
      reward_valid <= 1'b0; reward <= '0;
    end else begin
      reward_valid <= sample;
      if (sample) begin
        prev_ops    <= ops;
        prev_cycles <= cycles;
        have_prev   <= 1'b1;
        if (!have_prev)      reward <= 2'sd0;
        else if (lhs > rhs)  reward <= 2'sd1;
        else if (lhs < rhs)  reward <= -2'sd1;
        else                 reward <= 2'sd0;
      end
    end
  end
endmodule
