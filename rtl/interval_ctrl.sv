// interval_ctrl: agent invocation timer.
//
// The agent is invoked every INTERVAL cycles, INTERVAL being one of the four
// values 100, 125, 167 and 250 cycles given by the paper. The "increase interval"
// and "decrease interval" actions step one place up or down this list; the step
// saturates at either end (this design's choice). The timer starts at 100 cycles.
// invoke pulses for one cycle at the end of each interval; cur_interval reports the
// length of the interval that just ended (for the OPC reward). A step requested by
// act_valid takes effect from the next interval.
module interval_ctrl
  import aimm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        act_valid,
  input  action_e     action,
  output logic        invoke,
  output logic [15:0] cur_interval,
  output logic [1:0]  idx
);
  function automatic logic [15:0] len(input logic [1:0] i);
    case (i)
      2'd0: return 16'd100;
      2'd1: return 16'd125;
      2'd2: return 16'd167;
      default: return 16'd250;
    endcase
  endfunction

  logic [1:0]  idx_next;
  logic [15:0] cnt;

  always_comb begin
    idx_next = idx;
    if (act_valid && action == ACT_INC_INT && idx != 2'd3) idx_next = idx + 2'd1;
    if (act_valid && action == ACT_DEC_INT && idx != 2'd0) idx_next = idx - 2'd1;
  end

  assign invoke       = (cnt == len(idx) - 16'd1);
  assign cur_interval = len(idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; idx <= '0;
    end else begin
      cnt <= invoke ? '0 : cnt + 16'd1;
      idx <= idx_next;
      // A change of length during an interval must not leave cnt past the new end.
      if (!invoke && idx_next != idx && cnt >= len(idx_next) - 16'd1) cnt <= len(idx_next) - 16'd1;
    end
  end
endmodule
