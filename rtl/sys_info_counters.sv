// sys_info_counters: the two system-information counter vectors of one memory controller.
//
// For each of the NC cubes nearest to this MC, one counter holds the running
// average of the NMP-table occupancy and one the running average of the row-buffer
// hit rate that the cube reports. A report from cube i (in_valid[i]) updates both
// counters of that cube by avg += (x - avg) >> AVG_SHIFT, visible one cycle later;
// all NC cubes may report in the same cycle. The paper specifies the two vectors and
// that they hold running averages; the averaging weight is this design's choice.
module sys_info_counters #(
  parameter int unsigned NC        = 4,
  parameter int unsigned AVG_SHIFT = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NC-1:0]         in_valid,
  input  logic [NC-1:0][15:0]   in_occ,
  input  logic [NC-1:0][15:0]   in_hit,
  output logic [NC-1:0][15:0]   avg_occ,
  output logic [NC-1:0][15:0]   avg_hit
);
  function automatic logic [15:0] step(input logic [15:0] avg, input logic [15:0] x);
    logic signed [17:0] d;
    d = $signed({2'b00, x}) - $signed({2'b00, avg});
    return 16'($signed({2'b00, avg}) + (d >>> AVG_SHIFT));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avg_occ <= '0; avg_hit <= '0;
    end else begin
      for (int i = 0; i < NC; i++) begin
        if (in_valid[i]) begin
          avg_occ[i] <= step(avg_occ[i], in_occ[i]);
          avg_hit[i] <= step(avg_hit[i], in_hit[i]);
        end
      end
    end
  end
endmodule
