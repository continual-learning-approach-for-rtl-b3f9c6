// cube_info_regs: per-cube status registers and information transmitter.
//
// Each memory cube keeps two registers describing its load: the occupancy of its
// NMP-op table (sampled from the table) and the average row-buffer hit rate of its
// DRAM accesses. The hit rate is an exponential moving average in Q8.8:
// on every access, rate += ((hit ? 1.0 : 0) - rate) >> AVG_SHIFT. Every TX_PERIOD
// cycles the transmitter sends both values to the cube's nearest memory controller
// as a one-cycle message (tx_valid). The paper gives the two quantities and the
// periodic reporting; the averaging rule and the period are this design's choices.
module cube_info_regs #(
  parameter int unsigned TX_PERIOD = 100,
  parameter int unsigned AVG_SHIFT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] occupancy,
  input  logic        rb_access,
  input  logic        rb_hit,
  output logic        tx_valid,
  output logic [15:0] tx_occ,
  output logic [15:0] tx_hit_rate,
  output logic [15:0] hit_rate
);
  logic [$clog2(TX_PERIOD)-1:0] cnt;
  logic signed [17:0] diff;

  assign diff = $signed({2'b00, (rb_hit ? 16'h0100 : 16'h0000)}) - $signed({2'b00, hit_rate});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; hit_rate <= '0; tx_valid <= 1'b0; tx_occ <= '0; tx_hit_rate <= '0;
    end else begin
      if (rb_access) hit_rate <= 16'(($signed({2'b00, hit_rate}) + (diff >>> AVG_SHIFT)));
      tx_valid <= 1'b0;
      if (cnt == ($clog2(TX_PERIOD))'(TX_PERIOD-1)) begin
        cnt         <= '0;
        tx_valid    <= 1'b1;
        tx_occ      <= occupancy;
        tx_hit_rate <= hit_rate;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
