// lfsr16: 16-bit maximal-length Galois LFSR (taps 16,14,13,11), advancing every
// cycle that en is high. Random source for epsilon-greedy exploration, the random
// neighbour choice of the near-remapping actions and replay sampling. Seed is a
// parameter; the state never reaches zero. Not specified by the paper.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {1'b0, q[15:1]} ^ (q[0] ? 16'hB400 : 16'h0000);
  end
endmodule
