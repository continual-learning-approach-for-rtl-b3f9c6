// replay_buffer: experience replay memory of the agent.
//
// Holds up to DEPTH samples (s_{t-1}, a_{t-1}, r_{t-1}, s_t), each SW bits wide,
// in a ring: a new sample (wr_valid) is written at the write pointer, overwriting
// the oldest once the buffer is full. count is the number of stored samples.
// A draw request (draw_req) picks a stored sample uniformly at random (32-bit
// LFSR modulo count) and returns it one cycle later with draw_valid and its index.
// Requests while empty return nothing. The paper gives the buffer's role and its
// size (36 MB); with the 2501-bit sample of this design that is 120736 samples.
// Ring replacement and the random source are this design's choices.
module replay_buffer #(
  parameter int unsigned SW    = 2501,
  parameter int unsigned DEPTH = 120736
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_valid,
  input  logic [SW-1:0]            wr_sample,
  input  logic                     draw_req,
  output logic                     draw_valid,
  output logic [SW-1:0]            draw_sample,
  output logic [$clog2(DEPTH)-1:0] draw_idx,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [SW-1:0] mem [DEPTH];
  logic [AW-1:0] wp;
  logic [31:0]   rnd;
  logic [AW-1:0] pick;

  assign pick = AW'(rnd % 32'(count));

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wp] <= wr_sample;
    if (draw_req) draw_sample <= mem[pick];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; count <= '0; rnd <= 32'h1234_5679; draw_valid <= 1'b0; draw_idx <= '0;
    end else begin
      rnd <= {1'b0, rnd[31:1]} ^ (rnd[0] ? 32'h8020_0003 : 32'h0);
      if (wr_valid) begin
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
        if (count != ($clog2(DEPTH+1))'(DEPTH)) count <= count + 1'b1;
      end
      draw_valid <= draw_req && (count != '0);
      if (draw_req) draw_idx <= pick;
    end
  end
endmodule
