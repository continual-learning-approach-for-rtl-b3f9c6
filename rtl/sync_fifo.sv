// sync_fifo: single-clock FIFO, used as the migration queue and the MC op queue.
//
// Storage is an array of DEPTH words with read and write pointers and a fill count.
// push is taken when in_ready (not full); pop when out_valid (not empty). The head
// word is presented combinationally on out_data. Both may happen in the same cycle.
// Default depth is the 128-entry migration queue of the configuration table; the
// refuse-when-full handshake is this design's choice.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  wire do_push = in_valid && in_ready;
  wire do_pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  // Handshake rules.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
