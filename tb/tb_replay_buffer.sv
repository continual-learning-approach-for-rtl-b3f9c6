// tb_replay_buffer: writes more samples than the buffer holds and checks the fill
// count, that every draw returns the sample stored at the drawn index (ring
// model), that draws cover all slots and that an empty buffer returns nothing.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/replay_buffer.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_replay_buffer;
  localparam int SW = 24, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_valid, draw_req, draw_valid;
  logic [SW-1:0] wr_sample, draw_sample;
  logic [2:0] draw_idx;
  logic [3:0] count;
  replay_buffer #(.SW(SW), .DEPTH(D)) dut (.*);
  logic [SW-1:0] m[D];
  int wp, n, seen[D];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_valid = 0; draw_req = 0; wr_sample = 0; wp = 0; n = 0;
    foreach (seen[i]) seen[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); draw_req = 1; @(negedge clk); draw_req = 0;
    checks++;
    if (draw_valid) begin failures++; $display("FAIL draw from empty buffer"); end
    for (int t = 0; t < 1000; t++) begin
      wr_valid = (t < 300) ? (($urandom % 4) == 0) : 0;
      wr_sample = SW'($urandom);
      draw_req = (n > 0) && ($urandom % 2);
      @(posedge clk);
      if (wr_valid) begin m[wp] = wr_sample; wp = (wp + 1) % D; if (n < D) n++; end
      #1;
      checks++;
      if (count != 4'(n)) begin failures++; $display("FAIL count %0d/%0d", count, n); end
      if (draw_req) begin
        checks++;
        if (!draw_valid || draw_idx >= 3'(n) && n < D) begin failures++; $display("FAIL draw idx %0d n %0d", draw_idx, n); end
      end
      @(negedge clk);
      if (draw_valid && !wr_valid) begin
        checks++;
        seen[draw_idx]++;
        if (draw_sample != m[draw_idx]) begin failures++; $display("FAIL sample at %0d", draw_idx); end
      end
    end
    for (int i = 0; i < D; i++) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("FAIL slot %0d never drawn", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
