// tb_sync_fifo: random push/pop traffic against a queue model; checks order, the
// full and empty handshakes and the fill count.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/sync_fifo.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] model[$];

  sync_fifo #(.W(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < (t < 1500 ? 70 : 30);
      out_ready = ($urandom % 100) < (t < 1500 ? 30 : 70);
      in_data   = W'($urandom);
      checks++;
      if (in_ready != (model.size() < D) || out_valid != (model.size() > 0) || count != model.size()) begin
        failures++; $display("FAIL flags t=%0d size=%0d count=%0d", t, model.size(), count);
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin failures++; $display("FAIL data %h vs %h", out_data, model[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
