// tb_cube_info_regs: random DRAM hit/miss events against an exponential-average
// model; checks the report period and the reported values.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/cube_info_regs.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_cube_info_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int P = 20;
  logic [15:0] occupancy, tx_occ, tx_hit_rate, hit_rate;
  logic rb_access, rb_hit, tx_valid;
  cube_info_regs #(.TX_PERIOD(P), .AVG_SHIFT(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int model, last_tx, cyc, exp_occ, exp_rate;
  initial begin
    occupancy = 0; rb_access = 0; rb_hit = 0; model = 0; last_tx = -1; cyc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (tx_valid) begin
        checks++;
        if (tx_occ != 16'(exp_occ) || tx_hit_rate != 16'(exp_rate)) begin
          failures++; $display("FAIL tx occ %0d/%0d rate %0d/%0d", tx_occ, exp_occ, tx_hit_rate, exp_rate);
        end
        if (last_tx >= 0) begin
          checks++;
          if (cyc - last_tx != P) begin failures++; $display("FAIL period %0d", cyc - last_tx); end
        end
        last_tx = cyc;
      end
      checks++;
      if (hit_rate != 16'(model)) begin failures++; $display("FAIL rate %0d model %0d", hit_rate, model); end
      occupancy = 16'($urandom % 512);
      rb_access = $urandom % 2;
      rb_hit    = (t < 1000) ? (($urandom % 10) < 8) : (($urandom % 10) < 2);
      // value sampled at the coming edge
      exp_occ = occupancy; exp_rate = model;
      @(posedge clk);
      cyc++;
      if (rb_access) model = model + (((rb_hit ? 256 : 0) - model) >>> 4);
    end
    checks++;
    if (hit_rate > 16'd100) begin failures++; $display("FAIL low-hit phase rate %0d", hit_rate); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
