// tb_sys_info_counters: random reports from four cubes, several at once, against a
// running-average model.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/sys_info_counters.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_sys_info_counters;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0] in_valid;
  logic [3:0][15:0] in_occ, in_hit, avg_occ, avg_hit;
  int mo[4], mh[4];
  sys_info_counters #(.NC(4), .AVG_SHIFT(2)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_occ = 0; in_hit = 0;
    foreach (mo[i]) begin mo[i] = 0; mh[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (avg_occ[i] != 16'(mo[i]) || avg_hit[i] != 16'(mh[i])) begin
          failures++; $display("FAIL cube %0d occ %0d/%0d hit %0d/%0d", i, avg_occ[i], mo[i], avg_hit[i], mh[i]);
        end
      end
      in_valid = 4'($urandom);
      for (int i = 0; i < 4; i++) begin in_occ[i] = 16'($urandom % 600); in_hit[i] = 16'($urandom % 257); end
      @(posedge clk);
      for (int i = 0; i < 4; i++) if (in_valid[i]) begin
        mo[i] = mo[i] + ((int'(in_occ[i]) - mo[i]) >>> 2);
        mh[i] = mh[i] + ((int'(in_hit[i]) - mh[i]) >>> 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
