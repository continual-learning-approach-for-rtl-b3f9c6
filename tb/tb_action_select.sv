// tb_action_select: greedy choice against a reference argmax, and the exploration
// rate over many random draws.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/action_select.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_action_select;
  import aimm_pkg::*;
  int checks = 0, failures = 0;
  feat_t [N_ACTIONS-1:0] q; logic [15:0] rnd; action_e action; logic explored;
  action_select #(.EPS_Q8(26)) dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int best, nexp;
    nexp = 0;
    for (int t = 0; t < 4000; t++) begin
      for (int a = 0; a < N_ACTIONS; a++) q[a] = feat_t'($urandom % 64) - 16'sd32;
      rnd = 16'($urandom);
      #1;
      best = 0;
      for (int a = 1; a < N_ACTIONS; a++) if (q[a] > q[best]) best = a;
      checks++;
      if (explored != (rnd[7:0] < 26)) begin failures++; $display("FAIL explored flag"); end
      checks++;
      if (explored ? (action != action_e'(rnd[10:8])) : (action != action_e'(best))) begin
        failures++; $display("FAIL action %0d best %0d", action, best);
      end
      if (explored) nexp++;
    end
    checks++;
    if (nexp < 300 || nexp > 520) begin failures++; $display("FAIL exploration count %0d", nexp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
