// tb_state_builder: drives random counters, histories and page entries and checks
// the whole state vector, the round-robin MC choice, the two divided rates and the
// 69-cycle latency.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/state_builder.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_state_builder;
  import aimm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done;
  logic [N_MC-1:0][CUBES_PER_MC-1:0][15:0] avg_occ, avg_hit;
  logic [N_MC-1:0][15:0] mc_qocc;
  logic [HIST_K-1:0][2:0] gact_hist;
  page_info_t [N_MC-1:0] top_info;
  logic [N_MC-1:0][31:0] tot_acc;
  feat_t [STATE_LEN-1:0] state;
  logic [1:0] sel_mc;
  page_info_t sel_info;
  state_builder dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lat, e, mc, r1, r2;
    feat_t exp_s[STATE_LEN];
    start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      @(negedge clk);
      for (int m = 0; m < N_MC; m++) begin
        for (int j = 0; j < 4; j++) begin avg_occ[m][j] = 16'($urandom % 512); avg_hit[m][j] = 16'($urandom % 257); end
        mc_qocc[m] = 16'($urandom % 17);
        top_info[m] = '0;
        top_info[m].valid = (r != 5);
        top_info[m].page = page_t'($urandom);
        top_info[m].accesses = 16'(1 + $urandom % 1000);
        top_info[m].migrations = 16'($urandom % 20);
        for (int k = 0; k < HIST_L; k++) begin
          top_info[m].hop_hist[k] = 16'($urandom % 7); top_info[m].lat_hist[k] = 16'($urandom % 900);
          top_info[m].mig_hist[k] = 16'($urandom % 3000); top_info[m].act_hist[k] = 16'($urandom % 8);
        end
        tot_acc[m] = 32'(top_info[m].accesses) + 32'($urandom % 5000);
      end
      for (int k = 0; k < HIST_K; k++) gact_hist[k] = 3'($urandom);
      mc = r % 4;
      for (int c = 0; c < 16; c++) begin
        exp_s[c] = feat_t'(avg_occ[{c[3], c[1]}][{c[2], c[0]}]);
        exp_s[16 + c] = feat_t'(avg_hit[{c[3], c[1]}][{c[2], c[0]}]);
      end
      for (int m = 0; m < 4; m++) exp_s[32 + m] = feat_t'(mc_qocc[m]);
      for (int k = 0; k < 8; k++) exp_s[36 + k] = feat_t'(gact_hist[k]);
      r1 = (int'(top_info[mc].accesses) * 256) / int'(tot_acc[mc]);
      r2 = (int'(top_info[mc].migrations) * 256) / int'(top_info[mc].accesses);
      exp_s[44] = top_info[mc].valid ? feat_t'(r1 > 32767 ? 32767 : r1) : '0;
      exp_s[45] = top_info[mc].valid ? feat_t'(r2 > 32767 ? 32767 : r2) : '0;
      for (int k = 0; k < 8; k++) begin
        exp_s[46 + k] = feat_t'(top_info[mc].hop_hist[k]); exp_s[54 + k] = feat_t'(top_info[mc].lat_hist[k]);
        exp_s[62 + k] = feat_t'(top_info[mc].mig_hist[k]); exp_s[70 + k] = feat_t'(top_info[mc].act_hist[k]);
      end
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 70) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (sel_mc != 2'(mc) || sel_info != top_info[mc]) begin failures++; $display("FAIL selected mc %0d expected %0d", sel_mc, mc); end
      e = 0;
      for (int i = 0; i < STATE_LEN; i++) if (state[i] != exp_s[i]) begin e++; $display("FAIL state[%0d] %0d expected %0d", i, state[i], exp_s[i]); end
      checks++;
      if (e != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
