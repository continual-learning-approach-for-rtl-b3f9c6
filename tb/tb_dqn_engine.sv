// tb_dqn_engine: loads random Q8.8 weights and biases through the weight port,
// runs forward passes on random states and compares the eight Q values with a
// reference computed here with the same fixed-point rules (40-bit sums, shift by 8,
// saturation, ReLU, Q = V + A - max A). Also checks the start-to-done latency,
// sum over layers of groups*(inputs+1) plus 2 cycles.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/dqn_engine.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_dqn_engine;
  import aimm_pkg::*;
  localparam int LANES = 16;
  localparam int SLEN = STATE_LEN;
  localparam int NL = 6;
  localparam int IN[NL]  = '{SLEN, 256, 128, 64, 32, 16};
  localparam int OUT[NL] = '{256, 128, 64, 32, 16, 9};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic w_we; logic [3:0] w_lane; logic [15:0] w_addr; feat_t w_data;
  logic start, busy, done; feat_t [SLEN-1:0] state; feat_t [N_ACTIONS-1:0] q;
  dqn_engine #(.LANES(LANES)) dut (.*);

  int W[NL][256][256];
  int B[NL][256];

  function automatic int sat(input longint v);
    longint s = v >>> 8;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int wb, bb, wdepth, lat_exp, lat, x[256], y[256], heads[9], amax, qe;
    longint acc;
    w_we = 0; w_lane = 0; w_addr = 0; w_data = 0; start = 0; state = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    wdepth = 0; lat_exp = 2;
    for (int l = 0; l < NL; l++) begin
      wdepth += ((OUT[l] + LANES - 1) / LANES) * IN[l];
      lat_exp += ((OUT[l] + LANES - 1) / LANES) * (IN[l] + 1);
    end
    // load weights
    wb = 0; bb = 0;
    for (int l = 0; l < NL; l++) begin
      for (int o = 0; o < OUT[l]; o++) begin
        B[l][o] = int'($urandom % 129) - 64;
        for (int i = 0; i < IN[l]; i++) begin
          W[l][o][i] = int'($urandom % 97) - 48;
          @(negedge clk); w_we = 1; w_lane = 4'(o % LANES); w_addr = 16'(wb + (o / LANES) * IN[l] + i); w_data = feat_t'(W[l][o][i]);
        end
        @(negedge clk); w_we = 1; w_lane = 4'(o % LANES); w_addr = 16'(wdepth + bb + o / LANES); w_data = feat_t'(B[l][o]);
      end
      wb += ((OUT[l] + LANES - 1) / LANES) * IN[l];
      bb += (OUT[l] + LANES - 1) / LANES;
    end
    @(negedge clk); w_we = 0;
    for (int r = 0; r < 4; r++) begin
      for (int i = 0; i < SLEN; i++) begin x[i] = int'($urandom % 600); state[i] = feat_t'(x[i]); end
      // reference
      for (int l = 0; l < NL; l++) begin
        for (int o = 0; o < OUT[l]; o++) begin
          acc = longint'(B[l][o]) <<< 8;
          for (int i = 0; i < IN[l]; i++) acc += longint'(W[l][o][i]) * longint'(x[i]);
          y[o] = sat(acc);
          if (l < NL-1 && y[o] < 0) y[o] = 0;
        end
        for (int o = 0; o < OUT[l]; o++) x[o] = y[o];
      end
      for (int a = 0; a < 9; a++) heads[a] = x[a];
      amax = heads[0];
      for (int a = 1; a < 8; a++) if (heads[a] > amax) amax = heads[a];
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != lat_exp) begin failures++; $display("FAIL latency %0d expected %0d", lat, lat_exp); end
      for (int a = 0; a < 8; a++) begin
        qe = heads[8] + heads[a] - amax;
        if (qe > 32767) qe = 32767; if (qe < -32768) qe = -32768;
        checks++;
        if (int'(q[a]) != qe) begin failures++; $display("FAIL run %0d q[%0d]=%0d expected %0d", r, a, q[a], qe); end
      end
      $display("run %0d latency %0d, q0 %0d", r, lat, q[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
