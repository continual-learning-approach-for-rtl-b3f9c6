// tb_aimm_top: end-to-end run of the whole mapping system at its default sizes
// (512-entry NMP tables, 128-entry page caches and migration queue, 256-lane
// Q network, 36 MB replay buffer).
//
// The environment around the design is modelled here behaviourally:
//   host      each MC receives a stream of NMP ops; most touch a few hot pages.
//             MCs 2 and 3 only read their hot pages (destinations are cold pages),
//             so their migrations are non-blocking; MCs 0 and 1 write theirs.
//             After a migration's OS interrupt the host uses the page's new frame.
//   network   a packet is placed into the NMP-op table of its compute cube; the
//             two source operands arrive a few cycles later; a finished result
//             produces an ACK to the issuing MC with the measured latency.
//             During the first phase the operands for cube 0 are withheld and all
//             destinations lie in cube 0, so that table fills and refuses entries.
//   DRAM      random row-buffer hits and misses in every cube.
//   OS/memory frame allocation, in-order line reads, writes, migration ACK.
//   trainer   loads small random weights, then after every action rewrites the
//             advantage-head biases so that each of the eight actions becomes the
//             greedy choice in turn.
// Counted mechanisms (each must happen at least once): every one of the eight
// actions, skipped invocations, interval changes, positive and negative rewards,
// blocking and non-blocking migrations, page-lock stalls, frame release,
// remapped computation, NMP-table full, cube status reports, replay samples.
// Stimulus, environment models and the steering of the agent are this testbench's own; the
// mechanisms it counts are those of the published design, as described in rtl/aimm_top.sv.
module tb_aimm_top;
  import aimm_pkg::*;
  localparam int LANES = 256;
  localparam int HEAD = 574 + 5;           // weight words, then 5 hidden-bias words
  localparam int SW = 2*STATE_LEN*FW + 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic [3:0] op_valid, op_ready, pkt_valid, pkt_ready, ack_valid;
  nmp_op_t [3:0] op; nmp_pkt_t [3:0] pkt; page_t [3:0] ack_page; logic [3:0][15:0] ack_latency;
  logic [15:0] cube_alloc_valid, cube_alloc_ready, cube_opnd_valid, cube_opnd_idx, cube_res_valid, cube_res_ready;
  logic [15:0] cube_rb_access, cube_rb_hit;
  nmp_opcode_e [15:0] cube_alloc_op; page_t [15:0] cube_alloc_dest, cube_res_dest;
  logic [15:0][31:0] cube_alloc_acc, cube_opnd_data, cube_res_data;
  logic [15:0][8:0] cube_alloc_tag, cube_opnd_tag;
  logic frame_req, frame_gnt, mig_rd_valid, mig_rd_ready, mig_rd_resp_valid, mig_wr_valid, mig_wr_ready, mig_ack;
  logic os_irq, old_frame_busy, frame_free_valid;
  cube_t frame_req_cube; page_t frame, mig_rd_frame, mig_wr_frame, os_irq_page, os_irq_frame, frame_free;
  logic [7:0] mig_rd_line, mig_wr_line; logic [127:0] mig_rd_resp_data, mig_wr_data;
  logic w_we; logic [7:0] w_lane; logic [15:0] w_addr; feat_t w_data;
  logic draw_req, draw_valid; logic [SW-1:0] draw_sample;
  logic act_valid; action_e act; logic [1:0] act_mc; logic signed [1:0] reward;
  logic [15:0] interval, skipped_invocations; logic [3:0][31:0] mc_stall_cycles;

  aimm_top dut (.*);

  // ---------------- counters ----------------
  int n_act[8], n_rew_pos, n_rew_neg, n_mig_blk, n_mig_nb, n_free, n_remapped, n_full, n_reports, n_results;
  int n_int_change, n_acks;
  logic [15:0] last_interval;

  // ---------------- host ----------------
  page_t hot[4][4];
  logic phase1;
  int rate;                         // ops offered per 8 cycles per MC, changed every 2500 cycles
  always @(posedge clk) if (cyc % 2500 == 0) rate <= 1 + $urandom % 4;
  function automatic page_t pick(input int m, input logic is_dest);
    if (phase1) return page_t'({14'($urandom % (m >= 2 ? 16384 : 64)), 4'($urandom % 4), 4'd0});   // all in cube 0
    if (is_dest && m >= 2) return page_t'(4096 + $urandom % 4096);
    if ($urandom % 4 != 0) return hot[m][$urandom % 4];
    return page_t'($urandom % 4096);
  endfunction
  always @(negedge clk) begin
    for (int m = 0; m < 4; m++) begin
      if (!op_valid[m] || op_ready[m]) begin
        op_valid[m] = rst_n && ($urandom % 8 < rate);
        op[m] = '{op: nmp_opcode_e'($urandom % 4), dest: pick(m, 1), src1: pick(m, 0), src2: pick(m, 0)};
      end
    end
  end
  always @(posedge clk) if (os_irq) begin
    for (int m = 0; m < 4; m++) for (int k = 0; k < 4; k++) if (hot[m][k] == os_irq_page) hot[m][k] <= os_irq_frame;
  end

  // ---------------- network and cubes ----------------
  logic [15:0][8:0] res_tag;        // table index of the result being delivered
  for (genvar c = 0; c < 16; c++) begin : g_tap
    assign res_tag[c] = dut.g_cube[c].u_tbl.res_tag;
  end
  typedef struct { int mc; page_t dest; int t0; } inflight_t;
  inflight_t pendq[16][$];          // waiting for a table entry
  inflight_t ent[16][512];
  int opq[16][$];                   // operand deliveries: tag*2+idx
  int opq_t[16][$];
  int ackq[4][$]; page_t ackp[4][$];

  always @(negedge clk) begin
    for (int m = 0; m < 4; m++) pkt_ready[m] = 1'b1;
    for (int c = 0; c < 16; c++) begin
      cube_alloc_valid[c] = pendq[c].size() > 0;
      if (pendq[c].size() > 0) begin
        cube_alloc_op[c] = OP_ADD; cube_alloc_dest[c] = pendq[c][0].dest; cube_alloc_acc[c] = 32'($urandom);
      end
      cube_opnd_valid[c] = 0;
      if (opq[c].size() > 0 && opq_t[c][0] <= cyc && !(phase1 && c == 0)) begin
        cube_opnd_valid[c] = 1;
        cube_opnd_tag[c] = 9'(opq[c][0] / 2); cube_opnd_idx[c] = 1'(opq[c][0] % 2); cube_opnd_data[c] = 32'($urandom);
      end
      cube_res_ready[c] = ($urandom % 4) != 0;
      cube_rb_access[c] = ($urandom % 3) == 0;
      cube_rb_hit[c] = ($urandom % 16) < c;
    end
    for (int m = 0; m < 4; m++) begin
      ack_valid[m] = ackq[m].size() > 0;
      if (ack_valid[m]) begin ack_page[m] = ackp[m][0]; ack_latency[m] = 16'(cyc - ackq[m][0]); end
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 4; m++) if (pkt_valid[m] && pkt_ready[m]) begin
      inflight_t f; f.mc = m; f.dest = pkt[m].op.dest; f.t0 = cyc;
      pendq[pkt[m].comp_cube].push_back(f);
      if (pkt[m].remapped) n_remapped++;
    end
    for (int c = 0; c < 16; c++) begin
      if (cube_alloc_valid[c] && !cube_alloc_ready[c]) n_full++;
      if (cube_alloc_valid[c] && cube_alloc_ready[c]) begin
        ent[c][cube_alloc_tag[c]] = pendq[c].pop_front();
        opq[c].push_back(2*int'(cube_alloc_tag[c]));     opq_t[c].push_back(cyc + 3 + $urandom % 8);
        opq[c].push_back(2*int'(cube_alloc_tag[c]) + 1); opq_t[c].push_back(cyc + 3 + $urandom % 8);
      end
      if (cube_opnd_valid[c]) begin void'(opq[c].pop_front()); void'(opq_t[c].pop_front()); end
      if (cube_res_valid[c] && cube_res_ready[c]) begin
        inflight_t f = ent[c][res_tag[c]];
        ackq[f.mc].push_back(f.t0); ackp[f.mc].push_back(f.dest);
        n_results++;
      end
      if (dut.tx_valid[c]) n_reports++;
    end
    for (int m = 0; m < 4; m++) if (ack_valid[m]) begin void'(ackq[m].pop_front()); void'(ackp[m].pop_front()); n_acks++; end
  end

  // ---------------- OS and migration memory ----------------
  int rdq[$]; int lines_written, mack_at;
  assign mig_rd_ready = 1'b1;
  assign mig_wr_ready = 1'b1;
  always @(posedge clk) begin
    frame_gnt <= frame_req && !frame_gnt;
    frame     <= page_t'({18'(1000 + $urandom % 1000), frame_req_cube});
    if (mig_rd_valid) rdq.push_back(int'(mig_rd_line));
    mig_rd_resp_valid <= rdq.size() > 0;
    if (rdq.size() > 0) mig_rd_resp_data <= {mig_rd_frame, 8'(rdq.pop_front()), 98'd0};
  end
  always @(negedge clk) begin
    if (mig_wr_valid) begin
      lines_written++;
      if (mig_wr_data[127:106] != mig_rd_frame || mig_wr_data[105:98] != mig_wr_line) begin
        failures++; $display("FAIL migrated line %0d corrupt", mig_wr_line);
      end
      if (mig_wr_line == 8'd255) mack_at = cyc + 4;
    end
  end
  always @(posedge clk) begin
    mig_ack <= (cyc == mack_at);
    old_frame_busy <= ($urandom % 4) != 0;
  end
  always @(negedge clk) begin
    if (frame_free_valid) n_free++;
    if (dut.done_valid) begin
      if (dut.u_mms.u_dma.cur.blocking) n_mig_blk++; else n_mig_nb++;
    end
  end

  // ---------------- agent observation ----------------
  int next_target;
  always @(posedge clk) if (rst_n) begin
    if (act_valid) n_act[act]++;
    if (dut.rw_valid && reward == 2'sd1) n_rew_pos++;
    if (dut.rw_valid && reward == -2'sd1) n_rew_neg++;
    if (interval != last_interval) n_int_change++;
    last_interval <= interval;
  end

  task automatic wr(input int a, input int l, input int v);
    @(negedge clk); w_we = 1; w_addr = 16'(a); w_lane = 8'(l); w_data = feat_t'(v);
  endtask
  task automatic steer(input int target);
    for (int a = 0; a < 8; a++) wr(HEAD, a, (a == target) ? 16'h2000 : 0);
    @(negedge clk); w_we = 0;
  endtask

  initial begin
    #(64'd10 * 64'd3000000);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int total_act;
  initial begin
    op_valid = 0; op = '0; w_we = 0; w_addr = 0; w_lane = 0; w_data = 0; draw_req = 0; phase1 = 1;
    mack_at = -1; lines_written = 0; rate = 2; last_interval = 100;
    foreach (n_act[i]) n_act[i] = 0;
    {n_rew_pos, n_rew_neg, n_mig_blk, n_mig_nb, n_free, n_remapped, n_full, n_reports, n_results, n_int_change, n_acks} = '0;
    for (int m = 0; m < 4; m++) for (int k = 0; k < 4; k++) hot[m][k] = page_t'($urandom % 4096);
    repeat (3) @(posedge clk);
    // weights: small random values everywhere, head biases steer the first action
    for (int a = 0; a < HEAD + 1; a++) for (int l = 0; l < LANES; l++) begin
      @(negedge clk); w_we = 1; w_addr = 16'(a); w_lane = 8'(l); w_data = feat_t'(int'($urandom % 5) - 2);
    end
    @(negedge clk); w_we = 0;
    rst_n = 1;
    steer(0);
    repeat (4000) @(negedge clk);
    phase1 = 0;
    next_target = 1;
    // cycle through the eight greedy actions
    while (next_target < 160) begin
      @(negedge clk);
      if (act_valid) begin steer(next_target % 8); next_target++; end
    end
    repeat (2000) @(negedge clk);
    for (int d = 0; d < 8; d++) begin
      @(negedge clk); draw_req = 1; @(negedge clk); draw_req = 0;
      checks++;
      if (!draw_valid) begin failures++; $display("FAIL replay draw empty"); end
    end
    total_act = 0;
    for (int a = 0; a < 8; a++) begin
      $display("action %0d taken %0d times", a, n_act[a]); total_act += n_act[a];
      checks++; if (n_act[a] == 0) begin failures++; $display("FAIL action %0d never taken", a); end
    end
    $display("skipped invocations %0d, interval changes %0d, rewards +%0d/-%0d", skipped_invocations, n_int_change, n_rew_pos, n_rew_neg);
    $display("migrations blocking %0d non-blocking %0d, frames freed %0d, lock stalls %0d/%0d/%0d/%0d",
             n_mig_blk, n_mig_nb, n_free, mc_stall_cycles[0], mc_stall_cycles[1], mc_stall_cycles[2], mc_stall_cycles[3]);
    $display("remapped packets %0d, table-full cycles %0d, cube reports %0d, results %0d, acks %0d, lines migrated %0d, cycles %0d",
             n_remapped, n_full, n_reports, n_results, n_acks, lines_written, cyc);
    checks++; if (skipped_invocations == 0) begin failures++; $display("FAIL no skipped invocation"); end
    checks++; if (n_int_change == 0) begin failures++; $display("FAIL interval never changed"); end
    checks++; if (n_rew_pos == 0 || n_rew_neg == 0) begin failures++; $display("FAIL reward signs"); end
    checks++; if (n_mig_blk == 0 || n_mig_nb == 0) begin failures++; $display("FAIL migration modes"); end
    checks++; if (n_free == 0) begin failures++; $display("FAIL no frame freed"); end
    checks++; if (mc_stall_cycles[0] + mc_stall_cycles[1] + mc_stall_cycles[2] + mc_stall_cycles[3] == 0) begin failures++; $display("FAIL no lock stall"); end
    checks++; if (n_remapped == 0) begin failures++; $display("FAIL no remapped computation"); end
    checks++; if (n_full == 0) begin failures++; $display("FAIL NMP table never full"); end
    checks++; if (n_reports == 0 || n_results == 0 || n_acks == 0) begin failures++; $display("FAIL no traffic"); end
    checks++; if (lines_written != 256 * (n_mig_blk + n_mig_nb) && lines_written != 256 * (n_mig_blk + n_mig_nb + 1)) begin
      failures++; $display("FAIL lines migrated %0d", lines_written); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
