// tb_memory_controller: sends NMP operations through one MC and checks the
// default compute cube, the page information cache contents (through the most
// accessed page and the total access count), the stall while a page is locked,
// the queue occupancy, ACK counting and latency history, compute remapping
// (far/near/source) changing the compute cube of later operations, and data
// remapping producing a migration request with the right target and mode.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/memory_controller.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_memory_controller;
  import aimm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic op_valid, op_ready, pkt_valid, pkt_ready, ack_valid, lock_valid, migdone_valid, mig_valid, mig_ready;
  logic act_valid, ops_clear;
  nmp_op_t op; nmp_pkt_t pkt; page_t ack_page, lock_page, migdone_page;
  logic [15:0] ack_latency, migdone_latency, qocc;
  logic [3:0] cs_valid; logic [3:0][15:0] cs_occ, cs_hit, avg_occ, avg_hit;
  mig_req_t mig_req; action_e action; page_info_t sel_info, top_info; logic [1:0] rnd;
  logic [31:0] tot_acc, ops_done, stall_cycles;
  memory_controller dut (.*);

  nmp_pkt_t got[$];
  always @(posedge clk) if (rst_n && pkt_valid && pkt_ready) got.push_back(pkt);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input page_t d, input page_t s1, input page_t s2);
    @(negedge clk); op_valid = 1; op = '{op: OP_ADD, dest: d, src1: s1, src2: s2};
    while (!op_ready) @(negedge clk);
    @(negedge clk); op_valid = 0;
  endtask

  task automatic expect_pkt(input page_t d, input cube_t c, input logic rm);
    nmp_pkt_t p;
    for (int w = 0; w < 50 && got.size() == 0; w++) @(negedge clk);
    checks++;
    if (got.size() == 0) begin failures++; $display("FAIL no packet"); return; end
    p = got.pop_front();
    if (p.op.dest != d || p.comp_cube != c || p.remapped != rm) begin
      failures++; $display("FAIL pkt dest %0h cube %0d rm %0d, expected %0h %0d %0d", p.op.dest, p.comp_cube, p.remapped, d, c, rm);
    end
  endtask

  initial begin
    page_t hot;
    op_valid = 0; op = '0; pkt_ready = 1; ack_valid = 0; ack_page = 0; ack_latency = 0; lock_valid = 0; lock_page = 0;
    migdone_valid = 0; migdone_page = 0; migdone_latency = 0; mig_ready = 0; act_valid = 0; action = ACT_DEFAULT;
    sel_info = '0; rnd = 0; ops_clear = 0; cs_valid = 0; cs_occ = 0; cs_hit = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    hot = 22'h00105;   // host cube 5 = (1,1)
    // 1. default scheduling and cache updates
    for (int i = 0; i < 6; i++) begin
      send(hot, page_t'(22'h200 + i), page_t'(22'h300 + 16*i));
      expect_pkt(hot, 4'd5, 1'b0);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (top_info.page != hot || top_info.accesses != 16'd6 || !top_info.written || top_info.host != 4'd5 ||
        top_info.hop_hist[0] != 16'd0 || tot_acc != 32'd18) begin
      failures++; $display("FAIL cache page %0h acc %0d tot %0d", top_info.page, top_info.accesses, tot_acc);
    end
    // src1 = 0x205 (cube 5), src2 0x30F (cube 15): hop count of src2 from cube 5 = 2+2
    // 2. lock stall and queue occupancy
    @(negedge clk); lock_valid = 1; lock_page = 22'h0030F;
    pkt_ready = 1;
    send(22'h00111, 22'h00112, 22'h0030F);
    send(22'h00113, 22'h00114, 22'h00115);
    repeat (10) @(negedge clk);
    checks++;
    if (got.size() != 0 || stall_cycles < 5 || qocc != 16'd2) begin failures++; $display("FAIL lock stall got %0d stalls %0d q %0d", got.size(), stall_cycles, qocc); end
    lock_valid = 0;
    expect_pkt(22'h00111, 4'd1, 1'b0);
    expect_pkt(22'h00113, 4'd3, 1'b0);
    // 3. ACKs
    @(negedge clk); ack_valid = 1; ack_page = hot; ack_latency = 16'd77; @(negedge clk); ack_valid = 0;
    @(negedge clk); ack_valid = 1; ack_page = hot; ack_latency = 16'd88; @(negedge clk); ack_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ops_done != 32'd2 || top_info.lat_hist[0] != 16'd88 || top_info.lat_hist[1] != 16'd77) begin
      failures++; $display("FAIL ack ops %0d lat %0d %0d", ops_done, top_info.lat_hist[0], top_info.lat_hist[1]);
    end
    @(negedge clk); ops_clear = 1; @(negedge clk); ops_clear = 0;
    checks++;
    if (ops_done != 0) begin failures++; $display("FAIL ops clear"); end
    // 4. far compute remap of the hot page: opposite of cube 5 (1,1) is cube 10 (2,2)
    sel_info = top_info;
    @(negedge clk); act_valid = 1; action = ACT_FAR_COMP; @(negedge clk); act_valid = 0;
    send(hot, 22'h00201, 22'h00202);
    expect_pkt(hot, 4'd10, 1'b1);
    repeat (4) @(negedge clk);
    checks++;
    if (top_info.act_hist[0] != 16'(ACT_FAR_COMP)) begin failures++; $display("FAIL action history"); end
    // near compute from the current compute cube 10 with rnd=1 (x-1): cube 9
    sel_info = top_info; rnd = 2'd1;
    @(negedge clk); act_valid = 1; action = ACT_NEAR_COMP; @(negedge clk); act_valid = 0;
    send(hot, 22'h00201, 22'h00202);
    expect_pkt(hot, 4'd9, 1'b1);
    // source compute: first source 0x20E lives in cube 14
    send(hot, 22'h0020E, 22'h00202);
    expect_pkt(hot, 4'd9, 1'b1);
    repeat (4) @(negedge clk);
    sel_info = top_info;
    @(negedge clk); act_valid = 1; action = ACT_SRC_COMP; @(negedge clk); act_valid = 0;
    send(hot, 22'h00201, 22'h00202);
    expect_pkt(hot, 4'd14, 1'b1);
    // 5. far data remap: compute cube now 14 (2,3) -> opposite (1,0) = cube 1, blocking (written page)
    repeat (4) @(negedge clk);
    sel_info = top_info;
    @(negedge clk); act_valid = 1; action = ACT_FAR_DATA; @(negedge clk); act_valid = 0;
    checks++;
    if (!mig_valid || mig_req.page != hot || mig_req.new_cube != 4'd1 || !mig_req.blocking) begin
      failures++; $display("FAIL migration request v%0d cube %0d", mig_valid, mig_req.new_cube);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (!mig_valid) begin failures++; $display("FAIL request dropped before taken"); end
    mig_ready = 1; @(negedge clk); mig_ready = 0;
    checks++;
    if (mig_valid) begin failures++; $display("FAIL request not released"); end
    // migration report
    @(negedge clk); migdone_valid = 1; migdone_page = hot; migdone_latency = 16'd321; @(negedge clk); migdone_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (top_info.migrations != 16'd1 || top_info.mig_hist[0] != 16'd321) begin failures++; $display("FAIL migration stats"); end
    // 6. cube status reports reach the counters
    @(negedge clk); cs_valid = 4'b0101; cs_occ[0] = 16'd40; cs_occ[2] = 16'd80; cs_hit[0] = 16'd200; @(negedge clk); cs_valid = 0;
    @(negedge clk);
    checks++;
    if (avg_occ[0] != 16'd10 || avg_occ[2] != 16'd20 || avg_hit[0] != 16'd50 || avg_occ[1] != 0) begin failures++; $display("FAIL sys counters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
