// aimm_top: learned data and computation mapping for a 4x4 memory-cube NMP system.
//
// Contents:
//   * 16 cubes' NMP-op tables (nmp_op_table) with their status registers and
//     transmitters (cube_info_regs); the cube network, DRAM and operand traffic are
//     outside and reach each table through the cube_* ports.
//   * 4 memory controllers (memory_controller) with op queue, NMP-op scheduler,
//     compute remap table, page information cache and system information counters.
//     Cube c reports to MC {c[3],c[1]} (its quadrant) at index {c[2],c[0]}.
//   * interval_ctrl, the agent invocation timer (100/125/167/250 cycles).
//   * state_builder and reward_unit (information orchestration).
//   * rl_agent: info buffer, dueling Q network, epsilon-greedy choice, replay buffer.
//   * migration_mgmt: migration queue and migration DMA.
//
// Control loop. At each invocation, if the agent and state builder are idle, the
// operations completed by all MCs since the previous accepted invocation and the
// length of that window are sampled by the reward unit (OPC comparison), and the
// state builder takes the system counters plus the page information of the MC
// whose turn it is. Invocations that find the agent busy are skipped
// (skipped_invocations). When the agent returns an action, interval actions go to
// the timer; remapping actions go to the MC that supplied the page: compute
// remapping writes its remap table, data remapping queues a migration (requests of
// several MCs are served lowest MC first). Migration reports and the page lock are
// broadcast to all MCs. Weight loading and replay draws are ports for the training
// logic, which is not part of this design.
module aimm_top
  import aimm_pkg::*;
#(
  parameter int unsigned NMP_ENTRIES = 512,
  parameter int unsigned PIC_ENTRIES = 128,
  parameter int unsigned MQ_DEPTH    = 128,
  parameter int unsigned LANES       = 256,
  parameter int unsigned RDEPTH      = 120736,
  parameter int unsigned TX_PERIOD   = 100,
  parameter int unsigned BUF_LINES   = 64,
  parameter int unsigned DW          = 32,
  localparam int unsigned TW = $clog2(NMP_ENTRIES),
  localparam int unsigned LW = $clog2(PAGE_LINES),
  localparam int unsigned SW = 2*STATE_LEN*FW + 5
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host -> MCs
  input  logic        [N_MC-1:0]       op_valid,
  output logic        [N_MC-1:0]       op_ready,
  input  nmp_op_t     [N_MC-1:0]       op,
  // MCs <-> cube network
  output logic        [N_MC-1:0]       pkt_valid,
  input  logic        [N_MC-1:0]       pkt_ready,
  output nmp_pkt_t    [N_MC-1:0]       pkt,
  input  logic        [N_MC-1:0]       ack_valid,
  input  page_t       [N_MC-1:0]       ack_page,
  input  logic [N_MC-1:0][15:0]        ack_latency,
  // cube NMP tables and DRAM events
  input  logic        [N_CUBES-1:0]    cube_alloc_valid,
  output logic        [N_CUBES-1:0]    cube_alloc_ready,
  input  nmp_opcode_e [N_CUBES-1:0]    cube_alloc_op,
  input  page_t       [N_CUBES-1:0]    cube_alloc_dest,
  input  logic [N_CUBES-1:0][DW-1:0]   cube_alloc_acc,
  output logic [N_CUBES-1:0][TW-1:0]   cube_alloc_tag,
  input  logic        [N_CUBES-1:0]    cube_opnd_valid,
  input  logic [N_CUBES-1:0][TW-1:0]   cube_opnd_tag,
  input  logic        [N_CUBES-1:0]    cube_opnd_idx,
  input  logic [N_CUBES-1:0][DW-1:0]   cube_opnd_data,
  output logic        [N_CUBES-1:0]    cube_res_valid,
  input  logic        [N_CUBES-1:0]    cube_res_ready,
  output page_t       [N_CUBES-1:0]    cube_res_dest,
  output logic [N_CUBES-1:0][DW-1:0]   cube_res_data,
  input  logic        [N_CUBES-1:0]    cube_rb_access,
  input  logic        [N_CUBES-1:0]    cube_rb_hit,
  // migration: OS frame pool, memory traffic, acknowledgement
  output logic                         frame_req,
  output cube_t                        frame_req_cube,
  input  logic                         frame_gnt,
  input  page_t                        frame,
  output logic                         mig_rd_valid,
  input  logic                         mig_rd_ready,
  output page_t                        mig_rd_frame,
  output logic [LW-1:0]                mig_rd_line,
  input  logic                         mig_rd_resp_valid,
  input  logic [127:0]                 mig_rd_resp_data,
  output logic                         mig_wr_valid,
  input  logic                         mig_wr_ready,
  output page_t                        mig_wr_frame,
  output logic [LW-1:0]                mig_wr_line,
  output logic [127:0]                 mig_wr_data,
  input  logic                         mig_ack,
  output logic                         os_irq,
  output page_t                        os_irq_page,
  output page_t                        os_irq_frame,
  input  logic                         old_frame_busy,
  output logic                         frame_free_valid,
  output page_t                        frame_free,
  // training side
  input  logic                         w_we,
  input  logic [$clog2(LANES)-1:0]     w_lane,
  input  logic [15:0]                  w_addr,
  input  feat_t                        w_data,
  input  logic                         draw_req,
  output logic                         draw_valid,
  output logic [SW-1:0]                draw_sample,
  // observation
  output logic                         act_valid,
  output action_e                      act,
  output logic [1:0]                   act_mc,
  output logic signed [1:0]            reward,
  output logic [15:0]                  interval,
  output logic [15:0]                  skipped_invocations,
  output logic [N_MC-1:0][31:0]        mc_stall_cycles
);
  // ---------------- cubes ----------------
  logic [N_CUBES-1:0][15:0] occ, tx_occ, tx_hit, hit_rate;
  logic [N_CUBES-1:0]       tx_valid;

  for (genvar c = 0; c < N_CUBES; c++) begin : g_cube
    nmp_op_table #(.ENTRIES(NMP_ENTRIES), .DW(DW)) u_tbl (
      .clk, .rst_n,
      .alloc_valid(cube_alloc_valid[c]), .alloc_ready(cube_alloc_ready[c]),
      .alloc_op(cube_alloc_op[c]), .alloc_dest(cube_alloc_dest[c]), .alloc_acc(cube_alloc_acc[c]),
      .alloc_tag(cube_alloc_tag[c]),
      .opnd_valid(cube_opnd_valid[c]), .opnd_tag(cube_opnd_tag[c]), .opnd_idx(cube_opnd_idx[c]),
      .opnd_data(cube_opnd_data[c]),
      .res_valid(cube_res_valid[c]), .res_ready(cube_res_ready[c]), .res_dest(cube_res_dest[c]),
      .res_data(cube_res_data[c]), .res_tag(), .occupancy(occ[c]));
    cube_info_regs #(.TX_PERIOD(TX_PERIOD)) u_regs (
      .clk, .rst_n, .occupancy(occ[c]), .rb_access(cube_rb_access[c]), .rb_hit(cube_rb_hit[c]),
      .tx_valid(tx_valid[c]), .tx_occ(tx_occ[c]), .tx_hit_rate(tx_hit[c]), .hit_rate(hit_rate[c]));
  end

  // ---------------- agent side signals ----------------
  logic        invoke, sb_busy, sb_done, ag_busy, sample;
  logic [1:0]  sel_mc;
  page_info_t  sel_info;
  feat_t [STATE_LEN-1:0] state;
  logic [HIST_K-1:0][2:0] gact_hist;
  logic [15:0] rnd;
  logic        rw_valid;
  logic [1:0]  int_idx;
  logic [31:0] ops_sum;
  logic [15:0] win_cycles;

  // ---------------- memory controllers ----------------
  logic [N_MC-1:0][CUBES_PER_MC-1:0][15:0] avg_occ, avg_hit;
  page_info_t [N_MC-1:0]   top_info;
  logic [N_MC-1:0][31:0]   tot_acc, ops_done;
  logic [N_MC-1:0][15:0]   qocc;
  logic [N_MC-1:0]         mreq_valid, mreq_ready;
  mig_req_t [N_MC-1:0]     mreq;
  logic                    lock_valid, done_valid;
  page_t                   lock_page, done_page;
  logic [15:0]             done_latency;

  for (genvar m = 0; m < N_MC; m++) begin : g_mc
    logic [CUBES_PER_MC-1:0]       cs_valid;
    logic [CUBES_PER_MC-1:0][15:0] cs_occ, cs_hit;
    for (genvar j = 0; j < CUBES_PER_MC; j++) begin : g_cs
      // cube index from (MC m, slot j): c = {m[1], j[1], m[0], j[0]}
      localparam int unsigned C = ((m >> 1) << 3) | ((j >> 1) << 2) | ((m & 1) << 1) | (j & 1);
      assign cs_valid[j] = tx_valid[C];
      assign cs_occ[j]   = tx_occ[C];
      assign cs_hit[j]   = tx_hit[C];
    end
    memory_controller #(.PIC_ENTRIES(PIC_ENTRIES)) u_mc (
      .clk, .rst_n,
      .op_valid(op_valid[m]), .op_ready(op_ready[m]), .op(op[m]),
      .pkt_valid(pkt_valid[m]), .pkt_ready(pkt_ready[m]), .pkt(pkt[m]),
      .ack_valid(ack_valid[m]), .ack_page(ack_page[m]), .ack_latency(ack_latency[m]),
      .cs_valid, .cs_occ, .cs_hit, .avg_occ(avg_occ[m]), .avg_hit(avg_hit[m]),
      .lock_valid, .lock_page,
      .migdone_valid(done_valid), .migdone_page(done_page), .migdone_latency(done_latency),
      .mig_valid(mreq_valid[m]), .mig_ready(mreq_ready[m]), .mig_req(mreq[m]),
      .act_valid(act_valid && act_mc == 2'(m)), .action(act), .sel_info, .rnd(rnd[1:0]),
      .top_info(top_info[m]), .tot_acc(tot_acc[m]), .qocc(qocc[m]),
      .ops_clear(sample), .ops_done(ops_done[m]), .stall_cycles(mc_stall_cycles[m]));
  end

  // ---------------- migration ----------------
  logic     mm_valid, mm_ready;
  mig_req_t mm_req;
  logic [$clog2(MQ_DEPTH+1)-1:0] mq_count;

  always_comb begin
    mm_valid = 1'b0; mm_req = mreq[0]; mreq_ready = '0;
    for (int m = N_MC-1; m >= 0; m--) if (mreq_valid[m]) begin mm_valid = 1'b1; mm_req = mreq[m]; end
    for (int m = 0; m < N_MC; m++) if (mreq_valid[m]) begin mreq_ready[m] = mm_ready; break; end
  end

  migration_mgmt #(.QDEPTH(MQ_DEPTH), .BUF_LINES(BUF_LINES)) u_mms (
    .clk, .rst_n, .req_valid(mm_valid), .req_ready(mm_ready), .req(mm_req), .qcount(mq_count),
    .lock_valid, .lock_page, .frame_req, .frame_cube_o(frame_req_cube), .frame_gnt, .frame,
    .rd_valid(mig_rd_valid), .rd_ready(mig_rd_ready), .rd_frame(mig_rd_frame), .rd_line(mig_rd_line),
    .rd_resp_valid(mig_rd_resp_valid), .rd_resp_data(mig_rd_resp_data),
    .wr_valid(mig_wr_valid), .wr_ready(mig_wr_ready), .wr_frame(mig_wr_frame), .wr_line(mig_wr_line),
    .wr_data(mig_wr_data), .mack_valid(mig_ack),
    .done_valid, .done_page, .done_frame(os_irq_frame), .done_latency, .os_irq,
    .old_busy(old_frame_busy), .free_valid(frame_free_valid), .free_frame(frame_free));
  assign os_irq_page = done_page;

  // ---------------- invocation, reward, state ----------------
  lfsr16 #(.SEED(16'h1D2B)) u_rnd (.clk, .rst_n, .en(1'b1), .q(rnd));

  interval_ctrl u_int (.clk, .rst_n, .act_valid, .action(act), .invoke, .cur_interval(interval), .idx(int_idx));

  assign sample = invoke && !sb_busy && !ag_busy && !sb_done;

  always_comb begin
    ops_sum = '0;
    for (int m = 0; m < N_MC; m++) ops_sum += ops_done[m];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_cycles <= '0; skipped_invocations <= '0;
    end else begin
      win_cycles <= sample ? 16'd1 : ((win_cycles == 16'hFFFF) ? win_cycles : win_cycles + 16'd1);
      if (invoke && !sample) skipped_invocations <= skipped_invocations + 16'd1;
    end
  end

  reward_unit u_rew (.clk, .rst_n, .sample, .ops(ops_sum), .cycles(win_cycles),
                     .reward_valid(rw_valid), .reward);

  state_builder u_sb (
    .clk, .rst_n, .start(sample), .avg_occ, .avg_hit, .mc_qocc(qocc), .gact_hist,
    .top_info, .tot_acc, .busy(sb_busy), .done(sb_done), .state, .sel_mc, .sel_info);

  rl_agent #(.LANES(LANES), .RDEPTH(RDEPTH)) u_agent (
    .clk, .rst_n, .st_valid(sb_done), .state, .reward,
    .act_valid, .action(act), .act_explored(), .gact_hist, .dropped(), .samples(), .busy(ag_busy),
    .w_we, .w_lane, .w_addr, .w_data, .draw_req, .draw_valid, .draw_sample);

  assign act_mc = sel_mc;

  logic unused;
  assign unused = ^{hit_rate, rw_valid, int_idx, mq_count};
endmodule
