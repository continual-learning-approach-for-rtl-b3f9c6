// memory_controller: the mapping-related part of one memory controller (MC).
//
// NMP operations from the host wait in the MC queue (QDEPTH entries; its fill level
// is the "MC queue occupancy" state feature). The operation at the head is held
// back (stall) while any of its three pages is locked by a blocking migration.
// Otherwise the NMP-op scheduler picks its computation cube (destination host cube,
// or the compute remap table's entry for the destination page) and the packet is
// sent when the network accepts it (pkt_ready). Sending an op updates the page
// information cache for its destination, first and second source in the next three
// cycles (access count, hop count); the queue does not issue again until they are
// done, so at most one op leaves every three cycles.
//
// Other cache updates: an NMP ACK (ack_*) adds its packet latency to the history of
// its destination page and counts one completed operation; a migration report
// (migdone_*) adds the migration latency; an agent action (act_*) for this MC's
// selected page adds the action. Each of these waits in a one-entry register and is
// applied when the cache port is free (a newer event of the same kind replaces an
// unapplied one).
//
// Agent actions for the selected page (sel_info): its current compute cube is its
// remap-table entry or, failing that, its host cube.
//   near/far data remapping   -> migration request to a random neighbour / the
//                                diagonal opposite of the compute cube; blocking if
//                                the page has been written, non-blocking otherwise
//   near/far/source compute   -> remap table entry: random neighbour / diagonal
//                                opposite of the compute cube / host cube of the
//                                first source
// The MC's cube status reports feed its system information counters.
// ops_done counts completed operations since the last ops_clear.
// Paper: queue occupancy, remap table use, page-cache update events, locking, the
// action definitions. Design choices: queue depth, serialised updates, pending
// registers, use of the destination page for remap lookup and ACK latency.
module memory_controller
  import aimm_pkg::*;
#(
  parameter int unsigned QDEPTH     = 16,
  parameter int unsigned PIC_ENTRIES = 128,
  parameter int unsigned CRT_ENTRIES = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  // host side
  input  logic         op_valid,
  output logic         op_ready,
  input  nmp_op_t      op,
  // network side
  output logic         pkt_valid,
  input  logic         pkt_ready,
  output nmp_pkt_t     pkt,
  input  logic         ack_valid,
  input  page_t        ack_page,
  input  logic [15:0]  ack_latency,
  // cube status reports of the CUBES_PER_MC nearest cubes
  input  logic [CUBES_PER_MC-1:0]        cs_valid,
  input  logic [CUBES_PER_MC-1:0][15:0]  cs_occ,
  input  logic [CUBES_PER_MC-1:0][15:0]  cs_hit,
  output logic [CUBES_PER_MC-1:0][15:0]  avg_occ,
  output logic [CUBES_PER_MC-1:0][15:0]  avg_hit,
  // migration system
  input  logic         lock_valid,
  input  page_t        lock_page,
  input  logic         migdone_valid,
  input  page_t        migdone_page,
  input  logic [15:0]  migdone_latency,
  output logic         mig_valid,
  input  logic         mig_ready,
  output mig_req_t     mig_req,
  // agent
  input  logic         act_valid,
  input  action_e      action,
  input  page_info_t   sel_info,
  input  logic [1:0]   rnd,
  output page_info_t   top_info,
  output logic [31:0]  tot_acc,
  output logic [15:0]  qocc,
  input  logic         ops_clear,
  output logic [31:0]  ops_done,
  output logic [31:0]  stall_cycles
);
  logic        q_valid, q_pop;
  nmp_op_t     q_head;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  sync_fifo #(.W($bits(nmp_op_t)), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .in_valid(op_valid), .in_ready(op_ready), .in_data(op),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_head), .count(q_count));
  assign qocc = 16'(q_count);

  // Scheduler and remap table.
  page_t  rt_lk_page;
  logic   rt_hit, rt2_hit;
  cube_t  rt_cube, rt2_cube;
  logic [3:0] hop_d, hop_1, hop_2;
  logic   crt_we;
  page_t  crt_page;
  cube_t  crt_cube;

  compute_remap_table #(.ENTRIES(CRT_ENTRIES)) u_crt (
    .clk, .rst_n, .wr_valid(crt_we), .wr_page(crt_page), .wr_cube(crt_cube),
    .lk_page(rt_lk_page), .lk_hit(rt_hit), .lk_cube(rt_cube),
    .lk2_page(sel_info.page), .lk2_hit(rt2_hit), .lk2_cube(rt2_cube));

  nmp_op_scheduler u_sched (
    .op(q_head), .rt_lk_page, .rt_hit, .rt_cube, .pkt,
    .hop_dest(hop_d), .hop_src1(hop_1), .hop_src2(hop_2));

  // Issue with page-lock stall and serialised cache updates.
  logic [1:0]  useq;            // remaining access updates of the last op
  nmp_op_t     sent;
  logic [3:0]  h1, h2, hop_d_r;
  logic        locked;

  assign locked    = lock_valid && (q_head.dest == lock_page || q_head.src1 == lock_page || q_head.src2 == lock_page);
  assign pkt_valid = q_valid && !locked && (useq == 2'd0);
  assign q_pop     = pkt_valid && pkt_ready;

  // Page information cache and its update arbitration.
  logic        pic_we;
  pic_update_t pic_upd;
  logic        pic_hit;
  logic        p_ack, p_mig, p_act;
  pic_update_t u_ack, u_mig, u_act;

  page_info_cache #(.ENTRIES(PIC_ENTRIES)) u_pic (
    .clk, .rst_n, .upd_valid(pic_we), .upd(pic_upd), .top_info, .tot_acc, .upd_hit(pic_hit));

  always_comb begin
    pic_we  = 1'b0;
    pic_upd = '0;
    if (useq != 2'd0) begin
      pic_we           = 1'b1;
      pic_upd.kind     = UPD_ACCESS;
      pic_upd.page     = (useq == 2'd3) ? sent.dest : (useq == 2'd2) ? sent.src1 : sent.src2;
      pic_upd.value    = {12'd0, (useq == 2'd3) ? hop_d_r : (useq == 2'd2) ? h1 : h2};
      pic_upd.host     = frame_cube(pic_upd.page);
      pic_upd.src_host = frame_cube(sent.src1);
      pic_upd.is_dest  = (useq == 2'd3);
    end else if (p_ack) begin
      pic_we = 1'b1; pic_upd = u_ack;
    end else if (p_mig) begin
      pic_we = 1'b1; pic_upd = u_mig;
    end else if (p_act) begin
      pic_we = 1'b1; pic_upd = u_act;
    end
  end

  // Action execution.
  cube_t comp_cur, tgt;
  always_comb begin
    comp_cur = rt2_hit ? rt2_cube : sel_info.host;
    unique case (action)
      ACT_NEAR_DATA, ACT_NEAR_COMP: tgt = neighbour(comp_cur, rnd);
      ACT_FAR_DATA, ACT_FAR_COMP:   tgt = opposite(comp_cur);
      ACT_SRC_COMP:                 tgt = sel_info.src_host;
      default:                      tgt = comp_cur;
    endcase
  end
  wire act_ok   = act_valid && sel_info.valid;
  wire act_data = act_ok && (action == ACT_NEAR_DATA || action == ACT_FAR_DATA);
  wire act_comp = act_ok && (action == ACT_NEAR_COMP || action == ACT_FAR_COMP || action == ACT_SRC_COMP);

  assign crt_we   = act_comp;
  assign crt_page = sel_info.page;
  assign crt_cube = tgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      useq <= '0; sent <= '0; h1 <= '0; h2 <= '0; hop_d_r <= '0;
      p_ack <= 1'b0; p_mig <= 1'b0; p_act <= 1'b0; u_ack <= '0; u_mig <= '0; u_act <= '0;
      mig_valid <= 1'b0; mig_req <= '0; ops_done <= '0; stall_cycles <= '0;
    end else begin
      if (q_pop) begin
        useq <= 2'd3; sent <= q_head; hop_d_r <= hop_d; h1 <= hop_1; h2 <= hop_2;
      end else if (useq != 2'd0) begin
        useq <= useq - 2'd1;
      end
      if (q_valid && locked) stall_cycles <= stall_cycles + 32'd1;

      // pending single-entry update registers
      if (useq == 2'd0) begin
        if (p_ack) p_ack <= 1'b0;
        else if (p_mig) p_mig <= 1'b0;
        else if (p_act) p_act <= 1'b0;
      end
      if (ack_valid) begin
        p_ack <= 1'b1;
        u_ack <= '{kind: UPD_PKTLAT, page: ack_page, value: ack_latency, host: '0, src_host: '0, is_dest: 1'b0};
      end
      if (migdone_valid) begin
        p_mig <= 1'b1;
        u_mig <= '{kind: UPD_MIGLAT, page: migdone_page, value: migdone_latency, host: '0, src_host: '0, is_dest: 1'b0};
      end
      if (act_ok) begin
        p_act <= 1'b1;
        u_act <= '{kind: UPD_ACTION, page: sel_info.page, value: {13'd0, action}, host: '0, src_host: '0, is_dest: 1'b0};
      end

      // data remapping request, held until the migration system takes it
      if (mig_valid && mig_ready) mig_valid <= 1'b0;
      if (act_data) begin
        mig_valid <= 1'b1;
        mig_req   <= '{page: sel_info.page, new_cube: tgt, blocking: sel_info.written};
      end

      if (ops_clear) ops_done <= ack_valid ? 32'd1 : 32'd0;
      else if (ack_valid) ops_done <= ops_done + 32'd1;
    end
  end

  // system information counters
  sys_info_counters #(.NC(CUBES_PER_MC)) u_sic (
    .clk, .rst_n, .in_valid(cs_valid), .in_occ(cs_occ), .in_hit(cs_hit), .avg_occ, .avg_hit);

  logic unused;
  assign unused = pic_hit;
endmodule
