// page_info_cache: per-MC fully associative cache of page statistics.
//
// Each entry describes one physical page: its access count, its migration count
// and four histories of length HIST_L (communication hop count, packet latency,
// migration latency and the actions taken for it), plus the page's host cube, the
// host cube of the first source of its latest operation and whether it was ever
// written. One update is applied per cycle (upd_valid):
//   UPD_ACCESS  an NMP op involving the page was sent: accesses+1, hop count shifted
//               into the hop history. A page with no entry gets one: a free entry if
//               there is one, otherwise the least frequently used entry (lowest access
//               count, lowest index on a tie), which is cleared; the victim's
//               contents are dropped, never written back.
//   UPD_PKTLAT  an ACK came back: packet latency shifted into the latency history.
//   UPD_MIGLAT  the page's migration finished: migration count+1 and latency shifted
//               into the migration-latency history.
//   UPD_ACTION  the page was chosen for an agent action: action shifted into the
//               action history.
// The three non-access updates change only an existing entry. Histories hold the
// newest value at index 0. top_info is the valid entry with the highest access count
// (the "highly accessed page" handed to the agent), combinational on the stored state.
// tot_acc counts every access update, for the page access rate.
// Paper: entry contents, update events, LFU replacement with discarded victim,
// 128 entries. Design choices: history length 8, 16-bit saturating counters,
// host/source/written fields, allocation only on access updates.
module page_info_cache
  import aimm_pkg::*;
#(
  parameter int unsigned ENTRIES = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         upd_valid,
  input  pic_update_t  upd,
  output page_info_t   top_info,
  output logic [31:0]  tot_acc,
  output logic         upd_hit       // the updated page had an entry (for visibility)
);
  localparam int unsigned AW = $clog2(ENTRIES);
  page_info_t e [ENTRIES];

  logic          hit, have_free;
  logic [AW-1:0] hit_idx, free_idx, lfu_idx, top_idx, tgt;
  logic [15:0]   lfu_cnt, top_cnt;

  always_comb begin
    hit = 1'b0; hit_idx = '0;
    have_free = 1'b0; free_idx = '0;
    lfu_idx = '0; lfu_cnt = 16'hFFFF;
    top_idx = '0; top_cnt = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (e[i].valid && e[i].page == upd.page) begin hit = 1'b1; hit_idx = AW'(i); end
      if (!e[i].valid) begin have_free = 1'b1; free_idx = AW'(i); end
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (e[i].valid && e[i].accesses < lfu_cnt) begin lfu_cnt = e[i].accesses; lfu_idx = AW'(i); end
      if (e[i].valid && (e[i].accesses > top_cnt || i == 0)) begin top_cnt = e[i].accesses; top_idx = AW'(i); end
    end
    tgt = hit ? hit_idx : (have_free ? free_idx : lfu_idx);
  end

  assign top_info = e[top_idx];
  assign upd_hit  = hit;

  function automatic logic [15:0] inc_sat(input logic [15:0] v);
    return (v == 16'hFFFF) ? v : v + 16'd1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) e[i] <= '0;
      tot_acc <= '0;
    end else if (upd_valid) begin
      unique case (upd.kind)
        UPD_ACCESS: begin
          tot_acc <= tot_acc + 32'd1;
          if (hit) begin
            e[tgt].accesses <= inc_sat(e[tgt].accesses);
            e[tgt].hop_hist <= {e[tgt].hop_hist[HIST_L-2:0], upd.value};
            e[tgt].host     <= upd.host;
            e[tgt].src_host <= upd.src_host;
            e[tgt].written  <= e[tgt].written | upd.is_dest;
          end else begin
            e[tgt]          <= '0;
            e[tgt].valid    <= 1'b1;
            e[tgt].page     <= upd.page;
            e[tgt].accesses <= 16'd1;
            e[tgt].hop_hist <= {{(HIST_L-1){16'd0}}, upd.value};
            e[tgt].host     <= upd.host;
            e[tgt].src_host <= upd.src_host;
            e[tgt].written  <= upd.is_dest;
          end
        end
        UPD_PKTLAT: if (hit) e[tgt].lat_hist <= {e[tgt].lat_hist[HIST_L-2:0], upd.value};
        UPD_MIGLAT: if (hit) begin
          e[tgt].mig_hist   <= {e[tgt].mig_hist[HIST_L-2:0], upd.value};
          e[tgt].migrations <= inc_sat(e[tgt].migrations);
        end
        UPD_ACTION: if (hit) e[tgt].act_hist <= {e[tgt].act_hist[HIST_L-2:0], upd.value};
      endcase
    end
  end
endmodule
