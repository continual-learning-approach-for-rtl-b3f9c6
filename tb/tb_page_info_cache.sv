// tb_page_info_cache: random updates of all four kinds against a software model of
// the cache (LFU victim, discarded contents, shift histories); checks every entry
// field of the most accessed page and the total access count.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/page_info_cache.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_page_info_cache;
  import aimm_pkg::*;
  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic upd_valid, upd_hit; pic_update_t upd; page_info_t top_info; logic [31:0] tot_acc;
  page_info_cache #(.ENTRIES(E)) dut (.*);

  page_info_t m[E];
  int evictions, tot;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int find(input page_t p);
    for (int i = 0; i < E; i++) if (m[i].valid && m[i].page == p) return i;
    return -1;
  endfunction

  task automatic apply(input pic_update_t u);
    int i, v;
    i = find(u.page);
    case (u.kind)
      UPD_ACCESS: begin
        tot++;
        if (i < 0) begin
          v = -1;
          for (int k = E-1; k >= 0; k--) if (!m[k].valid) v = k;
          if (v < 0) begin
            int lc = 70000;
            for (int k = 0; k < E; k++) if (m[k].accesses < lc) begin lc = m[k].accesses; v = k; end
            evictions++;
          end
          m[v] = '0; m[v].valid = 1; m[v].page = u.page; i = v;
        end
        if (m[i].accesses != 16'hFFFF) m[i].accesses++;
        m[i].hop_hist = {m[i].hop_hist[HIST_L-2:0], u.value};
        m[i].host = u.host; m[i].src_host = u.src_host; m[i].written |= u.is_dest;
      end
      UPD_PKTLAT: if (i >= 0) m[i].lat_hist = {m[i].lat_hist[HIST_L-2:0], u.value};
      UPD_MIGLAT: if (i >= 0) begin m[i].mig_hist = {m[i].mig_hist[HIST_L-2:0], u.value}; m[i].migrations++; end
      default:    if (i >= 0) m[i].act_hist = {m[i].act_hist[HIST_L-2:0], u.value};
    endcase
  endtask

  initial begin
    int ti, tc;
    upd_valid = 0; upd = '0; evictions = 0; tot = 0;
    foreach (m[i]) m[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      ti = 0; tc = -1;
      for (int i = 0; i < E; i++) if (m[i].valid && int'(m[i].accesses) > tc) begin tc = m[i].accesses; ti = i; end
      checks++;
      if (top_info != m[ti] || tot_acc != 32'(tot)) begin
        failures++; $display("FAIL t=%0d top page %0d/%0d acc %0d/%0d", t, top_info.page, m[ti].page, top_info.accesses, m[ti].accesses);
      end
      upd_valid = ($urandom % 4) != 0;
      upd.kind  = upd_kind_e'(($urandom % 3 == 0) ? ($urandom % 4) : 0);
      // skewed page popularity: a few hot pages, many cold ones
      upd.page  = page_t'(($urandom % 2) ? ($urandom % 4) : ($urandom % 40));
      upd.value = 16'($urandom % 300);
      upd.host = cube_t'($urandom); upd.src_host = cube_t'($urandom); upd.is_dest = $urandom % 2;
      @(posedge clk);
      if (upd_valid) apply(upd);
    end
    checks++;
    if (evictions < 50) begin failures++; $display("FAIL too few evictions %0d", evictions); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
