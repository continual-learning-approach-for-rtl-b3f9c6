// tb_compute_remap_table: random suggestions against an associative model with
// round-robin replacement; both lookup ports are checked every cycle.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/compute_remap_table.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_compute_remap_table;
  import aimm_pkg::*;
  localparam int E = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_valid, lk_hit, lk2_hit;
  page_t wr_page, lk_page, lk2_page;
  cube_t wr_cube, lk_cube, lk2_cube;
  compute_remap_table #(.ENTRIES(E)) dut (.*);
  logic mv[E]; page_t mp[E]; cube_t mc[E]; int rr;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void look(input page_t p, output logic h, output cube_t c);
    h = 0; c = 0;
    for (int i = 0; i < E; i++) if (mv[i] && mp[i] == p) begin h = 1; c = mc[i]; end
  endfunction

  initial begin
    logic eh; cube_t ec; int slot;
    wr_valid = 0; wr_page = 0; wr_cube = 0; lk_page = 0; lk2_page = 0; rr = 0;
    foreach (mv[i]) mv[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      lk_page = page_t'($urandom % 8); lk2_page = page_t'($urandom % 8);
      wr_valid = ($urandom % 3) == 0; wr_page = page_t'($urandom % 8); wr_cube = cube_t'($urandom);
      #1;
      look(lk_page, eh, ec);
      checks++;
      if (lk_hit != eh || (eh && lk_cube != ec)) begin failures++; $display("FAIL lk page %0d", lk_page); end
      look(lk2_page, eh, ec);
      checks++;
      if (lk2_hit != eh || (eh && lk2_cube != ec)) begin failures++; $display("FAIL lk2 page %0d", lk2_page); end
      @(posedge clk);
      if (wr_valid) begin
        slot = -1;
        for (int i = 0; i < E; i++) if (mv[i] && mp[i] == wr_page) slot = i;
        if (slot < 0) begin slot = rr; rr = (rr + 1) % E; end
        mv[slot] = 1; mp[slot] = wr_page; mc[slot] = wr_cube;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
