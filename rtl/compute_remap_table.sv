// compute_remap_table: agent-suggested compute locations, per page.
//
// A fully associative table of ENTRIES (page, cube) pairs. A write (wr_valid)
// updates the entry of that page if one exists, otherwise fills the next entry in
// round-robin order, replacing whatever was there. Lookup is combinational: lk_hit
// and lk_cube for lk_page in the same cycle; a second lookup port (lk2_*)
// serves the action logic. The paper specifies what is stored and
// when it is consulted; the size and replacement are this design's choices.
module compute_remap_table
  import aimm_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_valid,
  input  page_t wr_page,
  input  cube_t wr_cube,
  input  page_t lk_page,
  output logic  lk_hit,
  output cube_t lk_cube,
  input  page_t lk2_page,
  output logic  lk2_hit,
  output cube_t lk2_cube
);
  localparam int unsigned AW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] valid;
  page_t  pg  [ENTRIES];
  cube_t  cb  [ENTRIES];
  logic [AW-1:0] rr;
  logic          wr_hit;
  logic [AW-1:0] wr_idx;

  always_comb begin
    lk_hit = 1'b0; lk_cube = '0; lk2_hit = 1'b0; lk2_cube = '0;
    wr_hit = 1'b0; wr_idx = rr;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && pg[i] == lk_page) begin lk_hit = 1'b1; lk_cube = cb[i]; end
      if (valid[i] && pg[i] == lk2_page) begin lk2_hit = 1'b1; lk2_cube = cb[i]; end
      if (valid[i] && pg[i] == wr_page) begin wr_hit = 1'b1; wr_idx = AW'(i); end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0; rr <= '0;
    end else if (wr_valid) begin
      valid[wr_idx] <= 1'b1;
      if (!wr_hit) rr <= rr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      pg[wr_idx] <= wr_page;
      cb[wr_idx] <= wr_cube;
    end
  end
endmodule
