// nmp_op_table: the NMP-op table of one memory cube.
//
// An operation dest += src1 OP src2 that is computed in this cube gets an entry
// while it waits for its two source operands. alloc_* takes a new operation (the
// current destination value comes with it) into the lowest free entry and returns
// that entry's index as alloc_tag in the same cycle; alloc_ready is low when the
// table is full. Source operand responses (opnd_*) name the entry and operand
// (0 = src1, 1 = src2). When both operands of an entry are present, the entry
// offers its result on res_* (lowest ready entry first): res_data = dest OP-result,
// i.e. dest + (src1 OP src2). The entry is freed when res_ready accepts it, the
// moment the result goes to the cube's read-write queue. occupancy counts entries in
// use. Paper: role of the table, 512 entries, operation format, entry removed after
// the result is written. Design choices: the OP set (ADD, MUL, SUB, MAX), 32-bit data,
// tag-steered operand responses.
module nmp_op_table
  import aimm_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned DW      = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       alloc_valid,
  output logic                       alloc_ready,
  input  nmp_opcode_e                alloc_op,
  input  page_t                      alloc_dest,
  input  logic [DW-1:0]              alloc_acc,
  output logic [$clog2(ENTRIES)-1:0] alloc_tag,
  input  logic                       opnd_valid,
  input  logic [$clog2(ENTRIES)-1:0] opnd_tag,
  input  logic                       opnd_idx,
  input  logic [DW-1:0]              opnd_data,
  output logic                       res_valid,
  input  logic                       res_ready,
  output page_t                      res_dest,
  output logic [DW-1:0]              res_data,
  output logic [$clog2(ENTRIES)-1:0] res_tag,
  output logic [15:0]                occupancy
);
  localparam int unsigned AW = $clog2(ENTRIES);

  typedef struct packed {
    nmp_opcode_e   op;
    page_t         dest;
    logic [DW-1:0] acc;
    logic [DW-1:0] s1;
    logic [DW-1:0] s2;
  } entry_t;

  entry_t             tbl [ENTRIES];
  logic [ENTRIES-1:0] used, got1, got2;
  logic               have_free, have_rdy;
  logic [AW-1:0]      free_idx, rdy_idx;
  entry_t             r;
  logic [DW-1:0]      f;

  always_comb begin
    have_free = 1'b0; free_idx = '0;
    have_rdy  = 1'b0; rdy_idx  = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (!used[i]) begin have_free = 1'b1; free_idx = AW'(i); end
      if (used[i] && got1[i] && got2[i]) begin have_rdy = 1'b1; rdy_idx = AW'(i); end
    end
  end

  assign alloc_ready = have_free;
  assign alloc_tag   = free_idx;
  assign res_valid   = have_rdy;
  assign res_tag     = rdy_idx;
  assign r           = tbl[rdy_idx];
  assign res_dest    = r.dest;

  always_comb begin
    unique case (r.op)
      OP_ADD: f = r.s1 + r.s2;
      OP_MUL: f = DW'(r.s1 * r.s2);
      OP_SUB: f = r.s1 - r.s2;
      default: f = ($signed(r.s1) > $signed(r.s2)) ? r.s1 : r.s2;
    endcase
  end
  assign res_data = r.acc + f;

  wire do_alloc = alloc_valid && have_free;
  wire do_ret   = have_rdy && res_ready;

  always_ff @(posedge clk) begin
    if (do_alloc) begin
      tbl[free_idx].op   <= alloc_op;
      tbl[free_idx].dest <= alloc_dest;
      tbl[free_idx].acc  <= alloc_acc;
    end
    if (opnd_valid) begin
      if (opnd_idx) tbl[opnd_tag].s2 <= opnd_data;
      else          tbl[opnd_tag].s1 <= opnd_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0; got1 <= '0; got2 <= '0; occupancy <= '0;
    end else begin
      if (do_ret) begin
        used[rdy_idx] <= 1'b0; got1[rdy_idx] <= 1'b0; got2[rdy_idx] <= 1'b0;
      end
      if (do_alloc) begin
        used[free_idx] <= 1'b1; got1[free_idx] <= 1'b0; got2[free_idx] <= 1'b0;
      end
      if (opnd_valid) begin
        if (opnd_idx) got2[opnd_tag] <= 1'b1;
        else          got1[opnd_tag] <= 1'b1;
      end
      occupancy <= occupancy + (do_alloc ? 16'd1 : 16'd0) - (do_ret ? 16'd1 : 16'd0);
    end
  end

  // An operand must name an entry in use.
  assert property (@(posedge clk) disable iff (!rst_n) opnd_valid |-> used[opnd_tag]);
endmodule
