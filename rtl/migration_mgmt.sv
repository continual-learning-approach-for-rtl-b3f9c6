// migration_mgmt: the migration management system.
//
// Data-remapping requests (page, new host cube, blocking mode) enter the migration
// queue (QDEPTH entries, refused when full). The migration DMA takes the request at
// the head whenever it is idle and carries it out (see migration_dma); all its
// memory-side, OS-side and reporting signals are passed through. qcount is the
// queue fill level. Structure and queue size follow the paper.
module migration_mgmt
  import aimm_pkg::*;
#(
  parameter int unsigned QDEPTH     = 128,
  parameter int unsigned BUF_LINES  = 64,
  parameter int unsigned PAGE_LINES = aimm_pkg::PAGE_LINES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  mig_req_t     req,
  output logic [$clog2(QDEPTH+1)-1:0] qcount,
  output logic         lock_valid,
  output page_t        lock_page,
  output logic         frame_req,
  output cube_t        frame_cube_o,
  input  logic         frame_gnt,
  input  page_t        frame,
  output logic         rd_valid,
  input  logic         rd_ready,
  output page_t        rd_frame,
  output logic [$clog2(PAGE_LINES)-1:0] rd_line,
  input  logic         rd_resp_valid,
  input  logic [127:0] rd_resp_data,
  output logic         wr_valid,
  input  logic         wr_ready,
  output page_t        wr_frame,
  output logic [$clog2(PAGE_LINES)-1:0] wr_line,
  output logic [127:0] wr_data,
  input  logic         mack_valid,
  output logic         done_valid,
  output page_t        done_page,
  output page_t        done_frame,
  output logic [15:0]  done_latency,
  output logic         os_irq,
  input  logic         old_busy,
  output logic         free_valid,
  output page_t        free_frame
);
  logic     q_valid, q_ready;
  mig_req_t q_head;

  sync_fifo #(.W($bits(mig_req_t)), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_head), .count(qcount));

  migration_dma #(.BUF_LINES(BUF_LINES), .PAGE_LINES(PAGE_LINES)) u_dma (
    .clk, .rst_n, .req_valid(q_valid), .req_ready(q_ready), .req(q_head),
    .lock_valid, .lock_page, .frame_req, .frame_cube_o, .frame_gnt, .frame,
    .rd_valid, .rd_ready, .rd_frame, .rd_line, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_frame, .wr_line, .wr_data, .mack_valid,
    .done_valid, .done_page, .done_frame, .done_latency, .os_irq,
    .old_busy, .free_valid, .free_frame);
endmodule
