// migration_dma: moves one page to a frame in a new host cube.
//
// Sequence for a request {page, new_cube, blocking} (page = the physical frame the
// page occupies now):
//   1. If blocking (read-write page), the page is locked (lock_valid, lock_page):
//      the memory controllers hold back every operation that touches it.
//   2. The OS is asked for a free frame in new_cube (frame_req until frame_gnt).
//   3. The page is copied in chunks of BUF_LINES lines of 16 bytes through the DMA
//      buffer: BUF_LINES line reads of the old frame (rd_*; responses return in
//      order on rd_resp_*), then BUF_LINES line writes to the new frame (wr_*),
//      until all PAGE_LINES lines are moved.
//   4. It waits for the migration acknowledgement from the new host (mack_valid),
//      then pulses done_valid with the latency (cycles from the request being taken
//      to the acknowledgement) for the memory controller and raises os_irq for
//      the page-table update. A blocking migration unlocks the page here.
//   5. A non-blocking migration then waits until the old frame has no outstanding
//      accesses (old_busy low) and returns it to the free pool (free_valid).
// Paper: the sequence, the two modes, the 1 KB DMA buffer. Design choices: in-order
// read responses, chunked copy, latency definition.
module migration_dma
  import aimm_pkg::*;
#(
  parameter int unsigned BUF_LINES  = 64,
  parameter int unsigned PAGE_LINES = aimm_pkg::PAGE_LINES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  mig_req_t     req,
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
  localparam int unsigned LW = $clog2(PAGE_LINES);
  localparam int unsigned BW = $clog2(BUF_LINES);

  typedef enum logic [2:0] {D_IDLE, D_FRAME, D_READ, D_WRITE, D_ACK, D_DRAIN} st_e;
  st_e st;
  mig_req_t    cur;
  page_t       nframe;
  logic [127:0] buffer [BUF_LINES];
  logic [LW:0] base;          // first line of the current chunk
  logic [BW:0] issued, got, wrote;
  logic [15:0] lat;

  assign req_ready    = (st == D_IDLE);
  assign frame_req    = (st == D_FRAME);
  assign frame_cube_o = cur.new_cube;
  assign rd_valid     = (st == D_READ) && (issued != (BW+1)'(BUF_LINES));
  assign rd_frame     = cur.page;
  assign rd_line      = LW'(base) + LW'(issued);
  assign wr_valid     = (st == D_WRITE);
  assign wr_frame     = nframe;
  assign wr_line      = LW'(base) + LW'(wrote);
  assign wr_data      = buffer[BW'(wrote)];
  assign free_frame   = cur.page;

  always_ff @(posedge clk) begin
    if (st == D_READ && rd_resp_valid) buffer[BW'(got)] <= rd_resp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; cur <= '0; nframe <= '0; base <= '0; issued <= '0; got <= '0; wrote <= '0;
      lat <= '0; lock_valid <= 1'b0; lock_page <= '0; done_valid <= 1'b0; done_page <= '0;
      done_frame <= '0; done_latency <= '0; os_irq <= 1'b0; free_valid <= 1'b0;
    end else begin
      done_valid <= 1'b0;
      os_irq     <= 1'b0;
      free_valid <= 1'b0;
      if (st != D_IDLE && lat != 16'hFFFF) lat <= lat + 16'd1;
      unique case (st)
        D_IDLE: if (req_valid) begin
          cur <= req; lat <= 16'd1; base <= '0; issued <= '0; got <= '0; wrote <= '0;
          lock_valid <= req.blocking; lock_page <= req.page;
          st <= D_FRAME;
        end
        D_FRAME: if (frame_gnt) begin nframe <= frame; st <= D_READ; end
        D_READ: begin
          if (rd_valid && rd_ready) issued <= issued + 1'b1;
          if (rd_resp_valid) begin
            got <= got + 1'b1;
            if (got == (BW+1)'(BUF_LINES-1)) begin st <= D_WRITE; wrote <= '0; end
          end
        end
        D_WRITE: if (wr_ready) begin
          wrote <= wrote + 1'b1;
          if (wrote == (BW+1)'(BUF_LINES-1)) begin
            if (base + (LW+1)'(BUF_LINES) == (LW+1)'(PAGE_LINES)) st <= D_ACK;
            else begin
              base <= base + (LW+1)'(BUF_LINES); issued <= '0; got <= '0; st <= D_READ;
            end
          end
        end
        D_ACK: if (mack_valid) begin
          done_valid   <= 1'b1;
          done_page    <= cur.page;
          done_frame   <= nframe;
          done_latency <= lat;
          os_irq       <= 1'b1;
          lock_valid   <= 1'b0;
          st <= cur.blocking ? D_IDLE : D_DRAIN;
        end
        D_DRAIN: if (!old_busy) begin free_valid <= 1'b1; st <= D_IDLE; end
        default: st <= D_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> st == D_READ);
endmodule
