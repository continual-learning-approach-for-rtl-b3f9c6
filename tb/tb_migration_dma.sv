// tb_migration_dma: a memory model with random ready and response delays serves
// the copy. For blocking and non-blocking requests it checks the page lock, the OS
// frame request, that the new frame receives every line of the old one, the
// latency report, the OS interrupt and the freeing of the old frame only after
// its accesses have drained.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/migration_dma.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_migration_dma;
  import aimm_pkg::*;
  localparam int PL = 16, BL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid, req_ready, lock_valid, frame_req, frame_gnt, rd_valid, rd_ready, rd_resp_valid;
  logic wr_valid, wr_ready, mack_valid, done_valid, os_irq, old_busy, free_valid;
  mig_req_t req; page_t lock_page, frame, rd_frame, wr_frame, done_page, done_frame, free_frame;
  cube_t frame_cube_o;
  logic [3:0] rd_line, wr_line;
  logic [127:0] rd_resp_data, wr_data;
  logic [15:0] done_latency;
  migration_dma #(.BUF_LINES(BL), .PAGE_LINES(PL)) dut (.*);

  function automatic logic [127:0] content(input page_t f, input logic [3:0] l);
    return {f, 4'(l), 102'h2A5A5_1234_5678_9ABC_DEF0_1357};
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;
  logic [127:0] newmem[PL];
  int written[PL];
  logic [3:0] pend[$];

  // memory side
  always @(negedge clk) begin
    rd_ready <= ($urandom % 3) != 0;
    wr_ready <= ($urandom % 3) != 0;
  end
  always @(posedge clk) begin
    if (rst_n && rd_valid && rd_ready) pend.push_back(rd_line);
    if (rst_n && wr_valid && wr_ready) begin
      newmem[wr_line] <= wr_data; written[wr_line]++;
      if (wr_frame != frame) begin failures++; $display("FAIL write to frame %0d", wr_frame); end
    end
  end
  always @(negedge clk) begin
    rd_resp_valid = 0;
    if (pend.size() > 0 && ($urandom % 2)) begin
      rd_resp_valid = 1; rd_resp_data = content(req.page, pend.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic migrate(input logic blocking, input page_t pg, input cube_t cb);
    int t0, lat_seen, ok;
    foreach (written[i]) written[i] = 0;
    @(negedge clk); req_valid = 1; req = '{page: pg, new_cube: cb, blocking: blocking};
    @(negedge clk); req_valid = 0;
    t0 = cyc;
    checks++;
    if (lock_valid != blocking || (blocking && lock_page != pg)) begin failures++; $display("FAIL lock"); end
    while (!frame_req) @(negedge clk);
    checks++;
    if (frame_cube_o != cb) begin failures++; $display("FAIL frame cube"); end
    repeat (3) @(negedge clk);
    frame = page_t'({18'($urandom), cb}); frame_gnt = 1; @(negedge clk); frame_gnt = 0;
    // wait for all writes
    ok = 0;
    for (int w = 0; w < 2000 && !ok; w++) begin
      @(negedge clk);
      ok = 1; foreach (written[i]) if (written[i] == 0) ok = 0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (done_valid) begin failures++; $display("FAIL done before ack"); end
    mack_valid = 1; @(negedge clk); mack_valid = 0; t0 = cyc - t0;
    checks++;
    if (!done_valid || !os_irq || done_page != pg || done_frame != frame || done_latency != 16'(t0)) begin
      failures++; $display("FAIL done report lat %0d expected %0d", done_latency, t0);
    end
    for (int l = 0; l < PL; l++) begin
      checks++;
      if (written[l] != 1 || newmem[l] != content(pg, 4'(l))) begin failures++; $display("FAIL line %0d written %0d", l, written[l]); end
    end
    checks++;
    if (lock_valid) begin failures++; $display("FAIL still locked"); end
    if (!blocking) begin
      repeat (5) begin @(negedge clk); checks++; if (free_valid) begin failures++; $display("FAIL freed while busy"); end end
      old_busy = 0; @(negedge clk);
      checks++;
      if (!free_valid || free_frame != pg) begin failures++; $display("FAIL free"); end
      old_busy = 1;
    end
    @(negedge clk);
    checks++;
    if (!req_ready) begin failures++; $display("FAIL not idle"); end
  endtask

  initial begin
    req_valid = 0; req = '0; frame_gnt = 0; frame = 0; mack_valid = 0; old_busy = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    migrate(1'b1, 22'h12345, 4'd9);
    migrate(1'b0, 22'h0ABCD, 4'd3);
    migrate(1'b1, 22'h00007, 4'd15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
