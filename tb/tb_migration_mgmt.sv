// tb_migration_mgmt: queues several migration requests back to back (more than the
// DMA can take at once) and checks that all are carried out in order, each page
// copied to a frame of its requested cube, and that a full queue refuses requests.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/migration_mgmt.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_migration_mgmt;
  import aimm_pkg::*;
  localparam int PL = 8, BL = 4, QD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid, req_ready, lock_valid, frame_req, frame_gnt, rd_valid, rd_ready, rd_resp_valid;
  logic wr_valid, wr_ready, mack_valid, done_valid, os_irq, old_busy, free_valid;
  mig_req_t req; page_t lock_page, frame, rd_frame, wr_frame, done_page, done_frame, free_frame;
  cube_t frame_cube_o;
  logic [2:0] qcount;
  logic [2:0] rd_line, wr_line;
  logic [127:0] rd_resp_data, wr_data;
  logic [15:0] done_latency;
  migration_mgmt #(.QDEPTH(QD), .BUF_LINES(BL), .PAGE_LINES(PL)) dut (.*);

  logic [2:0] pend[$];
  int nwr, refused;
  mig_req_t sent[$];

  assign rd_ready = 1'b1;
  assign wr_ready = 1'b1;
  assign old_busy = 1'b0;
  always @(posedge clk) if (rst_n && rd_valid) pend.push_back(rd_line);
  always @(negedge clk) begin
    rd_resp_valid = 0;
    if (pend.size() > 0) begin rd_resp_valid = 1; rd_resp_data = {rd_frame, 3'(pend.pop_front()), 103'h55}; end
  end
  // OS: grants a frame in the requested cube two cycles after the request
  always @(posedge clk) begin
    frame_gnt <= frame_req && !frame_gnt;
    frame     <= page_t'({18'h3C, frame_cube_o});
    if (rst_n && wr_valid) begin
      nwr++; checks++;
      if (wr_data[127:106] != sent[0].page || wr_frame[3:0] != sent[0].new_cube) begin failures++; $display("FAIL copy data/frame"); end
      if (wr_data[105:103] != wr_line) begin failures++; $display("FAIL line order"); end
    end
  end
  // new host acknowledges 3 cycles after the last line
  int since;
  always @(posedge clk) begin
    since <= (rst_n && wr_valid) ? 0 : since + 1;
    mack_valid <= (since == 3 && nwr > 0 && nwr % PL == 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ndone;
    mig_req_t r;
    req_valid = 0; req = '0; nwr = 0; refused = 0; since = 100;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      @(negedge clk);
      req_valid = 1; req = '{page: page_t'(100 + i), new_cube: cube_t'(i * 3), blocking: 1'(i % 2)};
      #1;
      if (req_ready) sent.push_back(req); else refused++;
    end
    @(negedge clk); req_valid = 0;
    checks++;
    if (refused == 0) begin failures++; $display("FAIL full queue accepted everything"); end
    ndone = 0;
    while (sent.size() > 0) begin
      @(negedge clk);
      if (done_valid) begin
        checks++;
        r = sent.pop_front();
        if (done_page != r.page || done_frame[3:0] != r.new_cube) begin failures++; $display("FAIL done order page %0d", done_page); end
        ndone++;
      end
    end
    checks++;
    if (ndone != 7 - refused || nwr != PL * ndone) begin failures++; $display("FAIL done %0d writes %0d", ndone, nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
