// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// start latches dividend n and divisor d; W cycles later done pulses with
// quo = n / d (all ones when d = 0). Used to form the rate features of the
// agent state (page access rate, migrations per access), which the paper says are
// computed only when a state is formed.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] n,
  input  logic [W-1:0] d,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo
);
  logic [W-1:0] rem, dd, nn;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]   trial;

  assign trial = {rem, nn[W-1]} - {1'b0, dd};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; dd <= '0; nn <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem <= '0; dd <= d; nn <= n; cnt <= ($clog2(W+1))'(W); busy <= 1'b1; quo <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], nn[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        nn  <= {nn[W-2:0], 1'b0};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
