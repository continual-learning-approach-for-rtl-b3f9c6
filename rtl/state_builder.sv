// state_builder: forms the agent's state vector at each invocation.
//
// On start, the memory controller whose turn it is (round robin over the N_MC
// controllers) provides the entry of its most accessed page. The state then
// consists of, in order:
//   [0  .. 15]  NMP-table occupancy of each cube (running averages from the MCs)
//   [16 .. 31]  row-buffer hit rate of each cube
//   [32 .. 35]  MC queue occupancy of each MC
//   [36 .. 43]  global action history, newest first
//   [44]        page access rate  = page accesses / all accesses seen by that MC
//   [45]        migrations per access = page migrations / page accesses
//   [46 .. 53]  hop-count history, [54 .. 61] packet-latency history,
//   [62 .. 69]  migration-latency history, [70 .. 77] action history of the page
// Cube c's counters live in MC {c[3],c[1]} at index {c[2],c[0]}. Counters and
// histories are passed as raw 16-bit words; the two rates are Q8.8 fractions,
// produced by one sequential divider (two divisions of 33 cycles each), so done
// comes 70 cycles after start. sel_mc and sel_page name the page the state is
// about; the returned action applies to it. The fields and the round robin follow
// the paper; order, encoding and the divider are this design's choices.
module state_builder
  import aimm_pkg::*;
(
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic [N_MC-1:0][CUBES_PER_MC-1:0][15:0] avg_occ,
  input  logic [N_MC-1:0][CUBES_PER_MC-1:0][15:0] avg_hit,
  input  logic [N_MC-1:0][15:0]                mc_qocc,
  input  logic [HIST_K-1:0][2:0]               gact_hist,
  input  page_info_t [N_MC-1:0]                top_info,
  input  logic [N_MC-1:0][31:0]                tot_acc,
  output logic                                 busy,
  output logic                                 done,
  output feat_t [STATE_LEN-1:0]                state,
  output logic [1:0]                           sel_mc,
  output page_info_t                           sel_info
);
  typedef enum logic [1:0] {B_IDLE, B_DIV1, B_DIV2, B_OUT} st_e;
  st_e st;
  logic [1:0]  rr;
  logic [31:0] mc_tot;
  logic        dstart, dbusy, ddone;
  logic [31:0] dn, dd, dq;
  feat_t       rate_acc;

  seq_div #(.W(32)) u_div (.clk, .rst_n, .start(dstart), .n(dn), .d(dd), .busy(dbusy), .done(ddone), .quo(dq));

  function automatic feat_t sat16(input logic [31:0] v);
    return (v > 32'h7FFF) ? 16'sh7FFF : feat_t'(v[15:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= B_IDLE; rr <= '0; sel_mc <= '0; sel_info <= '0; mc_tot <= '0; done <= 1'b0;
      dstart <= 1'b0; dn <= '0; dd <= '0; rate_acc <= '0; state <= '0;
    end else begin
      done   <= 1'b0;
      dstart <= 1'b0;
      unique case (st)
        B_IDLE: if (start) begin
          sel_mc   <= rr;
          sel_info <= top_info[rr];
          mc_tot   <= tot_acc[rr];
          rr       <= rr + 2'd1;
          // System information snapshot.
          for (int c = 0; c < N_CUBES; c++) begin
            state[c]           <= feat_t'(avg_occ[{c[3], c[1]}][{c[2], c[0]}]);
            state[N_CUBES + c] <= feat_t'(avg_hit[{c[3], c[1]}][{c[2], c[0]}]);
          end
          for (int m = 0; m < N_MC; m++) state[2*N_CUBES + m] <= feat_t'(mc_qocc[m]);
          for (int k = 0; k < HIST_K; k++) state[2*N_CUBES + N_MC + k] <= feat_t'({13'd0, gact_hist[k]});
          dn <= {8'd0, top_info[rr].accesses, 8'd0};
          dd <= tot_acc[rr];
          dstart <= 1'b1;
          st <= B_DIV1;
        end
        B_DIV1: if (ddone) begin
          rate_acc <= sat16(dq);
          dn <= {8'd0, sel_info.migrations, 8'd0};
          dd <= {16'd0, sel_info.accesses};
          dstart <= 1'b1;
          st <= B_DIV2;
        end
        B_DIV2: if (ddone) begin
          state[2*N_CUBES + N_MC + HIST_K]     <= sel_info.valid ? rate_acc : '0;
          state[2*N_CUBES + N_MC + HIST_K + 1] <= sel_info.valid ? sat16(dq) : '0;
          for (int j = 0; j < HIST_L; j++) begin
            state[46 + j]            <= feat_t'(sel_info.hop_hist[j]);
            state[46 + HIST_L + j]   <= feat_t'(sel_info.lat_hist[j]);
            state[46 + 2*HIST_L + j] <= feat_t'(sel_info.mig_hist[j]);
            state[46 + 3*HIST_L + j] <= feat_t'(sel_info.act_hist[j]);
          end
          st <= B_OUT;
        end
        B_OUT: begin
          done <= 1'b1;
          st   <= B_IDLE;
        end
        default: st <= B_IDLE;
      endcase
    end
  end
  assign busy = (st != B_IDLE);
endmodule
