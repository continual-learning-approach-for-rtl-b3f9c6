// dqn_engine: forward pass of the dueling Q network of the agent.
//
// Network: state (STATE_LEN words) -> FC256 -> FC128 -> FC64 -> FC32 -> FC16, all
// ReLU, then two linear heads on the FC16 output: the advantage head A (8 outputs)
// and the value head V (1 output). The eight Q values are Q(s,a) = V(s) + A(s,a) -
// max_a A(s,a). The two heads are evaluated together as one 9-output linear layer
// (outputs 0..7 = A, output 8 = V), which is the same arithmetic.
//
// Arithmetic: signed Q8.8 weights, biases and activations; products are summed in a
// 40-bit accumulator that starts at bias << 8; the sum is shifted right by 8 and
// saturated to 16 bits; ReLU on hidden layers.
//
// Datapath: LANES multiply-accumulate lanes work on LANES output neurons of a layer
// at once, taking one input word per cycle. Weights sit in one memory whose word
// holds one weight per lane: for layer l and neuron group g, weight W_l[g*LANES+k][i]
// is at address WBASE_l + g*IN_l + i, lane k. Biases follow the weights: bias of
// neuron g*LANES+k of layer l at address WDEPTH + BBASE_l + g, lane k. The memory is
// written through w_we/w_lane/w_addr/w_data (from the training side or a loader).
// Latency from start to done: sum over layers of groups*(IN_l + 1) cycles plus 2;
// with LANES = 256 this is 580 cycles.
//
// Layer widths, activations, heads and the dueling combination follow the paper's
// network figure; number format and lane organisation are this design's choices.
module dqn_engine
  import aimm_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned SLEN  = STATE_LEN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [$clog2(LANES)-1:0] w_lane,
  input  logic [15:0]              w_addr,
  input  feat_t                    w_data,
  input  logic                     start,
  input  feat_t [SLEN-1:0]         state,
  output logic                     busy,
  output logic                     done,
  output feat_t [N_ACTIONS-1:0]    q
);
  localparam int unsigned NL = 6;
  localparam int unsigned MAXW = 256;

  function automatic int unsigned lin(input int unsigned l);
    case (l) 0: return SLEN; 1: return 256; 2: return 128; 3: return 64; 4: return 32; default: return 16; endcase
  endfunction
  function automatic int unsigned lout(input int unsigned l);
    case (l) 0: return 256; 1: return 128; 2: return 64; 3: return 32; 4: return 16; default: return 9; endcase
  endfunction
  function automatic int unsigned groups(input int unsigned l);
    return (lout(l) + LANES - 1) / LANES;
  endfunction
  function automatic int unsigned wbase(input int unsigned l);
    int unsigned s = 0;
    for (int unsigned j = 0; j < l; j++) s += groups(j) * lin(j);
    return s;
  endfunction
  function automatic int unsigned bbase(input int unsigned l);
    int unsigned s = 0;
    for (int unsigned j = 0; j < l; j++) s += groups(j);
    return s;
  endfunction

  localparam int unsigned WDEPTH = wbase(NL);
  localparam int unsigned DEPTH  = WDEPTH + bbase(NL);

  logic [LANES-1:0][15:0] wmem [DEPTH];

  always_ff @(posedge clk) begin
    if (w_we && w_addr < 16'(DEPTH)) wmem[w_addr][w_lane] <= w_data;
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_FIN, S_Q} st_e;
  st_e st;
  logic [2:0]  layer;
  logic [7:0]  grp;
  logic [8:0]  idx;
  logic        sel;                 // activation buffer being read
  feat_t       act [2][MAXW];
  feat_t       xin;
  logic signed [39:0] acc [LANES];
  logic [15:0] waddr, baddr;
  feat_t       heads [9];

  assign busy = (st != S_IDLE);

  always_comb begin
    waddr = 16'(wbase(32'(layer))) + 16'(grp) * 16'(lin(32'(layer))) + 16'(idx);
    baddr = 16'(WDEPTH) + 16'(bbase(32'(layer))) + 16'(grp);
    xin   = (layer == 3'd0) ? ((idx < 9'(SLEN)) ? state[idx] : '0) : act[sel][idx[7:0]];
  end

  function automatic feat_t sat(input logic signed [39:0] v);
    logic signed [39:0] s;
    s = v >>> FRAC;
    if (s > 40'sd32767)       return 16'sh7FFF;
    else if (s < -40'sd32768) return 16'sh8000;
    else                      return feat_t'(s);
  endfunction

  feat_t amax;
  always_comb begin
    amax = heads[0];
    for (int a = 1; a < N_ACTIONS; a++) if (heads[a] > amax) amax = heads[a];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; layer <= '0; grp <= '0; idx <= '0; sel <= 1'b0; done <= 1'b0;
      q <= '0;
      for (int k = 0; k < LANES; k++) acc[k] <= '0;
      for (int k = 0; k < 9; k++) heads[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_MAC; layer <= '0; grp <= '0; idx <= '0; sel <= 1'b0;
          for (int k = 0; k < LANES; k++) acc[k] <= '0;
        end
        S_MAC: begin
          for (int k = 0; k < LANES; k++)
            acc[k] <= acc[k] + 40'($signed(wmem[waddr][k]) * $signed(xin));
          if (idx == 9'(lin(32'(layer)) - 1)) st <= S_FIN;
          else idx <= idx + 9'd1;
        end
        S_FIN: begin
          // Add bias, shift, saturate, activate; write this group's outputs.
          for (int k = 0; k < LANES; k++) begin
            automatic int unsigned o = int'(grp) * LANES + k;
            automatic feat_t y = sat(acc[k] + ($signed({{24{wmem[baddr][k][15]}}, wmem[baddr][k]}) <<< FRAC));
            if (o < lout(32'(layer))) begin
              if (layer == 3'(NL-1)) heads[o] <= y;
              else act[~sel][o[7:0]] <= (y < 0) ? '0 : y;
            end
            acc[k] <= '0;
          end
          idx <= '0;
          if (grp == 8'(groups(32'(layer)) - 1)) begin
            grp <= '0;
            if (layer == 3'(NL-1)) st <= S_Q;
            else begin
              layer <= layer + 3'd1;
              sel   <= ~sel;
              st    <= S_MAC;
            end
          end else begin
            grp <= grp + 8'd1;
            st  <= S_MAC;
          end
        end
        S_Q: begin
          for (int a = 0; a < N_ACTIONS; a++)
            q[a] <= sat(($signed({{24{heads[8][15]}}, heads[8]}) + $signed({{24{heads[a][15]}}, heads[a]})
                        - $signed({{24{amax[15]}}, amax})) <<< FRAC);
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
