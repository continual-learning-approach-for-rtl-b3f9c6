// tb_nmp_op_table: random allocation, operand arrival (out of order, either
// operand first) and retirement against a model; checks results, tags, occupancy
// and that a full table refuses allocation.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/nmp_op_table.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_nmp_op_table;
  import aimm_pkg::*;
  localparam int E = 8, DW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic alloc_valid, alloc_ready, opnd_valid, opnd_idx, res_valid, res_ready;
  nmp_opcode_e alloc_op; page_t alloc_dest, res_dest;
  logic [DW-1:0] alloc_acc, opnd_data, res_data;
  logic [2:0] alloc_tag, opnd_tag, res_tag;
  logic [15:0] occupancy;
  nmp_op_table #(.ENTRIES(E), .DW(DW)) dut (.*);

  logic used[E], g1[E], g2[E]; nmp_opcode_e mop[E]; page_t md[E]; logic [DW-1:0] ma[E], m1[E], m2[E];
  int nused, full_seen, retired;

  function automatic logic [DW-1:0] f(input nmp_opcode_e o, input logic [DW-1:0] a, b);
    case (o)
      OP_ADD: return a + b;
      OP_MUL: return DW'(a * b);
      OP_SUB: return a - b;
      default: return ($signed(a) > $signed(b)) ? a : b;
    endcase
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lf, cand[$];
    alloc_valid = 0; opnd_valid = 0; res_ready = 0; alloc_op = OP_ADD; alloc_dest = 0; alloc_acc = 0;
    opnd_tag = 0; opnd_idx = 0; opnd_data = 0;
    foreach (used[i]) begin used[i] = 0; g1[i] = 0; g2[i] = 0; end
    nused = 0; full_seen = 0; retired = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      lf = -1;
      for (int i = E-1; i >= 0; i--) if (!used[i]) lf = i;
      alloc_valid = ($urandom % 100) < 45;
      alloc_op = nmp_opcode_e'($urandom % 4); alloc_dest = page_t'($urandom); alloc_acc = $urandom % 1000;
      cand.delete();
      for (int i = 0; i < E; i++) if (used[i] && (!g1[i] || !g2[i])) cand.push_back(i);
      opnd_valid = (cand.size() > 0) && ($urandom % 2);
      if (opnd_valid) begin
        opnd_tag = 3'(cand[$urandom % cand.size()]);
        opnd_idx = g1[opnd_tag] ? 1'b1 : (g2[opnd_tag] ? 1'b0 : 1'($urandom));
        opnd_data = $urandom % 5000;
      end
      res_ready = ($urandom % 100) < (t < 2000 ? 20 : 60);
      #1;
      checks++;
      if (alloc_ready != (lf >= 0) || (lf >= 0 && alloc_tag != 3'(lf)) || occupancy != 16'(nused)) begin
        failures++; $display("FAIL alloc/occ t=%0d ready=%0d tag=%0d lf=%0d occ=%0d/%0d", t, alloc_ready, alloc_tag, lf, occupancy, nused);
      end
      if (lf < 0) full_seen++;
      if (res_valid) begin
        int r = -1;
        for (int i = E-1; i >= 0; i--) if (used[i] && g1[i] && g2[i]) r = i;
        checks++;
        if (r < 0 || res_tag != 3'(r) || res_data != ma[r] + f(mop[r], m1[r], m2[r]) || res_dest != md[r]) begin
          failures++; $display("FAIL result tag %0d r %0d data %0d", res_tag, r, res_data);
        end
      end
      @(posedge clk);
      if (res_valid && res_ready) begin used[res_tag] = 0; g1[res_tag] = 0; g2[res_tag] = 0; nused--; retired++; end
      if (alloc_valid && lf >= 0) begin used[lf] = 1; g1[lf] = 0; g2[lf] = 0; mop[lf] = alloc_op; md[lf] = alloc_dest; ma[lf] = alloc_acc; nused++; end
      if (opnd_valid) begin if (opnd_idx) begin g2[opnd_tag] = 1; m2[opnd_tag] = opnd_data; end else begin g1[opnd_tag] = 1; m1[opnd_tag] = opnd_data; end end
    end
    checks++;
    if (full_seen == 0 || retired < 100) begin failures++; $display("FAIL coverage full=%0d retired=%0d", full_seen, retired); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
