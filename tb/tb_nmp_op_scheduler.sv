// tb_nmp_op_scheduler: random operations with and without a remap-table hit;
// checks the compute cube and the Manhattan hop counts.
// Stimulus and reference model are this testbench's own; the behaviour it expects is the one described at the top of rtl/nmp_op_scheduler.sv,
// which states what is taken from the published design and what is this design's choice.
module tb_nmp_op_scheduler;
  import aimm_pkg::*;
  int checks = 0, failures = 0;
  nmp_op_t op; page_t rt_lk_page; logic rt_hit; cube_t rt_cube; nmp_pkt_t pkt;
  logic [3:0] hop_dest, hop_src1, hop_src2;
  nmp_op_scheduler dut (.*);

  function automatic int mdist(input int a, input int b);
    int dx = (a % 4) - (b % 4), dy = (a / 4) - (b / 4);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int comp;
    for (int t = 0; t < 1000; t++) begin
      op.op = nmp_opcode_e'($urandom % 4);
      op.dest = page_t'($urandom); op.src1 = page_t'($urandom); op.src2 = page_t'($urandom);
      rt_hit = $urandom % 2; rt_cube = cube_t'($urandom);
      #1;
      comp = rt_hit ? int'(rt_cube) : int'(op.dest % 16);
      checks++;
      if (rt_lk_page != op.dest || pkt.comp_cube != cube_t'(comp) || pkt.remapped != rt_hit || pkt.op != op) begin
        failures++; $display("FAIL cube %0d expected %0d", pkt.comp_cube, comp);
      end
      checks++;
      if (hop_dest != 4'(mdist(op.dest % 16, comp)) || hop_src1 != 4'(mdist(op.src1 % 16, comp)) ||
          hop_src2 != 4'(mdist(op.src2 % 16, comp))) begin
        failures++; $display("FAIL hops");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
