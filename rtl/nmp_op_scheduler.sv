// nmp_op_scheduler: chooses the computation cube of an NMP operation.
//
// Combinational. By default the operation is computed in the cube that hosts its
// destination page (basic NMP scheduling, dest += src1 OP src2 at dest). The
// compute remap table is consulted with the destination page: on a hit, the cube
// the agent suggested is used instead and pkt.remapped is set. The hop counts from
// each operand's host cube to the chosen compute cube are reported for the page
// information cache. The host cube of a frame is frame mod 16 (this design's
// physical-to-cube mapping).
module nmp_op_scheduler
  import aimm_pkg::*;
(
  input  nmp_op_t     op,
  output page_t       rt_lk_page,
  input  logic        rt_hit,
  input  cube_t       rt_cube,
  output nmp_pkt_t    pkt,
  output logic [3:0]  hop_dest,
  output logic [3:0]  hop_src1,
  output logic [3:0]  hop_src2
);
  cube_t comp;
  assign rt_lk_page   = op.dest;
  assign comp         = rt_hit ? rt_cube : frame_cube(op.dest);
  assign pkt.op       = op;
  assign pkt.comp_cube = comp;
  assign pkt.remapped = rt_hit;
  assign hop_dest = hops(frame_cube(op.dest), comp);
  assign hop_src1 = hops(frame_cube(op.src1), comp);
  assign hop_src2 = hops(frame_cube(op.src2), comp);
endmodule
