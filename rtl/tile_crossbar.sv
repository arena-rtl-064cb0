// tile_crossbar: the 6 x 7 crossbar switch of a CGRA tile.
//
// Six inputs (north, south, east, west neighbour links, the tile's result
// register and the AUX input that carries load data) can be routed to seven
// destinations (the four registered neighbour outputs and the three operand
// registers A, B, C). For each destination the control word gives a 3-bit
// select: 0..5 pick an input, 7 (or 6) leaves the destination unwritten, which
// the tile uses to hold a register. The 6 x 7 size is the published one; the
// input/output numbering and the hold code are choices of this design.
// Purely combinational.
module tile_crossbar
  import arena_pkg::*;
(
  input  logic [XB_IN-1:0][DATA_W-1:0]  in,
  input  logic [XB_OUT-1:0][2:0]        sel,
  output logic [XB_OUT-1:0][DATA_W-1:0] out,
  output logic [XB_OUT-1:0]             we
);
  always_comb begin
    for (int d = 0; d < XB_OUT; d++) begin
      we[d]  = (sel[d] < 3'(XB_IN));
      out[d] = we[d] ? in[sel[d]] : '0;
    end
  end
endmodule
