// route_compute -- route computation (RC) for a header flit.
//
// Dimension-ordered XY routing on the mesh: the packet first travels along
// its row to the destination column, then along the column to the
// destination row, and leaves on the local port at the destination node.
// The global buffer sits beyond the right edge of the mesh and is addressed
// by column MESH_COLS, so packets for it travel East along their row and
// leave the last router of that row on its East port (row-based gather).
// XY routing is deadlock free on a mesh. The paper names the RC stage but not
// its algorithm; XY is this design's choice. Combinational.
module route_compute
  import noc_pkg::*;
(
  input  coord_t my_pos,
  input  coord_t dst,
  output port_e  out_port
);

  always_comb begin
    if (dst.col > my_pos.col)      out_port = PORT_EAST;
    else if (dst.col < my_pos.col) out_port = PORT_WEST;
    else if (dst.row > my_pos.row) out_port = PORT_SOUTH;
    else if (dst.row < my_pos.row) out_port = PORT_NORTH;
    else                           out_port = PORT_LOCAL;
  end

endmodule
