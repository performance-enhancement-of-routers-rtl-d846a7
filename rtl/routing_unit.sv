// routing_unit: output-port computation for a header flit.
//
// A header entering an input port goes to this unit and to the UBS in
// parallel; the port it computes is stored in the VC control table on the same
// clock edge as the flit. The paper names the unit but not its algorithm; this
// design uses dimension-order (XY) routing on a 2-D mesh, which is minimal and
// deadlock-free: first move along X until the column matches, then along Y,
// then deliver to the local port. East is +X and North is +Y.
//
// Interface: the router's own coordinates (`cur_x`, `cur_y`), the header flit
// (destination X in bits 5:2, Y in bits 9:6) and the result `out_port`.
// Purely combinational.
module routing_unit
  import noc_pkg::*;
#(
  parameter int FLIT_W = noc_pkg::FLIT_WIDTH
) (
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  input  logic [FLIT_W-1:0]  header,
  output port_e              out_port
);
  logic [COORD_W-1:0] dst_x, dst_y;

  always_comb begin
    dst_x = header[DST_X_LSB +: COORD_W];
    dst_y = header[DST_Y_LSB +: COORD_W];
    if      (dst_x > cur_x) out_port = PORT_EAST;
    else if (dst_x < cur_x) out_port = PORT_WEST;
    else if (dst_y > cur_y) out_port = PORT_NORTH;
    else if (dst_y < cur_y) out_port = PORT_SOUTH;
    else                    out_port = PORT_LOCAL;
  end

endmodule
