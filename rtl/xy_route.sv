// Dimension-order (XY) routing logic.
//
// Combinational. A packet first travels along the row (West/East) until its
// column matches, then along the column (North/South), then leaves on the
// local port. Column index grows to the East and row index grows to the South
// (this orientation is a choice of this design; the XY order is the paper's).
module xy_route
  import noc_pkg::*;
(
  input  logic [COORD_W-1:0] my_row,
  input  logic [COORD_W-1:0] my_col,
  input  logic [COORD_W-1:0] dst_row,
  input  logic [COORD_W-1:0] dst_col,
  output port_e              out_port
);
  always_comb begin
    if (dst_col > my_col)      out_port = PORT_E;
    else if (dst_col < my_col) out_port = PORT_W;
    else if (dst_row > my_row) out_port = PORT_S;
    else if (dst_row < my_row) out_port = PORT_N;
    else                       out_port = PORT_L;
  end
endmodule
