// route_compute: dimension-order route computation for one packet head.
//
// A packet carries the path its source agent chose: XY (travel along the row
// first, then the column) or YX (column first). Given the router position and
// the destination, the module returns the output port: E/W while the column
// differs in the first dimension of the path, N/S for the row, L on arrival.
// Only XY and YX paths exist in CAFEEN, so every packet turns at most once.
// Purely combinational. Rows grow southward and columns eastward, a
// convention of this design.
module route_compute
  import cafeen_pkg::*;
(
  input  logic [COORD_W-1:0] cur_row,
  input  logic [COORD_W-1:0] cur_col,
  input  logic [COORD_W-1:0] dst_row,
  input  logic [COORD_W-1:0] dst_col,
  input  logic               route_yx,
  output port_e              out_port
);
  port_e col_dir, row_dir;

  always_comb begin
    col_dir = (dst_col > cur_col) ? PORT_E : PORT_W;
    row_dir = (dst_row > cur_row) ? PORT_S : PORT_N;
    if (dst_row == cur_row && dst_col == cur_col) begin
      out_port = PORT_L;
    end else if (!route_yx) begin
      out_port = (dst_col != cur_col) ? col_dir : row_dir;
    end else begin
      out_port = (dst_row != cur_row) ? row_dir : col_dir;
    end
  end
endmodule
