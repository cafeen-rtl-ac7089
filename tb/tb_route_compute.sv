// tb_route_compute: exhaustive check of route_compute on an 8 x 8 mesh,
// for every router position, destination and path type, against an
// independent reference: XY resolves the column first, YX the row first;
// rows grow southward (S), columns eastward (E).
module tb_route_compute;
  import cafeen_pkg::*;
  logic [COORD_W-1:0] cr, cc, dr, dc;
  logic yx;
  port_e op;
  int checks = 0, failures = 0;

  route_compute dut (.cur_row(cr), .cur_col(cc), .dst_row(dr), .dst_col(dc), .route_yx(yx), .out_port(op));

  function automatic port_e ref_route(int r, int c, int tr, int tc, bit y);
    if (r == tr && c == tc) return PORT_L;
    if (!y) begin
      if (tc > c) return PORT_E;
      if (tc < c) return PORT_W;
      return (tr > r) ? PORT_S : PORT_N;
    end
    if (tr > r) return PORT_S;
    if (tr < r) return PORT_N;
    return (tc > c) ? PORT_E : PORT_W;
  endfunction

  initial begin
    for (int i = 0; i < 8 * 8 * 8 * 8 * 2; i++) begin
      cr = 3'(i); cc = 3'(i >> 3); dr = 3'(i >> 6); dc = 3'(i >> 9); yx = i[12];
      #1;
      checks++;
      if (op != ref_route(cr, cc, dr, dc, yx)) begin
        failures++;
        if (failures < 10) $display("FAIL (%0d,%0d)->(%0d,%0d) yx=%0d got %0d", cr, cc, dr, dc, yx, op);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
