// tb_route_compute -- compares the route computation with an XY reference
// for every source and destination of an 8x8 mesh, including the global
// buffer column 8.
module tb_route_compute;
  import noc_pkg::*;

  coord_t my_pos, dst;
  port_e  out_port;

  route_compute dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int sr = 0; sr < 8; sr++)
      for (int sc = 0; sc < 8; sc++)
        for (int dr = 0; dr < 8; dr++)
          for (int dc = 0; dc <= 8; dc++) begin
            port_e exp;
            my_pos = '{row: 3'(sr), col: 4'(sc)};
            dst    = '{row: 3'(dr), col: 4'(dc)};
            #1;
            if (dc != sc)      exp = (dc > sc) ? PORT_EAST : PORT_WEST;
            else if (dr != sr) exp = (dr > sr) ? PORT_SOUTH : PORT_NORTH;
            else               exp = PORT_LOCAL;
            checks++;
            if (out_port != exp) begin
              failures++;
              if (failures < 10) $display("FAIL (%0d,%0d)->(%0d,%0d): %0d", sr, sc, dr, dc, out_port);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
