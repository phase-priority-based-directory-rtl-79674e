// tb_ppb_route_xy: self-checking test of X-Y route computation. Every
// source and destination pair of an 8 x 8 mesh is checked: X is corrected
// first, then Y, then the local port.
module tb_ppb_route_xy;
  import ppb_pkg::*;

  node_t here, dst;
  logic [PORT_W-1:0] port;
  int checks = 0, failures = 0;

  ppb_route_xy dut (.*);

  initial begin
    logic [PORT_W-1:0] exp;
    for (int hx = 0; hx < 8; hx++)
      for (int hy = 0; hy < 8; hy++)
        for (int dx = 0; dx < 8; dx++)
          for (int dy = 0; dy < 8; dy++) begin
            here.x = 4'(hx); here.y = 4'(hy); dst.x = 4'(dx); dst.y = 4'(dy);
            #1;
            if (dx > hx)      exp = P_EAST;
            else if (dx < hx) exp = P_WEST;
            else if (dy > hy) exp = P_SOUTH;
            else if (dy < hy) exp = P_NORTH;
            else              exp = P_LOCAL;
            checks++;
            if (port != exp) begin
              failures++;
              $display("FAIL (%0d,%0d)->(%0d,%0d): port %0d expected %0d", hx, hy, dx, dy, port, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
