// tb_route_compute: exhaustive test of the route choice.  For every pair of
// node address and destination in a 4x4x4 corner of the address space and a
// sample of random far addresses, the expected port is worked out from the
// dimension-order rule (x first, then y, then z) and compared.  It also
// walks random packets hop by hop and checks that each reaches its
// destination in exactly the Manhattan distance.
module tb_route_compute;
  import scalp_pkg::*;
  coord_t here, dst;
  port_e out_port;
  int checks = 0, failures = 0;

  route_compute dut (.*);

  function automatic port_e expect_port(coord_t h, coord_t d);
    if (d.x != h.x) return (d.x > h.x) ? P_EAST : P_WEST;
    if (d.y != h.y) return (d.y > h.y) ? P_NORTH : P_SOUTH;
    if (d.z != h.z) return (d.z > h.z) ? P_TOP : P_BOTTOM;
    return P_LOCAL;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int hx = 0; hx < 4; hx++) for (int hy = 0; hy < 4; hy++) for (int hz = 0; hz < 4; hz++)
    for (int dx = 0; dx < 4; dx++) for (int dy = 0; dy < 4; dy++) for (int dz = 0; dz < 4; dz++) begin
      here = '{z: 4'(hz), y: 4'(hy), x: 4'(hx)};
      dst  = '{z: 4'(dz), y: 4'(dy), x: 4'(dx)};
      #1;
      checks++;
      if (out_port != expect_port(here, dst)) begin
        failures++;
        $display("FAIL here=%p dst=%p port=%s", here, dst, out_port.name());
      end
    end
    // Hop-by-hop walks.
    for (int n = 0; n < 500; n++) begin
      coord_t start, pos;
      int hops, mdist;
      start = coord_t'($urandom);
      dst   = coord_t'($urandom);
      pos   = start;
      hops  = 0;
      mdist  = (start.x > dst.x ? start.x - dst.x : dst.x - start.x)
            + (start.y > dst.y ? start.y - dst.y : dst.y - start.y)
            + (start.z > dst.z ? start.z - dst.z : dst.z - start.z);
      forever begin
        here = pos; #1;
        if (out_port == P_LOCAL || hops > 64) break;
        case (out_port)
          P_EAST:   pos.x++;
          P_WEST:   pos.x--;
          P_NORTH:  pos.y++;
          P_SOUTH:  pos.y--;
          P_TOP:    pos.z++;
          P_BOTTOM: pos.z--;
          default: ;
        endcase
        hops++;
      end
      checks++;
      if (pos != dst || hops != mdist) begin
        failures++;
        $display("FAIL walk %p -> %p ended %p after %0d hops (mdist %0d)", start, dst, pos, hops, mdist);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
