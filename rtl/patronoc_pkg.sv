// patronoc_pkg: geometry of the 2D mesh and the static YX routing tables of its crosspoints.
//
// Crosspoints sit on a NumX x NumY grid; node n = y * NumX + x, with row 0 at the top and
// column 0 at the left, as XP0..XP15 are numbered in the paper's 4x4 mesh. Each crosspoint has
// a local port (the endpoint's master and slave) and one port towards each neighbour that
// exists: N (row - 1), E (column + 1), S (row + 1), W (column - 1). Corner crosspoints therefore
// have 3 ports, edge crosspoints 4 and inner crosspoints 5. Port numbers are dense: port 0 is
// the local port, then the present directions in the order N, E, S, W.
//
// Routing is YX and address based: node n owns the address range
// [AddrBase + n * RegionSize, AddrBase + (n + 1) * RegionSize). A crosspoint first sends a
// transaction along its column (N or S) until the destination row is reached, then along the
// row (E or W), then to its local port. The paper generates these tables with a script; here
// the same tables are computed by the functions below at elaboration time. The region layout
// (equal, contiguous regions in node order) is this design's choice.
package patronoc_pkg;

  typedef enum int unsigned { DIR_L = 0, DIR_N = 1, DIR_E = 2, DIR_S = 3, DIR_W = 4 } dir_e;
  localparam int unsigned NumDirs = 5;

  function automatic bit has_dir(int unsigned x, int unsigned y, int unsigned nx,
                                 int unsigned ny, int unsigned d);
    case (d)
      DIR_L:   return 1'b1;
      DIR_N:   return y > 0;
      DIR_E:   return x + 1 < nx;
      DIR_S:   return y + 1 < ny;
      DIR_W:   return x > 0;
      default: return 1'b0;
    endcase
  endfunction

  function automatic int unsigned num_ports(int unsigned x, int unsigned y, int unsigned nx,
                                            int unsigned ny);
    int unsigned n = 0;
    for (int unsigned d = 0; d < NumDirs; d++) if (has_dir(x, y, nx, ny, d)) n++;
    return n;
  endfunction

  // Port number of direction d at crosspoint (x, y); only meaningful if has_dir().
  function automatic int unsigned port_of_dir(int unsigned x, int unsigned y, int unsigned nx,
                                              int unsigned ny, int unsigned d);
    int unsigned p = 0;
    for (int unsigned k = 0; k < d; k++) if (has_dir(x, y, nx, ny, k)) p++;
    return p;
  endfunction

  function automatic int unsigned dir_of_port(int unsigned x, int unsigned y, int unsigned nx,
                                              int unsigned ny, int unsigned p);
    for (int unsigned d = 0; d < NumDirs; d++)
      if (has_dir(x, y, nx, ny, d) && port_of_dir(x, y, nx, ny, d) == p) return d;
    return DIR_L;
  endfunction

  function automatic int unsigned opposite(int unsigned d);
    case (d)
      DIR_N:   return DIR_S;
      DIR_S:   return DIR_N;
      DIR_E:   return DIR_W;
      DIR_W:   return DIR_E;
      default: return DIR_L;
    endcase
  endfunction

  // YX dimension-ordered routing: direction to take at (x, y) towards node (dx, dy).
  function automatic int unsigned yx_route(int unsigned x, int unsigned y, int unsigned dx,
                                           int unsigned dy);
    if (dy < y) return DIR_N;
    if (dy > y) return DIR_S;
    if (dx > x) return DIR_E;
    if (dx < x) return DIR_W;
    return DIR_L;
  endfunction

  // Partial connectivity that YX routing needs: traffic entering from the local port may go
  // anywhere (including back to the local slave); traffic entering from N or S may continue or
  // turn but not U-turn; traffic entering from E or W is already travelling along its row and
  // can only continue or leave to the local port.
  function automatic bit yx_connected(int unsigned din, int unsigned dout);
    if (din == DIR_L) return 1'b1;
    if (din == DIR_N || din == DIR_S) return dout != din;
    return (dout == DIR_L) || (dout == opposite(din));
  endfunction

  // Connectivity matrix of crosspoint (x, y), indexed [ingress port][egress port].
  function automatic bit [axi_pkg::MaxXpPorts-1:0][axi_pkg::MaxXpPorts-1:0] xp_connectivity(
      int unsigned x, int unsigned y, int unsigned nx, int unsigned ny, bit full);
    bit [axi_pkg::MaxXpPorts-1:0][axi_pkg::MaxXpPorts-1:0] c = '0;
    int unsigned np = num_ports(x, y, nx, ny);
    for (int unsigned s = 0; s < np; s++)
      for (int unsigned m = 0; m < np; m++)
        c[s][m] = full ? 1'b1
                       : yx_connected(dir_of_port(x, y, nx, ny, s), dir_of_port(x, y, nx, ny, m));
    return c;
  endfunction

  // Routing-table rule of crosspoint (x, y) for destination node n.
  function automatic axi_pkg::xbar_rule_t yx_rule(int unsigned x, int unsigned y,
      int unsigned nx, int unsigned ny, int unsigned n, axi_pkg::addr_t base,
      axi_pkg::addr_t region);
    axi_pkg::xbar_rule_t r;
    r.idx        = 8'(port_of_dir(x, y, nx, ny, yx_route(x, y, n % nx, n / nx)));
    r.start_addr = base + axi_pkg::addr_t'(n) * region;
    r.end_addr   = base + axi_pkg::addr_t'(n + 1) * region;
    return r;
  endfunction

endpackage
