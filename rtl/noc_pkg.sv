// noc_pkg: types and constants shared by the hybrid two-layer router.
//
// The router has eight packet-switched (P-layer) ports: four local IP ports
// L0..L3 and four directional ports N, E, S, W. A port number is three bits,
// the width of the cross-point select lines. P-layer channels are 8 bits wide,
// the circuit-switched (C-layer) bus 32 bits. The port count, the channel
// widths and the 3-bit select follow the paper; the port numbering, the header
// layout and the direction of the mesh axes are this design's own choices.
//
// Packet format on the 8-bit P-layer (one flit per cycle):
//   flit 0  H0 = {dst_x[2:0], dst_y[2:0], dst_l[1:0]}   destination IP
//   flit 1  H1 = {3'b000, size[4:0]}                      packet size code
//   flit 2  H2 = {src_x[2:0], src_y[2:0], src_l[1:0]}   source IP
//   flit 3  H3 = 8'h00                                    reserved
//   then size payload words of 32 bits, most significant byte first.
// The size code is the packet length as a fraction of the input buffer
// depth: length = (size + 1) * BUF_DEPTH / 2**SIZE_W flits. With the default
// depth of 128 flits one unit is 4 flits, one 32-bit word, so the header is
// one unit and size counts payload words (0..31).
//
// XY routing: X is resolved first. E is the +X direction, N the +Y direction.
package noc_pkg;

  localparam int unsigned FLIT_W   = 8;   // P-layer channel width
  localparam int unsigned CW       = 32;  // C-layer bus width
  localparam int unsigned NLOCAL   = 4;   // local IP ports per router
  localparam int unsigned NDIR     = 4;   // directional ports
  localparam int unsigned NPORT    = NLOCAL + NDIR;
  localparam int unsigned SEL_W    = 3;   // cross-point select width
  localparam int unsigned COORD_W  = 3;   // mesh coordinate width (up to 8x8)
  localparam int unsigned LID_W    = 2;   // local IP index width
  localparam int unsigned SIZE_W   = 5;   // size-code width in H1
  localparam int unsigned BUF_DEPTH = 128; // input buffer depth in flits
  localparam int unsigned HDR_FLITS = 4;  // header flits (one 32-bit word)

  typedef enum logic [SEL_W-1:0] {
    P_L0 = 3'd0, P_L1 = 3'd1, P_L2 = 3'd2, P_L3 = 3'd3,
    P_N  = 3'd4, P_E  = 3'd5, P_S  = 3'd6, P_W  = 3'd7
  } port_e;

  typedef logic [FLIT_W-1:0] flit_t;

  // Address of one IP core: router coordinates and local port.
  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [LID_W-1:0]   l;
  } ipaddr_t;

  // A P-layer link: flit plus valid, from a sender into a receive buffer.
  typedef struct packed {
    logic  valid;
    flit_t data;
  } plink_t;

  // A C-layer word with its valid bit.
  typedef struct packed {
    logic          valid;
    logic [CW-1:0] data;
  } cword_t;

  function automatic logic is_local(input logic [SEL_W-1:0] p);
    return p < SEL_W'(NLOCAL);
  endfunction

  // XY (dimension-ordered) route for a header H0 at router (mx, my).
  function automatic port_e xy_route(input ipaddr_t dst,
                                     input logic [COORD_W-1:0] mx,
                                     input logic [COORD_W-1:0] my);
    if (dst.x > mx)      return P_E;
    else if (dst.x < mx) return P_W;
    else if (dst.y > my) return P_N;
    else if (dst.y < my) return P_S;
    else                 return port_e'({1'b0, dst.l});
  endfunction

endpackage
