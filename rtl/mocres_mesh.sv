// mocres_mesh: a 2-D mesh of hybrid router nodes.
//
// MESH_X by MESH_Y nodes (mocres_node), node (x, y) at index y*MESH_X + x,
// each with four IPs. Neighbouring nodes are joined through their directional
// ports: the E output of (x, y) writes the W input buffer of (x+1, y) and the
// N output of (x, y) writes the S input buffer of (x, y+1), and the other way
// round; each input buffer is written on the clock of the node that sends into
// it and reports its free space back to that node. Every node has its own
// P-layer and C-layer clock, so the mesh is multi-clock as a whole.
// Ports at the edge of the mesh are unused: their inputs are idle and their
// outputs report no room, which XY routing never needs for targets inside
// the mesh (a packet addressed outside the mesh would wait forever).
//
// The IP and schedule signals of all nodes are brought out as arrays indexed
// by node (and by local port for the IPs). The mesh topology and XY routing
// follow the paper; the 2x2 default size is this design's choice, as the
// paper gives no mesh size.
module mocres_mesh
  import noc_pkg::*;
#(
  parameter int unsigned MESH_X = 2,
  parameter int unsigned MESH_Y = 2,
  parameter logic [NLOCAL-1:0] C_MASK = 4'b1001,
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned NSLOT = 16,
  localparam int unsigned NN     = MESH_X * MESH_Y,
  localparam int unsigned NC     = $countones(C_MASK),
  localparam int unsigned CSEL_W = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned SLOT_W = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic [NN-1:0]             p_clk,
  input  logic [NN-1:0]             p_rst_n,
  input  logic [NN-1:0]             c_clk,
  input  logic [NN-1:0]             c_rst_n,
  // IP cores, [node][local port]
  input  logic [NLOCAL-1:0]         ip_clk   [NN],
  input  logic [NLOCAL-1:0]         ip_rst_n [NN],
  input  logic [NLOCAL-1:0]         tx_valid [NN],
  output logic [NLOCAL-1:0]         tx_ready [NN],
  input  logic [CW-1:0]             tx_data  [NN][NLOCAL],
  input  ipaddr_t                   tx_dst   [NN][NLOCAL],
  input  logic [SIZE_W-1:0]         tx_len   [NN][NLOCAL],
  output logic [NLOCAL-1:0]         tx_err   [NN],
  output logic [NLOCAL-1:0]         mode_c   [NN],
  output logic [NLOCAL-1:0]         rx_valid [NN],
  input  logic [NLOCAL-1:0]         rx_ready [NN],
  output logic [CW-1:0]             rx_data  [NN][NLOCAL],
  output ipaddr_t                   rx_src   [NN][NLOCAL],
  output logic [SIZE_W-1:0]         rx_len   [NN][NLOCAL],
  output logic [NLOCAL-1:0]         rx_first [NN],
  output logic [NLOCAL-1:0]         rx_last  [NN],
  output cword_t                    c_rx     [NN][NLOCAL],
  output logic [NPORT-1:0]          drop     [NN],
  // C-layer schedules, per node
  input  logic [NN-1:0]             sched_we,
  input  logic [SLOT_W-1:0]         sched_addr [NN],
  input  logic [NC*(CSEL_W+1)-1:0]  sched_data [NN],
  input  logic [SLOT_W:0]           sched_len  [NN],
  input  logic [NN-1:0]             sched_run,
  output logic [SLOT_W-1:0]         sched_slot [NN]
);
  localparam int unsigned LEN_W = $clog2(DEPTH) + 1;
  localparam int DN = 0, DE = 1, DS = 2, DW = 3;

  // directional signals of every node, [node][direction]
  logic [NDIR-1:0]   d_in_clk   [NN];
  logic [NDIR-1:0]   d_in_rst_n [NN];
  plink_t            d_in       [NN][NDIR];
  logic [LEN_W-1:0]  d_in_free  [NN][NDIR];
  plink_t            d_out      [NN][NDIR];
  logic [LEN_W-1:0]  d_out_free [NN][NDIR];

  for (genvar y = 0; y < int'(MESH_Y); y++) begin : g_y
    for (genvar x = 0; x < int'(MESH_X); x++) begin : g_x
      localparam int N  = y * MESH_X + x;
      localparam int NE = y * MESH_X + x + 1;       // east neighbour
      localparam int NW = y * MESH_X + x - 1;       // west neighbour
      localparam int NNB = (y + 1) * MESH_X + x;    // north neighbour
      localparam int NS = (y - 1) * MESH_X + x;     // south neighbour

      mocres_node #(.C_MASK(C_MASK), .DEPTH(DEPTH), .NSLOT(NSLOT)) u_node (
        .p_clk(p_clk[N]), .p_rst_n(p_rst_n[N]), .c_clk(c_clk[N]), .c_rst_n(c_rst_n[N]),
        .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .ip_clk(ip_clk[N]), .ip_rst_n(ip_rst_n[N]),
        .tx_valid(tx_valid[N]), .tx_ready(tx_ready[N]), .tx_data(tx_data[N]),
        .tx_dst(tx_dst[N]), .tx_len(tx_len[N]), .tx_err(tx_err[N]), .mode_c(mode_c[N]),
        .rx_valid(rx_valid[N]), .rx_ready(rx_ready[N]), .rx_data(rx_data[N]),
        .rx_src(rx_src[N]), .rx_len(rx_len[N]), .rx_first(rx_first[N]),
        .rx_last(rx_last[N]), .c_rx(c_rx[N]),
        .dir_in_clk(d_in_clk[N]), .dir_in_rst_n(d_in_rst_n[N]), .dir_in(d_in[N]),
        .dir_in_free(d_in_free[N]), .dir_out(d_out[N]), .dir_out_free(d_out_free[N]),
        .drop(drop[N]),
        .sched_we(sched_we[N]), .sched_addr(sched_addr[N]), .sched_data(sched_data[N]),
        .sched_len(sched_len[N]), .sched_run(sched_run[N]), .sched_slot(sched_slot[N])
      );

      // east side: W input of the east neighbour, or mesh edge
      if (x + 1 < int'(MESH_X)) begin : g_e
        assign d_in_clk[N][DE]   = p_clk[NE];
        assign d_in_rst_n[N][DE] = p_rst_n[NE];
        assign d_in[N][DE]       = d_out[NE][DW];
        assign d_out_free[N][DE] = d_in_free[NE][DW];
      end else begin : g_e_edge
        assign d_in_clk[N][DE]   = p_clk[N];
        assign d_in_rst_n[N][DE] = p_rst_n[N];
        assign d_in[N][DE]       = '0;
        assign d_out_free[N][DE] = '0;
      end
      if (x > 0) begin : g_w
        assign d_in_clk[N][DW]   = p_clk[NW];
        assign d_in_rst_n[N][DW] = p_rst_n[NW];
        assign d_in[N][DW]       = d_out[NW][DE];
        assign d_out_free[N][DW] = d_in_free[NW][DE];
      end else begin : g_w_edge
        assign d_in_clk[N][DW]   = p_clk[N];
        assign d_in_rst_n[N][DW] = p_rst_n[N];
        assign d_in[N][DW]       = '0;
        assign d_out_free[N][DW] = '0;
      end
      if (y + 1 < int'(MESH_Y)) begin : g_n
        assign d_in_clk[N][DN]   = p_clk[NNB];
        assign d_in_rst_n[N][DN] = p_rst_n[NNB];
        assign d_in[N][DN]       = d_out[NNB][DS];
        assign d_out_free[N][DN] = d_in_free[NNB][DS];
      end else begin : g_n_edge
        assign d_in_clk[N][DN]   = p_clk[N];
        assign d_in_rst_n[N][DN] = p_rst_n[N];
        assign d_in[N][DN]       = '0;
        assign d_out_free[N][DN] = '0;
      end
      if (y > 0) begin : g_s
        assign d_in_clk[N][DS]   = p_clk[NS];
        assign d_in_rst_n[N][DS] = p_rst_n[NS];
        assign d_in[N][DS]       = d_out[NS][DN];
        assign d_out_free[N][DS] = d_in_free[NS][DN];
      end else begin : g_s_edge
        assign d_in_clk[N][DS]   = p_clk[N];
        assign d_in_rst_n[N][DS] = p_rst_n[N];
        assign d_in[N][DS]       = '0;
        assign d_out_free[N][DS] = '0;
      end
    end
  end
endmodule
