// mocres_node: one node of the mesh, a hybrid two-layer router with its four
// IP ports, each behind a network interface (NI).
//
// This is the router of the paper's architecture figure: four local IP ports
// and four directional ports N, E, S, W on the 8-bit packet-switched layer,
// and, among the local IPs, the ones marked in C_MASK (IP0 and IP3 by
// default) also on the 32-bit circuit-switched layer. An IP sends a message
// with its target address; its NI picks the layer. Messages to other routers
// travel as packets over the directional ports, messages between the C-layer
// IPs of this router travel over the time-multiplexed C-layer in the slots
// the schedule gives them.
//
// Clocks: p_clk for the router's P-layer, c_clk for the C-layer, ip_clk[i]
// for IP i (an IP on the C-layer must run on c_clk). The directional input
// buffers are written on the neighbour's clock dir_in_clk. The IP signals are
// arrays indexed by local port; the directional signals by 0..3 = N, E, S, W.
// The schedule is written by a host on c_clk through sched_*.
module mocres_node
  import noc_pkg::*;
#(
  parameter logic [NLOCAL-1:0] C_MASK = 4'b1001,
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned NSLOT = 16,
  localparam int unsigned NC     = $countones(C_MASK),
  localparam int unsigned LEN_W  = $clog2(DEPTH) + 1,
  localparam int unsigned CSEL_W = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned SLOT_W = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic                     p_clk,
  input  logic                     p_rst_n,
  input  logic                     c_clk,
  input  logic                     c_rst_n,
  input  logic [COORD_W-1:0]       my_x,
  input  logic [COORD_W-1:0]       my_y,
  // IP cores
  input  logic [NLOCAL-1:0]        ip_clk,
  input  logic [NLOCAL-1:0]        ip_rst_n,
  input  logic [NLOCAL-1:0]        tx_valid,
  output logic [NLOCAL-1:0]        tx_ready,
  input  logic [CW-1:0]            tx_data  [NLOCAL],
  input  ipaddr_t                  tx_dst   [NLOCAL],
  input  logic [SIZE_W-1:0]        tx_len   [NLOCAL],
  output logic [NLOCAL-1:0]        tx_err,
  output logic [NLOCAL-1:0]        mode_c,
  output logic [NLOCAL-1:0]        rx_valid,
  input  logic [NLOCAL-1:0]        rx_ready,
  output logic [CW-1:0]            rx_data  [NLOCAL],
  output ipaddr_t                  rx_src   [NLOCAL],
  output logic [SIZE_W-1:0]        rx_len   [NLOCAL],
  output logic [NLOCAL-1:0]        rx_first,
  output logic [NLOCAL-1:0]        rx_last,
  output cword_t                   c_rx     [NLOCAL],
  // directional ports (0..3 = N, E, S, W)
  input  logic [NDIR-1:0]          dir_in_clk,
  input  logic [NDIR-1:0]          dir_in_rst_n,
  input  plink_t                   dir_in   [NDIR],
  output logic [LEN_W-1:0]         dir_in_free [NDIR],
  output plink_t                   dir_out  [NDIR],
  input  logic [LEN_W-1:0]         dir_out_free [NDIR],
  output logic [NPORT-1:0]         drop,
  // C-layer schedule
  input  logic                     sched_we,
  input  logic [SLOT_W-1:0]        sched_addr,
  input  logic [NC*(CSEL_W+1)-1:0] sched_data,
  input  logic [SLOT_W:0]          sched_len,
  input  logic                     sched_run,
  output logic [SLOT_W-1:0]        sched_slot
);
  // C-layer port index of local port l (C-layer ports numbered in port order)
  function automatic int cport_of(input int l);
    int n = 0;
    for (int i = 0; i < l; i++) if (C_MASK[i]) n++;
    return n;
  endfunction

  logic [NPORT-1:0]  r_in_clk, r_in_rst_n;
  plink_t            r_in_link  [NPORT];
  logic [LEN_W-1:0]  r_in_free  [NPORT];
  plink_t            r_out_link [NPORT];
  logic [LEN_W-1:0]  r_out_free [NPORT];
  cword_t            r_c_in  [NC];
  cword_t            r_c_out [NC];
  logic [NC-1:0]     r_c_route [NC];

  hybrid_router #(.NC(NC), .DEPTH(DEPTH), .NSLOT(NSLOT)) u_router (
    .p_clk, .p_rst_n, .my_x, .my_y,
    .in_clk(r_in_clk), .in_rst_n(r_in_rst_n), .in_link(r_in_link), .in_free(r_in_free),
    .out_link(r_out_link), .out_free(r_out_free), .drop,
    .c_clk, .c_rst_n, .c_in(r_c_in), .c_out(r_c_out), .c_route(r_c_route),
    .sched_we, .sched_addr, .sched_data, .sched_len, .sched_run, .sched_slot
  );

  for (genvar d = 0; d < int'(NDIR); d++) begin : g_dir
    assign r_in_clk[NLOCAL+d]   = dir_in_clk[d];
    assign r_in_rst_n[NLOCAL+d] = dir_in_rst_n[d];
    assign r_in_link[NLOCAL+d]  = dir_in[d];
    assign dir_in_free[d]       = r_in_free[NLOCAL+d];
    assign dir_out[d]           = r_out_link[NLOCAL+d];
    assign r_out_free[NLOCAL+d] = dir_out_free[d];
  end

  for (genvar l = 0; l < int'(NLOCAL); l++) begin : g_ni
    localparam int CP = cport_of(l);
    cword_t          ni_c_tx;
    cword_t          ni_c_in;
    logic [NC-1:0]   ni_route;
    plink_t          inj;

    if (C_MASK[l]) begin : g_c
      assign r_c_in[CP] = ni_c_tx;
      assign ni_c_in    = r_c_out[CP];
      assign ni_route   = r_c_route[CP];
    end else begin : g_noc
      assign ni_c_in  = '0;
      assign ni_route = '0;
    end

    assign r_in_clk[l]   = ip_clk[l];
    assign r_in_rst_n[l] = ip_rst_n[l];
    assign r_in_link[l]  = inj;

    network_interface #(.LID(l), .C_MASK(C_MASK), .DEPTH(DEPTH)) u_ni (
      .ip_clk(ip_clk[l]), .ip_rst_n(ip_rst_n[l]), .p_clk, .p_rst_n, .my_x, .my_y,
      .tx_valid(tx_valid[l]), .tx_ready(tx_ready[l]), .tx_data(tx_data[l]),
      .tx_dst(tx_dst[l]), .tx_len(tx_len[l]), .tx_err(tx_err[l]), .mode_c(mode_c[l]),
      .rx_valid(rx_valid[l]), .rx_ready(rx_ready[l]), .rx_data(rx_data[l]),
      .rx_src(rx_src[l]), .rx_len(rx_len[l]), .rx_first(rx_first[l]), .rx_last(rx_last[l]),
      .c_rx(c_rx[l]),
      .inj_wr(inj.valid), .inj_data(inj.data), .inj_free(r_in_free[l]),
      .ej_link(r_out_link[l]), .ej_free(r_out_free[l]),
      .c_tx(ni_c_tx), .c_route(ni_route), .c_in(ni_c_in)
    );
  end

endmodule
