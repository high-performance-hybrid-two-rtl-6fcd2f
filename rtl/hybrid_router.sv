// hybrid_router: the two-layer router.
//
// Packet-switched layer (P-layer), eight 8-bit ports L0..L3, N, E, S, W:
// every input has a dual-clock buffer whose write side runs on the sender's
// clock (in_clk) and whose read side runs on the router clock p_clk. An input
// port controller decodes the header, routes XY and asks the central arbiter
// for its output; the arbiter's per-output round-robin machines set the
// multiplexer cross-point; flits leave through a register into the buffer
// behind each output, whose free space (out_free) comes back for virtual
// cut-through. Local-to-local connections do not exist in this layer.
//
// Circuit-switched layer (C-layer), NC ports of 32 bits on the C-layer clock
// c_clk: a scheduling memory steps through time slots and sets an unbuffered
// multiplexer cross-point in every slot, with multicast.
//
// Timing: a header flit written into an empty input buffer leaves on the
// output link 6 p_clk cycles after the write when the output is free (2 for
// the clock-domain crossing, 2 to read the two routing flits, 1 for the
// grant, 1 for the output register), plus up to one cycle of phase offset
// between the sender's clock and p_clk; each further flit follows one cycle
// later. This matches the paper's "at least 6 cycles" from router input to
// output.
// A C-layer word crosses in the cycle it is sent.
// Structure follows the paper's router figure and text; the clocking of the
// buffers and the cycle counts are this design's.
module hybrid_router
  import noc_pkg::*;
#(
  parameter int unsigned NC    = 2,          // C-layer ports
  parameter int unsigned DEPTH = BUF_DEPTH,  // input buffer depth (flits)
  parameter int unsigned NSLOT = 16,         // C-layer schedule slots
  localparam int unsigned LEN_W  = $clog2(DEPTH) + 1,
  localparam int unsigned CSEL_W = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned SLOT_W = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic                     p_clk,
  input  logic                     p_rst_n,
  input  logic [COORD_W-1:0]       my_x,
  input  logic [COORD_W-1:0]       my_y,
  // P-layer inputs: write side of the input buffers
  input  logic [NPORT-1:0]         in_clk,
  input  logic [NPORT-1:0]         in_rst_n,
  input  plink_t                   in_link  [NPORT],
  output logic [LEN_W-1:0]         in_free  [NPORT],
  // P-layer outputs
  output plink_t                   out_link [NPORT],
  input  logic [LEN_W-1:0]         out_free [NPORT],
  output logic [NPORT-1:0]         drop,
  // C-layer
  input  logic                     c_clk,
  input  logic                     c_rst_n,
  input  cword_t                   c_in     [NC],
  output cword_t                   c_out    [NC],
  output logic [NC-1:0]            c_route  [NC],
  input  logic                     sched_we,
  input  logic [SLOT_W-1:0]        sched_addr,
  input  logic [NC*(CSEL_W+1)-1:0] sched_data,
  input  logic [SLOT_W:0]          sched_len,
  input  logic                     sched_run,
  output logic [SLOT_W-1:0]        sched_slot
);
  // ---------------------------------------------------------------- P-layer
  flit_t             buf_data  [NPORT];
  logic [NPORT-1:0]  buf_empty, buf_pop;
  logic [NPORT-1:0]  req_valid, grant, last, busy;
  port_e             req_port  [NPORT];
  logic [LEN_W-1:0]  req_len   [NPORT];
  plink_t            xin       [NPORT];
  logic [SEL_W-1:0]  msel      [NPORT];
  logic [NPORT-1:0]  release_v;

  for (genvar i = 0; i < int'(NPORT); i++) begin : g_in
    async_fifo #(.W(FLIT_W), .DEPTH(DEPTH)) u_buf (
      .wclk(in_clk[i]), .wrst_n(in_rst_n[i]),
      .wr_en(in_link[i].valid), .wr_data(in_link[i].data), .wr_free(in_free[i]),
      .rclk(p_clk), .rrst_n(p_rst_n),
      .rd_en(buf_pop[i]), .rd_data(buf_data[i]), .rd_empty(buf_empty[i])
    );

    input_port #(.PORT_ID(i), .DEPTH(DEPTH)) u_port (
      .clk(p_clk), .rst_n(p_rst_n), .my_x, .my_y,
      .buf_data(buf_data[i]), .buf_empty(buf_empty[i]), .buf_pop(buf_pop[i]),
      .req_valid(req_valid[i]), .req_port(req_port[i]), .req_len(req_len[i]),
      .grant(grant[i]),
      .flit_out(xin[i]), .last(last[i]), .drop(drop[i])
    );

    assign release_v[i] = xin[i].valid && last[i];
  end

  central_arbiter #(.LEN_W(LEN_W)) u_arb (
    .clk(p_clk), .rst_n(p_rst_n),
    .req_valid, .req_port, .req_len, .release_i(release_v),
    .dn_free(out_free), .grant, .msel, .busy
  );

  p_crosspoint u_xp (
    .clk(p_clk), .rst_n(p_rst_n),
    .in_link(xin), .msel, .busy, .out_link
  );

  // ---------------------------------------------------------------- C-layer
  logic [NC-1:0]     c_en;
  logic [CSEL_W-1:0] c_sel [NC];

  c_schedule #(.NC(NC), .NSLOT(NSLOT)) u_sched (
    .clk(c_clk), .rst_n(c_rst_n),
    .cfg_we(sched_we), .cfg_addr(sched_addr), .cfg_data(sched_data),
    .cfg_len(sched_len), .cfg_run(sched_run),
    .slot(sched_slot), .out_en(c_en), .out_sel(c_sel)
  );

  c_crosspoint #(.NC(NC)) u_cxp (
    .c_in, .out_en(c_en), .out_sel(c_sel), .c_out, .route(c_route)
  );

endmodule
