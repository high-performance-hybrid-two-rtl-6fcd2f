// network_interface: joins one IP core to the hybrid router.
//
// Mode switching. When the IP offers the first word of a message, the NI
// compares the target's router coordinates with its own. A target on another
// router goes over the packet-switched layer (P-layer); a target on this
// router goes over the circuit-switched layer (C-layer), which is the only
// path between IPs of one router. If this IP or the target has no C-layer
// port, the message cannot be delivered: it is consumed and tx_err pulses.
//
// P-layer send: the NI writes the 4-flit header (destination, size code,
// source, reserved; see noc_pkg) and then each 32-bit word as four 8-bit
// flits, most significant byte first, into the router's local input buffer
// (inj_*; that buffer is clocked by the IP clock on its write side). The size
// code is the number of payload words, which makes the packet
// (size+1)/32 of the buffer depth long.
// C-layer send: a word is taken (tx_ready) only in a slot in which the
// schedule connects this IP's C-layer port to the target's, and is then put
// on the cross-point in that same cycle. The IP must run on the C-layer clock.
//
// P-layer receive: the router's local output writes flits into a dual-clock
// receive buffer here (ej_*, router clock); the NI strips the header and
// hands the payload words to the IP with valid/ready, with the source address
// and the word count. C-layer receive: the cross-point output is handed to the
// IP as it is, with no buffering.
//
// Interface timing: tx_len (1..31 words) and tx_dst are sampled with the first
// word of a message and must stay stable until its last word is taken.
// Sending a P-layer word takes five IP clock cycles (load and four flits).
// Mode switching and the header contents follow the paper; the header layout,
// the byte order and the handshakes are this design's.
module network_interface
  import noc_pkg::*;
#(
  parameter int unsigned LID    = 0,         // local port of this NI
  parameter logic [NLOCAL-1:0] C_MASK = 4'b1001,  // local ports on the C-layer
  parameter int unsigned DEPTH  = BUF_DEPTH,
  localparam int unsigned NC    = $countones(C_MASK),
  localparam int unsigned LEN_W = $clog2(DEPTH) + 1
) (
  input  logic                ip_clk,
  input  logic                ip_rst_n,
  input  logic                p_clk,
  input  logic                p_rst_n,
  input  logic [COORD_W-1:0]  my_x,
  input  logic [COORD_W-1:0]  my_y,
  // IP send side
  input  logic                tx_valid,
  output logic                tx_ready,
  input  logic [CW-1:0]       tx_data,
  input  ipaddr_t             tx_dst,
  input  logic [SIZE_W-1:0]   tx_len,
  output logic                tx_err,
  output logic                mode_c,     // 1 while a C-layer message is sent
  // IP receive side (P-layer)
  output logic                rx_valid,
  input  logic                rx_ready,
  output logic [CW-1:0]       rx_data,
  output ipaddr_t             rx_src,
  output logic [SIZE_W-1:0]   rx_len,
  output logic                rx_first,
  output logic                rx_last,
  // IP receive side (C-layer)
  output cword_t              c_rx,
  // router local input buffer, write side (IP clock)
  output logic                inj_wr,
  output flit_t               inj_data,
  input  logic [LEN_W-1:0]    inj_free,
  // router local output (router clock)
  input  plink_t              ej_link,
  output logic [LEN_W-1:0]    ej_free,
  // C-layer cross-point
  output cword_t              c_tx,
  input  logic [NC-1:0]       c_route,    // outputs that listen to this port now
  input  cword_t              c_in
);
  localparam int unsigned CPW = (NC > 1) ? $clog2(NC) : 1;

  // C-layer port index of a local port: count of C-layer ports below it.
  function automatic logic [CPW-1:0] cport_index(input logic [LID_W-1:0] l);
    int n = 0;
    for (int i = 0; i < int'(NLOCAL); i++)
      if (i < int'(l) && C_MASK[i]) n++;
    return CPW'(n);
  endfunction

  // ---------------------------------------------------------------- send
  typedef enum logic [2:0] {T_IDLE, T_HDR, T_LOAD, T_BYTES, T_CMODE, T_ERR} tstate_e;
  tstate_e           tst;
  ipaddr_t           dst_q;
  logic [SIZE_W-1:0] left;        // words still to take from the IP
  logic [1:0]        fidx;        // flit index within a word
  logic [CW-1:0]     shreg;
  logic [CPW-1:0]    dst_cport;
  logic              same_router, c_ok;
  flit_t             hdr_flit;

  assign same_router = (tx_dst.x == my_x) && (tx_dst.y == my_y);
  assign c_ok        = C_MASK[LID] && C_MASK[tx_dst.l] && (int'(tx_dst.l) != int'(LID));
  assign dst_cport   = cport_index(dst_q.l);
  assign mode_c      = (tst == T_CMODE);

  always_comb begin
    unique case (fidx)
      2'd0:    hdr_flit = flit_t'(dst_q);
      2'd1:    hdr_flit = flit_t'(left);
      2'd2:    hdr_flit = flit_t'(ipaddr_t'{x: my_x, y: my_y, l: LID_W'(LID)});
      default: hdr_flit = '0;
    endcase
  end

  always_comb begin
    tx_ready = 1'b0;
    inj_wr   = 1'b0;
    inj_data = '0;
    c_tx     = '0;
    unique case (tst)
      T_HDR: begin
        inj_wr   = (inj_free != '0);
        inj_data = hdr_flit;
      end
      T_LOAD:  tx_ready = 1'b1;
      T_BYTES: begin
        inj_wr   = (inj_free != '0);
        inj_data = shreg[CW-1 -: FLIT_W];
      end
      T_CMODE: begin
        tx_ready = c_route[dst_cport];
        c_tx     = '{valid: tx_valid && c_route[dst_cport], data: tx_data};
      end
      T_ERR:   tx_ready = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge ip_clk or negedge ip_rst_n) begin
    if (!ip_rst_n) begin
      tst    <= T_IDLE;
      dst_q  <= '0;
      left   <= '0;
      fidx   <= '0;
      shreg  <= '0;
      tx_err <= 1'b0;
    end else begin
      tx_err <= 1'b0;
      unique case (tst)
        T_IDLE: if (tx_valid) begin
          dst_q <= tx_dst;
          left  <= tx_len;
          fidx  <= '0;
          if (!same_router) tst <= T_HDR;
          else if (c_ok)    tst <= T_CMODE;
          else begin
            tst    <= T_ERR;
            tx_err <= 1'b1;
          end
        end
        T_HDR: if (inj_wr) begin
          fidx <= fidx + 1'b1;
          if (fidx == 2'd3) tst <= T_LOAD;
        end
        T_LOAD: if (tx_valid) begin
          shreg <= tx_data;
          left  <= left - 1'b1;
          tst   <= T_BYTES;
        end
        T_BYTES: if (inj_wr) begin
          fidx  <= fidx + 1'b1;
          shreg <= shreg << FLIT_W;
          if (fidx == 2'd3) tst <= (left == '0) ? T_IDLE : T_LOAD;
        end
        T_CMODE, T_ERR: if (tx_valid && tx_ready) begin
          left <= left - 1'b1;
          if (left == SIZE_W'(1)) tst <= T_IDLE;
        end
        default: tst <= T_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- receive
  flit_t            ej_data;
  logic             ej_empty, ej_pop;
  logic             rx_hold, hdr_phase;
  logic [1:0]       ridx;
  logic [23:0]      racc;
  logic [SIZE_W-1:0] rleft;

  async_fifo #(.W(FLIT_W), .DEPTH(DEPTH)) u_rxbuf (
    .wclk(p_clk), .wrst_n(p_rst_n), .wr_en(ej_link.valid), .wr_data(ej_link.data),
    .wr_free(ej_free),
    .rclk(ip_clk), .rrst_n(ip_rst_n), .rd_en(ej_pop), .rd_data(ej_data),
    .rd_empty(ej_empty)
  );

  assign ej_pop   = !ej_empty && !rx_hold;
  assign rx_valid = rx_hold;

  always_ff @(posedge ip_clk or negedge ip_rst_n) begin
    if (!ip_rst_n) begin
      rx_hold   <= 1'b0;
      hdr_phase <= 1'b1;
      ridx      <= '0;
      racc      <= '0;
      rleft     <= '0;
      rx_data   <= '0;
      rx_src    <= '0;
      rx_len    <= '0;
      rx_first  <= 1'b0;
      rx_last   <= 1'b0;
    end else begin
      if (rx_valid && rx_ready) rx_hold <= 1'b0;
      if (ej_pop) begin
        ridx <= ridx + 1'b1;
        racc <= {racc[15:0], ej_data};
        if (ridx == 2'd3) begin
          if (hdr_phase) begin
            // racc = {H0, H1, H2}; ej_data = H3
            rx_src    <= ipaddr_t'(racc[7:0]);
            rx_len    <= racc[8 +: SIZE_W];
            rleft     <= racc[8 +: SIZE_W];
            hdr_phase <= (racc[8 +: SIZE_W] == '0);
          end else begin
            rx_hold   <= 1'b1;
            rx_data   <= {racc, ej_data};
            rx_first  <= (rleft == rx_len);
            rx_last   <= (rleft == SIZE_W'(1));
            rleft     <= rleft - 1'b1;
            hdr_phase <= (rleft == SIZE_W'(1));
          end
        end
      end
    end
  end

  assign c_rx = c_in;

  a_len_nonzero: assert property (@(posedge ip_clk) disable iff (!ip_rst_n)
    (tst == T_IDLE && tx_valid) |-> tx_len != '0)
    else $error("network_interface: message of zero words");

endmodule
