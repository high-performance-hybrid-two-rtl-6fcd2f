// input_port: the per-input controller of the P-layer.
//
// It takes the first two header flits (H0: destination, H1: size) out of the
// input buffer, computes the output port by XY routing and the packet length
// from the size code, and raises a request (Req_in in the paper's arbiter
// figure) to the central arbiter. When the grant (Grnt_in) comes it sends H0,
// then H1, then the remaining flits of the packet straight from the buffer,
// one per cycle while the buffer is not empty. The flit that ends the packet
// carries `last`, which releases the output in the arbiter.
//
// The P-layer has no connections between local ports: a packet that enters
// at a local port and is addressed to a local port of the same router (or one
// that would turn back out of the port it came in by) is drained and dropped,
// and `drop` pulses. The network interface never sends such packets; the
// C-layer serves traffic between IPs of one router.
//
// Timing: with the header at the head of the buffer, the request is raised two
// cycles later (one cycle per header flit); H0 leaves in the cycle the grant
// is seen. Req/grant and header decoding follow the paper; the state machine
// itself is this design's.
module input_port
  import noc_pkg::*;
#(
  parameter int unsigned PORT_ID = 4,
  parameter int unsigned DEPTH   = BUF_DEPTH,
  localparam int unsigned LEN_W  = $clog2(DEPTH) + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [COORD_W-1:0]  my_x,
  input  logic [COORD_W-1:0]  my_y,
  // input buffer, read side
  input  flit_t               buf_data,
  input  logic                buf_empty,
  output logic                buf_pop,
  // central arbiter
  output logic                req_valid,
  output port_e               req_port,
  output logic [LEN_W-1:0]    req_len,
  input  logic                grant,
  // towards the cross-point
  output plink_t              flit_out,
  output logic                last,
  output logic                drop
);
  localparam int unsigned GRAN = DEPTH >> SIZE_W;
  // A packet is at least one unit long and a unit holds the 4 header flits.
  if (GRAN < HDR_FLITS) begin : g_depth_check
    $error("input_port: DEPTH must be at least HDR_FLITS * 2**SIZE_W");
  end

  typedef enum logic [2:0] {S_H0, S_H1, S_REQ, S_SEND_H1, S_BODY, S_DROP} state_e;
  state_e            state;
  flit_t             h0, h1;
  logic [LEN_W-1:0]  remain;      // body flits still to send / drop
  logic [LEN_W-1:0]  pkt_len;
  port_e             route;
  logic              bad_route;

  assign route    = xy_route(ipaddr_t'(h0), my_x, my_y);
  assign pkt_len  = LEN_W'((int'(h1[SIZE_W-1:0]) + 1) * int'(GRAN));
  assign bad_route = (is_local(SEL_W'(PORT_ID)) && is_local(route)) ||
                     (route == port_e'(PORT_ID));

  assign req_valid = (state == S_REQ) && !bad_route;
  assign req_port  = route;
  assign req_len   = pkt_len;

  always_comb begin
    buf_pop       = 1'b0;
    flit_out      = '0;
    last          = 1'b0;
    unique case (state)
      S_H0, S_H1: buf_pop = !buf_empty;
      S_REQ: if (grant && !bad_route) flit_out = '{valid: 1'b1, data: h0};
      S_SEND_H1: begin
        flit_out = '{valid: 1'b1, data: h1};
        last     = (remain == '0);
      end
      S_BODY: if (!buf_empty) begin
        buf_pop  = 1'b1;
        flit_out = '{valid: 1'b1, data: buf_data};
        last     = (remain == LEN_W'(1));
      end
      S_DROP: buf_pop = !buf_empty && (remain != '0);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_H0;
      h0     <= '0;
      h1     <= '0;
      remain <= '0;
      drop   <= 1'b0;
    end else begin
      drop <= 1'b0;
      unique case (state)
        S_H0: if (!buf_empty) begin h0 <= buf_data; state <= S_H1; end
        S_H1: if (!buf_empty) begin h1 <= buf_data; state <= S_REQ; end
        S_REQ: begin
          remain <= pkt_len - LEN_W'(2);
          if (bad_route) begin
            drop  <= 1'b1;
            state <= S_DROP;
          end else if (grant) begin
            state <= S_SEND_H1;
          end
        end
        S_SEND_H1: state <= (remain == '0) ? S_H0 : S_BODY;
        S_BODY: if (!buf_empty) begin
          remain <= remain - 1'b1;
          if (remain == LEN_W'(1)) state <= S_H0;
        end
        S_DROP: begin
          if (remain == '0) state <= S_H0;
          else if (!buf_empty) begin
            remain <= remain - 1'b1;
            if (remain == LEN_W'(1)) state <= S_H0;
          end
        end
        default: state <= S_H0;
      endcase
    end
  end

endmodule
