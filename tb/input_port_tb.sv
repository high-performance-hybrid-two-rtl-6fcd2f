// input_port_tb: self-checking test of the P-layer input port controller.
// A queue stands in for the input buffer. The port sits at local port L0 of
// router (2,2). Checks: XY route for targets in all four directions and
// packet length from the size code; the request comes two cycles after the
// header is at the head of the buffer; flits leave in order, H0 in the grant
// cycle, one per cycle, with `last` on the final flit and a stall while the
// buffer runs empty; a packet for a local port of the same router is dropped.
module input_port_tb;
  import noc_pkg::*;
  localparam int DEPTH = 128, LEN_W = 8, GRAN = DEPTH / 32;
  logic clk = 0, rst_n = 0;
  logic [COORD_W-1:0] my_x = 3'd2, my_y = 3'd2;
  flit_t buf_data;
  logic buf_empty, buf_pop, req_valid, grant = 0, last, drop;
  port_e req_port;
  logic [LEN_W-1:0] req_len;
  plink_t flit_out;
  flit_t q[$];
  bit hold_back = 0;   // hide the buffer contents (simulates an empty buffer)
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  assign buf_empty = hold_back || (q.size() == 0);
  assign buf_data  = q.size() ? q[0] : '0;
  always @(posedge clk) if (buf_pop && !buf_empty) void'(q.pop_front());

  input_port #(.PORT_ID(0), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic flit_t h0(input int x, y, l);
    return flit_t'(ipaddr_t'{x: COORD_W'(x), y: COORD_W'(y), l: LID_W'(l)});
  endfunction

  // push a packet of (size+1) units: H0, H1, H2, H3, payload
  task automatic push_pkt(input int x, y, l, size, output flit_t pkt[$]);
    pkt = {};
    pkt.push_back(h0(x, y, l));
    pkt.push_back(flit_t'(size));
    pkt.push_back(8'h11);
    pkt.push_back(8'h00);
    for (int i = 0; i < size * 4; i++) pkt.push_back(flit_t'($urandom));
    foreach (pkt[i]) q.push_back(pkt[i]);
  endtask

  // run one packet through, grant after `gdelay` extra cycles
  task automatic run_pkt(input int x, y, l, size, input port_e exp_port, input int gap_at);
    flit_t pkt[$];
    int n, cyc;
    bit gap_done = 0;
    push_pkt(x, y, l, size, pkt);
    // request after two cycles
    // header at the head of the buffer now; request two cycles later
    @(negedge clk); check(!req_valid, "no request after one pop");
    @(negedge clk);
    check(req_valid && req_port == exp_port,
          $sformatf("route to %0d expected %0d", req_port, exp_port));
    check(int'(req_len) == (size + 1) * GRAN, $sformatf("length %0d", req_len));
    grant = 1;
    #1;
    check(flit_out.valid && flit_out.data == pkt[0], "H0 in grant cycle");
    n = 1; cyc = 0;
    while (n < pkt.size() && cyc < 1000) begin
      @(negedge clk); cyc++;
      hold_back = (n == gap_at) && !gap_done;
      if (hold_back) gap_done = 1;
      #1;
      if (flit_out.valid) begin
        check(flit_out.data == pkt[n], $sformatf("flit %0d", n));
        check(last == (n == pkt.size() - 1), $sformatf("last at flit %0d", n));
        n++;
      end else check(hold_back, "stall only when buffer empty");
    end
    check(cyc == pkt.size() - 1 + (gap_at > 1 ? 1 : 0),
          $sformatf("%0d cycles for %0d flits", cyc, pkt.size()));
    grant = 0; hold_back = 0;
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    flit_t pkt[$];
    repeat (2) @(negedge clk); rst_n = 1;
    run_pkt(3, 2, 1, 2, P_E, 7);
    run_pkt(0, 7, 0, 0, P_W, 0);
    run_pkt(2, 5, 3, 1, P_N, 5);
    run_pkt(2, 0, 2, 5, P_S, 0);
    // local target on this router: dropped, nothing sent, no request
    push_pkt(2, 2, 3, 1, pkt);
    push_pkt(4, 2, 0, 0, pkt);   // followed by a packet that must go out E
    begin
      bit seen_drop = 0;
      for (int c = 0; c < 12; c++) begin
        @(negedge clk);
        if (drop) seen_drop = 1;
        if (req_valid) break;
      end
      check(seen_drop, "drop pulse");
      check(req_valid && req_port == P_E, "next packet after the dropped one");
      check(q.size() == 2, $sformatf("dropped packet drained, %0d left", q.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
