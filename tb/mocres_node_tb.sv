// mocres_node_tb: end-to-end test of one router node with its four NIs, at
// the default parameters (IP0 and IP3 on the C-layer, 128-flit buffers,
// 16-slot schedule). The node sits at (1,1). Behavioural neighbours stand
// behind N, E, S, W: they send packets in on their own clock and receive the
// node's packets into buffers that drain at random.
// Exercised and counted (each must happen at least once):
//  - P-layer messages from IPs to other routers (serialised into packets);
//  - packets from neighbours delivered to IPs, words and source checked;
//  - output contention (two neighbours sending to one IP at once);
//  - a cut-through wait (no room behind the E output until it is freed);
//  - C-layer messages between IP0 and IP3 in their schedule slots;
//  - a multicast slot (IP0's word to IP3 and back to IP0 in the same cycle);
//  - mode switching in IP0's NI (P-layer message, then C-layer message);
//  - a refused message (IP1 to IP2 of the same router: no C-layer path).
module mocres_node_tb;
  import noc_pkg::*;
  localparam int LEN_W = 8;
  logic p_clk = 0, c_clk = 0, n_clk = 0, ip1_clk = 0, ip2_clk = 0, rst_n = 0;
  logic [COORD_W-1:0] my_x = 3'd1, my_y = 3'd1;
  logic [NLOCAL-1:0] ip_clk, ip_rst_n, tx_valid, tx_ready, tx_err, mode_c;
  logic [CW-1:0] tx_data [NLOCAL];
  ipaddr_t tx_dst [NLOCAL];
  logic [SIZE_W-1:0] tx_len [NLOCAL];
  logic [NLOCAL-1:0] rx_valid, rx_ready, rx_first, rx_last;
  logic [CW-1:0] rx_data [NLOCAL];
  ipaddr_t rx_src [NLOCAL];
  logic [SIZE_W-1:0] rx_len [NLOCAL];
  cword_t c_rx [NLOCAL];
  logic [NDIR-1:0] dir_in_clk, dir_in_rst_n;
  plink_t dir_in [NDIR];
  logic [LEN_W-1:0] dir_in_free [NDIR];
  plink_t dir_out [NDIR];
  logic [LEN_W-1:0] dir_out_free [NDIR];
  logic [NPORT-1:0] drop;
  logic sched_we = 0, sched_run = 0;
  logic [3:0] sched_addr = '0, sched_slot;
  logic [3:0] sched_data = '0;
  logic [4:0] sched_len = '0;

  int checks = 0, failures = 0;
  int n_pmsg = 0, n_deliv = 0, n_contention = 0, n_vct = 0, n_cmsg = 0;
  int n_mcast = 0, n_mode_sw = 0, n_err = 0;

  always #5 p_clk = ~p_clk;
  always #4 c_clk = ~c_clk;
  always #6 n_clk = ~n_clk;
  always #7 ip1_clk = ~ip1_clk;
  always #9 ip2_clk = ~ip2_clk;
  assign ip_clk = {c_clk, ip2_clk, ip1_clk, c_clk};
  assign ip_rst_n = {NLOCAL{rst_n}};
  assign dir_in_clk = {NDIR{n_clk}};
  assign dir_in_rst_n = {NDIR{rst_n}};

  mocres_node dut (.*, .p_rst_n(rst_n), .c_rst_n(rst_n));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic wait_ip(input int i);
    case (i)
      1: @(posedge ip1_clk);
      2: @(posedge ip2_clk);
      default: @(posedge c_clk);
    endcase
  endtask

  // IP i sends a message
  task automatic ip_send(input int i, input ipaddr_t dst, input logic [CW-1:0] w[$]);
    tx_dst[i] = dst; tx_len[i] = SIZE_W'(w.size());
    foreach (w[k]) begin
      tx_valid[i] = 1; tx_data[i] = w[k];
      wait_ip(i);
      while (!tx_ready[i]) wait_ip(i);
      #1;
    end
    tx_valid[i] = 0;
  endtask

  // ---------------- behavioural neighbours: receive side
  int occ [NDIR];
  bit e_block = 0;          // E neighbour keeps its buffer full while set
  flit_t dcur [NDIR][$];
  flit_t dpkts [NDIR][$][$];
  always_comb for (int d = 0; d < NDIR; d++)
    dir_out_free[d] = (d == 1 && e_block) ? 8'd6 : LEN_W'(128 - occ[d]);
  always @(posedge p_clk) if (rst_n) begin
    for (int d = 0; d < NDIR; d++) begin
      if (occ[d] > 0 && $urandom_range(0, 2) == 0) occ[d]--;
      if (dir_out[d].valid) begin
        occ[d]++;
        dcur[d].push_back(dir_out[d].data);
        if (dcur[d].size() >= 2 && dcur[d].size() == (int'(dcur[d][1]) + 1) * 4) begin
          dpkts[d].push_back(dcur[d]);
          dcur[d] = {};
        end
      end
    end
  end

  // behavioural neighbour d sends a packet into the node
  task automatic nb_send(input int d, input flit_t pkt[$]);
    foreach (pkt[k]) begin
      @(negedge n_clk);
      while (dir_in_free[d] == 0) @(negedge n_clk);
      dir_in[d] = '{valid: 1'b1, data: pkt[k]};
      @(posedge n_clk); #1;
      dir_in[d] = '0;
    end
  endtask

  // ---------------- IP receive sides
  logic [CW-1:0] rxw [NLOCAL][$];
  ipaddr_t rxs [NLOCAL][$];
  for (genvar i = 0; i < NLOCAL; i++) begin : g_rx
    always @(posedge ip_clk[i]) if (rst_n && rx_valid[i] && rx_ready[i]) begin
      rxw[i].push_back(rx_data[i]);
      rxs[i].push_back(rx_src[i]);
    end
  end
  logic [CW-1:0] crx [NLOCAL][$];
  always @(posedge c_clk) if (rst_n) begin
    if (c_rx[0].valid) crx[0].push_back(c_rx[0].data);
    if (c_rx[3].valid) crx[3].push_back(c_rx[3].data);
    if (c_rx[0].valid && c_rx[3].valid && c_rx[0].data == c_rx[3].data) n_mcast++;
  end

  // ---------------- monitors
  logic mode0_q = 0;
  always @(posedge c_clk) begin
    if (mode_c[0] != mode0_q) n_mode_sw++;
    mode0_q <= mode_c[0];
    if (rst_n && tx_err != '0) n_err++;
  end
  always @(posedge p_clk) if (rst_n) begin
    if (dut.u_router.req_valid[5] && dut.u_router.req_valid[7] &&
        dut.u_router.req_port[5] == P_L0 && dut.u_router.req_port[7] == P_L0) n_contention++;
    for (int i = 0; i < NPORT; i++)
      if (dut.u_router.req_valid[i] && dut.u_router.req_port[i] == P_E && !dut.u_router.busy[5] &&
          dir_out_free[1] < dut.u_router.req_len[i]) n_vct++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge p_clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic flit_t a2f(input int x, y, l);
    return flit_t'(ipaddr_t'{x: 3'(x), y: 3'(y), l: 2'(l)});
  endfunction

  initial begin
    logic [CW-1:0] w1[$], w2[$], w0[$], wc[$], wc3[$];
    for (int i = 0; i < NLOCAL; i++) begin
      tx_valid[i] = 0; tx_data[i] = '0; tx_dst[i] = '0; tx_len[i] = '0;
    end
    rx_ready = '1;
    for (int d = 0; d < NDIR; d++) begin dir_in[d] = '0; occ[d] = 0; end
    repeat (4) @(negedge p_clk); rst_n = 1;
    repeat (4) @(negedge p_clk);
    for (int k = 0; k < 5; k++) w1.push_back($urandom);
    for (int k = 0; k < 3; k++) w2.push_back($urandom);
    for (int k = 0; k < 2; k++) w0.push_back($urandom);
    // ---- 1. P-layer messages out, with the E output blocked at first
    e_block = 1;
    fork
      ip_send(1, '{x: 3'd2, y: 3'd1, l: 2'd0}, w1);   // -> E
      ip_send(2, '{x: 3'd1, y: 3'd0, l: 2'd3}, w2);   // -> S
      ip_send(0, '{x: 3'd0, y: 3'd4, l: 2'd1}, w0);   // -> W
      begin repeat (300) @(negedge p_clk); e_block = 0; end
    join
    repeat (100) @(negedge p_clk);
    n_pmsg = 3;
    check(dpkts[1].size() == 1 && dpkts[2].size() == 1 && dpkts[3].size() == 1,
          "one packet each on E, S, W");
    if (dpkts[1].size() == 1) begin
      check(dpkts[1][0][0] == a2f(2, 1, 0) && dpkts[1][0][1] == 8'd5 &&
            dpkts[1][0][2] == a2f(1, 1, 1), "E packet header");
      for (int k = 0; k < 20; k++)
        check(dpkts[1][0][4+k] == w1[k/4][31-8*(k%4) -: 8], "E packet payload");
    end
    if (dpkts[2].size() == 1)
      check(dpkts[2][0][0] == a2f(1, 0, 3) && dpkts[2][0][2] == a2f(1, 1, 2) &&
            dpkts[2][0][4] == w2[0][31:24] && dpkts[2][0][15] == w2[2][7:0], "S packet");
    if (dpkts[3].size() == 1)
      check(dpkts[3][0][0] == a2f(0, 4, 1) && dpkts[3][0][1] == 8'd2, "W packet");
    // ---- 2. neighbours to IPs: N -> IP2, and E and W both -> IP0 (contention)
    fork
      nb_send(0, {a2f(1, 1, 2), 8'd2, a2f(1, 2, 1), 8'h00,
                  8'h10, 8'h20, 8'h30, 8'h40, 8'h50, 8'h60, 8'h70, 8'h80});
      nb_send(1, {a2f(1, 1, 0), 8'd1, a2f(2, 1, 3), 8'h00, 8'hE1, 8'hE2, 8'hE3, 8'hE4});
      nb_send(3, {a2f(1, 1, 0), 8'd1, a2f(0, 1, 2), 8'h00, 8'hB1, 8'hB2, 8'hB3, 8'hB4});
    join
    repeat (200) @(negedge p_clk);
    check(rxw[2].size() == 2 && rxw[2][0] == 32'h10203040 && rxw[2][1] == 32'h50607080 &&
          rxs[2][0] == ipaddr_t'{x: 3'd1, y: 3'd2, l: 2'd1}, "N packet delivered to IP2");
    check(rxw[0].size() == 2, $sformatf("IP0 got %0d words", rxw[0].size()));
    if (rxw[0].size() == 2) begin
      check((rxw[0][0] == 32'hE1E2E3E4 && rxw[0][1] == 32'hB1B2B3B4 &&
             rxs[0][0].x == 3'd2 && rxs[0][1].x == 3'd0) ||
            (rxw[0][1] == 32'hE1E2E3E4 && rxw[0][0] == 32'hB1B2B3B4 &&
             rxs[0][1].x == 3'd2 && rxs[0][0].x == 3'd0), "E and W packets delivered to IP0");
    end
    n_deliv = rxw[0].size() + rxw[2].size();
    // ---- 3. refused: IP1 to IP2 of this router
    ip_send(1, '{x: 3'd1, y: 3'd1, l: 2'd2}, {32'h77});
    repeat (10) @(negedge p_clk);
    check(rxw[2].size() == 2, "refused message not delivered");
    // ---- 4. C-layer: slot 0 IP0->IP3, slot 1 IP3->IP0, slot 2 IP0 -> both
    @(negedge c_clk);
    // entry = {out1: en, sel, out0: en, sel}
    sched_we = 1; sched_addr = 0; sched_data = 4'b10_00; @(negedge c_clk);
    sched_addr = 1; sched_data = 4'b00_11; @(negedge c_clk);
    sched_addr = 2; sched_data = 4'b10_10; @(negedge c_clk);
    sched_we = 0; sched_len = 3; sched_run = 1;
    for (int k = 0; k < 6; k++) begin wc.push_back($urandom); wc3.push_back($urandom); end
    fork
      ip_send(0, '{x: 3'd1, y: 3'd1, l: 2'd3}, wc);
      ip_send(3, '{x: 3'd1, y: 3'd1, l: 2'd0}, wc3);
    join
    n_cmsg = 2;
    repeat (4) @(negedge c_clk);
    check(crx[3] == wc, "IP0 -> IP3 over the C-layer, in order");
    begin
      // IP0 sees IP3's words and, in multicast slots, its own
      logic [CW-1:0] from3[$];
      foreach (crx[0][k]) if (!(crx[0][k] inside {wc})) from3.push_back(crx[0][k]);
      check(from3 == wc3, "IP3 -> IP0 over the C-layer, in order");
    end
    check(dpkts[0].size() == 0 && dpkts[1].size() == 1, "no C-layer traffic on the P-layer");
    // ---- mechanism counts
    $display("P msgs %0d, delivered words %0d, contention %0d, cut-through waits %0d, C msgs %0d, multicasts %0d, mode switches %0d, refused %0d",
             n_pmsg, n_deliv, n_contention, n_vct, n_cmsg, n_mcast, n_mode_sw, n_err);
    check(n_contention > 0, "contention happened");
    check(n_vct > 0, "cut-through wait happened");
    check(n_mcast > 0, "multicast happened");
    check(n_mode_sw >= 2, "mode switch happened");
    check(n_err == 1, "one refused message");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
