// mocres_mesh_tb: end-to-end test of the mesh at its default parameters
// (2x2 nodes, four IPs per node, IP0 and IP3 on each node's C-layer).
// Every node runs its P-layer and C-layer on clocks of its own; IP1 and IP2
// have clocks of their own too. Every IP sends messages of 1..8 words to
// random IPs on other nodes (one or two hops, X first then Y); IP0 and IP3
// also exchange messages over their node's C-layer, so their NIs switch
// between the two layers. Every received message is compared with what its
// source sent, in order per source. Counted: P-layer messages over one and
// over two hops, C-layer messages, NI mode switches, packets that met a busy
// output (contention); each must occur.
module mocres_mesh_tb;
  import noc_pkg::*;
  localparam int MX = 2, MY = 2, NN = MX * MY, NMSG = 8;

  logic [NN-1:0] p_clk, c_clk;
  logic rst_n = 0;
  logic [NN-1:0] p_rst_n, c_rst_n;
  logic ip1_clk = 0, ip2_clk = 0;
  logic [NLOCAL-1:0] ip_clk [NN], ip_rst_n [NN], tx_valid [NN], tx_ready [NN];
  logic [NLOCAL-1:0] tx_err [NN], mode_c [NN], rx_valid [NN], rx_ready [NN];
  logic [NLOCAL-1:0] rx_first [NN], rx_last [NN];
  logic [CW-1:0] tx_data [NN][NLOCAL], rx_data [NN][NLOCAL];
  ipaddr_t tx_dst [NN][NLOCAL], rx_src [NN][NLOCAL];
  logic [SIZE_W-1:0] tx_len [NN][NLOCAL], rx_len [NN][NLOCAL];
  cword_t c_rx [NN][NLOCAL];
  logic [NPORT-1:0] drop [NN];
  logic [NN-1:0] sched_we, sched_run;
  logic [3:0] sched_addr [NN], sched_slot [NN];
  logic [3:0] sched_data [NN];
  logic [4:0] sched_len [NN];

  int checks = 0, failures = 0;
  int n_hop1 = 0, n_hop2 = 0, n_cmsg = 0, n_mode = 0, n_busy = 0, n_done = 0;

  // clocks: node n P-layer period 10+2n ns, C-layer 8+n ns
  for (genvar n = 0; n < NN; n++) begin : g_clk
    initial begin p_clk[n] = 0; forever #(5 + n) p_clk[n] = ~p_clk[n]; end
    initial begin c_clk[n] = 0; forever #(4 + n) c_clk[n] = ~c_clk[n]; end
    assign ip_clk[n] = {c_clk[n], ip2_clk, ip1_clk, c_clk[n]};
    assign ip_rst_n[n] = {NLOCAL{rst_n}};
    assign rx_ready[n] = '1;
  end
  always #7 ip1_clk = ~ip1_clk;
  always #9 ip2_clk = ~ip2_clk;
  assign p_rst_n = {NN{rst_n}};
  assign c_rst_n = {NN{rst_n}};

  mocres_mesh dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // expected messages: [destination id][source id] -> queue of word lists
  typedef logic [CW-1:0] words_t[$];
  words_t exp_p [16][16][$];
  logic [CW-1:0] exp_c [16][$];
  int pending = 0;

  function automatic int id_of(input ipaddr_t a);
    return (int'(a.y) * MX + int'(a.x)) * 4 + int'(a.l);
  endfunction

  for (genvar n = 0; n < NN; n++) begin : g_node
    for (genvar l = 0; l < NLOCAL; l++) begin : g_ip
      localparam int ME = n * 4 + l;
      // ---------------- sender
      initial begin
        tx_valid[n][l] = 0; tx_data[n][l] = '0; tx_dst[n][l] = '0; tx_len[n][l] = '0;
        wait (rst_n);
        repeat (20) @(posedge ip_clk[n][l]);
        for (int m = 0; m < NMSG; m++) begin
          ipaddr_t d;
          logic [CW-1:0] w[$];
          int len;
          bit use_c;
          use_c = (l == 0 || l == 3) && (m % 2 == 1);
          if (use_c) d = '{x: 3'(n % MX), y: 3'(n / MX), l: (l == 0) ? 2'd3 : 2'd0};
          else begin
            int dn;
            do dn = $urandom_range(0, NN - 1); while (dn == n);
            d = '{x: 3'(dn % MX), y: 3'(dn / MX), l: 2'($urandom_range(0, 3))};
          end
          len = $urandom_range(1, 8);
          w = {};
          for (int k = 0; k < len; k++) w.push_back({8'(ME), 8'(m), 8'(k), 8'($urandom)});
          if (use_c) begin
            foreach (w[k]) exp_c[id_of(d)].push_back(w[k]);
            n_cmsg++;
          end else begin
            exp_p[id_of(d)][ME].push_back(w);
            if (int'(d.x) != n % MX && int'(d.y) != n / MX) n_hop2++; else n_hop1++;
          end
          pending++;
          @(negedge ip_clk[n][l]);
          tx_dst[n][l] = d; tx_len[n][l] = SIZE_W'(len);
          foreach (w[k]) begin
            tx_valid[n][l] = 1; tx_data[n][l] = w[k];
            @(posedge ip_clk[n][l]);
            while (!tx_ready[n][l]) @(posedge ip_clk[n][l]);
            #1;
          end
          tx_valid[n][l] = 0;
          if (use_c) pending--;
          repeat ($urandom_range(0, 30)) @(posedge ip_clk[n][l]);
        end
      end
      // ---------------- P-layer receiver
      logic [CW-1:0] got[$];
      always @(posedge ip_clk[n][l]) if (rst_n && rx_valid[n][l]) begin
        got.push_back(rx_data[n][l]);
        if (rx_last[n][l]) begin
          int s;
          s = id_of(rx_src[n][l]);
          checks++;
          if (exp_p[ME][s].size() == 0 || exp_p[ME][s][0] != got) begin
            failures++;
            $display("FAIL: message at %0d from %0d not as sent", ME, s);
          end
          if (exp_p[ME][s].size()) void'(exp_p[ME][s].pop_front());
          got = {};
          pending--;
          n_done++;
        end
      end
      // ---------------- C-layer receiver
      if (l == 0 || l == 3) begin : g_crx
        always @(posedge c_clk[n]) if (rst_n && c_rx[n][l].valid) begin
          checks++;
          if (exp_c[ME].size() == 0 || exp_c[ME][0] != c_rx[n][l].data) begin
            failures++;
            $display("FAIL: C-layer word at %0d", ME);
          end
          if (exp_c[ME].size()) void'(exp_c[ME].pop_front());
        end
      end
    end
    // mode switches and contention
    logic m0_q = 0;
    always @(posedge c_clk[n]) begin
      if (rst_n && mode_c[n][0] != m0_q) n_mode++;
      m0_q <= mode_c[n][0];
    end
    always @(posedge p_clk[n]) if (rst_n) begin
      for (int i = 0; i < NPORT; i++)
        if (dut.g_y[n / MX].g_x[n % MX].u_node.u_router.req_valid[i] &&
            dut.g_y[n / MX].g_x[n % MX].u_node.u_router.busy[
              dut.g_y[n / MX].g_x[n % MX].u_node.u_router.req_port[i]]) n_busy++;
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge p_clk[0]);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sched_we = '0; sched_run = '0;
    for (int n = 0; n < NN; n++) begin
      sched_addr[n] = '0; sched_data[n] = '0; sched_len[n] = '0;
    end
    #50 rst_n = 1;
    // every node: slot 0 IP0 -> IP3, slot 1 IP3 -> IP0
    for (int n = 0; n < NN; n++) begin
      @(negedge c_clk[n]);
      sched_we[n] = 1; sched_addr[n] = 0; sched_data[n] = 4'b10_00;
      @(negedge c_clk[n]);
      sched_addr[n] = 1; sched_data[n] = 4'b00_11;
      @(negedge c_clk[n]);
      sched_we[n] = 0; sched_len[n] = 2; sched_run[n] = 1;
    end
    #2000;
    wait (pending == 0);
    #1000;
    for (int d = 0; d < 16; d++) begin
      check(exp_c[d].size() == 0, $sformatf("C-layer words missing at %0d", d));
      for (int s = 0; s < 16; s++)
        check(exp_p[d][s].size() == 0, $sformatf("messages missing %0d -> %0d", s, d));
    end
    $display("P messages: %0d one hop, %0d two hops, %0d delivered; C messages %0d; mode switches %0d; busy-output waits %0d",
             n_hop1, n_hop2, n_done, n_cmsg, n_mode, n_busy);
    check(n_done == n_hop1 + n_hop2, "all P-layer messages delivered");
    check(n_hop2 > 0 && n_hop1 > 0, "one- and two-hop routes used");
    check(n_cmsg > 0, "C-layer messages sent");
    check(n_mode >= 2, "NI mode switches");
    check(n_busy > 0, "contention for an output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge p_clk[0]) cyc++;
  final $display("node 0 router cycles: %0d", cyc);
endmodule
