// hybrid_router_tb: self-checking test of the two-layer router at (1,1).
// P-layer: behavioural senders on all eight inputs (on their own clock,
// unrelated to the router clock) send random packets to random targets;
// behavioural receive buffers behind all eight outputs drain at random and
// report their free space. Every packet must leave whole, unchanged, on the
// output XY routing gives, and no receive buffer may overflow. The header
// latency through an idle router is measured. A packet from a local input to
// a local port of this router must be dropped. Counted mechanisms: output
// contention, cut-through waits (a packet held for lack of room downstream)
// and drops; each must occur.
// C-layer: a three-slot schedule with a swap, a partial slot and a multicast
// slot is loaded and each output is checked in every slot.
module hybrid_router_tb;
  import noc_pkg::*;
  localparam int DEPTH = 128, LEN_W = 8, NC = 2, NSLOT = 16, NPKT = 40;
  logic p_clk = 0, s_clk = 0, c_clk = 0, rst_n = 0;
  logic [COORD_W-1:0] my_x = 3'd1, my_y = 3'd1;
  logic [NPORT-1:0] in_clk, in_rst_n, drop;
  plink_t in_link [NPORT];
  logic [LEN_W-1:0] in_free [NPORT], out_free [NPORT];
  plink_t out_link [NPORT];
  cword_t c_in [NC], c_out [NC];
  logic [NC-1:0] c_route [NC];
  logic sched_we = 0, sched_run = 0;
  logic [3:0] sched_addr = '0, sched_slot;
  logic [NC*2-1:0] sched_data = '0;
  logic [4:0] sched_len = '0;
  int checks = 0, failures = 0;
  int contention = 0, vct_waits = 0, drops = 0, multicasts = 0;

  always #5 p_clk = ~p_clk;
  always #7 s_clk = ~s_clk;
  always #4 c_clk = ~c_clk;
  assign in_clk = {NPORT{s_clk}};
  assign in_rst_n = {NPORT{rst_n}};

  hybrid_router #(.NC(NC), .DEPTH(DEPTH), .NSLOT(NSLOT)) dut (
    .p_clk, .p_rst_n(rst_n), .my_x, .my_y, .in_clk, .in_rst_n, .in_link, .in_free,
    .out_link, .out_free, .drop, .c_clk, .c_rst_n(rst_n), .c_in, .c_out, .c_route,
    .sched_we, .sched_addr, .sched_data, .sched_len, .sched_run, .sched_slot);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // independent XY reference
  function automatic int exp_port(input int x, y, l);
    if (x > 1) return 5;
    if (x < 1) return 7;
    if (y > 1) return 4;
    if (y < 1) return 6;
    return l;
  endfunction

  // ---------------- expected packets, keyed by {input, sequence}
  flit_t expect_pkt [int][$];
  int    expect_out [int];
  int    sent = 0, received = 0;

  task automatic send_pkt(input int i, input flit_t pkt[$]);
    foreach (pkt[k]) begin
      @(negedge s_clk);
      while (in_free[i] == 0) @(negedge s_clk);
      in_link[i] = '{valid: 1'b1, data: pkt[k]};
      @(posedge s_clk); #1;
      in_link[i] = '0;
    end
  endtask

  task automatic sender(input int i);
    for (int n = 0; n < NPKT; n++) begin
      flit_t pkt[$];
      int x, y, l, sz;
      do begin
        x = $urandom_range(0, 2); y = $urandom_range(0, 2); l = $urandom_range(0, 3);
      end while ((i < 4 && x == 1 && y == 1) || exp_port(x, y, l) == i);
      sz = (n % 7 == 0) ? 31 : $urandom_range(0, 6);
      pkt = {flit_t'(ipaddr_t'{x: 3'(x), y: 3'(y), l: 2'(l)}), flit_t'(sz), flit_t'(i), flit_t'(n)};
      for (int k = 0; k < 4 * sz; k++) pkt.push_back(flit_t'($urandom));
      expect_pkt[i * 256 + n] = pkt;
      expect_out[i * 256 + n] = exp_port(x, y, l);
      sent++;
      send_pkt(i, pkt);
      repeat ($urandom_range(0, 20)) @(negedge s_clk);
    end
  endtask

  // ---------------- receive buffers behind the outputs
  int occ [NPORT];
  flit_t cur [NPORT][$];
  always_comb for (int o = 0; o < NPORT; o++) out_free[o] = LEN_W'(DEPTH - occ[o]);

  always @(posedge p_clk) begin
    for (int o = 0; o < NPORT; o++) begin
      if (rst_n && occ[o] > 0 && $urandom_range(0, 3) == 0) occ[o]--;
      if (rst_n && out_link[o].valid) begin
        occ[o]++;
        if (occ[o] > DEPTH) begin failures++; $display("FAIL: receive buffer %0d overflow", o); end
        cur[o].push_back(out_link[o].data);
        if (cur[o].size() >= 2 && cur[o].size() == (int'(cur[o][1]) + 1) * 4) begin
          int key;
          key = int'(cur[o][2]) * 256 + int'(cur[o][3]);
          checks++;
          if (!expect_pkt.exists(key)) begin
            failures++; $display("FAIL: unknown packet at %0d", o);
          end else begin
            if (expect_out[key] != o || expect_pkt[key] != cur[o]) begin
              failures++;
              $display("FAIL: packet %0d/%0d at output %0d expected %0d", key / 256, key % 256,
                       o, expect_out[key]);
            end
            expect_pkt.delete(key);
          end
          received++;
          cur[o] = {};
        end
      end
    end
  end

  // mechanism counters, sampled in the router
  always @(posedge p_clk) if (rst_n) begin
    for (int o = 0; o < NPORT; o++) begin
      int nreq;
      nreq = 0;
      for (int i = 0; i < NPORT; i++)
        if (dut.req_valid[i] && int'(dut.req_port[i]) == o) nreq++;
      if (nreq > 1 || (nreq > 0 && dut.busy[o])) contention++;
      for (int i = 0; i < NPORT; i++)
        if (dut.req_valid[i] && int'(dut.req_port[i]) == o && !dut.busy[o] &&
            out_free[o] < dut.req_len[i]) vct_waits++;
    end
    if (drop != '0) drops++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge p_clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < NPORT; i++) begin in_link[i] = '0; occ[i] = 0; end
    for (int i = 0; i < NC; i++) c_in[i] = '0;
    repeat (3) @(negedge p_clk); rst_n = 1;
    repeat (3) @(negedge p_clk);
    // ---- latency through an idle router: N input to S output, both clocks = p_clk phase
    begin
      int t0, t1;
      fork
        send_pkt(4, {flit_t'(ipaddr_t'{x: 3'd1, y: 3'd0, l: 2'd2}), 8'd0, 8'd4, 8'd200});
        begin
          @(posedge s_clk iff in_link[4].valid); t0 = $time;
          @(posedge p_clk iff out_link[6].valid); t1 = $time;
        end
      join
      expect_pkt[4 * 256 + 200] = {flit_t'(ipaddr_t'{x: 3'd1, y: 3'd0, l: 2'd2}), 8'd0, 8'd4, 8'd200};
      expect_out[4 * 256 + 200] = 6;
      $display("header latency: %0d ns = %0d router cycles after the write", t1 - t0, (t1 - t0 + 9) / 10);
      // 2 cycles clock crossing, 2 header reads, 1 grant, 1 output register,
      // plus up to one cycle of phase offset between the two clocks
      check((t1 - t0 + 9) / 10 >= 6 && (t1 - t0 + 9) / 10 <= 7, "header latency 6..7 cycles");
    end
    // ---- drop: L1 sends to L2 of this router
    send_pkt(1, {flit_t'(ipaddr_t'{x: 3'd1, y: 3'd1, l: 2'd2}), 8'd1, 8'd1, 8'd250,
                 8'h1, 8'h2, 8'h3, 8'h4});
    repeat (20) @(negedge p_clk);
    // ---- random traffic on all inputs
    fork
      sender(0); sender(1); sender(2); sender(3);
      sender(4); sender(5); sender(6); sender(7);
    join
    wait (received == sent + 1);
    repeat (20) @(negedge p_clk);
    check(expect_pkt.size() == 0, $sformatf("%0d packets missing", expect_pkt.size()));
    check(contention > 0, "output contention happened");
    check(vct_waits > 0, "cut-through wait happened");
    check(drops == 1, $sformatf("one drop, saw %0d", drops));
    // ---- C-layer
    @(negedge c_clk);
    // slot 0: out0<-in1, out1<-in0 ; slot 1: out0 off, out1<-in1 ; slot 2: both <- in0
    sched_we = 1; sched_addr = 0; sched_data = {1'b1, 1'b0, 1'b1, 1'b1}; @(negedge c_clk);
    sched_addr = 1; sched_data = {1'b1, 1'b1, 1'b0, 1'b0}; @(negedge c_clk);
    sched_addr = 2; sched_data = {1'b1, 1'b0, 1'b1, 1'b0}; @(negedge c_clk);
    sched_we = 0; sched_len = 3; sched_run = 1;
    for (int n = 0; n < 30; n++) begin
      c_in[0] = '{valid: 1'b1, data: $urandom};
      c_in[1] = '{valid: 1'b1, data: $urandom};
      #1;
      case (n % 3)
        0: check(c_out[0] == c_in[1] && c_out[1] == c_in[0] && c_route[0] == 2'b10 && c_route[1] == 2'b01, "slot 0 swap");
        1: check(c_out[0] == '0 && c_out[1] == c_in[1] && c_route[1] == 2'b10, "slot 1");
        default: begin
          check(c_out[0] == c_in[0] && c_out[1] == c_in[0] && c_route[0] == 2'b11, "slot 2 multicast");
          multicasts++;
        end
      endcase
      @(negedge c_clk);
    end
    check(multicasts > 0, "multicast happened");
    $display("packets %0d, contention %0d, cut-through waits %0d, drops %0d, multicasts %0d",
             received, contention, vct_waits, drops, multicasts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
