// network_interface_tb: self-checking test of the network interface (NI).
// The NI is IP0 (on the C-layer) of router (1,1); IP clock and router clock
// differ. Checks:
//  - P-layer send to another router: header flits (destination, size,
//    source, reserved) then payload bytes MSB first, with stalls while the
//    router's input buffer reports no room;
//  - P-layer receive through the dual-clock buffer: payload words, source,
//    length, first/last, under random back-pressure from the IP;
//  - C-layer send to IP3 of the same router: words leave only in slots that
//    connect IP0 to IP3, in the same cycle, with mode_c set;
//  - a message to IP1 of the same router (not on the C-layer) is refused
//    with tx_err and consumed;
//  - the C-layer word for this IP is handed to it unchanged.
module network_interface_tb;
  import noc_pkg::*;
  localparam int DEPTH = 128, LEN_W = 8;
  logic ip_clk = 0, p_clk = 0, ip_rst_n = 0, p_rst_n = 0;
  logic [COORD_W-1:0] my_x = 3'd1, my_y = 3'd1;
  logic tx_valid = 0, tx_ready, tx_err, mode_c;
  logic [CW-1:0] tx_data = '0;
  ipaddr_t tx_dst = '0;
  logic [SIZE_W-1:0] tx_len = '0;
  logic rx_valid, rx_ready = 0, rx_first, rx_last;
  logic [CW-1:0] rx_data;
  ipaddr_t rx_src;
  logic [SIZE_W-1:0] rx_len;
  cword_t c_rx, c_tx, c_in = '0;
  logic inj_wr;
  flit_t inj_data;
  logic [LEN_W-1:0] inj_free = 8'd128, ej_free;
  plink_t ej_link = '0;
  logic [1:0] c_route = '0;
  int checks = 0, failures = 0;
  flit_t inj_q[$];

  always #5 ip_clk = ~ip_clk;
  always #3 p_clk = ~p_clk;

  network_interface #(.LID(0), .C_MASK(4'b1001), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // router input buffer model: records flits, random "full" periods
  always @(posedge ip_clk) if (inj_wr) begin
    check(inj_free != 0, "write only when room");
    inj_q.push_back(inj_data);
  end

  // send one message with valid/ready; returns when all words are taken
  task automatic send(input ipaddr_t dst, input logic [CW-1:0] w[$]);
    @(negedge ip_clk);
    tx_dst = dst; tx_len = SIZE_W'(w.size());
    foreach (w[i]) begin
      tx_valid = 1; tx_data = w[i];
      @(posedge ip_clk);
      while (!tx_ready) @(posedge ip_clk);
      #1;
    end
    tx_valid = 0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge ip_clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // random back-pressure from the router input buffer
  initial begin
    forever begin
      @(negedge ip_clk);
      inj_free = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'd100;
    end
  end

  initial begin
    logic [CW-1:0] w[$];
    ipaddr_t d;
    repeat (3) @(negedge ip_clk); ip_rst_n = 1; p_rst_n = 1;
    check(ej_free == DEPTH, "receive buffer free after reset");
    // ---- P-layer send
    w = {32'hA0B1C2D3, 32'h01234567, 32'hDEADBEEF};
    d = '{x: 3'd2, y: 3'd1, l: 2'd2};
    send(d, w);
    repeat (30) @(negedge ip_clk);
    check(inj_q.size() == 16, $sformatf("%0d flits sent", inj_q.size()));
    if (inj_q.size() == 16) begin
      check(inj_q[0] == flit_t'(d), "H0 destination");
      check(inj_q[1] == 8'd3, "H1 size = 3 words");
      check(inj_q[2] == flit_t'(ipaddr_t'{x: 3'd1, y: 3'd1, l: 2'd0}), "H2 source");
      check(inj_q[3] == 8'h00, "H3 reserved");
      for (int i = 0; i < 12; i++)
        check(inj_q[4+i] == w[i/4][31 - 8*(i%4) -: 8], $sformatf("payload flit %0d", i));
    end
    // ---- P-layer receive (router side on p_clk)
    fork
      begin
        flit_t pkt[$];
        pkt = {flit_t'(ipaddr_t'{x: 3'd1, y: 3'd1, l: 2'd0}), 8'd2,
               flit_t'(ipaddr_t'{x: 3'd3, y: 3'd4, l: 2'd1}), 8'h00,
               8'h11, 8'h22, 8'h33, 8'h44, 8'h55, 8'h66, 8'h77, 8'h88};
        foreach (pkt[i]) begin
          @(negedge p_clk); ej_link = '{valid: 1'b1, data: pkt[i]};
        end
        @(negedge p_clk); ej_link = '0;
      end
      begin
        int got = 0;
        repeat (200) begin
          @(negedge ip_clk);
          rx_ready = 1'($urandom);
          if (rx_valid && rx_ready) begin
            check(rx_src == ipaddr_t'{x: 3'd3, y: 3'd4, l: 2'd1}, "rx source");
            check(rx_len == 2, "rx length");
            check(rx_data == (got == 0 ? 32'h11223344 : 32'h55667788), "rx data");
            check(rx_first == (got == 0) && rx_last == (got == 1), "rx first/last");
            got++;
          end
        end
        check(got == 2, $sformatf("received %0d words", got));
      end
    join
    // ---- C-layer send to IP3 (C-layer port 1)
    fork
      begin
        w = {32'h1111_0001, 32'h2222_0002, 32'h3333_0003, 32'h4444_0004};
        send('{x: 3'd1, y: 3'd1, l: 2'd3}, w);
      end
      begin
        int seen = 0;
        repeat (60) begin
          @(negedge ip_clk);
          c_route = 2'($urandom);
          #1;
          if (c_tx.valid) begin
            check(c_route[1] && mode_c, "C word only in a slot to IP3");
            check(c_tx.data == {16'(17'h1111 * (seen + 1)), 16'(seen + 1)},
                  $sformatf("C word %0d", seen));
            seen++;
          end else if (tx_valid && mode_c) check(!c_route[1], "word held when slot open");
        end
        check(seen == 4, $sformatf("%0d C-layer words", seen));
      end
    join
    check(!mode_c, "mode back to idle");
    check(inj_q.size() == 16, "no P-layer flits for C-layer message");
    // ---- refused: IP1 is not on the C-layer
    fork
      send('{x: 3'd1, y: 3'd1, l: 2'd1}, {32'h5});
      begin
        bit err = 0;
        repeat (5) begin @(posedge ip_clk); #1; if (tx_err) err = 1; end
        check(err, "tx_err for same-router target without C-layer port");
      end
    join
    check(inj_q.size() == 16, "refused message not sent");
    // ---- C-layer receive passes through
    c_in = '{valid: 1'b1, data: 32'hCAFEF00D}; #1;
    check(c_rx == c_in, "C-layer receive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
