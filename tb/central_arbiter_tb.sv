// central_arbiter_tb: self-checking test of the P-layer central arbiter.
// Checks: a grant one cycle after a request with the right select value;
// local inputs never reach local outputs; two disjoint requests are granted
// in the same cycle; round-robin order among four inputs contending for one
// output; a grant waits until the downstream buffer can hold the packet;
// the connection is held until release, followed by one idle cycle.
module central_arbiter_tb;
  import noc_pkg::*;
  localparam int LEN_W = 8;
  logic clk = 0, rst_n = 0;
  logic [NPORT-1:0] req_valid = '0, release_i = '0, grant, busy;
  port_e req_port [NPORT];
  logic [LEN_W-1:0] req_len [NPORT];
  logic [LEN_W-1:0] dn_free [NPORT];
  logic [SEL_W-1:0] msel [NPORT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  central_arbiter #(.LEN_W(LEN_W)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic clear();
    req_valid = '0; release_i = '0;
  endtask

  // drive request of input i for output o, length len
  task automatic req(input int i, input port_e o, input int len);
    req_valid[i] = 1'b1; req_port[i] = o; req_len[i] = LEN_W'(len);
  endtask

  // release input i for one cycle, drop its request
  task automatic rel(input int i);
    @(negedge clk); req_valid[i] = 1'b0; release_i[i] = 1'b1;
    @(negedge clk); release_i[i] = 1'b0;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int order[$];
    for (int i = 0; i < NPORT; i++) begin
      req_port[i] = P_L0; req_len[i] = '0; dn_free[i] = 8'd128;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    // 1. N requests L0
    req(4, P_L0, 16);
    check(grant == '0, "no grant in the request cycle");
    @(negedge clk);
    check(grant == 8'b0001_0000 && busy[0] && msel[0] == 3'd4, "N granted L0 one cycle later");
    repeat (3) @(negedge clk);
    check(grant[4] && busy[0], "grant held until release");
    rel(4);
    check(!busy[0] && grant == '0, "released");
    // 2. local input L1 asks for local output L0: never granted
    req(1, P_L0, 8);
    repeat (5) @(negedge clk);
    check(grant == '0 && busy == '0, "no local-to-local connection");
    // but L1 may go to a directional output
    req(1, P_E, 8);
    @(negedge clk);
    check(grant[1] && busy[5] && msel[5] == 3'd1, "L1 to E granted");
    rel(1);
    // 3. parallel: N->S and W->L2 and L3->N in the same cycle
    @(negedge clk);
    req(4, P_S, 8); req(7, P_L2, 8); req(3, P_N, 8);
    @(negedge clk);
    check(grant == 8'b1001_1000, $sformatf("three parallel grants, got %b", grant));
    check(msel[6] == 3'd4 && msel[2] == 3'd7 && msel[4] == 3'd3, "parallel selects");
    fork rel(4); rel(7); rel(3); join
    // 4. round robin: N, E, S, W all ask for L1; release each winner
    @(negedge clk);
    for (int i = 4; i < 8; i++) req(i, P_L1, 8);
    for (int n = 0; n < 8; n++) begin
      int w;
      @(negedge clk);
      w = -1;
      for (int i = 0; i < NPORT; i++) if (grant[i]) w = i;
      check(w >= 4 && busy[1] && int'(msel[1]) == w, "one winner for L1");
      order.push_back(w);
      release_i[w] = 1'b1;
      @(negedge clk); release_i[w] = 1'b0;
      check(!busy[1], "released");
      @(negedge clk);
      check(!busy[1] && grant == '0, "one idle cycle after release");
    end
    // previous grants of L1: none, pointer after reset at 7 -> order 4,5,6,7,...
    for (int n = 0; n < 8; n++)
      check(order[n] == 4 + (n % 4), $sformatf("rr order %0d: got %0d", n, order[n]));
    clear();
    // 5. virtual cut-through: not enough room behind E
    @(negedge clk);
    dn_free[5] = 8'd20;
    req(6, P_E, 32);
    repeat (4) @(negedge clk);
    check(!busy[5] && grant == '0, "no grant while packet does not fit");
    dn_free[5] = 8'd32;
    @(negedge clk);
    check(busy[5] && grant[6], "granted once it fits");
    rel(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
