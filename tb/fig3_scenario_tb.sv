// fig3_scenario_tb: the router simulation scenario of the design's reference
// waveform, replayed on the RTL.
// P-layer: at the same moment five 4-flit packets enter at N, E, S, W and L2
// of router (2,2), addressed so that they leave at S, L2, N, E and W
// respectively. All five requests are for different outputs, so the parallel
// arbiter machines must grant them together: the five packets must leave in
// the same cycle, with the same setup latency (6 to 7 router cycles here,
// as the sender clock is not aligned with the router clock), and
// back-to-back flits. C-layer: a second router instance with three C-layer
// ports (L0, L1, L3 as in the waveform) runs unicast slots and then a
// multicast slot in which one word reaches all three ports at once.
module fig3_scenario_tb;
  import noc_pkg::*;
  localparam int LEN_W = 8;
  logic p_clk = 0, s_clk = 0, c_clk = 0, rst_n = 0;
  logic [NPORT-1:0] in_clk, in_rst_n, drop;
  plink_t in_link [NPORT];
  logic [LEN_W-1:0] in_free [NPORT], out_free [NPORT];
  plink_t out_link [NPORT];
  cword_t c_in2 [2], c_out2 [2];
  logic [1:0] c_route2 [2];
  cword_t c_in3 [3], c_out3 [3];
  logic [2:0] c_route3 [3];
  logic we3 = 0, run3 = 0;
  logic [3:0] addr3 = '0, slot3, slot2;
  logic [8:0] data3 = '0;
  logic [4:0] len3 = '0;
  int checks = 0, failures = 0;
  int t_out [5];
  flit_t rx [5][$];

  always #5 p_clk = ~p_clk;
  always #6 s_clk = ~s_clk;
  always #2 c_clk = ~c_clk;       // C-layer clock faster than the P-layer's
  assign in_clk = {NPORT{s_clk}};
  assign in_rst_n = {NPORT{rst_n}};
  always_comb for (int o = 0; o < NPORT; o++) out_free[o] = 8'd128;

  // P-layer router at default parameters
  hybrid_router dut (
    .p_clk, .p_rst_n(rst_n), .my_x(3'd2), .my_y(3'd2), .in_clk, .in_rst_n, .in_link,
    .in_free, .out_link, .out_free, .drop, .c_clk, .c_rst_n(rst_n), .c_in(c_in2),
    .c_out(c_out2), .c_route(c_route2), .sched_we(1'b0), .sched_addr(4'd0),
    .sched_data(4'd0), .sched_len(5'd0), .sched_run(1'b0), .sched_slot(slot2));

  // C-layer with three ports (L0, L1, L3)
  hybrid_router #(.NC(3)) dut3 (
    .p_clk, .p_rst_n(rst_n), .my_x(3'd2), .my_y(3'd2), .in_clk, .in_rst_n,
    .in_link('{default: '0}), .in_free(), .out_link(), .out_free, .drop(),
    .c_clk, .c_rst_n(rst_n), .c_in(c_in3), .c_out(c_out3), .c_route(c_route3),
    .sched_we(we3), .sched_addr(addr3), .sched_data(data3), .sched_len(len3),
    .sched_run(run3), .sched_slot(slot3));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic flit_t a(input int x, y, l);
    return flit_t'(ipaddr_t'{x: 3'(x), y: 3'(y), l: 2'(l)});
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge p_clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // input port, expected output port, packet (header + 2 flits of the waveform)
    int inp [5] = '{4, 5, 6, 7, 2};
    int outp[5] = '{6, 2, 4, 5, 7};
    flit_t pk [5][4];
    int t_in;
    pk[0] = '{a(2, 0, 0), 8'd0, 8'hA2, 8'h33};   // N -> S
    pk[1] = '{a(2, 2, 2), 8'd0, 8'hA2, 8'h63};   // E -> L2
    pk[2] = '{a(2, 5, 1), 8'd0, 8'h42, 8'h23};   // S -> N
    pk[3] = '{a(6, 2, 3), 8'd0, 8'h52, 8'h33};   // W -> E
    pk[4] = '{a(0, 3, 1), 8'd0, 8'h72, 8'h53};   // L2 -> W
    for (int i = 0; i < NPORT; i++) in_link[i] = '0;
    for (int i = 0; i < 3; i++) c_in3[i] = '0;
    for (int i = 0; i < 2; i++) c_in2[i] = '0;
    repeat (3) @(negedge s_clk); rst_n = 1;
    repeat (3) @(negedge s_clk);
    for (int k = 0; k < 4; k++) begin
      for (int p = 0; p < 5; p++) in_link[inp[p]] = '{valid: 1'b1, data: pk[p][k]};
      @(posedge s_clk);
      if (k == 0) t_in = $time;
      #1;
    end
    for (int p = 0; p < 5; p++) in_link[inp[p]] = '0;
    for (int p = 0; p < 5; p++) t_out[p] = -1;
    repeat (20) begin
      @(posedge p_clk);
      for (int p = 0; p < 5; p++)
        if (out_link[outp[p]].valid) begin
          if (t_out[p] < 0) t_out[p] = $time;
          rx[p].push_back(out_link[outp[p]].data);
        end
    end
    for (int p = 0; p < 5; p++) begin
      check(rx[p].size() == 4, $sformatf("packet %0d: %0d flits at output %0d", p, rx[p].size(), outp[p]));
      for (int k = 0; k < 4 && k < rx[p].size(); k++)
        check(rx[p][k] == pk[p][k], $sformatf("packet %0d flit %0d", p, k));
    end
    for (int p = 1; p < 5; p++) check(t_out[p] == t_out[0], "all five leave in the same cycle");
    $display("setup latency %0d ns (router clock 10 ns)", t_out[0] - t_in);
    check((t_out[0] - t_in + 9) / 10 inside {[6:7]}, "setup latency 6..7 router cycles");
    // ---- C-layer, three ports: slots 0..2 unicast ring, slot 3 multicast from port 0
    // entry = {out2: en sel[1:0], out1: en sel, out0: en sel}
    @(negedge c_clk);
    we3 = 1; addr3 = 0; data3 = {3'b100, 3'b000, 3'b000}; @(negedge c_clk);   // out2 <- in0
    addr3 = 1; data3 = {3'b000, 3'b100, 3'b000}; @(negedge c_clk);             // out1 <- in0
    addr3 = 2; data3 = {3'b000, 3'b000, 3'b110}; @(negedge c_clk);             // out0 <- in2
    addr3 = 3; data3 = {3'b100, 3'b100, 3'b100}; @(negedge c_clk);             // all <- in0
    we3 = 0; len3 = 4; run3 = 1;
    for (int n = 0; n < 12; n++) begin
      for (int i = 0; i < 3; i++) c_in3[i] = '{valid: 1'b1, data: $urandom};
      #1;
      case (n % 4)
        0: check(c_out3[2] == c_in3[0] && !c_out3[0].valid && !c_out3[1].valid, "slot 0");
        1: check(c_out3[1] == c_in3[0] && !c_out3[0].valid && !c_out3[2].valid, "slot 1");
        2: check(c_out3[0] == c_in3[2] && !c_out3[1].valid && !c_out3[2].valid, "slot 2");
        default: check(c_out3[0] == c_in3[0] && c_out3[1] == c_in3[0] && c_out3[2] == c_in3[0] &&
                       c_route3[0] == 3'b111, "slot 3 multicast to L0, L1, L3");
      endcase
      @(negedge c_clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
