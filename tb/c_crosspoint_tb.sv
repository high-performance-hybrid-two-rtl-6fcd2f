// c_crosspoint_tb: self-checking test of the C-layer cross-point.
// Random words on four inputs and random slot configurations, including
// multicast (several outputs on one input) and disabled outputs; each output
// and the route vector of each input are compared with values computed from
// the configuration. Multicast configurations are counted.
module c_crosspoint_tb;
  import noc_pkg::*;
  localparam int NC = 4;
  cword_t c_in [NC];
  logic [NC-1:0] out_en;
  logic [1:0] out_sel [NC];
  cword_t c_out [NC];
  logic [NC-1:0] route [NC];
  int checks = 0, failures = 0, multicasts = 0;

  c_crosspoint #(.NC(NC)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      int cnt [NC];
      for (int i = 0; i < NC; i++) begin
        c_in[i] = '{valid: 1'($urandom), data: $urandom};
        out_sel[i] = 2'($urandom);
        cnt[i] = 0;
      end
      out_en = NC'($urandom);
      if (n % 4 == 0) begin   // broadcast from one input
        out_en = '1;
        for (int o = 0; o < NC; o++) out_sel[o] = 2'(n / 4);
      end
      #1;
      for (int o = 0; o < NC; o++) begin
        cword_t e;
        e = out_en[o] ? c_in[out_sel[o]] : '0;
        if (out_en[o]) cnt[out_sel[o]]++;
        checks++;
        if (c_out[o] != e) begin failures++; $display("FAIL: out %0d", o); end
      end
      for (int i = 0; i < NC; i++) begin
        logic [NC-1:0] r;
        for (int o = 0; o < NC; o++) r[o] = out_en[o] && out_sel[o] == 2'(i);
        checks++;
        if (route[i] != r) begin failures++; $display("FAIL: route %0d", i); end
        if (cnt[i] > 1) multicasts++;
      end
      #9;
    end
    checks++;
    if (multicasts < 100) begin failures++; $display("FAIL: only %0d multicasts", multicasts); end
    $display("multicast slots: %0d", multicasts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
