// p_crosspoint_tb: self-checking test of the P-layer cross-point.
// Random flits on all inputs, random selects and busy flags; the expected
// output, worked out from the select rules (8:1 for directional outputs,
// directional inputs only for local outputs, no data when not busy), is
// compared one cycle later, after the output register.
module p_crosspoint_tb;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  plink_t in_link [NPORT];
  logic [SEL_W-1:0] msel [NPORT];
  logic [NPORT-1:0] busy;
  plink_t out_link [NPORT];
  plink_t exp_q [NPORT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  p_crosspoint dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    busy = '0;
    for (int i = 0; i < NPORT; i++) begin in_link[i] = '0; msel[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int i = 0; i < NPORT; i++) begin
        in_link[i] = '{valid: 1'($urandom), data: flit_t'($urandom)};
        msel[i]    = SEL_W'($urandom);
        if (i < NLOCAL) msel[i][2] = 1'b1;   // arbiter only selects N..W here
      end
      busy = NPORT'($urandom);
      // expected value, computed from the rules
      for (int o = 0; o < NPORT; o++) begin
        int src;
        src = (o < NLOCAL) ? 4 + (msel[o] % 4) : msel[o];
        exp_q[o] = busy[o] ? in_link[src] : '{valid: 1'b0, data: in_link[src].data};
      end
      @(negedge clk);
      for (int o = 0; o < NPORT; o++) begin
        checks++;
        if (out_link[o].valid != exp_q[o].valid ||
            (exp_q[o].valid && out_link[o].data != exp_q[o].data)) begin
          failures++;
          $display("FAIL: out %0d got %p expected %p", o, out_link[o], exp_q[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
