// c_schedule_tb: self-checking test of the C-layer scheduling memory.
// Writes a random schedule, runs it with a length of 5 slots and checks
// that the slot counter steps 0..4 and wraps, one slot per cycle, and that
// each slot presents exactly the configuration written for it. Then it
// rewrites a slot while running and changes the length to the full 16.
module c_schedule_tb;
  localparam int NC = 3, NSLOT = 16, CSEL_W = 2, ENTRY_W = NC * (CSEL_W + 1), SLOT_W = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_run = 0;
  logic [SLOT_W-1:0] cfg_addr = '0, slot;
  logic [ENTRY_W-1:0] cfg_data = '0;
  logic [SLOT_W:0] cfg_len = '0;
  logic [NC-1:0] out_en;
  logic [CSEL_W-1:0] out_sel [NC];
  logic [ENTRY_W-1:0] model [NSLOT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  c_schedule #(.NC(NC), .NSLOT(NSLOT)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic check_slot(input int s);
    check(int'(slot) == s, $sformatf("slot %0d expected %0d", slot, s));
    for (int o = 0; o < NC; o++) begin
      check(out_en[o] == model[s][o*3+2] && (!out_en[o] || out_sel[o] == model[s][o*3 +: 2]),
            $sformatf("slot %0d output %0d", s, o));
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(out_en == '0, "idle before run");
    for (int s = 0; s < NSLOT; s++) begin
      model[s] = ENTRY_W'($urandom);
      @(negedge clk); cfg_we = 1; cfg_addr = SLOT_W'(s); cfg_data = model[s];
    end
    @(negedge clk); cfg_we = 0; cfg_len = 5'd5; cfg_run = 1;
    #1;
    for (int n = 0; n < 17; n++) begin
      check_slot(n % 5);
      @(negedge clk); #1;
    end
    // rewrite slot 3 while running (slot is now 2)
    model[3] = ENTRY_W'($urandom);
    cfg_we = 1; cfg_addr = 4'd3; cfg_data = model[3];
    @(negedge clk); cfg_we = 0; #1;
    check_slot(3);
    // full length
    cfg_run = 0; @(negedge clk); cfg_len = 5'd16; cfg_run = 1; #1;
    for (int n = 0; n < 33; n++) begin
      check_slot(n % 16);
      @(negedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
