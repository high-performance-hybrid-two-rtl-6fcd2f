// async_fifo_tb: self-checking test of the dual-clock input buffer.
// Phase 1 fills the FIFO with the reader stopped and checks that exactly
// DEPTH flits are accepted (wr_free counts down to 0). Phase 2 drains it and
// checks order. Phase 3 streams random data with random gaps on two unrelated
// clocks and compares every flit with a reference queue.
module async_fifo_tb;
  localparam int W = 8, DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] wr_free;
  logic rd_empty;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q[$];
  bit reader_on = 0;
  int nread = 0;

  always #5  wclk = ~wclk;
  always #7  rclk = ~rclk;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reader: pops when enabled and not empty, compares with reference
  assign rd_en = reader_on && !rd_empty && ($urandom_range(0, 3) != 0);
  always @(posedge rclk) if (rd_en) begin
    check(ref_q.size() > 0 && rd_data == ref_q[0],
          $sformatf("read %h expected %h", rd_data, ref_q.size() ? ref_q[0] : 0));
    if (ref_q.size()) void'(ref_q.pop_front());
    nread++;
  end

  initial begin : watchdog
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int accepted;
    repeat (3) @(posedge wclk);
    wrst_n = 1; rrst_n = 1;
    repeat (2) @(posedge wclk);
    check(wr_free == DEPTH, "free after reset");
    check(rd_empty, "empty after reset");
    // phase 1: fill
    accepted = 0;
    while (wr_free != 0) begin
      @(negedge wclk); wr_en = 1; wr_data = W'($urandom);
      @(posedge wclk); ref_q.push_back(wr_data); accepted++;
      #1 wr_en = 0;
    end
    check(accepted == DEPTH, $sformatf("accepted %0d of %0d", accepted, DEPTH));
    repeat (6) @(posedge rclk);
    check(!rd_empty, "not empty when full");
    // phase 2 + 3: drain while writing random traffic
    reader_on = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge wclk);
      if (wr_free != 0 && $urandom_range(0, 2) != 0) begin
        wr_en = 1; wr_data = W'($urandom);
        @(posedge wclk); ref_q.push_back(wr_data);
        #1 wr_en = 0;
      end else wr_en = 0;
    end
    wr_en = 0;
    wait (ref_q.size() == 0);
    repeat (10) @(posedge rclk);
    check(rd_empty, "empty at end");
    check(nread > 200, $sformatf("read %0d flits", nread));
    repeat (6) @(posedge wclk);
    check(wr_free == DEPTH, "free back to DEPTH");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
