// async_fifo: multi-clock input buffer of the P-layer.
//
// Every router input (and every NI receive path) is a dual-clock FIFO, as the
// router separates the clock domain of each sender from its own clock. The
// storage is an array of DEPTH flits, which an FPGA tool maps to block RAM.
// Pointers are one bit wider than the address and cross between domains in
// Gray code through two flip-flops; this is the usual construction, chosen
// here because the paper names multi-clock FIFOs but not their insides.
//
// Write side (wclk): wr_en / wr_data, and wr_free, the number of free entries
// as seen from the write domain. wr_free is conservative: reads show up in it
// two or three wclk cycles late. The sender uses it for virtual cut-through:
// it starts a packet only when the whole packet fits.
// Read side (rclk): show-ahead output. rd_data is the oldest entry whenever
// rd_empty is low; rd_en pops it.
// A write into a full FIFO or a read from an empty one is a protocol error
// (assertions below); the contents are then unchanged.
module async_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 128          // power of two
) (
  input  logic                       wclk,
  input  logic                       wrst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic [$clog2(DEPTH):0]     wr_free,

  input  logic                       rclk,
  input  logic                       rrst_n,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       rd_empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain
  logic [AW:0] rbin_w, wbin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic wr_full;
  assign rbin_w  = gray2bin(rgray_w2);
  assign wr_free = (AW+1)'(DEPTH) - (wbin - rbin_w);
  assign wr_full = (wr_free == '0);

  always_ff @(posedge wclk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !wr_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // ---------------- read domain ----------------
  assign wbin_r   = gray2bin(wgray_r2);
  assign rd_empty = (wbin_r == rbin);
  assign rd_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  // Protocol rules of the two sides.
  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) wr_en |-> !wr_full)
    else $error("async_fifo: write into full FIFO");
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) rd_en |-> !rd_empty)
    else $error("async_fifo: read from empty FIFO");

endmodule
