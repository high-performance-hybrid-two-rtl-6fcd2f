// p_crosspoint: the packet-switched cross-point matrix (P-layer).
//
// A multiplexer per output port, set by the central arbiter's select lines,
// rather than a switch per virtual channel. A directional output (N, E, S, W)
// chooses among all eight inputs (8:1). A local output (L0..L3) chooses only
// among the four directional inputs (4:1 on the low two select bits plus the
// fixed directional half): the P-layer has no local-to-local connections.
// An output carries data only while its connection is set up (busy).
//
// Each output is registered, so a flit leaves the router one cycle after it
// leaves its input port. That register drives the write port of the buffer
// behind the output (the next router's input buffer or the NI's receive
// buffer). Multiplexer structure and widths follow the paper; the output
// register is this design's choice.
module p_crosspoint
  import noc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  plink_t            in_link [NPORT],
  input  logic [SEL_W-1:0]  msel    [NPORT],
  input  logic [NPORT-1:0]  busy,
  output plink_t            out_link[NPORT]
);
  for (genvar o = 0; o < int'(NPORT); o++) begin : g_out
    plink_t mux;
    always_comb begin
      if (o < int'(NLOCAL))
        mux = in_link[NLOCAL + int'(msel[o][1:0])];   // 4:1, directional inputs
      else
        mux = in_link[msel[o]];                        // 8:1
      if (!busy[o]) mux.valid = 1'b0;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_link[o] <= '0;
      else        out_link[o] <= mux;
    end
  end
endmodule
