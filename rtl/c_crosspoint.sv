// c_crosspoint: the circuit-switched cross-point (C-layer).
//
// A 32-bit multiplexer per C-layer output, set in every time slot by the
// scheduling memory. There is no buffering and no handshake: the IP cores on
// the C-layer share the C-layer clock and send in the slots the schedule
// gives them. Up to NC connections run in parallel, and one input may drive
// several outputs in the same slot (multicast).
//
// route[i] tells input i which outputs listen to it in the current slot; the
// network interface uses it to know when its word will be carried.
// Purely combinational: a word reaches its outputs in the cycle it is sent.
// Bus width and structure follow the paper; the route vector is this design's.
module c_crosspoint
  import noc_pkg::*;
#(
  parameter int unsigned NC = 2,
  localparam int unsigned CSEL_W = (NC > 1) ? $clog2(NC) : 1
) (
  input  cword_t             c_in    [NC],
  input  logic [NC-1:0]      out_en,
  input  logic [CSEL_W-1:0]  out_sel [NC],
  output cword_t             c_out   [NC],
  output logic [NC-1:0]      route   [NC]
);
  always_comb begin
    for (int o = 0; o < int'(NC); o++) begin
      c_out[o] = '0;
      if (out_en[o] && int'(out_sel[o]) < int'(NC)) c_out[o] = c_in[out_sel[o]];
    end
    for (int i = 0; i < int'(NC); i++)
      for (int o = 0; o < int'(NC); o++)
        route[i][o] = out_en[o] && (int'(out_sel[o]) == i);
  end
endmodule
