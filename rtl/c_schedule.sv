// c_schedule: scheduling memory of the circuit-switched layer (C-layer).
//
// The C-layer is statically scheduled in time slots. This memory holds one
// configuration per slot and a slot counter steps through the first
// `len` slots, one slot per C-layer clock cycle, and wraps. A configuration
// gives, for every C-layer output, an enable bit and the C-layer input it
// listens to (log2 of the number of C-layer ports). Several outputs naming
// the same input make a multicast. The memory is small and written by a host
// through cfg_we / cfg_addr / cfg_data; cfg_len sets the schedule length
// (1..NSLOT) and cfg_run starts the counter at slot 0.
//
// Timing: slot_cfg is read combinationally from the current slot register,
// so it is valid for the whole cycle of that slot. A write to the slot that is
// current takes effect in the next cycle.
// The per-output source select and its log2 width follow the paper; the
// enable bit, the slot count (16) and the host write port are assumptions.
module c_schedule #(
  parameter int unsigned NC    = 2,    // C-layer ports
  parameter int unsigned NSLOT = 16,   // schedule depth in slots
  localparam int unsigned CSEL_W = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned ENTRY_W = NC * (CSEL_W + 1),
  localparam int unsigned SLOT_W  = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [SLOT_W-1:0]    cfg_addr,
  input  logic [ENTRY_W-1:0]   cfg_data,   // output o: bits [o*(CSEL_W+1) +: CSEL_W+1] = {en, sel}
  input  logic [SLOT_W:0]      cfg_len,
  input  logic                 cfg_run,
  output logic [SLOT_W-1:0]    slot,
  output logic [NC-1:0]        out_en,
  output logic [CSEL_W-1:0]    out_sel [NC]
);
  logic [ENTRY_W-1:0] mem [NSLOT];
  logic [ENTRY_W-1:0] cur;

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_addr] <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slot <= '0;
    else if (!cfg_run) slot <= '0;
    else if ({1'b0, slot} + 1'b1 >= cfg_len) slot <= '0;
    else slot <= slot + 1'b1;
  end

  assign cur = cfg_run ? mem[slot] : '0;

  always_comb begin
    for (int o = 0; o < int'(NC); o++) begin
      out_sel[o] = cur[o*(CSEL_W+1) +: CSEL_W];
      out_en[o]  = cur[o*(CSEL_W+1) + CSEL_W];
    end
  end
endmodule
