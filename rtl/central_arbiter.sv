// central_arbiter: sets up the P-layer cross-point.
//
// One small state machine per output port runs in parallel with the others,
// so requests for different outputs are granted in the same cycle and never
// queue behind each other. Each machine remembers the input it granted last
// and picks the next requesting input in round-robin order after it. The
// machines of the local outputs L0..L3 only know the directional inputs
// N, E, S, W: the P-layer has no local-to-local connections, so the states
// for them are left out (the paper's "state reduction"). A directional output
// accepts any input except itself.
//
// Virtual cut-through: the chosen input is granted only when the buffer
// behind the output (dn_free, in flits) can take its whole packet (req_len).
// Until then the machine waits on that input, which keeps the order fair.
// A granted connection is held until the input reports the packet's last
// flit (release). One idle cycle follows a release, so that the last flit has
// been written downstream before dn_free is trusted again.
//
// Interface: per input req_valid / req_port / req_len / release and the
// registered grant; per output the registered select msel (3 bits, as in the
// paper's figure) and busy. A grant is visible one cycle after the request.
// Parallel FSMs, round-robin order and the removed local states follow the
// paper; the cool-down cycle and the size check are this design's.
module central_arbiter
  import noc_pkg::*;
#(
  parameter int unsigned LEN_W = $clog2(BUF_DEPTH) + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NPORT-1:0]    req_valid,
  input  port_e               req_port [NPORT],
  input  logic [LEN_W-1:0]    req_len  [NPORT],
  input  logic [NPORT-1:0]    release_i,
  input  logic [LEN_W-1:0]    dn_free  [NPORT],
  output logic [NPORT-1:0]    grant,
  output logic [SEL_W-1:0]    msel     [NPORT],
  output logic [NPORT-1:0]    busy
);
  logic [SEL_W-1:0] owner [NPORT];

  for (genvar o = 0; o < int'(NPORT); o++) begin : g_proc
    // inputs this output's FSM has states for
    logic [NPORT-1:0] allowed;
    logic [NPORT-1:0] cand;
    logic [SEL_W-1:0] last_q;
    logic             cool;
    logic             found;
    logic [SEL_W-1:0] winner;

    always_comb begin
      for (int i = 0; i < int'(NPORT); i++) begin
        if (o < int'(NLOCAL)) allowed[i] = (i >= int'(NLOCAL));
        else                  allowed[i] = (i != o);
        cand[i] = allowed[i] && req_valid[i] && (req_port[i] == port_e'(o));
      end
    end

    // round-robin pick, starting after the last granted input
    always_comb begin
      found  = 1'b0;
      winner = '0;
      for (int k = 1; k <= int'(NPORT); k++) begin
        logic [SEL_W-1:0] idx;
        idx = SEL_W'(int'(last_q) + k);
        if (!found && cand[idx]) begin
          found  = 1'b1;
          winner = idx;
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy[o]  <= 1'b0;
        owner[o] <= '0;
        msel[o]  <= '0;
        last_q   <= SEL_W'(NPORT - 1);
        cool     <= 1'b0;
      end else if (busy[o]) begin
        if (release_i[owner[o]]) begin
          busy[o] <= 1'b0;
          cool    <= 1'b1;
        end
      end else if (cool) begin
        cool <= 1'b0;
      end else if (found && dn_free[o] >= req_len[winner]) begin
        busy[o]  <= 1'b1;
        owner[o] <= winner;
        msel[o]  <= winner;
        last_q   <= winner;
      end
    end
  end

  always_comb begin
    grant = '0;
    for (int o = 0; o < int'(NPORT); o++)
      if (busy[o]) grant[owner[o]] = 1'b1;
  end

  // Each input holds at most one connection.
  for (genvar o = 0; o < int'(NPORT); o++) begin : g_chk
    for (genvar p = o + 1; p < int'(NPORT); p++) begin : g_pair
      a_excl: assert property (@(posedge clk) disable iff (!rst_n)
        !(busy[o] && busy[p] && owner[o] == owner[p]))
        else $error("central_arbiter: input granted two outputs");
    end
  end

endmodule
