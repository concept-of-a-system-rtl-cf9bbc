// noc: the 32-bit network on chip that joins the RISC-V (node 0), the seven computing
// arrays (nodes 1..7) and the chip bridge (node 8).
//
// How it works: the network moves at most one flit per clock. A round-robin arbiter
// looks at every input whose head flit may go now -- its destination register is free or
// being emptied, and no other input holds that destination in the middle of a packet --
// and grants one. The granted flit is written into the output register of its
// destination. A destination stays locked to one source from the first flit of a packet
// until the flit with last set, so packets never interleave at a receiver. A flit whose
// destination is not a node is consumed and reported on route_err.
//
// Every transfer also appears, one cycle later, on the monitor port (mon_valid,
// mon_flit). Because the network carries one 32-bit word per cycle, the chip bridge can
// follow all of its traffic at speed: 16 LVDS lines at 2 Gbit/s give 32 bits per 1 GHz
// cycle. The 32-bit width, the node set and the at-speed monitoring follow the
// architecture; the single-transfer switch, the sideband routing fields, the wormhole
// lock and the round-robin policy are this design's own choices.
//
// Interface: per node a valid/ready input and a valid/ready output. A flit is taken when
// in_valid && in_ready; in_ready never depends on the value of in_flit.data.
// Latency: one cycle from input acceptance to output valid.
module noc
  import soc_pkg::*;
#(
  parameter int unsigned N = NUM_NODES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_valid,
  input  flit_t [N-1:0] in_flit,
  output logic [N-1:0]  in_ready,
  output logic [N-1:0]  out_valid,
  output flit_t [N-1:0] out_flit,
  input  logic [N-1:0]  out_ready,
  output logic          mon_valid,
  output flit_t         mon_flit,
  output logic          route_err
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]  slot_v;
  flit_t [N-1:0] slot_f;
  logic [N-1:0]  lock;
  logic [IW-1:0] owner [N];
  logic [IW-1:0] rr;

  logic [N-1:0]  space;
  logic [N-1:0]  elig;
  logic          gnt_any;
  logic [IW-1:0] gnt;
  flit_t         gflit;
  logic          gbad;

  assign out_valid = slot_v;
  assign out_flit  = slot_f;

  always_comb begin
    for (int d = 0; d < N; d++) space[d] = !slot_v[d] || out_ready[d];
    for (int i = 0; i < N; i++) begin
      elig[i] = 1'b0;
      if (in_valid[i]) begin
        if (int'(in_flit[i].dest) >= N) elig[i] = 1'b1;  // dropped as misrouted
        else elig[i] = space[in_flit[i].dest] &&
                       (!lock[in_flit[i].dest] || owner[in_flit[i].dest] == IW'(i));
      end
    end
    // round robin, starting at rr
    gnt_any = 1'b0;
    gnt     = '0;
    for (int k = 0; k < N; k++) begin
      int idx;
      idx = (int'(rr) + k) % N;
      if (!gnt_any && elig[idx]) begin
        gnt_any = 1'b1;
        gnt     = IW'(idx);
      end
    end
    gflit = in_flit[gnt];
    gbad  = int'(gflit.dest) >= N;
    in_ready = '0;
    if (gnt_any) in_ready[gnt] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_v    <= '0;
      lock      <= '0;
      rr        <= '0;
      mon_valid <= 1'b0;
      route_err <= 1'b0;
      for (int d = 0; d < N; d++) owner[d] <= '0;
    end else begin
      for (int d = 0; d < N; d++) if (out_ready[d]) slot_v[d] <= 1'b0;
      mon_valid <= gnt_any && !gbad;
      route_err <= gnt_any && gbad;
      if (gnt_any) begin
        rr <= (int'(gnt) == N-1) ? '0 : gnt + 1'b1;
        if (!gbad) begin
          slot_v[gflit.dest] <= 1'b1;
          lock[gflit.dest]   <= !gflit.last;
          owner[gflit.dest]  <= gnt;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (gnt_any && !gbad) slot_f[gflit.dest] <= gflit;
    if (gnt_any) mon_flit <= gflit;
  end

  // A flit must stay put while it waits for acceptance.
  for (genvar i = 0; i < N; i++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[i] && !in_ready[i] |=> in_valid[i] && $stable(in_flit[i]));
  end
endmodule
