// cn_router: packet switch of the Compute Node's router FPGA.
//
// One of the five FPGAs of a Compute Node serves as a router: its 16
// backplane links reach every other board of the ATCA shelf through the
// full-mesh backplane, and on the board it is linked to each of the four
// processor FPGAs. This module is the switch between those 20 ports
// (ports 0-15 backplane, 16-19 processor FPGAs). The port count and roles
// are published; the switching scheme is this design's: a crossbar without
// input buffers where every flit carries its output port, an output serves
// one input at a time, and a multi-flit packet keeps its output from the
// first flit to the one marked `last` (wormhole). Free outputs pick among
// competing inputs round-robin, starting after the previous winner, so no
// input starves. Point-to-point links and per-output arbitration match the
// published point that the mesh needs no bus arbitration.
//
// Interface: per port a valid/ready flit stream in and out (online_pkg::flit_t).
// A flit passes in the clock it is offered if its output is free or already
// held by its packet and the output is ready (no latency, combinational path
// from input to output). The serial links themselves are not part of it.
module cn_router
  import online_pkg::*;
#(
  parameter int unsigned N = ROUTER_PORTS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic  [N-1:0] in_valid,
  output logic  [N-1:0] in_ready,
  input  flit_t [N-1:0] in_flit,
  output logic  [N-1:0] out_valid,
  input  logic  [N-1:0] out_ready,
  output flit_t [N-1:0] out_flit,
  output logic  [31:0]  contentions   // clocks in which a flit waited for a busy output
);
  localparam int unsigned PW = $clog2(N);

  logic [N-1:0]  locked_q;                 // output held by a packet
  logic [PW-1:0] owner_q [N];              // input holding / last served
  logic [PW-1:0] grant   [N];
  logic [N-1:0]  has_grant;

  // per output: keep the owner while locked, else round-robin pick
  always_comb begin
    for (int o = 0; o < N; o++) begin
      grant[o]     = owner_q[o];
      has_grant[o] = 1'b0;
      if (locked_q[o]) begin
        has_grant[o] = 1'b1;
      end else begin
        for (int k = 1; k <= N; k++) begin
          automatic int i = (int'(owner_q[o]) + k) % N;
          if (!has_grant[o] && in_valid[i] && int'(in_flit[i].dest) == o) begin
            has_grant[o] = 1'b1;
            grant[o]     = PW'(i);
          end
        end
      end
    end
  end

  always_comb begin
    for (int o = 0; o < N; o++) begin
      out_flit[o]  = in_flit[grant[o]];
      out_valid[o] = has_grant[o] && in_valid[grant[o]] &&
                     int'(in_flit[grant[o]].dest) == o;
    end
    for (int i = 0; i < N; i++) begin
      automatic int d = int'(in_flit[i].dest);
      in_ready[i] = (d < N) && has_grant[d] && (int'(grant[d]) == i) && out_ready[d];
    end
  end

  logic [N-1:0] blocked;
  always_comb begin
    for (int i = 0; i < N; i++) blocked[i] = in_valid[i] && !in_ready[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked_q <= '0;
      for (int o = 0; o < N; o++) owner_q[o] <= PW'(N - 1);
      contentions <= '0;
    end else begin
      if (|blocked) contentions <= contentions + 1'b1;
      for (int o = 0; o < N; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          owner_q[o]  <= grant[o];
          locked_q[o] <= !out_flit[o].last;
        end
      end
    end
  end

  // every offered flit must name an existing port, and an output
  // must not be handed to another input in the middle of a packet
  for (genvar g = 0; g < N; g++) begin : g_chk
    a_dest_in_range: assert property (@(posedge clk) disable iff (!rst_n)
        in_valid[g] |-> int'(in_flit[g].dest) < N);
    a_wormhole: assert property (@(posedge clk) disable iff (!rst_n)
        locked_q[g] |-> grant[g] == owner_q[g]);
  end
endmodule
