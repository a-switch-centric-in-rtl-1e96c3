// switch_core: forwarding core for regular (INC=0) traffic between the switch ports.
//
// Every input stream carries whole packets whose header names the destination port. The
// destination read from a header flit is latched for the packet's payload flits. Each output
// has its own packet-atomic round-robin arbiter (pkt_rr_arb) over the inputs addressed to
// it, so packets to different outputs move in parallel and a packet is never interleaved
// with another. The paper only names the switch core; this non-blocking crossbar with
// round-robin outputs is the simplest design that does its job.
module switch_core
  import scin_pkg::*;
#(
  parameter int NUM_PORTS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  flit_t [NUM_PORTS-1:0] in_flit,
  input  logic  [NUM_PORTS-1:0] in_valid,
  output logic  [NUM_PORTS-1:0] in_ready,
  output flit_t [NUM_PORTS-1:0] out_flit,
  output logic  [NUM_PORTS-1:0] out_valid,
  input  logic  [NUM_PORTS-1:0] out_ready
);
  localparam int PW = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;
  logic [NUM_PORTS-1:0][PW-1:0] dst_q, dst;
  logic [NUM_PORTS-1:0][NUM_PORTS-1:0] req;      // [output][input]
  logic [NUM_PORTS-1:0][NUM_PORTS-1:0] gnt_rdy;  // [output][input]
  logic [NUM_PORTS-1:0] conflict_unused;

  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      hdr_t h;
      h = flit_hdr(in_flit[i]);
      dst[i] = in_flit[i].hdr ? PW'(h.dst) : dst_q[i];
    end
  end

  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++)
      for (int i = 0; i < NUM_PORTS; i++)
        req[o][i] = in_valid[i] && (dst[i] == PW'(o));
  end

  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++)
      in_ready[i] = gnt_rdy[dst[i]][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dst_q <= '0;
    else
      for (int i = 0; i < NUM_PORTS; i++)
        if (in_valid[i] && in_ready[i] && in_flit[i].hdr) dst_q[i] <= dst[i];
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    pkt_rr_arb #(.N(NUM_PORTS)) u_arb (
      .clk, .rst_n,
      .in_flit(in_flit), .in_valid(req[o]), .in_ready(gnt_rdy[o]),
      .out_flit(out_flit[o]), .out_valid(out_valid[o]), .out_ready(out_ready[o]),
      .conflict(conflict_unused[o])
    );
  end

endmodule
