// pkt_rr_arb: packet-atomic round-robin arbiter for flit streams.
//
// N input streams of scin_pkg::flit_t compete for one output. When the output is free, the
// first requesting input at or after the round-robin pointer wins and keeps the output until
// its flit marked `last` has been transferred; the pointer then moves past the winner, so
// every requester is served within N packets. A grant is taken in the cycle of the first
// flit (no added latency). This is the round-robin selection between ISA and switch traffic
// at a port's egress, and the merge of read requests, write packets and synchronisation
// writes in front of each ISA Tx request queue. Round-robin is the paper's; packet atomicity
// is implied by packets being sent whole.
module pkt_rr_arb
  import scin_pkg::*;
#(
  parameter int N = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  flit_t [N-1:0] in_flit,
  input  logic  [N-1:0] in_valid,
  output logic  [N-1:0] in_ready,
  output flit_t         out_flit,
  output logic          out_valid,
  input  logic          out_ready,
  output logic          conflict   // more than one input requested while the output was free
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr, sel, owner;
  logic          locked;
  logic          found;

  always_comb begin
    logic [IW:0] idx;
    sel   = owner;
    found = 1'b0;
    idx   = '0;
    if (!locked) begin
      for (int k = 0; k < N; k++) begin
        idx = (IW+1)'((int'(ptr) + k) % N);
        if (!found && in_valid[idx[IW-1:0]]) begin
          found = 1'b1;
          sel   = idx[IW-1:0];
        end
      end
    end
  end

  always_comb begin
    out_valid = locked ? in_valid[owner] : found;
    out_flit  = in_flit[sel];
    in_ready  = '0;
    in_ready[sel] = out_ready && (locked || found);
    conflict  = !locked && ($countones(in_valid) > 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; owner <= '0; locked <= 1'b0;
    end else if (out_valid && out_ready) begin
      if (out_flit.last) begin
        locked <= 1'b0;
        ptr    <= (sel == IW'(N-1)) ? '0 : sel + 1'b1;
      end else begin
        locked <= 1'b1;
        owner  <= sel;
      end
    end
  end

endmodule
