// barrier_manager: ISA-resident arrival flags for the pre-barrier.
//
// Before an All-Reduce each GPU makes its partial result visible and then writes its arrival
// flag in the ISA: a write request with the INC flag set, which the port's ingress steers to
// the ISA Rx request queue. For every port the manager consumes such packets (header and write
// data), sets that port's arrival flag when the packet ends, and answers with a write response
// (INC set, same tag) through the port's ISA Tx response queue, as a memory target would. The
// wave controller polls: ready is high when every port in poll_mask has arrived; with
// clear_en it clears the flags of clear_mask when it starts the operation. A flag set in the
// same cycle as its clear stays set. Flags set by GPU writes, polled by the wave controller,
// follow the paper; one flag per port (a single synchronisation resource), the ignored flag
// address and the response format are this design's. Read requests to the ISA are not used
// and are answered like writes.
// Most bits of the response flits are constant (a write response carries no data and a fixed
// header apart from destination and tag); synthesis reduces them to constants.
module barrier_manager
  import scin_pkg::*;
#(
  parameter int NUM_PORTS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  flit_t [NUM_PORTS-1:0] rx_flit,
  input  logic  [NUM_PORTS-1:0] rx_valid,
  output logic  [NUM_PORTS-1:0] rx_ready,
  output flit_t [NUM_PORTS-1:0] rsp_flit,
  output logic  [NUM_PORTS-1:0] rsp_valid,
  input  logic  [NUM_PORTS-1:0] rsp_ready,
  input  logic  [NUM_PORTS-1:0] poll_mask,
  output logic                  ready,
  input  logic                  clear_en,
  input  logic  [NUM_PORTS-1:0] clear_mask,
  output logic  [NUM_PORTS-1:0] arrived
);
  hdr_t [NUM_PORTS-1:0] cur;         // header of the packet being consumed
  logic [NUM_PORTS-1:0] set_now;

  assign ready = ((arrived & poll_mask) == poll_mask);

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      hdr_t h;
      h = cur[p];
      rx_ready[p]    = !rsp_valid[p] || rsp_ready[p];
      set_now[p]     = rx_valid[p] && rx_ready[p] && rx_flit[p].last;
      h.typ          = MSG_WR_RSP;
      h.inc          = 1'b1;
      h.dst          = PORT_W'(p);
      h.len          = '0;
      rsp_flit[p]    = make_hdr_flit(h, 1'b1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arrived   <= '0;
      rsp_valid <= '0;
      cur       <= '0;
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (rsp_valid[p] && rsp_ready[p]) rsp_valid[p] <= 1'b0;
        if (rx_valid[p] && rx_ready[p]) begin
          if (rx_flit[p].hdr) cur[p] <= flit_hdr(rx_flit[p]);
          if (rx_flit[p].last) begin
            rsp_valid[p] <= 1'b1;
            if (rx_flit[p].hdr) cur[p] <= flit_hdr(rx_flit[p]);
          end
        end
        if (set_now[p])                      arrived[p] <= 1'b1;
        else if (clear_en && clear_mask[p])  arrived[p] <= 1'b0;
      end
    end
  end

endmodule
