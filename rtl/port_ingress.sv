// port_ingress: receive-side demultiplexer of a switch port.
//
// Each packet arriving from the link is steered by the 1-bit INC flag in its header flit:
// INC=1 packets go to the ISA Rx queues, INC=0 packets to the Switch Rx queue for regular
// forwarding by the switch core. ISA-bound packets are further split by message class:
// requests with their write data (a GPU setting its arrival flag) go to the ISA request
// queue, responses with their read data to the ISA response queue. The choice made on the
// header flit is held for the packet's payload flits. Purely combinational steering; the
// link is stalled when the selected queue is full. Steering by INC follows the paper; merging
// each class's header and data into one queue is this design's simplification of the
// per-type queues.
// The outgoing flits are the incoming flit wired through to all three queues; only the valid
// signals are steered, so the flit outputs come straight from the input.
module port_ingress
  import scin_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t rx_flit,
  input  logic  rx_valid,
  output logic  rx_ready,
  output flit_t out_flit,
  output logic  isa_req_valid,
  input  logic  isa_req_ready,
  output logic  isa_rsp_valid,
  input  logic  isa_rsp_ready,
  output logic  sw_valid,
  input  logic  sw_ready
);
  typedef enum logic [1:0] {TO_SW = 2'd0, TO_ISA_REQ = 2'd1, TO_ISA_RSP = 2'd2} route_t;
  route_t route_q, route;
  hdr_t   h;

  always_comb begin
    h = flit_hdr(rx_flit);
    if (rx_flit.hdr) begin
      if (!h.inc)                                     route = TO_SW;
      else if (h.typ == MSG_RD_REQ || h.typ == MSG_WR_REQ) route = TO_ISA_REQ;
      else                                            route = TO_ISA_RSP;
    end else begin
      route = route_q;
    end
  end

  assign out_flit      = rx_flit;
  assign isa_req_valid = rx_valid && (route == TO_ISA_REQ);
  assign isa_rsp_valid = rx_valid && (route == TO_ISA_RSP);
  assign sw_valid      = rx_valid && (route == TO_SW);
  always_comb begin
    unique case (route)
      TO_ISA_REQ: rx_ready = isa_req_ready;
      TO_ISA_RSP: rx_ready = isa_rsp_ready;
      default:    rx_ready = sw_ready;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                     route_q <= TO_SW;
    else if (rx_valid && rx_ready && rx_flit.hdr)   route_q <= route;
  end

endmodule
