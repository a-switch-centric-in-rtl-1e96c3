// switch_port: one port of the SCIN switch, between the link to an accelerator and the
// switch core / in-switch accelerator (ISA).
//
// The transport-layer queues are duplicated into two independent sets. Receive side: the
// ingress demultiplexer (port_ingress) steers each packet by its INC flag into the ISA Rx
// request queue, the ISA Rx response queue, or the Switch Rx queue. Transmit side: the ISA
// Tx request queue (read requests, write requests with data, synchronisation writes), the
// ISA Tx response queue (answers to GPU flag writes) and the Switch Tx queue are merged onto
// the link by a packet-atomic round-robin arbiter. All streams are flit_t with valid/ready.
// The two queue sets, INC steering and round-robin egress follow the paper; queue depths and
// the grouping of each message class's header and data into one queue are this design's.
module switch_port
  import scin_pkg::*;
#(
  parameter int QDEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  // link (toward the accelerator)
  input  flit_t link_rx_flit,
  input  logic  link_rx_valid,
  output logic  link_rx_ready,
  output flit_t link_tx_flit,
  output logic  link_tx_valid,
  input  logic  link_tx_ready,
  // ISA side
  output flit_t isa_rx_req_flit,
  output logic  isa_rx_req_valid,
  input  logic  isa_rx_req_ready,
  output flit_t isa_rx_rsp_flit,
  output logic  isa_rx_rsp_valid,
  input  logic  isa_rx_rsp_ready,
  input  flit_t isa_tx_req_flit,
  input  logic  isa_tx_req_valid,
  output logic  isa_tx_req_ready,
  input  flit_t isa_tx_rsp_flit,
  input  logic  isa_tx_rsp_valid,
  output logic  isa_tx_rsp_ready,
  // switch-core side
  output flit_t sw_rx_flit,
  output logic  sw_rx_valid,
  input  logic  sw_rx_ready,
  input  flit_t sw_tx_flit,
  input  logic  sw_tx_valid,
  output logic  sw_tx_ready,
  output logic  egress_conflict
);
  flit_t ing_flit;
  logic  q_req_v, q_req_r, q_rsp_v, q_rsp_r, q_sw_v, q_sw_r;

  port_ingress u_ing (
    .clk, .rst_n,
    .rx_flit(link_rx_flit), .rx_valid(link_rx_valid), .rx_ready(link_rx_ready),
    .out_flit(ing_flit),
    .isa_req_valid(q_req_v), .isa_req_ready(q_req_r),
    .isa_rsp_valid(q_rsp_v), .isa_rsp_ready(q_rsp_r),
    .sw_valid(q_sw_v), .sw_ready(q_sw_r)
  );

  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_isa_rx_req (
    .clk, .rst_n, .in_data(ing_flit), .in_valid(q_req_v), .in_ready(q_req_r),
    .out_data(isa_rx_req_flit), .out_valid(isa_rx_req_valid), .out_ready(isa_rx_req_ready), .count());
  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_isa_rx_rsp (
    .clk, .rst_n, .in_data(ing_flit), .in_valid(q_rsp_v), .in_ready(q_rsp_r),
    .out_data(isa_rx_rsp_flit), .out_valid(isa_rx_rsp_valid), .out_ready(isa_rx_rsp_ready), .count());
  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_sw_rx (
    .clk, .rst_n, .in_data(ing_flit), .in_valid(q_sw_v), .in_ready(q_sw_r),
    .out_data(sw_rx_flit), .out_valid(sw_rx_valid), .out_ready(sw_rx_ready), .count());

  flit_t [2:0] tq_flit;
  logic  [2:0] tq_valid, tq_ready;

  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_isa_tx_req (
    .clk, .rst_n, .in_data(isa_tx_req_flit), .in_valid(isa_tx_req_valid), .in_ready(isa_tx_req_ready),
    .out_data(tq_flit[0]), .out_valid(tq_valid[0]), .out_ready(tq_ready[0]), .count());
  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_isa_tx_rsp (
    .clk, .rst_n, .in_data(isa_tx_rsp_flit), .in_valid(isa_tx_rsp_valid), .in_ready(isa_tx_rsp_ready),
    .out_data(tq_flit[1]), .out_valid(tq_valid[1]), .out_ready(tq_ready[1]), .count());
  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_sw_tx (
    .clk, .rst_n, .in_data(sw_tx_flit), .in_valid(sw_tx_valid), .in_ready(sw_tx_ready),
    .out_data(tq_flit[2]), .out_valid(tq_valid[2]), .out_ready(tq_ready[2]), .count());

  pkt_rr_arb #(.N(3)) u_egress (
    .clk, .rst_n,
    .in_flit(tq_flit), .in_valid(tq_valid), .in_ready(tq_ready),
    .out_flit(link_tx_flit), .out_valid(link_tx_valid), .out_ready(link_tx_ready),
    .conflict(egress_conflict)
  );

endmodule
