// scin_switch: a shared-memory network switch with an in-switch accelerator (SCIN).
//
// NUM_PORTS switch_port instances face the accelerators. Regular traffic (INC=0) goes from a
// port's Switch Rx queue through switch_core to the Switch Tx queue of the destination port.
// INC=1 traffic goes between the ports' ISA queues and the in_switch_accelerator, which has
// a dedicated connection to every port: it reads operands from accelerator memory, reduces
// them, multicasts the results and releases the GPUs through completion flags, all without
// GPU involvement beyond the arrival-flag write and the completion-flag poll. The link side of
// each port (link_*) is a flit stream with valid/ready: the physical and link layers (serial
// transceivers, link IP) sit outside this module. The configuration bus (cfg_*) loads ISA
// instructions and synchronisation addresses. ev_* are event indications for observation.
// Structure as in the paper's switch figure; the link-side handshake is this design's.
module scin_switch
  import scin_pkg::*;
#(
  parameter int NUM_PORTS   = 8,
  parameter int WAVES       = 24,
  parameter int WAVE_BYTES  = 4096,
  parameter int PAY_BYTES   = 128,
  parameter int SCALE_BYTES = 128,
  parameter int IBUF_DEPTH  = 16,
  parameter int QDEPTH      = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  flit_t [NUM_PORTS-1:0]           link_rx_flit,
  input  logic  [NUM_PORTS-1:0]           link_rx_valid,
  output logic  [NUM_PORTS-1:0]           link_rx_ready,
  output flit_t [NUM_PORTS-1:0]           link_tx_flit,
  output logic  [NUM_PORTS-1:0]           link_tx_valid,
  input  logic  [NUM_PORTS-1:0]           link_tx_ready,
  input  logic                            cfg_we,
  input  logic [$clog2(IBUF_DEPTH)-1:0]   cfg_addr,
  input  instr_t                          cfg_instr,
  input  logic [$clog2(IBUF_DEPTH+1)-1:0] cfg_len,
  input  logic                            cfg_run,
  input  logic                            cfg_sync_we,
  input  logic [PORT_W-1:0]               cfg_sync_port,
  input  logic [ADDR_W-1:0]               cfg_sync_addr,
  output logic                            ev_defer,
  output logic                            ev_bar_wait,
  output logic                            ev_credit_stall,
  output logic                            ev_done,
  output logic  [NUM_PORTS-1:0]           ev_egress_conflict
);
  flit_t [NUM_PORTS-1:0] irq_f, irs_f, itq_f, its_f, swr_f, swt_f;
  logic  [NUM_PORTS-1:0] irq_v, irq_r, irs_v, irs_r, itq_v, itq_r, its_v, its_r;
  logic  [NUM_PORTS-1:0] swr_v, swr_r, swt_v, swt_r;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    switch_port #(.QDEPTH(QDEPTH)) u_port (
      .clk, .rst_n,
      .link_rx_flit(link_rx_flit[p]), .link_rx_valid(link_rx_valid[p]), .link_rx_ready(link_rx_ready[p]),
      .link_tx_flit(link_tx_flit[p]), .link_tx_valid(link_tx_valid[p]), .link_tx_ready(link_tx_ready[p]),
      .isa_rx_req_flit(irq_f[p]), .isa_rx_req_valid(irq_v[p]), .isa_rx_req_ready(irq_r[p]),
      .isa_rx_rsp_flit(irs_f[p]), .isa_rx_rsp_valid(irs_v[p]), .isa_rx_rsp_ready(irs_r[p]),
      .isa_tx_req_flit(itq_f[p]), .isa_tx_req_valid(itq_v[p]), .isa_tx_req_ready(itq_r[p]),
      .isa_tx_rsp_flit(its_f[p]), .isa_tx_rsp_valid(its_v[p]), .isa_tx_rsp_ready(its_r[p]),
      .sw_rx_flit(swr_f[p]), .sw_rx_valid(swr_v[p]), .sw_rx_ready(swr_r[p]),
      .sw_tx_flit(swt_f[p]), .sw_tx_valid(swt_v[p]), .sw_tx_ready(swt_r[p]),
      .egress_conflict(ev_egress_conflict[p]));
  end

  switch_core #(.NUM_PORTS(NUM_PORTS)) u_core (
    .clk, .rst_n,
    .in_flit(swr_f), .in_valid(swr_v), .in_ready(swr_r),
    .out_flit(swt_f), .out_valid(swt_v), .out_ready(swt_r));

  in_switch_accelerator #(.NUM_PORTS(NUM_PORTS), .WAVES(WAVES), .WAVE_BYTES(WAVE_BYTES),
                          .PAY_BYTES(PAY_BYTES), .SCALE_BYTES(SCALE_BYTES),
                          .IBUF_DEPTH(IBUF_DEPTH)) u_isa (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_instr, .cfg_len, .cfg_run,
    .cfg_sync_we, .cfg_sync_port, .cfg_sync_addr,
    .rx_req_flit(irq_f), .rx_req_valid(irq_v), .rx_req_ready(irq_r),
    .rx_rsp_flit(irs_f), .rx_rsp_valid(irs_v), .rx_rsp_ready(irs_r),
    .tx_req_flit(itq_f), .tx_req_valid(itq_v), .tx_req_ready(itq_r),
    .tx_rsp_flit(its_f), .tx_rsp_valid(its_v), .tx_rsp_ready(its_r),
    .ev_defer, .ev_bar_wait, .ev_credit_stall, .ev_done, .arrived());

endmodule
