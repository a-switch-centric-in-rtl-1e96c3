// in_switch_accelerator: the ISA, a switch-resident engine that runs All-Reduce itself.
//
// Blocks and the numbered steps of its operation:
//  (1) instr_buffer holds preloaded instruction descriptors (configuration bus);
//  (2) barrier_manager collects the GPUs' arrival flags, polled by the wave controller;
//  (3) table_manager allocates wave-table entries, one index shared by all tables;
//  (4) wave_controller issues read requests through a per-port merge (pkt_rr_arb) with its
//      write requests and synchronisation flags into each port's ISA Tx request queue;
//  (5) one wave_table per port stores read responses at the place named by their tag;
//  (6) READY waves are read out, one flit per cycle from every table, and either passed on
//      as 16 BF16 values or dequantized (dequant_unit, INT8 x block scale); tables of
//      non-participating accelerators feed zero;
//  (7) reduction_unit adds them with a fixed adder tree, the sums go through an output staging
//      queue (DP_DEPTH entries, credit-controlled by the controller) to quant_unit, which
//      requantizes per block or passes BF16 through, and the controller multicasts the
//      results as write requests to all destination ports;
//  (8) write responses arriving in the ISA Rx response queues are counted; when all have come
//      back, completion flags are written to every participant.
// Answers to the GPUs' flag writes leave through each port's ISA Tx response queue. Datapath
// latency from a table read to the staging queue is 1 + log2(NUM_PORTS) cycles. The block
// structure and order of operations follow the paper's ISA figure; sizes default to the
// paper's evaluated configuration (8 ports, 24 waves of 4 KB plus 128 B of scales per table,
// 128-byte packets). Per-port synchronisation addresses are set over the configuration bus,
// which is this design's choice.
module in_switch_accelerator
  import scin_pkg::*;
  import scin_fp_pkg::*;
#(
  parameter int NUM_PORTS   = 8,
  parameter int WAVES       = 24,
  parameter int WAVE_BYTES  = 4096,
  parameter int PAY_BYTES   = 128,
  parameter int SCALE_BYTES = 128,
  parameter int IBUF_DEPTH  = 16,
  parameter int DP_DEPTH    = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // configuration bus
  input  logic                            cfg_we,
  input  logic [$clog2(IBUF_DEPTH)-1:0]   cfg_addr,
  input  instr_t                          cfg_instr,
  input  logic [$clog2(IBUF_DEPTH+1)-1:0] cfg_len,
  input  logic                            cfg_run,
  input  logic                            cfg_sync_we,
  input  logic [PORT_W-1:0]               cfg_sync_port,
  input  logic [ADDR_W-1:0]               cfg_sync_addr,
  // per-port ISA queues
  input  flit_t [NUM_PORTS-1:0]           rx_req_flit,
  input  logic  [NUM_PORTS-1:0]           rx_req_valid,
  output logic  [NUM_PORTS-1:0]           rx_req_ready,
  input  flit_t [NUM_PORTS-1:0]           rx_rsp_flit,
  input  logic  [NUM_PORTS-1:0]           rx_rsp_valid,
  output logic  [NUM_PORTS-1:0]           rx_rsp_ready,
  output flit_t [NUM_PORTS-1:0]           tx_req_flit,
  output logic  [NUM_PORTS-1:0]           tx_req_valid,
  input  logic  [NUM_PORTS-1:0]           tx_req_ready,
  output flit_t [NUM_PORTS-1:0]           tx_rsp_flit,
  output logic  [NUM_PORTS-1:0]           tx_rsp_valid,
  input  logic  [NUM_PORTS-1:0]           tx_rsp_ready,
  // events
  output logic                            ev_defer,
  output logic                            ev_bar_wait,
  output logic                            ev_credit_stall,
  output logic                            ev_done,
  output logic  [NUM_PORTS-1:0]           arrived
);
  localparam int IW  = $clog2(WAVES);
  localparam int DFL = WAVE_BYTES / FLIT_BYTES;
  localparam int SFL = SCALE_BYTES / FLIT_BYTES;
  localparam int PFL = PAY_BYTES / FLIT_BYTES;

  // ------------------------------------------------------------ configuration registers
  logic [NUM_PORTS-1:0][ADDR_W-1:0] sync_addr;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sync_addr <= '0;
    else if (cfg_sync_we && int'(cfg_sync_port) < NUM_PORTS) sync_addr[cfg_sync_port] <= cfg_sync_addr;

  instr_t instr, instr_next;
  logic   instr_valid, instr_advance;

  instr_buffer #(.DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_instr, .cfg_len, .cfg_run,
    .advance(instr_advance), .advance_two(instr.quant_en), .instr, .instr_next, .instr_valid);

  // ------------------------------------------------------------ barrier manager
  logic [NUM_PORTS-1:0] poll_mask;
  logic bar_ready, bar_clear;
  barrier_manager #(.NUM_PORTS(NUM_PORTS)) u_bar (
    .clk, .rst_n,
    .rx_flit(rx_req_flit), .rx_valid(rx_req_valid), .rx_ready(rx_req_ready),
    .rsp_flit(tx_rsp_flit), .rsp_valid(tx_rsp_valid), .rsp_ready(tx_rsp_ready),
    .poll_mask, .ready(bar_ready), .clear_en(bar_clear), .clear_mask(poll_mask), .arrived);

  // ------------------------------------------------------------ table manager
  logic tm_alloc, tm_alloc_ok, tm_dealloc;
  logic [IW-1:0] tm_alloc_id, tm_dealloc_id;
  table_manager #(.WAVES(WAVES)) u_tm (
    .clk, .rst_n, .alloc(tm_alloc), .alloc_ok(tm_alloc_ok), .alloc_id(tm_alloc_id),
    .dealloc(tm_dealloc), .dealloc_id(tm_dealloc_id), .idle_count());

  // ------------------------------------------------------------ wave tables
  logic [NUM_PORTS-1:0]               wt_alloc_en;
  logic [IW-1:0]                      wt_alloc_id, wt_info_id;
  logic [NUM_PORTS-1:0][ADDR_W-1:0]   wt_alloc_addr, wt_alloc_saddr, wt_info_addr, wt_info_saddr;
  logic [NUM_PORTS-1:0][8:0]          wt_alloc_expect;
  wave_state_t [NUM_PORTS-1:0][WAVES-1:0] wt_state;
  logic [NUM_PORTS-1:0]               wt_wr_rsp;
  logic                               wt_free_en;
  logic                               rd_en;
  logic [IW-1:0]                      rd_id;
  logic [$clog2(DFL)-1:0]             rd_flit;
  logic [$clog2(SFL)-1:0]             rd_sflit;
  logic [3:0]                         rd_sword;
  logic [NUM_PORTS-1:0][FLIT_W-1:0]   t_data, t_scale;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_wt
    wave_table #(.WAVES(WAVES), .DATA_FLITS(DFL), .SCALE_FLITS(SFL), .PKT_FLITS(PFL)) u_wt (
      .clk, .rst_n,
      .alloc_en(wt_alloc_en[p]), .alloc_id(wt_alloc_id), .alloc_addr(wt_alloc_addr[p]),
      .alloc_saddr(wt_alloc_saddr[p]), .alloc_expect(wt_alloc_expect[p]),
      .rx_flit(rx_rsp_flit[p]), .rx_valid(rx_rsp_valid[p]), .rx_ready(rx_rsp_ready[p]),
      .wr_rsp(wt_wr_rsp[p]), .state(wt_state[p]),
      .rd_en, .rd_id, .rd_flit, .rd_sflit, .rd_data(t_data[p]), .rd_scale(t_scale[p]),
      .info_id(wt_info_id), .info_addr(wt_info_addr[p]), .info_saddr(wt_info_saddr[p]),
      .free_en(wt_free_en), .free_id(rd_id));
  end

  // ------------------------------------------------------------ wave controller
  logic [NUM_PORTS-1:0] src_mask;
  logic                 quant_en;
  logic [4:0]           block_flits;
  logic                 dp_pop;
  logic [FLIT_W-1:0]    res_data;
  logic [15:0]          res_scale;
  logic                 res_scale_valid, res_valid, res_ready;
  flit_t [NUM_PORTS-1:0] rdq_flit, wrq_flit;
  logic  [NUM_PORTS-1:0] rdq_valid, rdq_ready, wrq_valid, wrq_ready;

  wave_controller #(.NUM_PORTS(NUM_PORTS), .WAVES(WAVES), .WAVE_BYTES(WAVE_BYTES),
                    .PAY_BYTES(PAY_BYTES), .SCALE_BYTES(SCALE_BYTES), .DP_DEPTH(DP_DEPTH)) u_wc (
    .clk, .rst_n,
    .instr, .instr_next, .instr_valid, .instr_advance,
    .poll_mask, .bar_ready, .bar_clear, .sync_addr,
    .tm_alloc, .tm_alloc_ok, .tm_alloc_id, .tm_dealloc, .tm_dealloc_id,
    .wt_alloc_en, .wt_alloc_id, .wt_alloc_addr, .wt_alloc_saddr, .wt_alloc_expect,
    .wt_state, .wt_info_id, .wt_info_addr, .wt_info_saddr, .wt_wr_rsp, .wt_free_en,
    .rd_en, .rd_id, .rd_flit, .rd_sflit, .rd_sword, .src_mask, .quant_en, .block_flits, .dp_pop,
    .res_data, .res_scale, .res_scale_valid, .res_valid, .res_ready,
    .rdq_flit, .rdq_valid, .rdq_ready, .wrq_flit, .wrq_valid, .wrq_ready,
    .ev_defer, .ev_bar_wait, .ev_credit_stall, .ev_done);

  // ------------------------------------------------------------ per-port Tx request merge
  // Each stream first enters a small queue whose ready does not depend on its valid, so the
  // controller can advance a multicast beat only when every addressed port has room.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_txm
    flit_t [1:0] m_flit;
    logic  [1:0] m_valid, m_ready;
    sync_fifo #(.T(flit_t), .DEPTH(2)) u_rq (
      .clk, .rst_n, .in_data(rdq_flit[p]), .in_valid(rdq_valid[p]), .in_ready(rdq_ready[p]),
      .out_data(m_flit[0]), .out_valid(m_valid[0]), .out_ready(m_ready[0]), .count());
    sync_fifo #(.T(flit_t), .DEPTH(4)) u_wq (
      .clk, .rst_n, .in_data(wrq_flit[p]), .in_valid(wrq_valid[p]), .in_ready(wrq_ready[p]),
      .out_data(m_flit[1]), .out_valid(m_valid[1]), .out_ready(m_ready[1]), .count());
    pkt_rr_arb #(.N(2)) u_m (
      .clk, .rst_n, .in_flit(m_flit), .in_valid(m_valid), .in_ready(m_ready),
      .out_flit(tx_req_flit[p]), .out_valid(tx_req_valid[p]), .out_ready(tx_req_ready[p]),
      .conflict());
  end

  // ------------------------------------------------------------ datapath
  logic       v1;
  logic [3:0] sword1;
  logic [NUM_PORTS-1:0][LANES-1:0][15:0] ops;
  logic [NUM_PORTS-1:0][LANES-1:0][15:0] deq;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin v1 <= 1'b0; sword1 <= '0; end
    else begin v1 <= rd_en; sword1 <= rd_sword; end

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_dq
    dequant_unit u_dq (.q_flit(t_data[p]), .scale(t_scale[p][16*sword1 +: 16]), .deq(deq[p]));
    always_comb begin
      ops[p] = '0;
      if (src_mask[p]) begin
        if (quant_en) ops[p] = deq[p];
        else for (int i = 0; i < LANES/2; i++) ops[p][i] = t_data[p][16*i +: 16];
      end
    end
  end

  logic                          red_valid;
  logic [LANES-1:0][15:0]        red_sum;
  reduction_unit #(.N(NUM_PORTS)) u_red (
    .clk, .rst_n, .in_valid(v1), .in_ops(ops),
    .out_valid(red_valid), .sum_all(red_sum), .sum_half());

  logic [LANES-1:0][15:0] stg_data;
  logic                   stg_valid, stg_ready;
  sync_fifo #(.T(logic [LANES-1:0][15:0]), .DEPTH(DP_DEPTH)) u_stg (
    .clk, .rst_n, .in_data(red_sum), .in_valid(red_valid), .in_ready(),
    .out_data(stg_data), .out_valid(stg_valid), .out_ready(stg_ready), .count());
  assign dp_pop = stg_valid && stg_ready;

  quant_unit u_q (
    .clk, .rst_n, .quant_en, .block_flits,
    .in_data(stg_data), .in_valid(stg_valid), .in_ready(stg_ready),
    .out_data(res_data), .out_scale(res_scale), .out_scale_valid(res_scale_valid),
    .out_valid(res_valid), .out_ready(res_ready));

endmodule
