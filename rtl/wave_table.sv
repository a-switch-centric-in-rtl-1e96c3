// wave_table: the per-accelerator wave table of the in-switch accelerator.
//
// Each of the WAVES entries holds one wave from one accelerator: DATA_FLITS flits of data
// (4 KB), SCALE_FLITS flits of scale factors (128 B, used when quantization is on), the
// entry's start address and scale address in that accelerator's memory, and its state
// IDLE / WAITING / READY. The wave controller allocates an entry (alloc_*), telling it how
// many flits to expect; the entry then waits. Read responses arrive out of order from the
// port's ISA Rx response queue; the tag they carry (copied from the read request) says where
// they go: tag[15] selects the scale field, tag[14:8] is the entry and tag[7:0] the packet
// index inside the entry, each packet holding PKT_FLITS flits. When all expected flits have
// arrived the entry becomes READY. The reduction path reads one data flit and one scale flit
// per cycle (registered, one-cycle latency) and then frees the entry. Write responses
// arriving on the same queue are reported to the controller as wr_rsp pulses. The fields,
// the states and the tag-addressed placement follow the paper; the tag bit layout and the
// flit-count readiness test are this design's.
module wave_table
  import scin_pkg::*;
#(
  parameter int WAVES       = 24,
  parameter int DATA_FLITS  = 128,
  parameter int SCALE_FLITS = 4,
  parameter int PKT_FLITS   = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // allocation by the wave controller
  input  logic                             alloc_en,
  input  logic [$clog2(WAVES)-1:0]         alloc_id,
  input  logic [ADDR_W-1:0]                alloc_addr,
  input  logic [ADDR_W-1:0]                alloc_saddr,
  input  logic [8:0]                       alloc_expect,
  // responses from the port
  input  flit_t                            rx_flit,
  input  logic                             rx_valid,
  output logic                             rx_ready,
  output logic                             wr_rsp,
  // state
  output wave_state_t [WAVES-1:0]          state,
  // readout to the datapath
  input  logic                             rd_en,
  input  logic [$clog2(WAVES)-1:0]         rd_id,
  input  logic [$clog2(DATA_FLITS)-1:0]    rd_flit,
  input  logic [$clog2(SCALE_FLITS)-1:0]   rd_sflit,
  output logic [FLIT_W-1:0]                rd_data,
  output logic [FLIT_W-1:0]                rd_scale,
  input  logic [$clog2(WAVES)-1:0]         info_id,
  output logic [ADDR_W-1:0]                info_addr,
  output logic [ADDR_W-1:0]                info_saddr,
  // release
  input  logic                             free_en,
  input  logic [$clog2(WAVES)-1:0]         free_id
);
  localparam int IW  = $clog2(WAVES);
  localparam int FW  = $clog2(DATA_FLITS);
  localparam int SW  = $clog2(SCALE_FLITS);

  logic [FLIT_W-1:0] dmem [WAVES*DATA_FLITS];
  logic [FLIT_W-1:0] smem [WAVES*SCALE_FLITS];
  logic [ADDR_W-1:0] start_addr [WAVES];
  logic [ADDR_W-1:0] scale_addr [WAVES];
  logic [8:0]        expect_cnt [WAVES];
  logic [8:0]        recv_cnt   [WAVES];

  hdr_t       cur;
  logic [FW:0] k;          // flit index inside the current packet
  logic       wr_fire;
  logic       cur_scale;
  logic [IW-1:0] cur_id;
  logic [7:0] cur_pkt;
  hdr_t       h_in;

  assign rx_ready  = 1'b1;
  assign h_in      = flit_hdr(rx_flit);
  assign cur_scale = cur.tag[15];
  assign cur_id    = IW'(cur.tag[14:8]);
  assign cur_pkt   = cur.tag[7:0];
  assign wr_fire   = rx_valid && !rx_flit.hdr;
  assign wr_rsp    = rx_valid && rx_flit.hdr && (h_in.typ == MSG_WR_RSP);

  always_ff @(posedge clk) begin
    if (wr_fire) begin
      if (cur_scale)
        smem[int'(cur_id)*SCALE_FLITS + int'(k)] <= rx_flit.data;
      else
        dmem[int'(cur_id)*DATA_FLITS + int'(cur_pkt)*PKT_FLITS + int'(k)] <= rx_flit.data;
    end
    if (rd_en) begin
      rd_data  <= dmem[int'(rd_id)*DATA_FLITS + int'(rd_flit)];
      rd_scale <= smem[int'(rd_id)*SCALE_FLITS + int'(rd_sflit)];
    end
    if (alloc_en) begin
      start_addr[alloc_id] <= alloc_addr;
      scale_addr[alloc_id] <= alloc_saddr;
      expect_cnt[alloc_id] <= alloc_expect;
    end
  end

  assign info_addr  = start_addr[info_id];
  assign info_saddr = scale_addr[info_id];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      k   <= '0;
      for (int i = 0; i < WAVES; i++) begin
        state[i]    <= WS_IDLE;
        recv_cnt[i] <= '0;
      end
    end else begin
      if (rx_valid && rx_flit.hdr) begin
        cur <= h_in;
        k   <= '0;
      end else if (wr_fire) begin
        k <= k + 1'b1;
      end
      for (int i = 0; i < WAVES; i++) begin
        if (alloc_en && alloc_id == IW'(i)) begin
          recv_cnt[i] <= '0;
          state[i]    <= (alloc_expect == '0) ? WS_READY : WS_WAITING;
        end else if (free_en && free_id == IW'(i)) begin
          state[i]    <= WS_IDLE;
        end else if (wr_fire && cur_id == IW'(i) && state[i] == WS_WAITING) begin
          recv_cnt[i] <= recv_cnt[i] + 1'b1;
          if (recv_cnt[i] + 1'b1 == expect_cnt[i]) state[i] <= WS_READY;
        end
      end
    end
  end

endmodule
