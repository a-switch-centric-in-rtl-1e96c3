// wave_controller: sequencing of one switch-driven All-Reduce (or Reduce) in the ISA.
//
// Three cooperating state machines:
//  * Issue: takes the instruction at the head of the instruction buffer (and, when
//    QuantEnable is set, the following slot, whose address field holds the per-accelerator
//    scale-factor addresses), polls the barrier manager until every participant (source or
//    destination) has set its arrival flag, clears those flags, and then splits the transfer
//    into waves of WAVE_BYTES. For each wave it needs a free wave-table entry; with none free
//    it waits (the rest of the transfer is deferred until entries are released). It
//    allocates the entry in the tables of all participants (recording start and scale
//    addresses) and sends one read request per PAY_BYTES packet to every source accelerator,
//    all sources in the same cycle, plus one scale read per source when quantizing. The tag
//    of each request names the entry and the packet slot (see wave_table).
//  * Readout: takes waves in issue order; once the head wave is READY in every source table it
//    reads the wave out, one flit per cycle from all tables in parallel, into the
//    dequantize-reduce datapath, as long as the output staging queue has room (credit count
//    of DP_DEPTH), hands the wave's write addresses to the writer as it starts, and frees the entry after
//    the last flit.
//  * Writer: packetises the requantized result stream into write requests of PAY_BYTES
//    (header flit + payload flits) multicast to every destination accelerator at the
//    addresses the sources were read from (in-place results), followed, when quantizing, by
//    one scale packet per wave. It counts outstanding writes; when all have been answered the
//    issue machine writes a synchronisation flag (the instruction ID) to each participant's
//    sync address and waits for those writes to be acknowledged before moving on.
// Per-port request and write streams are valid/ready; a multicast beat advances only when
// every addressed port can take it. Wave regulation, the entry/tag scheme, the in-order
// multicast of results and the completion flag follow the paper. One instruction in flight at
// a time, reading waves out in issue order, the flag payload and the credit scheme are this
// design's. Lengths must be multiples of 32 bytes, and of BlockSize bytes when quantizing;
// BlockSize must be a power of two from 64 to 32 * MAX_BLOCK_FLITS (the quantizer's block
// buffer), and at most WAVE_BYTES / 16 so that each wave's scales fill whole 32-byte flits.
// Header fields that never change (message class, INC, length of a read request, unused
// flit bytes) make many request-flit output bits constant after synthesis.
module wave_controller
  import scin_pkg::*;
#(
  parameter int NUM_PORTS   = 8,
  parameter int WAVES       = 24,
  parameter int WAVE_BYTES  = 4096,
  parameter int PAY_BYTES   = 128,
  parameter int SCALE_BYTES = 128,
  parameter int DP_DEPTH    = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // instruction buffer
  input  instr_t                             instr,
  input  instr_t                             instr_next,
  input  logic                               instr_valid,
  output logic                               instr_advance,
  // barrier manager
  output logic [NUM_PORTS-1:0]               poll_mask,
  input  logic                               bar_ready,
  output logic                               bar_clear,
  // per-port synchronisation addresses
  input  logic [NUM_PORTS-1:0][ADDR_W-1:0]   sync_addr,
  // table manager
  output logic                               tm_alloc,
  input  logic                               tm_alloc_ok,
  input  logic [$clog2(WAVES)-1:0]           tm_alloc_id,
  output logic                               tm_dealloc,
  output logic [$clog2(WAVES)-1:0]           tm_dealloc_id,
  // wave tables
  output logic [NUM_PORTS-1:0]               wt_alloc_en,
  output logic [$clog2(WAVES)-1:0]           wt_alloc_id,
  output logic [NUM_PORTS-1:0][ADDR_W-1:0]   wt_alloc_addr,
  output logic [NUM_PORTS-1:0][ADDR_W-1:0]   wt_alloc_saddr,
  output logic [NUM_PORTS-1:0][8:0]          wt_alloc_expect,
  input  wave_state_t [NUM_PORTS-1:0][WAVES-1:0] wt_state,
  output logic [$clog2(WAVES)-1:0]           wt_info_id,
  input  logic [NUM_PORTS-1:0][ADDR_W-1:0]   wt_info_addr,
  input  logic [NUM_PORTS-1:0][ADDR_W-1:0]   wt_info_saddr,
  input  logic [NUM_PORTS-1:0]               wt_wr_rsp,
  output logic                               wt_free_en,
  // readout control to the datapath
  output logic                               rd_en,
  output logic [$clog2(WAVES)-1:0]           rd_id,
  output logic [$clog2(WAVE_BYTES/FLIT_BYTES)-1:0] rd_flit,
  output logic [$clog2(SCALE_BYTES/FLIT_BYTES)-1:0] rd_sflit,
  output logic [3:0]                         rd_sword,
  output logic [NUM_PORTS-1:0]               src_mask,
  output logic                               quant_en,
  output logic [4:0]                         block_flits,
  input  logic                               dp_pop,
  // requantized result stream
  input  logic [FLIT_W-1:0]                  res_data,
  input  logic [15:0]                        res_scale,
  input  logic                               res_scale_valid,
  input  logic                               res_valid,
  output logic                               res_ready,
  // per-port outgoing request streams
  output flit_t [NUM_PORTS-1:0]              rdq_flit,
  output logic  [NUM_PORTS-1:0]              rdq_valid,
  input  logic  [NUM_PORTS-1:0]              rdq_ready,
  output flit_t [NUM_PORTS-1:0]              wrq_flit,
  output logic  [NUM_PORTS-1:0]              wrq_valid,
  input  logic  [NUM_PORTS-1:0]              wrq_ready,
  // event indications
  output logic                               ev_defer,      // a wave waits for a free entry
  output logic                               ev_bar_wait,   // polling an incomplete barrier
  output logic                               ev_credit_stall,
  output logic                               ev_done        // instruction completed
);
  localparam int IW   = $clog2(WAVES);
  localparam int DFL  = WAVE_BYTES / FLIT_BYTES;
  localparam int SFL  = SCALE_BYTES / FLIT_BYTES;
  localparam int FW   = $clog2(DFL);
  localparam int SFW  = $clog2(SFL);
  localparam int CW   = $clog2(DP_DEPTH+1);
  localparam int NSW  = SCALE_BYTES / 2;       // scale words per wave

  typedef struct packed {
    logic [IW-1:0] id;
    logic [15:0]   wl;      // wave bytes
    logic [15:0]   sb;      // wave scale bytes
  } winfo_t;

  typedef struct packed {
    logic [15:0]                       wl;
    logic [15:0]                       sb;
    logic [NUM_PORTS-1:0][ADDR_W-1:0]  a;
    logic [NUM_PORTS-1:0][ADDR_W-1:0]  s;
  } wrinfo_t;

  // ---------------------------------------------------------------- instruction state
  instr_t                          cur;
  logic [NUM_PORTS-1:0][ADDR_W-1:0] saddr;
  logic [NUM_PORTS-1:0]            src, dst, part;
  logic [4:0]                      blog;     // log2(BlockSize)

  assign src       = cur.src_mask[NUM_PORTS-1:0];
  assign dst       = cur.dst_mask[NUM_PORTS-1:0];
  assign part      = src | dst;
  assign src_mask  = src;
  assign quant_en  = cur.quant_en;
  always_comb begin
    blog = 5'd6;
    for (int b = 6; b < 16; b++) if (cur.block_size[b]) blog = 5'(b);
  end
  assign block_flits = 5'(1 << (blog - 5'd5));

  typedef enum logic [2:0] {S_IDLE, S_BAR, S_ALLOC, S_REQ, S_SREQ, S_DRAIN, S_SYNC, S_SYNCW} st_t;
  st_t           st;
  logic [63:0]   off;         // byte offset of the next wave
  logic [63:0]   soff;        // byte offset of the next wave's scales
  logic [15:0]   wl_q, sb_q;
  logic [IW-1:0] id_q;
  logic [7:0]    j;           // packet index inside the wave
  logic [7:0]    npk;
  logic [15:0]   waves_issued, waves_written;
  logic [15:0]   outstanding;
  logic          sync_beat;

  // wave length and scale bytes of the wave about to be allocated
  logic [63:0]   rem_len;
  logic [15:0]   wl_n, sb_n;
  assign rem_len = cur.length - off;
  assign wl_n    = (rem_len >= 64'(WAVE_BYTES)) ? 16'(WAVE_BYTES) : rem_len[15:0];
  assign sb_n    = cur.quant_en ? 16'((32'(wl_n) << 1) >> blog) : 16'd0;

  // wave-info queue from issue to readout
  winfo_t wi_in, wi_out;
  logic   wi_push, wi_pop, wi_in_ready, wi_valid;
  sync_fifo #(.T(winfo_t), .DEPTH(WAVES)) u_wi (
    .clk, .rst_n, .in_data(wi_in), .in_valid(wi_push), .in_ready(wi_in_ready),
    .out_data(wi_out), .out_valid(wi_valid), .out_ready(wi_pop), .count());

  // ---------------------------------------------------------------- issue machine
  logic all_rdq_ready, all_wrq_ready_part;
  always_comb begin
    all_rdq_ready = 1'b1;
    all_wrq_ready_part = 1'b1;
    for (int p = 0; p < NUM_PORTS; p++) begin
      if (src[p]  && !rdq_ready[p]) all_rdq_ready = 1'b0;
      if (part[p] && !wrq_ready[p]) all_wrq_ready_part = 1'b0;
    end
  end

  assign poll_mask     = part;
  assign bar_clear     = (st == S_BAR) && bar_ready;
  assign tm_alloc      = (st == S_ALLOC) && (off < cur.length) && wi_in_ready;
  assign wt_alloc_id   = tm_alloc_id;
  assign wi_push       = tm_alloc && tm_alloc_ok;
  assign wi_in         = '{id: tm_alloc_id, wl: wl_n, sb: sb_n};
  assign ev_defer      = (st == S_ALLOC) && (off < cur.length) && !(tm_alloc_ok && wi_in_ready);
  assign ev_bar_wait   = (st == S_BAR) && !bar_ready;
  assign instr_advance = (st == S_SYNCW) && (outstanding == 16'd0);
  assign ev_done       = instr_advance;

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      wt_alloc_en[p]     = wi_push && part[p];
      wt_alloc_addr[p]   = cur.addr[p] + off[ADDR_W-1:0];
      wt_alloc_saddr[p]  = saddr[p] + soff[ADDR_W-1:0];
      wt_alloc_expect[p] = src[p] ? 9'((wl_n >> 5) + ((sb_n + 16'd31) >> 5)) : 9'd0;
    end
  end

  // read requests
  always_comb begin
    hdr_t h;
    h = '0;
    for (int p = 0; p < NUM_PORTS; p++) begin
      h       = '0;
      h.typ   = MSG_RD_REQ;
      h.inc   = 1'b1;
      h.src   = PORT_W'(p);
      h.dst   = PORT_W'(p);
      if (st == S_SREQ) begin
        h.tag  = {1'b1, 7'(id_q), 8'd0};
        h.addr = saddr[p] + soff[ADDR_W-1:0];
        h.len  = sb_q;
      end else begin
        h.tag  = {1'b0, 7'(id_q), j};
        h.addr = cur.addr[p] + off[ADDR_W-1:0] + ADDR_W'(32'(j) * PAY_BYTES);
        h.len  = ((wl_q - 16'(32'(j) * PAY_BYTES)) >= 16'(PAY_BYTES)) ? 16'(PAY_BYTES)
                                                                    : (wl_q - 16'(32'(j) * PAY_BYTES));
      end
      rdq_flit[p]  = make_hdr_flit(h, 1'b1);
      rdq_valid[p] = (st == S_REQ || st == S_SREQ) && src[p] && all_rdq_ready;
    end
  end

  logic rd_fire;
  assign rd_fire = (st == S_REQ || st == S_SREQ) && all_rdq_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; saddr <= '0; off <= '0; soff <= '0;
      wl_q <= '0; sb_q <= '0; id_q <= '0; j <= '0; npk <= '0;
      waves_issued <= '0; sync_beat <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (instr_valid) begin
          cur <= instr;
          for (int p = 0; p < NUM_PORTS; p++) saddr[p] <= instr_next.addr[p];
          st  <= S_BAR;
        end
        S_BAR: if (bar_ready) begin
          off <= '0; soff <= '0; waves_issued <= '0;
          st  <= S_ALLOC;
        end
        S_ALLOC: begin
          if (off >= cur.length) st <= S_DRAIN;
          else if (wi_push) begin
            wl_q <= wl_n; sb_q <= sb_n; id_q <= tm_alloc_id; j <= '0;
            npk  <= 8'((32'(wl_n) + PAY_BYTES - 1) / PAY_BYTES);
            waves_issued <= waves_issued + 1'b1;
            st   <= S_REQ;
          end
        end
        S_REQ: if (rd_fire) begin
          if (j + 1'b1 == npk) begin
            if (cur.quant_en) st <= S_SREQ;
            else begin
              off <= off + 64'(wl_q);
              st  <= S_ALLOC;
            end
          end
          j <= j + 1'b1;
        end
        S_SREQ: if (rd_fire) begin
          off  <= off + 64'(wl_q);
          soff <= soff + 64'(sb_q);
          st   <= S_ALLOC;
        end
        S_DRAIN: if (waves_written == waves_issued && outstanding == 16'd0 && !wi_valid) begin
          sync_beat <= 1'b0;
          st <= S_SYNC;
        end
        S_SYNC: if (all_wrq_ready_part) begin
          if (sync_beat) st <= S_SYNCW;
          sync_beat <= ~sync_beat;
        end
        S_SYNCW: if (outstanding == 16'd0) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- readout machine
  logic          r_busy, r_last;
  logic [FW:0]   f;
  logic [CW-1:0] credits_used;
  logic          src_ready;
  wrinfo_t       wr_in, wr_out;
  logic          wr_push, wr_in_ready, wr_valid, wr_pop;
  logic [15:0]   sidx;

  always_comb begin
    src_ready = wi_valid;
    for (int p = 0; p < NUM_PORTS; p++)
      if (src[p] && wt_state[p][wi_out.id] != WS_READY) src_ready = 1'b0;
  end

  assign wt_info_id = wi_out.id;
  assign rd_id      = wi_out.id;
  assign rd_flit    = FW'(f);
  assign sidx       = 16'((32'(f) << 5) >> blog);
  assign rd_sflit   = SFW'(sidx >> 4);
  assign rd_sword   = sidx[3:0];
  assign rd_en      = r_busy && (credits_used < CW'(DP_DEPTH));
  assign ev_credit_stall = r_busy && !rd_en;
  assign r_last     = rd_en && (32'(f) + 1 == 32'(wi_out.wl >> 5));
  assign wr_push    = !r_busy && src_ready && wr_in_ready;   // writer learns the wave at start
  assign wi_pop     = r_last;
  assign tm_dealloc = r_last;
  assign tm_dealloc_id = wi_out.id;
  assign wt_free_en = r_last;
  always_comb begin
    wr_in.wl = wi_out.wl;
    wr_in.sb = wi_out.sb;
    wr_in.a  = wt_info_addr;
    wr_in.s  = wt_info_saddr;
  end

  sync_fifo #(.T(wrinfo_t), .DEPTH(4)) u_wr (
    .clk, .rst_n, .in_data(wr_in), .in_valid(wr_push), .in_ready(wr_in_ready),
    .out_data(wr_out), .out_valid(wr_valid), .out_ready(wr_pop), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy <= 1'b0; f <= '0; credits_used <= '0;
    end else begin
      if (!r_busy) begin
        if (wr_push) begin r_busy <= 1'b1; f <= '0; end
      end else if (rd_en) begin
        f <= f + 1'b1;
        if (r_last) r_busy <= 1'b0;
      end
      credits_used <= credits_used + CW'(rd_en) - CW'(dp_pop);
    end
  end

  // ---------------------------------------------------------------- writer machine
  typedef enum logic [2:0] {W_IDLE, W_HDR, W_DATA, W_SHDR, W_SDATA, W_DONE} wst_t;
  wst_t         wst;
  logic [15:0]  wrem, wlen, wpos;
  logic [7:0]   wk, wnk;
  logic [15:0]  sbuf [NSW];
  logic [6:0]   scnt;
  logic         all_wrq_ready_dst;
  logic         w_fire;
  logic [NUM_PORTS-1:0] w_mask;

  always_comb begin
    all_wrq_ready_dst = 1'b1;
    for (int p = 0; p < NUM_PORTS; p++)
      if (dst[p] && !wrq_ready[p]) all_wrq_ready_dst = 1'b0;
  end

  assign wlen = (wrem >= 16'(PAY_BYTES)) ? 16'(PAY_BYTES) : wrem;

  always_comb begin
    logic [FLIT_W-1:0] sdata;
    logic              wv;
    hdr_t              h;
    sdata = '0;
    h  = '0;
    for (int w = 0; w < 16; w++)
      if (int'(wk) * 16 + w < NSW) sdata[16*w +: 16] = sbuf[int'(wk) * 16 + w];
    wv = 1'b0;
    res_ready = 1'b0;
    w_mask = dst;
    for (int p = 0; p < NUM_PORTS; p++) wrq_flit[p] = '0;
    if (st == S_SYNC) begin
      // completion flag: header then one flit holding the instruction ID
      w_mask = part;
      wv     = 1'b1;
      for (int p = 0; p < NUM_PORTS; p++) begin
        h = '0;
        h.typ = MSG_WR_REQ; h.inc = 1'b1; h.src = PORT_W'(p); h.dst = PORT_W'(p);
        h.tag = 16'h7FFF; h.addr = sync_addr[p]; h.len = 16'(FLIT_BYTES);
        if (!sync_beat) wrq_flit[p] = make_hdr_flit(h, 1'b0);
        else begin
          wrq_flit[p].hdr  = 1'b0;
          wrq_flit[p].last = 1'b1;
          wrq_flit[p].data = {{(FLIT_W-17){1'b0}}, 1'b1, cur.id};
        end
      end
    end else begin
      unique case (wst)
        W_HDR, W_SHDR: begin
          wv = 1'b1;
          for (int p = 0; p < NUM_PORTS; p++) begin
            h = '0;
            h.typ = MSG_WR_REQ; h.inc = 1'b1; h.src = PORT_W'(p); h.dst = PORT_W'(p);
            h.tag = 16'h7FFE;
            if (wst == W_HDR) begin
              h.addr = wr_out.a[p] + ADDR_W'(wpos);
              h.len  = wlen;
            end else begin
              h.addr = wr_out.s[p];
              h.len  = wr_out.sb;
            end
            wrq_flit[p] = make_hdr_flit(h, 1'b0);
          end
        end
        W_DATA: begin
          wv = res_valid;
          res_ready = all_wrq_ready_dst;
          for (int p = 0; p < NUM_PORTS; p++) begin
            wrq_flit[p].hdr  = 1'b0;
            wrq_flit[p].last = (wk + 1'b1 == wnk);
            wrq_flit[p].data = res_data;
          end
        end
        W_SDATA: begin
          wv = 1'b1;
          for (int p = 0; p < NUM_PORTS; p++) begin
            wrq_flit[p].hdr  = 1'b0;
            wrq_flit[p].last = (wk + 1'b1 == wnk);
            wrq_flit[p].data = sdata;
          end
        end
        default: wv = 1'b0;
      endcase
    end
    for (int p = 0; p < NUM_PORTS; p++)
      wrq_valid[p] = wv && w_mask[p] && ((st == S_SYNC) ? all_wrq_ready_part : all_wrq_ready_dst);
  end

  assign w_fire = (st != S_SYNC) && (wst != W_IDLE) && (wst != W_DONE) && all_wrq_ready_dst &&
                  ((wst != W_DATA) || res_valid);
  assign wr_pop = (wst == W_DONE);

  logic [4:0]  rsp_cnt;
  logic [15:0] issued;     // write requests sent this cycle (each expects one response)
  always_comb begin
    rsp_cnt = '0;
    for (int p = 0; p < NUM_PORTS; p++) rsp_cnt = rsp_cnt + 5'(wt_wr_rsp[p]);
    issued = '0;
    if (st == S_SYNC && all_wrq_ready_part && !sync_beat) issued = 16'($countones(part));
    if ((wst == W_HDR || wst == W_SHDR) && w_fire)       issued = 16'($countones(dst));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= W_IDLE; wrem <= '0; wpos <= '0; wk <= '0; wnk <= '0; scnt <= '0;
      waves_written <= '0; outstanding <= '0;
    end else begin
      if (st == S_BAR && bar_ready) waves_written <= '0;
      unique case (wst)
        W_IDLE: if (wr_valid) begin
          wrem <= wr_out.wl; wpos <= '0; scnt <= '0;
          wst  <= W_HDR;
        end
        W_HDR: if (w_fire) begin
          wk  <= '0;
          wnk <= 8'(wlen >> 5);
          wst <= W_DATA;
        end
        W_DATA: if (w_fire) begin
          if (res_scale_valid && res_ready) begin
            sbuf[scnt[$clog2(NSW)-1:0]] <= res_scale;
            scnt <= scnt + 1'b1;
          end
          wk <= wk + 1'b1;
          if (wk + 1'b1 == wnk) begin
            wrem <= wrem - wlen;
            wpos <= wpos + wlen;
            if (wrem == wlen) wst <= (wr_out.sb != 0) ? W_SHDR : W_DONE;
            else              wst <= W_HDR;
          end
        end
        W_SHDR: if (w_fire) begin
          wk  <= '0;
          wnk <= 8'((wr_out.sb + 16'd31) >> 5);
          wst <= W_SDATA;
        end
        W_SDATA: if (w_fire) begin
          wk <= wk + 1'b1;
          if (wk + 1'b1 == wnk) wst <= W_DONE;
        end
        W_DONE: begin
          waves_written <= waves_written + 1'b1;
          wst <= W_IDLE;
        end
        default: wst <= W_IDLE;
      endcase
      outstanding <= outstanding + issued - 16'(rsp_cnt);
    end
  end

endmodule
