// tb_in_switch_accelerator: the in-switch accelerator on its own, at a reduced size (4 ports,
// 3 wave-table entries of 2 KB, 128-byte packets, 64 bytes of scales per entry), with four
// behavioural accelerators (accel_model) connected through one switch_port each (regular
// switch traffic is not used here). One program of four instructions is run:
//   A  BF16 All-Reduce of 16640 bytes: 8 full waves and a partial one, more than the three
//      entries, so waves are deferred until entries are freed;
//   B  quantized All-Reduce, BlockSize 64, 8 KB (instruction + scale-address slot);
//   C  Reduce of GPUs 0 and 2 into GPU 1 only, 3040 bytes;
//   D  quantized All-Reduce of GPUs 1 and 3, BlockSize 128, 4 KB.
// Each result (and every scale) is compared with a double-precision reference computed in the
// same adder-tree order; memory outside the result must stay untouched. A monitor on the ISA's
// request queues checks that every source is read exactly once at each packet address of the
// operation, never before all participants have arrived, that every destination receives
// each result packet exactly once, and that the completion flag is written only after all of
// that port's result writes. The wave deferral, barrier wait, credit stall and out-of-order
// response mechanisms must each occur.
module tb_in_switch_accelerator;
  import scin_pkg::*;
  import ref_fp_pkg::*;

  localparam int NP = 4, WAVES = 3, WB = 2048, PAY = 128, SB = 64;
  localparam int MEM_FLITS = 1024;
  localparam logic [47:0] SCALE_BASE = 48'h6000;
  localparam logic [47:0] SYNC_BASE  = 48'h7C00;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  flit_t [NP-1:0] up_flit, dn_flit, rq_f, rs_f, tq_f, ts_f, swr_f;
  logic  [NP-1:0] up_valid, up_ready, dn_valid, dn_ready, rq_v, rq_r, rs_v, rs_r, tq_v, tq_r, ts_v, ts_r;
  logic  [NP-1:0] swr_v, sw_t_r, conf, arrived;
  logic           cfg_we, cfg_run, cfg_sync_we;
  logic [2:0]     cfg_addr;
  instr_t         cfg_instr;
  logic [3:0]     cfg_len;
  logic [3:0]     cfg_sync_port;
  logic [47:0]    cfg_sync_addr;
  logic           ev_defer, ev_bar_wait, ev_credit_stall, ev_done;

  in_switch_accelerator #(.NUM_PORTS(NP), .WAVES(WAVES), .WAVE_BYTES(WB), .PAY_BYTES(PAY),
                          .SCALE_BYTES(SB), .IBUF_DEPTH(8), .DP_DEPTH(8)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_instr, .cfg_len, .cfg_run,
    .cfg_sync_we, .cfg_sync_port, .cfg_sync_addr,
    .rx_req_flit(rq_f), .rx_req_valid(rq_v), .rx_req_ready(rq_r),
    .rx_rsp_flit(rs_f), .rx_rsp_valid(rs_v), .rx_rsp_ready(rs_r),
    .tx_req_flit(tq_f), .tx_req_valid(tq_v), .tx_req_ready(tq_r),
    .tx_rsp_flit(ts_f), .tx_rsp_valid(ts_v), .tx_rsp_ready(ts_r),
    .ev_defer, .ev_bar_wait, .ev_credit_stall, .ev_done, .arrived);

  for (genvar p = 0; p < NP; p++) begin : g_port
    switch_port #(.QDEPTH(4)) u_port (
      .clk, .rst_n,
      .link_rx_flit(up_flit[p]), .link_rx_valid(up_valid[p]), .link_rx_ready(up_ready[p]),
      .link_tx_flit(dn_flit[p]), .link_tx_valid(dn_valid[p]), .link_tx_ready(dn_ready[p]),
      .isa_rx_req_flit(rq_f[p]), .isa_rx_req_valid(rq_v[p]), .isa_rx_req_ready(rq_r[p]),
      .isa_rx_rsp_flit(rs_f[p]), .isa_rx_rsp_valid(rs_v[p]), .isa_rx_rsp_ready(rs_r[p]),
      .isa_tx_req_flit(tq_f[p]), .isa_tx_req_valid(tq_v[p]), .isa_tx_req_ready(tq_r[p]),
      .isa_tx_rsp_flit(ts_f[p]), .isa_tx_rsp_valid(ts_v[p]), .isa_tx_rsp_ready(ts_r[p]),
      .sw_rx_flit(swr_f[p]), .sw_rx_valid(swr_v[p]), .sw_rx_ready(1'b1),
      .sw_tx_flit('0), .sw_tx_valid(1'b0), .sw_tx_ready(sw_t_r[p]),
      .egress_conflict(conf[p]));
  end

  accel_model #(.NUM_PORTS(NP), .MEM_FLITS(MEM_FLITS)) acc (
    .clk, .rst_n,
    .in_flit(dn_flit), .in_valid(dn_valid), .in_ready(dn_ready),
    .out_flit(up_flit), .out_valid(up_valid), .out_ready(up_ready));

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_defer = 0, n_barwait = 0, n_credit = 0, n_done = 0, n_sw = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_defer)        n_defer++;
    if (ev_bar_wait)     n_barwait++;
    if (ev_credit_stall) n_credit++;
    if (ev_done)         n_done++;
    if (rst_n && swr_v != 0) n_sw++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- request monitor
  // per port: how often each 32-byte address was read / written by the ISA in this operation
  int  rd_cnt [NP][int];
  int  wr_cnt [NP][int];
  int  srd_cnt [NP];
  int  bad_len = 0, bad_tag = 0, early = 0, flag_early = 0, flag_cnt [NP];
  bit  released = 0;      // set by the testbench once every participant has arrived
  int  op_len;
  logic [NP-1:0] op_src, op_dst;
  bit  op_q;
  int  op_bs;

  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (tq_v[p] && tq_r[p] && tq_f[p].hdr) begin
        hdr_t h;
        h = flit_hdr(tq_f[p]);
        if (h.typ == MSG_RD_REQ) begin
          if (!released) early++;
          if (int'(h.tag[14:8]) >= WAVES) bad_tag++;
          if (h.tag[15]) begin
            srd_cnt[p]++;
            if (int'(h.len) != (WB / op_bs) * 2) bad_len++;
          end else begin
            int a;
            a = int'(h.addr);
            if (a % PAY != 0 || int'(h.len) != ((op_len - a < PAY) ? op_len - a : PAY)) bad_len++;
            if (int'(h.tag[7:0]) != (a % WB) / PAY) bad_tag++;
            rd_cnt[p][a] = rd_cnt[p].exists(a) ? rd_cnt[p][a] + 1 : 1;
          end
        end else if (h.typ == MSG_WR_REQ) begin
          int a;
          a = int'(h.addr);
          if (h.addr == SYNC_BASE) begin
            flag_cnt[p]++;
            for (int x = 0; x < op_len; x += PAY) if (op_dst[p] && !(wr_cnt[p].exists(x))) flag_early++;
          end else if (h.addr < SCALE_BASE) begin
            wr_cnt[p][a] = wr_cnt[p].exists(a) ? wr_cnt[p][a] + 1 : 1;
          end
        end
      end

  task automatic mon_start(int len, logic [NP-1:0] srcm, logic [NP-1:0] dstm, bit q, int bs);
    for (int p = 0; p < NP; p++) begin
      rd_cnt[p].delete(); wr_cnt[p].delete(); srd_cnt[p] = 0; flag_cnt[p] = 0;
    end
    bad_len = 0; bad_tag = 0; early = 0; flag_early = 0; released = 0;
    op_len = len; op_src = srcm; op_dst = dstm; op_q = q; op_bs = (bs == 0) ? 64 : bs;
  endtask

  task automatic mon_check(string op);
    int waves, bad_rd, bad_wr;
    waves = (op_len + WB - 1) / WB;
    bad_rd = 0; bad_wr = 0;
    for (int p = 0; p < NP; p++) begin
      for (int x = 0; x < op_len; x += PAY) begin
        int nr, nw;
        nr = rd_cnt[p].exists(x) ? rd_cnt[p][x] : 0;
        nw = wr_cnt[p].exists(x) ? wr_cnt[p][x] : 0;
        if (nr != (op_src[p] ? 1 : 0)) bad_rd++;
        if (nw != (op_dst[p] ? 1 : 0)) bad_wr++;
      end
      if (rd_cnt[p].num() != (op_src[p] ? (op_len + PAY - 1) / PAY : 0)) bad_rd++;
      if (srd_cnt[p] != ((op_src[p] && op_q) ? waves : 0)) bad_rd++;
      check(flag_cnt[p] == ((op_src[p] || op_dst[p]) ? 1 : 0), {op, ": one completion flag per participant"});
    end
    check(bad_rd == 0, {op, ": each source packet read exactly once (and scales once per wave)"});
    check(bad_wr == 0, {op, ": each result packet written exactly once per destination"});
    check(bad_len == 0, {op, ": request lengths"});
    check(bad_tag == 0, {op, ": request tags"});
    check(early == 0, {op, ": no read before the barrier completed"});
    check(flag_early == 0, {op, ": completion flag after all result writes"});
  endtask

  // ---------------------------------------------------------------- memory helpers
  function automatic logic [7:0] rd8(int p, int a);
    return acc.mem[p][a >> 5][8*(a % 32) +: 8];
  endfunction
  function automatic void wr8(int p, int a, logic [7:0] v);
    acc.mem[p][a >> 5][8*(a % 32) +: 8] = v;
  endfunction
  function automatic logic [15:0] rd16(int p, int a);
    return {rd8(p, a + 1), rd8(p, a)};
  endfunction
  function automatic void wr16(int p, int a, logic [15:0] v);
    wr8(p, a, v[7:0]); wr8(p, a + 1, v[15:8]);
  endfunction

  function automatic logic [15:0] tree_sum(logic [15:0] v [NP]);
    logic [15:0] t [NP];
    int n;
    t = v;
    n = NP;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
      n = n / 2;
    end
    return t[0];
  endfunction

  function automatic instr_t mk(int id, int len, logic [7:0] srcm, logic [7:0] dstm, bit q, int bs,
                                logic [47:0] a);
    instr_t i;
    i = '0;
    i.id = 16'(id); i.length = 64'(len); i.src_mask = srcm; i.dst_mask = dstm;
    i.quant_en = q; i.block_size = 16'(bs);
    for (int p = 0; p < MAX_ACC; p++) i.addr[p] = a;
    return i;
  endfunction

  logic [15:0] exp16 [];
  logic [7:0]  expq  [];
  logic [15:0] exps  [];

  task automatic prep_bf16(int len, logic [NP-1:0] srcm);
    logic [15:0] v [NP];
    exp16 = new[len / 2];
    for (int p = 0; p < NP; p++) begin
      for (int a = 0; a < len; a += 2) wr16(p, a, rand_bf(118, 130));
      for (int a = len; a < len + 64; a += 2) wr16(p, a, 16'h1234);
    end
    for (int e = 0; e < len / 2; e++) begin
      for (int p = 0; p < NP; p++) v[p] = srcm[p] ? rd16(p, 2*e) : 16'h0000;
      exp16[e] = tree_sum(v);
    end
  endtask

  task automatic prep_quant(int len, int bs, logic [NP-1:0] srcm);
    int nb;
    logic [15:0] v [NP];
    logic [15:0] sums [];
    nb = len / bs;
    expq = new[len]; exps = new[nb]; sums = new[len];
    for (int p = 0; p < NP; p++) begin
      for (int a = 0; a < len; a++) wr8(p, a, 8'($urandom % 255) - 8'd127);
      for (int a = len; a < len + 64; a++) wr8(p, a, 8'h5A);
      for (int b = 0; b < nb; b++) wr16(p, int'(SCALE_BASE) + 2*b, {1'b0, 8'(112 + $urandom % 8), 7'($urandom)});
    end
    for (int e = 0; e < len; e++) begin
      for (int p = 0; p < NP; p++)
        v[p] = srcm[p] ? ref_mul($signed(rd8(p, e)), rd16(p, int'(SCALE_BASE) + 2*(e / bs))) : 16'h0000;
      sums[e] = tree_sum(v);
    end
    for (int b = 0; b < nb; b++) begin
      logic [15:0] amax;
      amax = 16'h0000;
      for (int e = b*bs; e < (b+1)*bs; e++)
        if (absr(bf2r(sums[e])) > absr(bf2r(amax))) amax = sums[e];
      amax[15] = 1'b0;
      exps[b] = ref_scale(amax);
      for (int e = b*bs; e < (b+1)*bs; e++) expq[e] = ref_quant(sums[e], amax);
    end
  endtask

  // participants arrive in random order, the 'late' one 300 cycles after the others
  task automatic run_op(int id, logic [NP-1:0] part, int late);
    int pending;
    int order [NP];
    for (int p = 0; p < NP; p++) acc.mem[p][int'(SYNC_BASE) >> 5] = '0;
    for (int p = 0; p < NP; p++) order[p] = p;
    order.shuffle();
    foreach (order[k]) if (part[order[k]] && order[k] != late) begin
      repeat ($urandom % 20) @(posedge clk);
      acc.arrive(order[k]);
    end
    repeat (300) @(posedge clk);
    acc.arrive(late);
    // the barrier completes once the late flag write has reached the accelerator
    wait (arrived[late]);
    released = 1;
    pending = 1;
    while (pending) begin
      @(posedge clk);
      pending = 0;
      for (int p = 0; p < NP; p++)
        if (part[p] && acc.mem[p][int'(SYNC_BASE) >> 5][16:0] != {1'b1, 16'(id)}) pending = 1;
    end
    repeat (20) @(posedge clk);
  endtask

  task automatic check_bf16(string op, int len, logic [NP-1:0] dstm, logic [NP-1:0] keep_ok);
    int bad;
    bad = 0;
    for (int p = 0; p < NP; p++)
      if (dstm[p]) begin
        for (int e = 0; e < len / 2; e++) if (rd16(p, 2*e) !== exp16[e]) begin
          bad++;
          if (bad < 4) $display("%s mismatch p%0d e%0d got %h exp %h", op, p, e, rd16(p, 2*e), exp16[e]);
        end
        if (rd16(p, len) !== 16'h1234) bad++;
      end
    check(bad == 0, {op, ": BF16 results at every destination, nothing written past the end"});
  endtask

  task automatic check_quant(string op, int len, int bs, logic [NP-1:0] dstm);
    int bad;
    bad = 0;
    for (int p = 0; p < NP; p++)
      if (dstm[p]) begin
        for (int e = 0; e < len; e++) if (rd8(p, e) !== expq[e]) begin
          bad++;
          if (bad < 4) $display("%s mismatch p%0d e%0d got %h exp %h", op, p, e, rd8(p, e), expq[e]);
        end
        for (int b = 0; b < len / bs; b++) if (rd16(p, int'(SCALE_BASE) + 2*b) !== exps[b]) bad++;
        if (rd8(p, len) !== 8'h5A) bad++;
      end
    check(bad == 0, {op, ": INT8 results and scales at every destination"});
  endtask

  localparam int LEN_A = 8 * WB + 256;

  initial begin
    logic [15:0] keep;
    cfg_we = 0; cfg_run = 0; cfg_sync_we = 0; cfg_addr = '0; cfg_instr = '0; cfg_len = '0;
    cfg_sync_port = '0; cfg_sync_addr = '0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      cfg_sync_we = 1; cfg_sync_port = 4'(p); cfg_sync_addr = SYNC_BASE;
      @(negedge clk);
    end
    cfg_sync_we = 0;
    begin
      instr_t prog [6];
      prog[0] = mk(1, LEN_A, 8'h0F, 8'h0F, 1'b0, 64, 48'h0);
      prog[1] = mk(2, 8192,  8'h0F, 8'h0F, 1'b1, 64, 48'h0);
      prog[2] = mk(0, 0,     8'h00, 8'h00, 1'b0, 0,  SCALE_BASE);
      prog[3] = mk(3, 3040,  8'h05, 8'h02, 1'b0, 64, 48'h0);
      prog[4] = mk(4, 4096,  8'h0A, 8'h0A, 1'b1, 128, 48'h0);
      prog[5] = mk(0, 0,     8'h00, 8'h00, 1'b0, 0,  SCALE_BASE);
      for (int s = 0; s < 6; s++) begin
        cfg_we = 1; cfg_addr = 3'(s); cfg_instr = prog[s];
        @(negedge clk);
      end
      cfg_we = 0; cfg_len = 4'd6;
    end
    // operands are placed before the program starts running
    prep_bf16(LEN_A, 4'hF);
    mon_start(LEN_A, 4'hF, 4'hF, 0, 64);
    cfg_run = 1;
    run_op(1, 4'hF, 2);
    check_bf16("A", LEN_A, 4'hF, 4'h0);
    mon_check("A");

    prep_quant(8192, 64, 4'hF);
    mon_start(8192, 4'hF, 4'hF, 1, 64);
    run_op(2, 4'hF, 1);
    check_quant("B", 8192, 64, 4'hF);
    mon_check("B");

    prep_bf16(3040, 4'h5);
    keep = rd16(0, 0);
    mon_start(3040, 4'h5, 4'h2, 0, 64);
    run_op(3, 4'h7, 0);
    check_bf16("C", 3040, 4'h2, 4'h0);
    check(rd16(0, 0) == keep, "C: source-only GPU keeps its operand");
    mon_check("C");

    prep_quant(4096, 128, 4'hA);
    keep = rd16(0, 0);
    mon_start(4096, 4'hA, 4'hA, 1, 128);
    run_op(4, 4'hA, 3);
    check_quant("D", 4096, 128, 4'hA);
    check(rd16(0, 0) == keep, "D: non-participant untouched");
    mon_check("D");

    repeat (300) @(posedge clk);
    $display("events: defer=%0d barrier_wait=%0d credit_stall=%0d ooo=%0d done=%0d",
             n_defer, n_barwait, n_credit, acc.ooo_count, n_done);
    check(n_defer > 0,       "waves deferred for lack of free entries");
    check(n_barwait > 0,     "barrier waited for a late GPU");
    check(n_credit > 0,      "readout stalled on staging credit");
    check(acc.ooo_count > 0, "responses returned out of order");
    check(n_done == 4,       "four instructions completed");
    check(n_sw == 0,         "no ISA traffic leaked to the switch path");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
