// tb_scin_switch: end-to-end test of the SCIN switch at its default size (8 ports, 24 waves
// of 4 KB per wave table, 128-byte packets).
//
// Eight behavioural accelerators (accel_model) hang off the ports. A seven-slot ISA program is
// loaded over the configuration bus and run once:
//   A  All-Reduce, BF16, all eight GPUs, 112 KB each (28 waves: more than the 24 table
//      entries, so waves must wait for entries to be released);
//   B  quantized All-Reduce, INT8 with BF16 scales, BlockSize 64, 16 KB (+ scale-address slot);
//   C  Reduce to GPU 0 only, BF16, 4352 bytes (a full and a partial wave);
//   D  quantized All-Reduce among GPUs 0..3 only, BlockSize 128, 8 KB (+ scale-address slot);
//   E  as A, but GPU 3 answers reads 1500 cycles late, so all 24 entries fill up and further
//      waves are deferred until entries are released.
// Before each operation the testbench fills the memories with random operands, computes the
// expected result with real arithmetic (ref_fp_pkg, same adder-tree order), lets the GPUs set
// their arrival flags at random times, waits for every participant's completion flag and
// compares every result byte and scale. During A, GPU 0 also writes to GPU 1 through the
// switch core, so ISA and regular traffic share the links. It counts the mechanisms the
// design has (deferred waves, barrier waits, credit stalls, out-of-order responses, egress
// round-robin conflicts, regular forwarding, quantized and Reduce operations) and fails if any
// never happened. The BF16 All-Reduce must also finish within 1.25x of its link bound: each
// 128-byte packet costs 6 flits on the GPU-to-switch link (a 5-flit read response plus the
// write response of the result packet) and the switch moves one flit per cycle per link.
module tb_scin_switch;
  import scin_pkg::*;
  import ref_fp_pkg::*;

  localparam int NP        = 8;
  localparam int MEM_FLITS = 4096;
  localparam logic [47:0] SCALE_BASE = 48'h1C000;
  localparam logic [47:0] SYNC_BASE  = 48'h1F000;
  localparam logic [47:0] P2P_BASE   = 48'h1E000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  flit_t [NP-1:0] up_flit, dn_flit;
  logic  [NP-1:0] up_valid, up_ready, dn_valid, dn_ready;
  logic           cfg_we, cfg_run, cfg_sync_we;
  logic [3:0]     cfg_addr;
  instr_t         cfg_instr;
  logic [4:0]     cfg_len;
  logic [3:0]     cfg_sync_port;
  logic [47:0]    cfg_sync_addr;
  logic           ev_defer, ev_bar_wait, ev_credit_stall, ev_done;
  logic [NP-1:0]  ev_conf;

  scin_switch dut (
    .clk, .rst_n,
    .link_rx_flit(up_flit), .link_rx_valid(up_valid), .link_rx_ready(up_ready),
    .link_tx_flit(dn_flit), .link_tx_valid(dn_valid), .link_tx_ready(dn_ready),
    .cfg_we, .cfg_addr, .cfg_instr, .cfg_len, .cfg_run,
    .cfg_sync_we, .cfg_sync_port, .cfg_sync_addr,
    .ev_defer, .ev_bar_wait, .ev_credit_stall, .ev_done, .ev_egress_conflict(ev_conf));

  accel_model #(.NUM_PORTS(NP), .MEM_FLITS(MEM_FLITS)) acc (
    .clk, .rst_n,
    .in_flit(dn_flit), .in_valid(dn_valid), .in_ready(dn_ready),
    .out_flit(up_flit), .out_valid(up_valid), .out_ready(up_ready));

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_defer = 0, n_barwait = 0, n_credit = 0, n_done = 0, n_conf = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_defer)        n_defer++;
    if (ev_bar_wait)     n_barwait++;
    if (ev_credit_stall) n_credit++;
    if (ev_done)         n_done++;
    if (ev_conf != 0)    n_conf++;
  end

  // watchdog
  initial begin
    repeat (100000) @(posedge clk);
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

  // ---------------------------------------------------------------- expected results
  logic [15:0] exp16 [NP][];   // expected BF16 result per destination (element index)
  logic [7:0]  expq  [];       // expected quantized result
  logic [15:0] exps  [];       // expected scales

  task automatic prep_bf16(int len, logic [7:0] srcm);
    int ne;
    logic [15:0] v [NP];
    ne = len / 2;
    for (int p = 0; p < NP; p++) begin
      exp16[p] = new[ne];
      for (int a = 0; a < len; a += 2) wr16(p, a, rand_bf(118, 130));
      for (int a = len; a < len + 64; a += 2) wr16(p, a, 16'h1234);   // guard beyond length
    end
    for (int e = 0; e < ne; e++) begin
      for (int p = 0; p < NP; p++) v[p] = srcm[p] ? rd16(p, 2*e) : 16'h0000;
      exp16[0][e] = tree_sum(v);
    end
  endtask

  task automatic prep_quant(int len, int bs, logic [7:0] srcm);
    int ne, nb;
    logic [15:0] v [NP];
    logic [15:0] sums [];
    ne = len;                // one byte per element
    nb = ne / bs;
    expq = new[ne];
    exps = new[nb];
    sums = new[ne];
    for (int p = 0; p < NP; p++) begin
      for (int a = 0; a < ne; a++) wr8(p, a, 8'($urandom % 255) - 8'd127);
      for (int b = 0; b < nb; b++) wr16(p, int'(SCALE_BASE) + 2*b, {1'b0, 8'(112 + $urandom % 8), 7'($urandom)});
    end
    for (int e = 0; e < ne; e++) begin
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

  // all participants arrive (in random order, one of them late), then wait for completion
  task automatic run_op(int id, logic [7:0] part, int late, output int t_release, output int t_done);
    int pending;
    int order [NP];
    for (int p = 0; p < NP; p++) acc.mem[p][int'(SYNC_BASE) >> 5] = '0;
    for (int p = 0; p < NP; p++) order[p] = p;
    order.shuffle();
    foreach (order[k]) if (part[order[k]] && order[k] != late) begin
      repeat ($urandom % 20) @(posedge clk);
      acc.arrive(order[k]);
    end
    repeat (200) @(posedge clk);
    t_release = cyc;
    if (part[late]) acc.arrive(late);
    pending = 1;
    while (pending) begin
      @(posedge clk);
      pending = 0;
      for (int p = 0; p < NP; p++)
        if (part[p] && acc.mem[p][int'(SYNC_BASE) >> 5][16:0] != {1'b1, 16'(id)}) pending = 1;
    end
    t_done = cyc;
  endtask

  int t0, t1;
  int p2p_sent = 0;
  logic [NP-1:0] tmp;

  initial begin
    cfg_we = 0; cfg_run = 0; cfg_sync_we = 0; cfg_addr = '0; cfg_instr = '0; cfg_len = '0;
    cfg_sync_port = '0; cfg_sync_addr = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // synchronisation addresses
    for (int p = 0; p < NP; p++) begin
      cfg_sync_we <= 1; cfg_sync_port <= 4'(p); cfg_sync_addr <= SYNC_BASE;
      @(posedge clk);
    end
    cfg_sync_we <= 0;
    // program
    begin
      instr_t prog [7];
      prog[0] = mk(1, 28*4096, 8'hFF, 8'hFF, 1'b0, 64, 48'h0);
      prog[1] = mk(2, 16384,   8'hFF, 8'hFF, 1'b1, 64, 48'h0);
      prog[2] = mk(0, 0,       8'h00, 8'h00, 1'b0, 0,  SCALE_BASE);
      prog[3] = mk(3, 4352,    8'hFF, 8'h01, 1'b0, 64, 48'h0);
      prog[4] = mk(4, 8192,    8'h0F, 8'h0F, 1'b1, 128, 48'h0);
      prog[5] = mk(0, 0,       8'h00, 8'h00, 1'b0, 0,  SCALE_BASE);
      prog[6] = mk(5, 28*4096, 8'hFF, 8'hFF, 1'b0, 64, 48'h0);
      for (int s = 0; s < 7; s++) begin
        cfg_we <= 1; cfg_addr <= 4'(s); cfg_instr <= prog[s];
        @(posedge clk);
      end
      cfg_we <= 0; cfg_len <= 5'd7; cfg_run <= 1;
    end

    // ---------------- A: BF16 All-Reduce, 112 KB, with regular traffic 0 -> 1
    prep_bf16(28*4096, 8'hFF);
    fork
      run_op(1, 8'hFF, 5, t0, t1);
      begin
        repeat (300) @(posedge clk);
        for (int k = 0; k < 24; k++) begin
          acc.p2p(0, 1, P2P_BASE + 48'(32*k), {8{32'hC0DE0000 + 32'(k)}});
          p2p_sent++;
          repeat (20) @(posedge clk);
        end
      end
    join
    begin
      int bad = 0;
      for (int p = 0; p < NP; p++)
        for (int e = 0; e < 28*4096/2; e++)
          if (rd16(p, 2*e) !== exp16[0][e]) begin
            bad++;
            if (bad < 5) $display("A mismatch p%0d e%0d got %h exp %h", p, e, rd16(p, 2*e), exp16[0][e]);
          end
      check(bad == 0, "A: BF16 All-Reduce results");
      for (int p = 0; p < NP; p++) check(rd16(p, 28*4096) == 16'h1234, "A: no write past length");
      // rate: 28 waves * 32 packets * 5 flits at one flit per cycle
      $display("A: %0d cycles from last arrival to completion (link bound %0d)", t1 - t0, 28*32*6);
      check((t1 - t0) * 4 <= 28*32*6 * 5, "A: All-Reduce within 1.25x of the link bound");
    end
    repeat (100) @(posedge clk);
    for (int k = 0; k < 24; k++)
      check(acc.mem[1][(int'(P2P_BASE) >> 5) + k] == {8{32'hC0DE0000 + 32'(k)}}, "regular forwarding data");
    check(acc.wr_rsp_seen[0] >= 24, "regular forwarding responses");

    // ---------------- B: quantized All-Reduce, BlockSize 64, 16 KB
    prep_quant(16384, 64, 8'hFF);
    run_op(2, 8'hFF, 2, t0, t1);
    begin
      int bad = 0;
      for (int p = 0; p < NP; p++) begin
        for (int e = 0; e < 16384; e++) if (rd8(p, e) !== expq[e]) begin
          bad++;
          if (bad < 5) $display("B mismatch p%0d e%0d got %h exp %h", p, e, rd8(p, e), expq[e]);
        end
        for (int b = 0; b < 16384/64; b++) if (rd16(p, int'(SCALE_BASE) + 2*b) !== exps[b]) begin
          bad++;
          if (bad < 5) $display("B scale mismatch p%0d b%0d got %h exp %h", p, b, rd16(p, int'(SCALE_BASE) + 2*b), exps[b]);
        end
      end
      check(bad == 0, "B: quantized All-Reduce data and scales");
      $display("B: %0d cycles", t1 - t0);
    end

    // ---------------- C: Reduce to GPU 0, 4352 bytes
    prep_bf16(4352, 8'hFF);
    begin
      logic [15:0] keep1;
      keep1 = rd16(1, 0);
      run_op(3, 8'hFF, 7, t0, t1);
      begin
        int bad = 0;
        for (int e = 0; e < 4352/2; e++) if (rd16(0, 2*e) !== exp16[0][e]) bad++;
        check(bad == 0, "C: Reduce result at destination");
        check(rd16(1, 0) == keep1, "C: non-destination memory untouched");
        check(rd16(0, 4352) == 16'h1234, "C: no write past length");
      end
    end

    // ---------------- D: quantized All-Reduce on GPUs 0..3, BlockSize 128
    prep_quant(8192, 128, 8'h0F);
    begin
      logic [7:0] keep7;
      keep7 = rd8(7, 5);
      run_op(4, 8'h0F, 0, t0, t1);
      begin
        int bad = 0;
        for (int p = 0; p < 4; p++) begin
          for (int e = 0; e < 8192; e++) if (rd8(p, e) !== expq[e]) bad++;
          for (int b = 0; b < 8192/128; b++) if (rd16(p, int'(SCALE_BASE) + 2*b) !== exps[b]) bad++;
        end
        check(bad == 0, "D: 4-GPU quantized All-Reduce");
        check(rd8(7, 5) == keep7, "D: non-participant untouched");
      end
    end

    // ---------------- E: BF16 All-Reduce, 112 KB, GPU 3 answering reads slowly
    prep_bf16(28*4096, 8'hFF);
    acc.extra_lat[3] = 1500;
    run_op(5, 8'hFF, 6, t0, t1);
    acc.extra_lat[3] = 0;
    begin
      int bad = 0;
      for (int p = 0; p < NP; p++)
        for (int e = 0; e < 28*4096/2; e++) if (rd16(p, 2*e) !== exp16[0][e]) bad++;
      check(bad == 0, "E: BF16 All-Reduce with a slow GPU");
      $display("E: %0d cycles", t1 - t0);
    end

    // ---------------- mechanisms
    repeat (200) @(posedge clk);
    $display("events: defer=%0d barrier_wait=%0d credit_stall=%0d ooo=%0d conflicts=%0d done=%0d",
             n_defer, n_barwait, n_credit, acc.ooo_count, n_conf, n_done);
    check(n_defer > 0,        "wave deferred for lack of free entries");
    check(n_barwait > 0,      "barrier waited for a late GPU");
    check(n_credit > 0,       "readout stalled on output credit");
    check(acc.ooo_count > 0,  "responses returned out of order");
    check(n_conf > 0,         "egress round-robin between ISA and switch traffic");
    check(n_done == 5,        "five instructions completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
