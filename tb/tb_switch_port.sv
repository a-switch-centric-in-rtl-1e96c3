// tb_switch_port: receive side - packets with random INC flag/type from the link must appear
// unchanged and in order in the matching queue (ISA request, ISA response or switch); transmit
// side - packets offered at the same time by the ISA request, ISA response and switch Tx
// queues must all leave on the link, whole, in per-queue order, with the round-robin egress
// arbiter seeing contention.
module tb_switch_port;
  import scin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t link_rx_flit, link_tx_flit, isa_rx_req_flit, isa_rx_rsp_flit, isa_tx_req_flit, isa_tx_rsp_flit, sw_rx_flit, sw_tx_flit;
  logic link_rx_valid, link_rx_ready, link_tx_valid, link_tx_ready;
  logic isa_rx_req_valid, isa_rx_req_ready, isa_rx_rsp_valid, isa_rx_rsp_ready;
  logic isa_tx_req_valid, isa_tx_req_ready, isa_tx_rsp_valid, isa_tx_rsp_ready;
  logic sw_rx_valid, sw_rx_ready, sw_tx_valid, sw_tx_ready, egress_conflict;
  int checks = 0, failures = 0, n_conf = 0;

  switch_port #(.QDEPTH(4)) dut (.*);

  flit_t exp_q [3][$];    // expected per receive queue: 0 sw, 1 isa req, 2 isa rsp
  flit_t rxsrc [$];
  flit_t txsrc [3][$];    // 0 isa req, 1 isa rsp, 2 sw
  flit_t txexp [3][$];
  int    tx_owner;
  logic  f_lrx, f_tq, f_ts, f_sw, f_srx, f_irq, f_irs, f_ltx, c_conf;
  flit_t c_srx, c_irq, c_irs, c_ltx;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void gen(ref flit_t q [$], input int k, input hdr_t h, input int len);
    for (int i = 0; i < len; i++)
      q.push_back((i == 0) ? make_hdr_flit(h, len == 1) : '{hdr: 1'b0, last: (i == len - 1), data: 256'(k * 16 + i)});
  endfunction

  initial begin
    for (int k = 0; k < 300; k++) begin
      hdr_t h;
      int len, want;
      flit_t tmp [$];
      h = '0; h.inc = $urandom % 2; h.typ = msg_t'($urandom % 4); h.tag = 16'(k);
      want = !h.inc ? 0 : (h.typ == MSG_RD_REQ || h.typ == MSG_WR_REQ) ? 1 : 2;
      len = 1 + int'($urandom % 4);
      tmp.delete();
      gen(tmp, k, h, len);
      foreach (tmp[i]) begin rxsrc.push_back(tmp[i]); exp_q[want].push_back(tmp[i]); end
    end
    for (int s = 0; s < 3; s++)
      for (int k = 0; k < 100; k++) begin
        hdr_t h;
        flit_t tmp [$];
        h = '0; h.tag = 16'(s * 1000 + k);
        tmp.delete();
        gen(tmp, s * 1000 + k, h, 1 + int'($urandom % 4));
        foreach (tmp[i]) begin txsrc[s].push_back(tmp[i]); txexp[s].push_back(tmp[i]); end
      end
  end

  always_comb begin
    link_rx_valid    = rxsrc.size() != 0;
    link_rx_flit     = link_rx_valid ? rxsrc[0] : '0;
    isa_tx_req_valid = txsrc[0].size() != 0;
    isa_tx_req_flit  = isa_tx_req_valid ? txsrc[0][0] : '0;
    isa_tx_rsp_valid = txsrc[1].size() != 0;
    isa_tx_rsp_flit  = isa_tx_rsp_valid ? txsrc[1][0] : '0;
    sw_tx_valid      = txsrc[2].size() != 0;
    sw_tx_flit       = sw_tx_valid ? txsrc[2][0] : '0;
  end

  initial begin
    int idle = 0;
    sw_rx_ready = 0; isa_rx_req_ready = 0; isa_rx_rsp_ready = 0; link_tx_ready = 0; tx_owner = -1;
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1;
    while (idle < 50) begin
      @(negedge clk);
      sw_rx_ready = $urandom % 2; isa_rx_req_ready = $urandom % 2; isa_rx_rsp_ready = $urandom % 2;
      link_tx_ready = ($urandom % 4) != 0;
      #2;
      f_lrx = link_rx_valid && link_rx_ready; f_tq = isa_tx_req_valid && isa_tx_req_ready;
      f_ts = isa_tx_rsp_valid && isa_tx_rsp_ready; f_sw = sw_tx_valid && sw_tx_ready;
      f_srx = sw_rx_valid && sw_rx_ready; f_irq = isa_rx_req_valid && isa_rx_req_ready;
      f_irs = isa_rx_rsp_valid && isa_rx_rsp_ready; f_ltx = link_tx_valid && link_tx_ready;
      c_srx = sw_rx_flit; c_irq = isa_rx_req_flit; c_irs = isa_rx_rsp_flit; c_ltx = link_tx_flit;
      c_conf = egress_conflict;
      @(posedge clk);
      #1;
      if (c_conf) n_conf++;
      idle++;
      if (f_lrx) begin void'(rxsrc.pop_front()); idle = 0; end
      if (f_tq) void'(txsrc[0].pop_front());
      if (f_ts) void'(txsrc[1].pop_front());
      if (f_sw) void'(txsrc[2].pop_front());
      if (f_srx) begin
        checks++; idle = 0;
        if (exp_q[0].size() == 0 || c_srx != exp_q[0].pop_front()) begin failures++; $display("sw rx mismatch"); end
      end
      if (f_irq) begin
        checks++; idle = 0;
        if (exp_q[1].size() == 0 || c_irq != exp_q[1].pop_front()) begin failures++; $display("isa req mismatch"); end
      end
      if (f_irs) begin
        checks++; idle = 0;
        if (exp_q[2].size() == 0 || c_irs != exp_q[2].pop_front()) begin failures++; $display("isa rsp mismatch"); end
      end
      if (f_ltx) begin
        int s;
        idle = 0;
        s = int'(c_ltx.data[15:0]) / 16;   // payload flits carry k*16+i, k = s*1000+n
        if (c_ltx.hdr) s = int'(flit_hdr(c_ltx).tag) / 1000;
        else s = s / 1000;
        if (tx_owner >= 0 && s != tx_owner) begin failures++; $display("egress interleaved"); end
        checks++;
        if (txexp[s].size() == 0 || c_ltx != txexp[s].pop_front()) begin failures++; $display("egress mismatch src %0d", s); end
        tx_owner = c_ltx.last ? -1 : s;
      end
    end
    for (int s = 0; s < 3; s++) begin
      checks += 2;
      if (exp_q[s].size() != 0) begin failures++; $display("rx queue %0d missing %0d flits", s, exp_q[s].size()); end
      if (txexp[s].size() != 0) begin failures++; $display("tx queue %0d missing %0d flits", s, txexp[s].size()); end
    end
    checks++;
    if (n_conf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
