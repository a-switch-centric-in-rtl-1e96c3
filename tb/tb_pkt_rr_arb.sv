// tb_pkt_rr_arb: three sources send packets of random length (1..4 flits) into the arbiter
// under random output back-pressure. Checks that packets leave whole and in per-source order,
// that every flit arrives, and that when all sources keep requesting, grants rotate
// round-robin (no source gets two packets while another waits).
module tb_pkt_rr_arb;
  import scin_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  flit_t [N-1:0] in_flit;
  logic  [N-1:0] in_valid, in_ready;
  flit_t out_flit;
  logic out_valid, out_ready, conflict;
  int checks = 0, failures = 0;

  pkt_rr_arb #(.N(N)) dut (.*);

  flit_t srcq [N][$];
  int    nxt_seq [N];
  int    cur_src, grants [N], last_src, n_conf;
  bit    in_pkt;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // flit payload: {source, sequence number, position, packet length}
  initial begin
    for (int s = 0; s < N; s++) begin
      int seq;
      seq = 0;
      for (int k = 0; k < 200; k++) begin
        int len = 1 + int'($urandom % 4);
        for (int i = 0; i < len; i++) begin
          flit_t f;
          f = '0;
          f.hdr = (i == 0); f.last = (i == len - 1);
          f.data[63:0] = {16'(s), 16'(seq), 16'(i), 16'(len)};
          srcq[s].push_back(f);
          seq++;
        end
      end
    end
  end

  always_comb
    for (int s = 0; s < N; s++) begin
      in_valid[s] = srcq[s].size() != 0;
      in_flit[s]  = in_valid[s] ? srcq[s][0] : '0;
    end

  initial begin
    out_ready = 0; in_pkt = 0; last_src = -1; n_conf = 0;
    for (int s = 0; s < N; s++) begin nxt_seq[s] = 0; grants[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (srcq[0].size() + srcq[1].size() + srcq[2].size() != 0) begin
      @(negedge clk);
      out_ready = ($urandom % 4) != 0;
      if (conflict) n_conf++;
      @(posedge clk);
      if (out_valid && out_ready) begin
        int s, seq;
        s = int'(out_flit.data[63:48]); seq = int'(out_flit.data[47:32]);
        checks++;
        if (seq != nxt_seq[s]) begin failures++; $display("order: src %0d seq %0d exp %0d", s, seq, nxt_seq[s]); end
        nxt_seq[s] = seq + 1;
        if (in_pkt) begin
          checks++;
          if (s != cur_src) begin failures++; $display("packet interleaved"); end
        end else begin
          // round-robin: with all sources busy, the next source after the last one wins
          if (last_src >= 0 && srcq[0].size() > 2 && srcq[1].size() > 2 && srcq[2].size() > 2) begin
            checks++;
            if (s != (last_src + 1) % N) begin failures++; $display("rr: got %0d after %0d", s, last_src); end
          end
          cur_src = s;
          grants[s]++;
        end
        in_pkt = !out_flit.last;
        if (out_flit.last) last_src = s;
        void'(srcq[s].pop_front());
      end
    end
    for (int s = 0; s < N; s++) begin
      checks++;
      if (grants[s] != 200) begin failures++; $display("src %0d packets %0d", s, grants[s]); end
    end
    checks++;
    if (n_conf == 0) begin failures++; $display("no conflict seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
