// tb_wave_table: a reduced table (4 entries of 16 data flits + 2 scale flits, 4-flit packets).
// Entries are allocated with their addresses and flit counts, then read-response packets for
// all entries arrive in a random order, interleaved with write-response headers. Checks that
// each entry stays WAITING until its last expected flit and then turns READY, that entries
// expecting nothing are READY at once, that write responses pulse wr_rsp once each, that every
// data and scale flit reads back from where its tag placed it (one-cycle read latency), that
// the start and scale addresses are reported, and that freeing returns an entry to IDLE.
module tb_wave_table;
  import scin_pkg::*;
  localparam int WAVES = 4, DF = 16, SF = 2, PF = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_en, rx_valid, rx_ready, wr_rsp, rd_en, free_en;
  logic [1:0] alloc_id, rd_id, info_id, free_id;
  logic [ADDR_W-1:0] alloc_addr, alloc_saddr, info_addr, info_saddr;
  logic [8:0] alloc_expect;
  flit_t rx_flit;
  wave_state_t [WAVES-1:0] state;
  logic [3:0] rd_flit;
  logic [0:0] rd_sflit;
  logic [FLIT_W-1:0] rd_data, rd_scale;
  int checks = 0, failures = 0;

  wave_table #(.WAVES(WAVES), .DATA_FLITS(DF), .SCALE_FLITS(SF), .PKT_FLITS(PF)) dut (.*);

  logic [FLIT_W-1:0] dref [WAVES][DF];
  logic [FLIT_W-1:0] sref [WAVES][SF];
  int expect_n [WAVES], recv_n [WAVES];
  flit_t stream [$];
  int n_wr = 0, n_pulse = 0, cur_e = 0;
  typedef struct { int e; bit sc; int pk; } pkt_t;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && wr_rsp) n_pulse++;

  task automatic round(int r);
    pkt_t pk [$];
    // allocate: entry 3 expects nothing (e.g. a non-source accelerator), entry 2 no scales
    for (int e = 0; e < WAVES; e++) begin
      expect_n[e] = (e == 3) ? 0 : (e == 2) ? DF : DF + SF;
      recv_n[e] = 0;
      @(negedge clk);
      alloc_en = 1; alloc_id = 2'(e); alloc_addr = {$urandom, $urandom}; alloc_saddr = {$urandom, $urandom};
      alloc_expect = 9'(expect_n[e]);
      @(negedge clk);
      alloc_en = 0; info_id = 2'(e);
      #1;
      checks += 3;
      if (info_addr !== alloc_addr || info_saddr !== alloc_saddr) begin failures++; $display("info addr entry %0d", e); end
      if (state[e] !== ((e == 3) ? WS_READY : WS_WAITING)) begin failures++; $display("state after alloc entry %0d: %0d", e, state[e]); end
      if (r > 0 && int'(info_id) != e) failures++;
    end
    for (int e = 0; e < 3; e++) begin
      for (int p = 0; p < DF / PF; p++) pk.push_back('{e, 0, p});
      if (e != 2) pk.push_back('{e, 1, 0});
    end
    pk.shuffle();
    foreach (pk[i]) begin
      hdr_t h;
      int nf;
      h = '0; h.typ = MSG_RD_RSP; h.inc = 1'b1;
      h.tag = pk[i].sc ? {1'b1, 7'(pk[i].e), 8'd0} : {1'b0, 7'(pk[i].e), 8'(pk[i].pk)};
      nf = pk[i].sc ? SF : PF;
      stream.push_back(make_hdr_flit(h, 1'b0));
      for (int k = 0; k < nf; k++) begin
        flit_t f;
        f.hdr = 1'b0; f.last = (k == nf - 1);
        for (int w = 0; w < 8; w++) f.data[32*w +: 32] = $urandom;
        if (pk[i].sc) sref[pk[i].e][k] = f.data; else dref[pk[i].e][pk[i].pk * PF + k] = f.data;
        stream.push_back(f);
      end
      if ($urandom % 3 == 0) begin
        h.typ = MSG_WR_RSP; h.tag = 16'($urandom);
        stream.push_back(make_hdr_flit(h, 1'b1));
        n_wr++;
      end
    end
    while (stream.size() != 0) begin
      flit_t f;
      @(negedge clk);
      f = stream.pop_front();
      rx_valid = $urandom % 4 != 0;
      rx_flit = f;
      if (!rx_valid) stream.push_front(f);
      @(posedge clk);
      #1;
      if (rx_valid && f.hdr) cur_e = int'(flit_hdr(f).tag[14:8]);
      if (rx_valid && !f.hdr) recv_n[cur_e]++;
      rx_valid = 0;
      for (int e = 0; e < 3; e++) begin
        checks++;
        if (state[e] !== ((recv_n[e] == expect_n[e]) ? WS_READY : WS_WAITING)) begin
          failures++; $display("entry %0d state %0d after %0d of %0d flits", e, state[e], recv_n[e], expect_n[e]);
        end
      end
    end
    // read back everything
    for (int e = 0; e < 3; e++)
      for (int i = 0; i < DF; i++) begin
        @(negedge clk);
        rd_en = 1; rd_id = 2'(e); rd_flit = 4'(i); rd_sflit = 1'(i % SF);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_data !== dref[e][i]) begin failures++; $display("data entry %0d flit %0d", e, i); end
        if (e != 2) begin
          checks++;
          if (rd_scale !== sref[e][i % SF]) begin failures++; $display("scale entry %0d flit %0d", e, i % SF); end
        end
      end
    for (int e = 0; e < WAVES; e++) begin
      @(negedge clk);
      free_en = 1; free_id = 2'(e);
      @(negedge clk);
      free_en = 0;
      checks++;
      if (state[e] !== WS_IDLE) begin failures++; $display("entry %0d not idle after free", e); end
    end
  endtask

  initial begin
    alloc_en = 0; rx_valid = 0; rx_flit = '0; rd_en = 0; free_en = 0; alloc_id = '0; rd_id = '0;
    info_id = '0; free_id = '0; alloc_addr = '0; alloc_saddr = '0; alloc_expect = '0; rd_flit = '0; rd_sflit = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 20; r++) round(r);
    repeat (3) @(posedge clk);
    checks += 2;
    if (n_pulse != n_wr) begin failures++; $display("wr_rsp pulses %0d exp %0d", n_pulse, n_wr); end
    if (rx_ready !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
