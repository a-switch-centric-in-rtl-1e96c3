// tb_switch_core: four inputs send packets (1..4 flits) to random destinations while the
// outputs apply random back-pressure. Every packet must arrive whole at the port its header
// names, never interleaved with another packet, and in order per source-destination pair.
module tb_switch_core;
  import scin_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t [NP-1:0] in_flit, out_flit;
  logic  [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;

  switch_core #(.NUM_PORTS(NP)) dut (.*);

  flit_t src [NP][$];
  flit_t expq [NP][NP][$];      // [dst][src]
  int    owner [NP];
  int    total = 0, got = 0;
  logic [NP-1:0] in_fire, out_fire;
  flit_t [NP-1:0] out_s;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial
    for (int s = 0; s < NP; s++)
      for (int k = 0; k < 150; k++) begin
        hdr_t h;
        int len, d;
        h = '0; d = int'($urandom % NP); h.dst = PORT_W'(d); h.src = PORT_W'(s); h.tag = 16'(k);
        len = 1 + int'($urandom % 4);
        for (int i = 0; i < len; i++) begin
          flit_t f;
          f = (i == 0) ? make_hdr_flit(h, len == 1)
                       : '{hdr: 1'b0, last: (i == len - 1), data: {232'(0), 8'(s), 16'(k * 8 + i)}};
          src[s].push_back(f);
          expq[d][s].push_back(f);
          total++;
        end
      end

  always_comb
    for (int s = 0; s < NP; s++) begin
      in_valid[s] = src[s].size() != 0;
      in_flit[s]  = in_valid[s] ? src[s][0] : '0;
    end

  initial begin
    out_ready = '0;
    for (int o = 0; o < NP; o++) owner[o] = -1;
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1;
    while (got < total) begin
      @(negedge clk);
      for (int o = 0; o < NP; o++) out_ready[o] = ($urandom % 3) != 0;
      #2;
      in_fire = in_valid & in_ready; out_fire = out_valid & out_ready; out_s = out_flit;
      @(posedge clk);
      #1;
      for (int s = 0; s < NP; s++) if (in_fire[s]) void'(src[s].pop_front());
      for (int o = 0; o < NP; o++) if (out_fire[o]) begin
        int s;
        s = out_s[o].hdr ? int'(flit_hdr(out_s[o]).src) : owner[o];
          checks++;
        if (s < 0 || expq[o][s].size() == 0 || out_s[o] != expq[o][s].pop_front()) begin
          failures++; $display("output %0d: unexpected flit s=%0d got hdr%0d last%0d %h  exp hdr%0d last%0d %h", o, s, out_s[o].hdr, out_s[o].last, out_s[o].data[71:0], (s>=0)?expq[o][s][0].hdr:0,(s>=0)?expq[o][s][0].last:0,(s>=0)?expq[o][s][0].data[71:0]:0);
        end
        owner[o] = out_s[o].last ? -1 : s;
        got++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
