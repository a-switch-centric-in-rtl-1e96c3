// tb_quant_unit: streams random BF16 flits through the requantizer with random input gaps and
// output back-pressure, for block sizes of 2 and 4 flits (64 and 128 elements). For every
// block the reference takes the largest magnitude, derives the BF16 scale amax/127 and the
// INT8 values round(x * 127 / amax) in double precision; the test checks every output byte,
// the scale presented with the first flit of each block, and finally the bypass mode, where
// lanes 0..15 pass through unchanged.
module tb_quant_unit;
  import scin_pkg::*;
  import ref_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic quant_en, in_valid, in_ready, out_valid, out_ready, out_scale_valid;
  logic [4:0] block_flits;
  logic [LANES-1:0][15:0] in_data;
  logic [FLIT_W-1:0] out_data;
  logic [15:0] out_scale;
  int checks = 0, failures = 0;

  quant_unit #(.MAX_BLOCK_FLITS(16)) dut (.*);

  typedef struct { logic [FLIT_W-1:0] d; logic sv; logic [15:0] s; } out_t;
  out_t expq [$];
  logic gate;
  logic [LANES-1:0][15:0] srcq [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_blocks(int nblk, int bf, bit q);
    for (int b = 0; b < nblk; b++) begin
      logic [LANES-1:0][15:0] blk [$];
      logic [14:0] amax;
      amax = '0;
      for (int f = 0; f < bf; f++) begin
        logic [LANES-1:0][15:0] v;
        for (int l = 0; l < LANES; l++) begin
          v[l] = (b % 9 == 4) ? 16'h0000 : rand_bf(100, 100 + int'(b % 40));
          if (v[l][14:0] > amax) amax = v[l][14:0];
        end
        blk.push_back(v);
        srcq.push_back(v);
      end
      for (int f = 0; f < bf; f++) begin
        out_t o;
        o.d = '0; o.sv = q && (f == 0); o.s = q ? ref_scale({1'b0, amax}) : 16'h0;
        for (int l = 0; l < LANES; l++)
          if (q) o.d[8*l +: 8] = ref_quant(blk[f][l], {1'b0, amax});
          else if (l < 16) o.d[16*l +: 16] = blk[f][l];
        expq.push_back(o);
      end
    end
  endtask

  always_comb begin
    in_valid = srcq.size() != 0 && gate;
    in_data  = (srcq.size() != 0) ? srcq[0] : '0;
  end
  task automatic run();
    int idle;
    logic fi, fo, sv;
    logic [FLIT_W-1:0] d;
    logic [15:0] s;
    idle = 0;
    while (idle < 100) begin
      @(negedge clk);
      gate = ($urandom % 4) != 0;
      out_ready = ($urandom % 3) != 0;
      #2;
      fi = in_valid && in_ready; fo = out_valid && out_ready; d = out_data; s = out_scale; sv = out_scale_valid;
      @(posedge clk);
      #1;
      idle++;
      if (fi) begin void'(srcq.pop_front()); idle = 0; end
      if (fo) begin
        out_t e;
        idle = 0;
        checks++;
        if (expq.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          e = expq.pop_front();
          if (d !== e.d) begin failures++; if (failures < 10) $display("data mismatch %h exp %h", d, e.d); end
          if (sv !== e.sv || (e.sv && s !== e.s)) begin failures++; if (failures < 10) $display("scale %h/%0d exp %h/%0d", s, sv, e.s, e.sv); end
        end
      end
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
  endtask

  initial begin
    gate = 0; out_ready = 0; quant_en = 1; block_flits = 5'd2;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    make_blocks(150, 2, 1);
    run();
    block_flits = 5'd4;
    make_blocks(80, 4, 1);
    run();
    quant_en = 0;
    make_blocks(20, 4, 0);
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
