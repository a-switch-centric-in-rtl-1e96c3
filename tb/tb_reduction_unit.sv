// tb_reduction_unit: streams random operand sets (with gaps in in_valid) through the 8-input
// BF16 adder tree and checks, per lane, the full sum and both half sums against a reference
// that adds in the same tree order with one BF16 rounding per adder, the log2(8) = 3 cycle
// latency, and that zero operands (non-participating accelerators) leave the sum unchanged.
module tb_reduction_unit;
  import scin_pkg::*;
  import ref_fp_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [N-1:0][LANES-1:0][15:0] in_ops;
  logic [LANES-1:0][15:0] sum_all;
  logic [1:0][LANES-1:0][15:0] sum_half;
  int checks = 0, failures = 0;

  reduction_unit #(.N(N)) dut (.*);

  typedef struct { logic [LANES-1:0][15:0] all; logic [1:0][LANES-1:0][15:0] half; int t; } exp_t;
  exp_t expq [$];
  int cyc = 0, n_out = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic exp_t model(logic [N-1:0][LANES-1:0][15:0] ops);
    exp_t e;
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] s01, s23, s45, s67;
      s01 = ref_add(ops[0][l], ops[1][l]); s23 = ref_add(ops[2][l], ops[3][l]);
      s45 = ref_add(ops[4][l], ops[5][l]); s67 = ref_add(ops[6][l], ops[7][l]);
      e.half[0][l] = ref_add(s01, s23);
      e.half[1][l] = ref_add(s45, s67);
      e.all[l]     = ref_add(e.half[0][l], e.half[1][l]);
    end
    return e;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; in_ops = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int k = 0; k < N; k++)
        for (int l = 0; l < LANES; l++)
          in_ops[k][l] = (n % 5 == 0 && k >= 4) ? 16'h0000 : rand_bf(120, 127 + (n % 8));
      if (in_valid) begin
        exp_t e;
        e = model(in_ops);
        e.t = cyc + 3;
        expq.push_back(e);
        if (n % 5 == 0) begin
          checks++;
          if (e.all != e.half[0]) begin failures++; $display("model: zero half changed sum"); end
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0 || n_out == 0) begin failures++; $display("missing outputs: %0d", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    n_out++;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (e.t != cyc) begin failures++; $display("latency: out at %0d exp %0d", cyc, e.t); end
      for (int l = 0; l < LANES; l++) begin
        checks += 3;
        if (sum_all[l] !== e.all[l]) begin failures++; if (failures < 10) $display("lane %0d all %h exp %h", l, sum_all[l], e.all[l]); end
        if (sum_half[0][l] !== e.half[0][l]) begin failures++; if (failures < 10) $display("lane %0d half0 %h exp %h", l, sum_half[0][l], e.half[0][l]); end
        if (sum_half[1][l] !== e.half[1][l]) begin failures++; if (failures < 10) $display("lane %0d half1 %h exp %h", l, sum_half[1][l], e.half[1][l]); end
      end
    end
  end
endmodule
