// reduction_unit: tree-based reduction of one flit from every wave table.
//
// N operands of LANES BF16 values each are summed lane by lane by a balanced binary adder
// tree, one pipeline register per tree level, so the latency is log2(N) cycles at one flit
// per cycle. The tree order is fixed, which makes the floating-point result reproducible.
// Besides the full N-input sum the unit exposes the sums of the two halves (inputs 0..N/2-1
// and N/2..N-1), delayed to the same latency: with N = 8 these are the two 4-input computing
// units and the 2-input unit that joins them, which lets the same adders serve one TP8 or two
// TP4 All-Reduce operations. Operands of non-participating accelerators are driven with zero
// by the caller. Tree structure and the TP4/TP8 split follow the paper; BF16 adders are this
// design's choice of arithmetic. N must be a power of two, at least 2.
module reduction_unit
  import scin_pkg::*;
  import scin_fp_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic [N-1:0][LANES-1:0][15:0]       in_ops,
  output logic                                out_valid,
  output logic [LANES-1:0][15:0]              sum_all,
  output logic [1:0][LANES-1:0][15:0]         sum_half
);
  localparam int L = $clog2(N);

  // lvl[l] holds N >> l partial sums
  logic [N-1:0][LANES-1:0][15:0] lvl [L+1];
  logic [L:0] vld;
  logic [1:0][LANES-1:0][15:0] half_q;

  assign lvl[0] = in_ops;
  assign vld[0] = in_valid;

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < (N >> l); i++)
        for (int j = 0; j < LANES; j++)
          lvl[l][i][j] <= bf16_add(lvl[l-1][2*i][j], lvl[l-1][2*i+1][j]);
      for (int i = (N >> l); i < N; i++)
        lvl[l][i] <= '0;
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vld[l] <= 1'b0;
      else        vld[l] <= vld[l-1];
  end

  always_ff @(posedge clk) half_q <= {lvl[L-1][1], lvl[L-1][0]};

  assign out_valid = vld[L];
  assign sum_all   = lvl[L][0];
  assign sum_half  = half_q;

endmodule
