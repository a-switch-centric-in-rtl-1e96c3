// dequant_unit: dequantization stage of the in-switch accelerator's datapath.
//
// Takes one 32-byte flit of INT8 activations read from a wave table together with the BF16
// scale factor of the block these elements belong to, and returns the 32 values q_i * s as
// BF16 (a 512-bit lane vector, lane i = byte i). Because a block holds a power-of-two number
// of elements of at least 64, all 32 elements of a flit share one scale. Purely
// combinational; the accelerator registers its output through the reduction tree. The
// product is rounded to nearest even (scin_fp_pkg::bf16_mul_i8). The paper gives the stage's
// function (scale-aware dequantization before reduction); its arithmetic format is this
// design's choice.
module dequant_unit
  import scin_pkg::*;
  import scin_fp_pkg::*;
(
  input  logic [FLIT_W-1:0]          q_flit,
  input  logic [15:0]                scale,
  output logic [LANES-1:0][15:0]     deq
);
  always_comb
    for (int i = 0; i < LANES; i++)
      deq[i] = bf16_mul_i8($signed(q_flit[8*i +: 8]), scale);
endmodule
