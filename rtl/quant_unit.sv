// quant_unit: dynamic block-wise INT8 requantization of reduced results.
//
// Input: reduced flits of 32 BF16 lanes (valid/ready). With quantization enabled, every
// block of BLOCK = block_flits * 32 elements gets its own scale s = amax / 127, amax being the
// block's largest magnitude, and each element becomes q = round(x / s) as INT8. A block can
// only be quantized once it has fully arrived, so the unit holds two block buffers
// (ping-pong): one fills while the other drains, sustaining one flit per cycle with a
// latency of one block. Each output flit carries the 32 INT8 results; the first flit of a
// block also presents the block's BF16 scale (out_scale_valid). With quantization disabled,
// lanes 0..15 (sixteen BF16 results) pass straight through as one flit. Scale from the
// block's maximum magnitude, INT8 and block-wise operation follow the paper; the rounding
// mode and the double buffering are this design's. block_flits must be 2..MAX_BLOCK_FLITS.
module quant_unit
  import scin_pkg::*;
  import scin_fp_pkg::*;
#(
  parameter int MAX_BLOCK_FLITS = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       quant_en,
  input  logic [4:0]                 block_flits,
  input  logic [LANES-1:0][15:0]     in_data,
  input  logic                       in_valid,
  output logic                       in_ready,
  output logic [FLIT_W-1:0]          out_data,
  output logic [15:0]                out_scale,
  output logic                       out_scale_valid,
  output logic                       out_valid,
  input  logic                       out_ready
);
  localparam int BW = $clog2(MAX_BLOCK_FLITS);
  logic [LANES-1:0][15:0] bank [2][MAX_BLOCK_FLITS];
  logic [1:0]    full;
  logic [14:0]   amax [2];
  logic [BW-1:0] fill_cnt, rd_idx;
  logic          wb, rb;
  logic [14:0]   in_max;
  logic          in_fire, out_fire;
  logic [BW-1:0] last_idx;

  assign last_idx = BW'(block_flits - 5'd1);

  always_comb begin
    in_max = '0;
    for (int i = 0; i < LANES; i++)
      if (bf16_mag(in_data[i]) > in_max) in_max = bf16_mag(in_data[i]);
  end

  always_comb begin
    if (quant_en) begin
      in_ready        = !full[wb];
      out_valid       = full[rb];
      out_scale       = bf16_scale(amax[rb]);
      out_scale_valid = full[rb] && (rd_idx == '0);
      for (int i = 0; i < LANES; i++)
        out_data[8*i +: 8] = bf16_quant(bank[rb][rd_idx][i], amax[rb]);
    end else begin
      in_ready        = out_ready;
      out_valid       = in_valid;
      out_scale       = '0;
      out_scale_valid = 1'b0;
      for (int i = 0; i < LANES/2; i++)
        out_data[16*i +: 16] = in_data[i];
    end
  end

  assign in_fire  = quant_en && in_valid && in_ready;
  assign out_fire = quant_en && out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (in_fire) begin
      bank[wb][fill_cnt] <= in_data;
      amax[wb] <= (fill_cnt == '0 || in_max > amax[wb]) ? in_max : amax[wb];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; fill_cnt <= '0; rd_idx <= '0; wb <= 1'b0; rb <= 1'b0;
    end else begin
      if (in_fire) begin
        if (fill_cnt == last_idx) begin
          fill_cnt <= '0;
          wb       <= ~wb;
        end else begin
          fill_cnt <= fill_cnt + 1'b1;
        end
      end
      if (out_fire) begin
        if (rd_idx == last_idx) begin
          rd_idx <= '0;
          rb     <= ~rb;
        end else begin
          rd_idx <= rd_idx + 1'b1;
        end
      end
      for (int b = 0; b < 2; b++) begin
        if (in_fire && fill_cnt == last_idx && wb == b[0]) full[b] <= 1'b1;
        else if (out_fire && rd_idx == last_idx && rb == b[0]) full[b] <= 1'b0;
      end
    end
  end

endmodule
