// tb_dequant_unit: drives random INT8 flits and BF16 scales (plus corner cases: zero scale,
// -128, +127, large and tiny scales) into the combinational dequantizer and compares all 32
// lanes with a double-precision reference product rounded once to BF16.
module tb_dequant_unit;
  import scin_pkg::*;
  import ref_fp_pkg::*;
  logic [FLIT_W-1:0]      q_flit;
  logic [15:0]            scale;
  logic [LANES-1:0][15:0] deq;
  int checks = 0, failures = 0;

  dequant_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < FLIT_W / 32; i++) q_flit[32*i +: 32] = $urandom;
      case (n % 6)
        0:       scale = 16'h0000;
        1:       scale = rand_bf(1, 10);       // products near the bottom of the range
        2:       scale = rand_bf(240, 247);    // products near the top of the range
        default: scale = rand_bf(110, 130);
      endcase
      if (n % 7 == 0) begin q_flit[7:0] = 8'h80; q_flit[15:8] = 8'h7F; q_flit[23:16] = 8'h00; end
      #1;
      for (int l = 0; l < LANES; l++) begin
        logic [15:0] e;
        e = ref_mul(q_flit[8*l +: 8], scale);
        checks++;
        if (deq[l] !== e) begin
          failures++;
          if (failures < 10) $display("lane %0d q=%0d s=%h got %h exp %h", l, $signed(q_flit[8*l +: 8]), scale, deq[l], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
