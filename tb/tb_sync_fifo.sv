// tb_sync_fifo: random push/pop traffic against a queue model; checks order, data, count,
// full/empty flags and that a pushed entry is visible the next cycle.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [15:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [15:0] q [$];

  sync_fifo #(.T(logic [15:0]), .DEPTH(5)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = 16'($urandom);
      checks++;
      if (count != 4'(q.size()) || in_ready != (q.size() < 5) || out_valid != (q.size() > 0)) begin
        failures++; $display("flag mismatch count=%0d model=%0d", count, q.size());
      end
      if (out_valid) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data mismatch %h %h", out_data, q[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
