// tb_table_manager: random allocate/deallocate traffic against a bitmap model. Checks that the
// lowest free entry is offered, that alloc_ok drops exactly when all WAVES entries are busy,
// that idle_count tracks the model, and that freed entries become allocatable again.
module tb_table_manager;
  localparam int WAVES = 24;
  localparam int IW = $clog2(WAVES);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc, alloc_ok, dealloc;
  logic [IW-1:0] alloc_id, dealloc_id;
  logic [$clog2(WAVES+1)-1:0] idle_count;
  int checks = 0, failures = 0;
  bit busy [WAVES];
  int n_full = 0;

  table_manager #(.WAVES(WAVES)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc = 0; dealloc = 0; dealloc_id = '0;
    foreach (busy[i]) busy[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int lowest, idle, pick;
      @(negedge clk);
      lowest = -1; idle = 0;
      for (int i = WAVES - 1; i >= 0; i--) if (!busy[i]) begin lowest = i; idle++; end
      checks += 3;
      if (alloc_ok != (lowest >= 0)) begin failures++; $display("alloc_ok %0d with %0d idle", alloc_ok, idle); end
      if (lowest >= 0 && int'(alloc_id) != lowest) begin failures++; $display("alloc_id %0d exp %0d", alloc_id, lowest); end
      if (int'(idle_count) != idle) begin failures++; $display("idle_count %0d exp %0d", idle_count, idle); end
      if (lowest < 0) n_full++;
      // bias towards allocation in the first half of each 1000-cycle period to reach "full"
      alloc = ($urandom % 100) < (((n / 500) % 2 == 0) ? 80 : 30);
      pick = int'($urandom % WAVES);
      dealloc = busy[pick] && ($urandom % 2);
      dealloc_id = IW'(pick);
      @(posedge clk);
      if (dealloc) busy[pick] = 0;
      if (alloc && lowest >= 0) busy[lowest] = 1;
    end
    checks++;
    if (n_full == 0) begin failures++; $display("table never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
