// tb_instr_buffer: loads a program of random instructions, runs it and steps through it with
// single and double (quantized instruction + scale slot) advances, checking the presented
// instruction and the following slot against a model of the program counter, including the
// wrap-around replay at cfg_len, holding when advance is low, and reset of the counter when
// the run flag drops.
module tb_instr_buffer;
  import scin_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we, cfg_run, advance, advance_two, instr_valid;
  logic [$clog2(DEPTH)-1:0] cfg_addr;
  logic [$clog2(DEPTH+1)-1:0] cfg_len;
  instr_t cfg_instr, instr, instr_next;
  instr_t prog [DEPTH];
  int checks = 0, failures = 0;

  instr_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc, len;
    cfg_we = 0; cfg_run = 0; advance = 0; advance_two = 0; cfg_addr = '0; cfg_len = '0; cfg_instr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      len = (r == 0) ? DEPTH : 1 + int'($urandom % DEPTH);
      @(negedge clk);
      cfg_run = 0;
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        prog[i] = '0;
        for (int w = 0; w < 8; w++) prog[i].addr[w] = {$urandom, $urandom};
        prog[i].id = 16'(r * 100 + i); prog[i].length = {$urandom, $urandom};
        prog[i].src_mask = 8'($urandom); prog[i].dst_mask = 8'($urandom);
        prog[i].quant_en = $urandom % 2; prog[i].block_size = 16'($urandom);
        cfg_we = 1; cfg_addr = 4'(i); cfg_instr = prog[i];
      end
      @(negedge clk);
      cfg_we = 0; cfg_len = 5'(len);
      checks++;
      if (instr_valid) begin failures++; $display("valid while not running"); end
      cfg_run = 1;
      pc = 0;
      for (int s = 0; s < 200; s++) begin
        @(negedge clk);
        checks += 3;
        if (!instr_valid) begin failures++; $display("not valid while running"); end
        if (instr !== prog[pc]) begin failures++; $display("instr: pc %0d id %0d", pc, instr.id); end
        if (instr_next !== prog[(pc + 1) % len]) begin failures++; $display("instr_next: pc %0d", pc); end
        advance = $urandom % 2; advance_two = $urandom % 2;
        @(posedge clk);
        if (advance) pc = (pc + (advance_two ? 2 : 1)) % len;
        if (advance && advance_two && len == 1) pc = 0;
        #1 advance = 0;
      end
      @(negedge clk);
      cfg_run = 0;
      @(negedge clk);
      cfg_run = 1;
      #1;
      checks++;
      if (instr !== prog[0]) begin failures++; $display("pc not reset by run=0"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
