// instr_buffer: ISA instruction buffer, loaded over the configuration bus.
//
// Software preloads the instruction descriptors of a captured GPU graph once; the buffer then
// replays them. cfg_we writes cfg_instr into slot cfg_addr; cfg_len sets how many slots form
// the program and cfg_run starts fetching. The wave controller sees the instruction at the
// fetch pointer (instr, instr_valid) and, with `advance`, moves to the next slot (two slots
// with advance_two, past the scale-address slot of a quantized instruction), wrapping
// to slot 0 after the last one so that the next graph replay runs the same program. The
// preloaded-descriptor model and the configuration bus are the paper's; the depth, the wrap
// and the register interface are this design's.
module instr_buffer
  import scin_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [$clog2(DEPTH)-1:0]   cfg_addr,
  input  instr_t                     cfg_instr,
  input  logic [$clog2(DEPTH+1)-1:0] cfg_len,
  input  logic                       cfg_run,
  input  logic                       advance,
  input  logic                       advance_two,  // with advance: skip the scale-address slot
  output instr_t                     instr,
  output instr_t                     instr_next,   // the slot after instr (scale addresses)
  output logic                       instr_valid
);
  localparam int AW = $clog2(DEPTH);
  instr_t        mem [DEPTH];
  logic [AW-1:0] pc, pc_next;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return ({1'b0, p} + 1'b1 >= (AW+1)'(cfg_len)) ? '0 : p + 1'b1;
  endfunction

  assign pc_next     = inc(pc);
  assign instr       = mem[pc];
  assign instr_next  = mem[pc_next];
  assign instr_valid = cfg_run && (cfg_len != '0);

  always_ff @(posedge clk) if (cfg_we) mem[cfg_addr] <= cfg_instr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     pc <= '0;
    else if (!cfg_run)              pc <= '0;
    else if (advance && instr_valid) pc <= advance_two ? inc(pc_next) : pc_next;
  end

endmodule
