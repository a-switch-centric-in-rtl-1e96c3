// sync_fifo: single-clock first-in first-out queue with valid/ready handshakes on both sides.
//
// Used for every transport-layer queue of a switch port (ISA and switch Rx/Tx queues) and for
// the small staging queues inside the accelerator. Storage is a DEPTH-entry array with read
// and write pointers; the head entry is presented combinationally (out_valid means not empty),
// so an entry written in one cycle can leave in the next. count reports occupancy. Depths are
// this design's choice; the prototype uses credit-based flow control on its link buffers,
// which valid/ready stands in for here.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  T                         in_data,
  input  logic                     in_valid,
  output logic                     in_ready,
  output T                         out_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + {{($clog2(DEPTH+1)-1){1'b0}}, push} - {{($clog2(DEPTH+1)-1){1'b0}}, pop};
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

endmodule
