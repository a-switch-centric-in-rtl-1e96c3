// table_manager: allocation of wave-table entries.
//
// One wave occupies the same entry index in every wave table of the accelerators taking part,
// so a single occupancy vector serves all tables. alloc returns the lowest free entry
// (alloc_id, valid when alloc_ok) and marks it busy in the same cycle the controller
// requests it; dealloc frees an entry after its data has been read into the reduction unit.
// idle_count tells the controller how many waves may still be injected. Allocate/deallocate
// between the wave controller and the tables is the paper's; lowest-index-first and the
// shared index across tables are this design's.
module table_manager #(
  parameter int WAVES = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       alloc,
  output logic                       alloc_ok,
  output logic [$clog2(WAVES)-1:0]   alloc_id,
  input  logic                       dealloc,
  input  logic [$clog2(WAVES)-1:0]   dealloc_id,
  output logic [$clog2(WAVES+1)-1:0] idle_count
);
  localparam int IW = $clog2(WAVES);
  logic [WAVES-1:0] busy;

  always_comb begin
    alloc_ok = 1'b0;
    alloc_id = '0;
    for (int i = WAVES-1; i >= 0; i--)
      if (!busy[i]) begin
        alloc_ok = 1'b1;
        alloc_id = IW'(i);
      end
    idle_count = '0;
    for (int i = 0; i < WAVES; i++)
      idle_count = idle_count + {{($clog2(WAVES+1)-1){1'b0}}, !busy[i]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else begin
      if (dealloc) busy[dealloc_id] <= 1'b0;
      if (alloc && alloc_ok) busy[alloc_id] <= 1'b1;
    end
  end

endmodule
