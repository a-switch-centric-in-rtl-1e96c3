// tb_barrier_manager: four ports send arrival-flag writes (header + one data flit, or a
// header-only write) at random times while their response queues apply random back-pressure.
// Checks that each port's arrived flag rises only after the last flit of its write, that
// ready follows the poll mask, that every write is answered by exactly one write response
// (type WR_RSP, INC set, addressed to the port, tag copied from the request), that clearing
// drops the selected flags, and that an arrival in the same cycle as a clear wins.
module tb_barrier_manager;
  import scin_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t [NP-1:0] rx_flit, rsp_flit;
  logic  [NP-1:0] rx_valid, rx_ready, rsp_valid, rsp_ready, poll_mask, clear_mask, arrived;
  logic ready, clear_en;
  int checks = 0, failures = 0;

  barrier_manager #(.NUM_PORTS(NP)) dut (.*);

  flit_t src [NP][$];
  int    tags [NP][$];
  bit    model [NP];
  int    n_rsp = 0, n_req = 0, n_race = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int p = 0; p < NP; p++) begin
      rx_valid[p] = src[p].size() != 0;
      rx_flit[p]  = rx_valid[p] ? src[p][0] : '0;
    end

  initial begin
    logic [NP-1:0] f_rx, f_rsp;
    flit_t [NP-1:0] c_rx, c_rsp;
    logic c_clr;
    logic [NP-1:0] c_mask;
    rsp_ready = '0; poll_mask = '0; clear_en = 0; clear_mask = '0;
    foreach (model[p]) model[p] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // occasionally queue a new arrival write on a random port
      if (n < 3800 && $urandom % 6 == 0) begin
        int p;
        hdr_t h;
        bit two;
        p = int'($urandom % NP);
        h = '0; h.typ = MSG_WR_REQ; h.inc = 1'b1; h.src = PORT_W'(p); h.tag = 16'($urandom); h.len = 16'd32;
        two = $urandom % 2;
        src[p].push_back(make_hdr_flit(h, !two));
        if (two) src[p].push_back('{hdr: 1'b0, last: 1'b1, data: 256'(n)});
        tags[p].push_back(int'(h.tag));
        n_req++;
      end
      rsp_ready  = (n < 3800) ? NP'($urandom) : '1;
      poll_mask  = NP'($urandom);
      clear_en   = ($urandom % 8) == 0;
      clear_mask = NP'($urandom);
      #2;
      checks += 2;
      for (int p = 0; p < NP; p++) if (arrived[p] != model[p]) begin failures++; $display("arrived[%0d]=%0d exp %0d", p, arrived[p], model[p]); end
      if (ready != (((arrived & poll_mask) == poll_mask))) begin failures++; $display("ready wrong"); end
      f_rx = rx_valid & rx_ready; f_rsp = rsp_valid & rsp_ready; c_rx = rx_flit; c_rsp = rsp_flit;
      c_clr = clear_en; c_mask = clear_mask;
      @(posedge clk);
      #1;
      for (int p = 0; p < NP; p++) begin
        bit set;
        set = f_rx[p] && c_rx[p].last;
        if (f_rx[p]) void'(src[p].pop_front());
        if (set && c_clr && c_mask[p]) n_race++;
        if (set) model[p] = 1;
        else if (c_clr && c_mask[p]) model[p] = 0;
        if (f_rsp[p]) begin
          hdr_t h;
          h = flit_hdr(c_rsp[p]);
          n_rsp++;
          checks++;
          if (tags[p].size() == 0) begin failures++; $display("unexpected response on %0d", p); end
          else if (!c_rsp[p].hdr || !c_rsp[p].last || h.typ != MSG_WR_RSP || !h.inc ||
                   int'(h.dst) != p || int'(h.tag) != tags[p].pop_front()) begin
            failures++; $display("bad response on port %0d", p);
          end
        end
      end
    end
    checks += 2;
    if (n_rsp != n_req) begin failures++; $display("responses %0d requests %0d", n_rsp, n_req); end
    if (n_race == 0) begin failures++; $display("set/clear race not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
