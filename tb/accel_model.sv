// accel_model: behavioural model of the accelerators (GPUs) attached to the switch ports.
//
// Not synthesizable. One instance models all NUM_PORTS endpoints, each with MEM_FLITS flits
// of memory (mem[port][flit], 32-byte flits, byte addresses). Per endpoint:
//  * incoming read requests are answered with a read response carrying the same tag and INC
//    flag, after a random latency, and picked at random among the oldest four that are due, so
//    responses return out of order (but not arbitrarily late);
//  * incoming write requests update memory (byte-exact, len bytes) and are answered with a
//    write response after a random latency;
//  * incoming write responses are counted (wr_rsp_seen);
//  * the testbench can make an endpoint write its arrival flag in the switch accelerator
//    (arrive) or write a flit into another endpoint's memory through the switch core (p2p).
// Links use valid/ready; the model throttles its receive side at random (1 in 16 cycles).
// Addresses and lengths must be 32-byte aligned except for the last flit of a write.
module accel_model
  import scin_pkg::*;
#(
  parameter int NUM_PORTS = 8,
  parameter int MEM_FLITS = 4096
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // switch -> endpoint
  input  flit_t [NUM_PORTS-1:0] in_flit,
  input  logic  [NUM_PORTS-1:0] in_valid,
  output logic  [NUM_PORTS-1:0] in_ready,
  // endpoint -> switch
  output flit_t [NUM_PORTS-1:0] out_flit,
  output logic  [NUM_PORTS-1:0] out_valid,
  input  logic  [NUM_PORTS-1:0] out_ready
);
  typedef struct {
    hdr_t h;
    int   due;
  } pend_t;

  logic [FLIT_W-1:0] mem [NUM_PORTS][MEM_FLITS];
  flit_t  txq  [NUM_PORTS][$];
  pend_t  pend [NUM_PORTS][$];
  hdr_t   cur  [NUM_PORTS];
  int     wk   [NUM_PORTS];
  int     cyc;
  int     wr_rsp_seen [NUM_PORTS];
  int     ooo_count;      // responses served ahead of an older pending request
  int     served;
  int     extra_lat [NUM_PORTS];   // added read latency per endpoint (set by the testbench)

  task automatic arrive(int p);
    hdr_t  h;
    flit_t f;
    h = '0; h.typ = MSG_WR_REQ; h.inc = 1'b1; h.src = PORT_W'(p); h.dst = PORT_W'(p);
    h.tag = 16'h0100; h.addr = 48'h0; h.len = 16'(FLIT_BYTES);
    txq[p].push_back(make_hdr_flit(h, 1'b0));
    f = '0; f.last = 1'b1; f.data = 256'h1;
    txq[p].push_back(f);
  endtask

  task automatic p2p(int p, int q, logic [47:0] addr, logic [FLIT_W-1:0] d);
    hdr_t  h;
    flit_t f;
    h = '0; h.typ = MSG_WR_REQ; h.inc = 1'b0; h.src = PORT_W'(p); h.dst = PORT_W'(q);
    h.tag = 16'h0200; h.addr = addr; h.len = 16'(FLIT_BYTES);
    txq[p].push_back(make_hdr_flit(h, 1'b0));
    f = '0; f.last = 1'b1; f.data = d;
    txq[p].push_back(f);
  endtask

  function automatic void serve(int p, int idx);
    pend_t e;
    hdr_t  r;
    flit_t f;
    int    n;
    e = pend[p][idx];
    pend[p].delete(idx);
    r = e.h;
    r.src = e.h.dst;
    r.dst = e.h.src;
    if (e.h.typ == MSG_RD_REQ) begin
      r.typ = MSG_RD_RSP;
      n = (int'(e.h.len) + FLIT_BYTES - 1) / FLIT_BYTES;
      txq[p].push_back(make_hdr_flit(r, 1'b0));
      for (int i = 0; i < n; i++) begin
        f = '0;
        f.last = (i == n - 1);
        f.data = mem[p][int'(e.h.addr >> 5) + i];
        txq[p].push_back(f);
      end
    end else begin
      r.typ = MSG_WR_RSP;
      r.len = '0;
      txq[p].push_back(make_hdr_flit(r, 1'b1));
    end
  endfunction

  always_comb
    for (int p = 0; p < NUM_PORTS; p++) begin
      out_valid[p] = (txq[p].size() != 0);
      out_flit[p]  = (txq[p].size() != 0) ? txq[p][0] : '0;
    end

  initial begin
    cyc = 0; ooo_count = 0; served = 0;
    for (int p = 0; p < NUM_PORTS; p++) begin
      wr_rsp_seen[p] = 0; wk[p] = 0; extra_lat[p] = 0; cur[p] = '0;
      for (int i = 0; i < MEM_FLITS; i++) mem[p][i] = '0;
    end
    in_ready = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NUM_PORTS; p++) begin
      // transmit
      if (out_valid[p] && out_ready[p]) void'(txq[p].pop_front());
      // receive
      if (in_valid[p] && in_ready[p]) begin
        if (in_flit[p].hdr) begin
          hdr_t h;
          h = flit_hdr(in_flit[p]);
          cur[p] = h;
          wk[p]  = 0;
          if (h.typ == MSG_RD_REQ) pend[p].push_back('{h: h, due: cyc + 8 + int'($urandom % 40) + extra_lat[p]});
          else if (h.typ == MSG_WR_RSP || h.typ == MSG_RD_RSP) wr_rsp_seen[p]++;
        end else if (cur[p].typ == MSG_WR_REQ) begin
          int base, nb;
          base = int'(cur[p].addr >> 5) + wk[p];
          nb   = int'(cur[p].len) - wk[p] * FLIT_BYTES;
          for (int b = 0; b < FLIT_BYTES; b++)
            if (b < nb) mem[p][base][8*b +: 8] = in_flit[p].data[8*b +: 8];
          wk[p]++;
          if (in_flit[p].last) pend[p].push_back('{h: cur[p], due: cyc + 4 + int'($urandom % 20)});
        end
      end
      // answer one pending request that is due, chosen at random
      if (pend[p].size() != 0 && txq[p].size() < 4) begin
        int idx, start;
        start = int'($urandom % ((pend[p].size() < 4) ? pend[p].size() : 4));
        idx   = -1;
        for (int k = 0; k < pend[p].size(); k++)
          if (idx < 0 && pend[p][(start + k) % pend[p].size()].due <= cyc) idx = (start + k) % pend[p].size();
        if (idx >= 0) begin
          for (int k = 0; k < idx; k++)
            if (pend[p][k].h.typ == MSG_RD_REQ) begin ooo_count++; break; end
          served++;
          serve(p, idx);
        end
      end
      in_ready[p] <= ($urandom % 16) != 0;
    end
  end

endmodule
