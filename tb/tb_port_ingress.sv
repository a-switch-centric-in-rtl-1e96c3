// tb_port_ingress: sends packets with random INC flag and message type and checks that each
// flit, header and payload, reaches exactly the queue chosen by its header (INC=0: switch;
// INC=1 request: ISA request queue; INC=1 response: ISA response queue), with back-pressure.
module tb_port_ingress;
  import scin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  flit_t rx_flit, out_flit;
  logic rx_valid, rx_ready, isa_req_valid, isa_req_ready, isa_rsp_valid, isa_rsp_ready, sw_valid, sw_ready;
  int checks = 0, failures = 0;

  port_ingress dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_sw = 0, n_rq = 0, n_rs = 0;
    rx_valid = 0; rx_flit = '0; isa_req_ready = 0; isa_rsp_ready = 0; sw_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      hdr_t h;
      int len, want;
      h = '0;
      h.inc = $urandom % 2;
      h.typ = msg_t'($urandom % 4);
      want  = !h.inc ? 0 : (h.typ == MSG_RD_REQ || h.typ == MSG_WR_REQ) ? 1 : 2;
      len   = 1 + int'($urandom % 3);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        rx_valid = 1;
        rx_flit  = (i == 0) ? make_hdr_flit(h, len == 1) : '{hdr: 1'b0, last: (i == len - 1), data: 256'(k)};
        isa_req_ready = $urandom % 2; isa_rsp_ready = $urandom % 2; sw_ready = $urandom % 2;
        #0.1;
        while (!rx_ready) begin
          @(negedge clk);
          isa_req_ready = $urandom % 2; isa_rsp_ready = $urandom % 2; sw_ready = $urandom % 2;
        end
        checks++;
        if ({sw_valid, isa_req_valid, isa_rsp_valid} != ((want == 0) ? 3'b100 : (want == 1) ? 3'b010 : 3'b001) ||
            out_flit != rx_flit) begin
          failures++; $display("packet %0d flit %0d routed wrong", k, i);
        end
        if (want == 0) n_sw++; else if (want == 1) n_rq++; else n_rs++;
        @(posedge clk);
      end
      @(negedge clk);
      rx_valid = 0;
    end
    checks++;
    if (n_sw == 0 || n_rq == 0 || n_rs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
