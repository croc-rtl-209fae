// tb_sram_bank: self-checking test of one SRAM bank.
//
// Drives the bank's OBI port with single accesses and with a back-to-back
// stream (one request per cycle), and compares every read with a reference
// array kept in the testbench. Checks the timing the interconnect relies on:
// gnt in the cycle of the request and rvalid exactly one cycle later, so the
// bank sustains one access per cycle. Also checks byte-enable merging and
// that the response ID echoes the request ID.
module tb_sram_bank;
  import croc_pkg::*;

  localparam int unsigned Words = croc_pkg::SramNumWords;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  obi_req_t req;
  obi_rsp_t rsp;
  int       checks = 0;
  int       failures = 0;
  data_t    model [Words];

  always #5 clk = ~clk;

  sram_bank dut (.clk_i(clk), .rst_ni(rst_n), .obi_req_i(req), .obi_rsp_o(rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, msg);
    end
  endtask

  function automatic data_t merge(data_t o, data_t w, strb_t be);
    data_t r = o;
    for (int i = 0; i < 4; i++) if (be[i]) r[8*i +: 8] = w[8*i +: 8];
    return r;
  endfunction

  // One access, with an idle cycle after it.
  task automatic access(input int idx, input logic we, input strb_t be, input data_t wd);
    automatic id_t id = id_t'($urandom);
    @(negedge clk);
    req.req = 1'b1; req.a.addr = ImemBase + addr_t'(idx * 4); req.a.we = we;
    req.a.be = be; req.a.wdata = wd; req.a.aid = id;
    #1 check(rsp.gnt == 1'b1, "gnt in the request cycle");
    @(negedge clk);
    req = ObiReqIdle;
    check(rsp.rvalid == 1'b1, "rvalid one cycle after gnt");
    check(rsp.r.rid == id, "rid echoes aid");
    check(rsp.r.err == 1'b0, "no error");
    if (!we) check(rsp.r.rdata == model[idx], $sformatf("read word %0d", idx));
    else model[idx] = merge(model[idx], wd, be);
    #1 check(rsp.rvalid == 1'b0 || rsp.gnt == 1'b0, "idle after response");
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int    last_idx;
    logic  last_we;
    logic  pending;
    req = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Fill the whole bank.
    for (int i = 0; i < Words; i++) begin
      automatic data_t d = $urandom;
      access(i, 1'b1, 4'hF, d);
    end
    // Random single accesses with random byte enables.
    for (int n = 0; n < 300; n++) begin
      automatic int idx = int'($urandom_range(Words - 1));
      if ($urandom_range(1) == 1) access(idx, 1'b1, strb_t'($urandom), $urandom);
      else                        access(idx, 1'b0, 4'hF, '0);
    end
    // Back-to-back stream: one request per cycle, response every cycle.
    pending = 1'b0;
    last_idx = 0;
    last_we = 1'b0;
    for (int n = 0; n < 200; n++) begin
      automatic int   idx = int'($urandom_range(Words - 1));
      automatic logic we  = logic'($urandom_range(1));
      automatic data_t wd = $urandom;
      @(negedge clk);
      if (pending) begin
        check(rsp.rvalid == 1'b1, "stream: response every cycle");
        if (!last_we) check(rsp.r.rdata == model[last_idx], "stream: read data");
      end
      req.req = 1'b1; req.a.addr = ImemBase + addr_t'(idx * 4); req.a.we = we;
      req.a.be = 4'hF; req.a.wdata = wd; req.a.aid = '0;
      #1 check(rsp.gnt == 1'b1, "stream: gnt every cycle");
      if (we) begin
        // The write lands at this edge; later reads see it.
        @(posedge clk);
        model[idx] = wd;
      end
      pending  = 1'b1;
      last_idx = idx;
      last_we  = we;
    end
    @(negedge clk);
    req = ObiReqIdle;
    check(rsp.rvalid == 1'b1, "stream: last response");
    if (!last_we) check(rsp.r.rdata == model[last_idx], "stream: last read data");
    // Final read-back of every word.
    for (int i = 0; i < Words; i++) access(i, 1'b0, 4'hF, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
