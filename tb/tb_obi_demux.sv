// tb_obi_demux: self-checking test of the peripheral demux.
//
// The four peripherals are replaced by single-cycle register models that
// return their own index in the top byte of every read and store writes.
// Checks that each access reaches exactly the peripheral its address
// selects, that reads and writes keep their data, single-cycle timing,
// stalls passed back when a peripheral holds gnt low, and error answers for
// addresses in the window that no peripheral decodes.
module tb_obi_demux;
  import croc_pkg::*;
  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  obi_req_t req;
  obi_rsp_t rsp;
  int       checks = 0;
  int       failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, msg);
    end
  endtask

  // One OBI access: gnt must come in the request cycle, the response
  // exactly one cycle later with the request's ID.
  task automatic access(input addr_t a, input logic we, input strb_t be, input data_t wd,
                        output data_t rd, output logic err);
    automatic id_t id = id_t'($urandom);
    @(negedge clk);
    req.req = 1'b1; req.a.addr = a; req.a.we = we; req.a.be = be;
    req.a.wdata = wd; req.a.aid = id;
    #1 check(rsp.gnt == 1'b1, "gnt in the request cycle");
    @(negedge clk);
    req = ObiReqIdle;
    check(rsp.rvalid == 1'b1, "rvalid one cycle after gnt");
    check(rsp.r.rid == id, "rid echoes aid");
    rd  = rsp.r.rdata;
    err = rsp.r.err;
  endtask

  task automatic wr(input addr_t a, input data_t wd);
    data_t rd;
    logic  err;
    access(a, 1'b1, 4'hF, wd, rd, err);
    check(!err, $sformatf("write 0x%08h without error", a));
  endtask

  task automatic rd_check(input addr_t a, input data_t exp, input string msg);
    data_t rd;
    logic  err;
    access(a, 1'b0, 4'hF, '0, rd, err);
    check(!err, $sformatf("read 0x%08h without error", a));
    check(rd == exp, $sformatf("%s: got 0x%08h expected 0x%08h", msg, rd, exp));
  endtask

  task automatic err_check(input addr_t a);
    data_t rd;
    logic  err;
    access(a, 1'b0, 4'hF, '0, rd, err);
    check(err, $sformatf("access to 0x%08h answers with err", a));
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  localparam int unsigned P = NumPeriph;
  obi_req_t preq [P];
  obi_rsp_t prsp [P];
  logic     pgnt [P];
  data_t    pmem [P][16];
  logic     p_rvalid_q [P];
  data_t    p_rdata_q [P];
  id_t      p_rid_q [P];
  int       n_stall = 0;

  obi_demux dut (.clk_i(clk), .rst_ni(rst_n), .mgr_req_i(req), .mgr_rsp_o(rsp),
                 .sub_req_o(preq), .sub_rsp_i(prsp));

  function automatic addr_t pbase(int p);
    case (p)
      0: return PeriphRegsBase;
      1: return PeriphUartBase;
      2: return PeriphGpioBase;
      default: return PeriphTimerBase;
    endcase
  endfunction

  for (genvar p = 0; p < P; p++) begin : g_per
    assign prsp[p].gnt     = preq[p].req && pgnt[p];
    assign prsp[p].rvalid  = p_rvalid_q[p];
    assign prsp[p].r.rdata = p_rdata_q[p];
    assign prsp[p].r.rid   = p_rid_q[p];
    assign prsp[p].r.err   = 1'b0;
    always @(posedge clk) begin
      p_rvalid_q[p] <= prsp[p].gnt;
      if (prsp[p].gnt) begin
        p_rid_q[p]   <= preq[p].a.aid;
        p_rdata_q[p] <= preq[p].a.we ? '0 : pmem[p][preq[p].a.addr[5:2]];
        if (preq[p].a.we) pmem[p][preq[p].a.addr[5:2]] = preq[p].a.wdata;
        check(periph_decode(preq[p].a.addr) == p, "request reached the right peripheral");
      end
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  initial begin
    data_t ref_mem [P][16];
    data_t rd;
    logic  err;
    req = ObiReqIdle;
    for (int p = 0; p < P; p++) begin
      pgnt[p] = 1'b1;
      for (int w = 0; w < 16; w++) begin
        pmem[p][w] = '0;
        ref_mem[p][w] = '0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      automatic int    p  = int'($urandom_range(P - 1));
      automatic int    w  = int'($urandom_range(15));
      automatic logic  we = logic'($urandom_range(1));
      automatic data_t v  = $urandom;
      if (we) begin
        wr(pbase(p) + addr_t'(w * 4), v);
        ref_mem[p][w] = v;
      end else begin
        rd_check(pbase(p) + addr_t'(w * 4), ref_mem[p][w], "peripheral read");
      end
    end
    // A stalling peripheral: gnt held low for 3 cycles.
    @(negedge clk);
    pgnt[2] = 1'b0;
    req.req = 1'b1; req.a.addr = PeriphGpioBase; req.a.we = 1'b0; req.a.be = 4'hF;
    req.a.wdata = '0; req.a.aid = 2'd1;
    repeat (3) begin
      #1 check(rsp.gnt == 1'b0, "stall passed back");
      n_stall++;
      @(negedge clk);
      check(rsp.rvalid == 1'b0, "no response while stalled");
    end
    pgnt[2] = 1'b1;
    #1 check(rsp.gnt == 1'b1, "grant after stall");
    @(negedge clk);
    req = ObiReqIdle;
    check(rsp.rvalid && rsp.r.rdata == ref_mem[2][0], "response after stall");
    err_check(PeriphBase + 32'h1000);
    err_check(PeriphBase + 32'hF000);
    check(n_stall == 3, "stall happened");
    finish_tb();
  end
endmodule
