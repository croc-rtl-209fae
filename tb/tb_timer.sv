// tb_timer: self-checking test of the machine timer.
//
// Checks that the counter stands still while disabled, advances by exactly
// one per clock cycle while enabled (two reads a known number of cycles
// apart), that writes to mtime and mtimecmp land, the carry into the upper
// counter word, and that the interrupt rises exactly in the cycle mtime
// reaches mtimecmp and falls when mtimecmp is moved ahead.
module tb_timer;
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
  logic irq;

  timer dut (.clk_i(clk), .rst_ni(rst_n), .obi_req_i(req), .obi_rsp_o(rsp), .irq_o(irq));

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  initial begin
    data_t rd, rd2;
    logic  err;
    int    cyc;
    req = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    rd_check(PeriphTimerBase + 0, 0, "mtime reset");
    rd_check(PeriphTimerBase + 8, 32'hFFFF_FFFF, "mtimecmp reset");
    repeat (10) @(negedge clk);
    rd_check(PeriphTimerBase + 0, 0, "mtime holds while disabled");
    check(irq == 1'b0, "no irq while disabled");
    // Enable and measure the rate: reads at known cycle distance.
    wr(PeriphTimerBase + 16, 1);
    access(PeriphTimerBase + 0, 1'b0, 4'hF, '0, rd, err);
    repeat (37) @(negedge clk);
    access(PeriphTimerBase + 0, 1'b0, 4'hF, '0, rd2, err);
    // Each access takes 2 cycles: reads are sampled 37 + 2 cycles apart.
    check(rd2 - rd == 39, $sformatf("one count per cycle: delta %0d", rd2 - rd));
    // Carry into the upper word.
    wr(PeriphTimerBase + 16, 0);
    wr(PeriphTimerBase + 0, 32'hFFFF_FFF0);
    wr(PeriphTimerBase + 4, 32'h0000_0001);
    wr(PeriphTimerBase + 16, 1);
    repeat (20) @(negedge clk);
    wr(PeriphTimerBase + 16, 0);
    rd_check(PeriphTimerBase + 4, 32'h2, "carry into mtime[63:32]");
    // Compare interrupt: mtime = 0, mtimecmp = 50.
    wr(PeriphTimerBase + 0, 0);
    wr(PeriphTimerBase + 4, 0);
    wr(PeriphTimerBase + 12, 0);
    wr(PeriphTimerBase + 8, 50);
    check(irq == 1'b0, "no irq before compare");
    @(negedge clk);
    req.req = 1'b1; req.a.addr = PeriphTimerBase + 16; req.a.we = 1'b1;
    req.a.be = 4'hF; req.a.wdata = 1; req.a.aid = '0;
    @(negedge clk);
    req = ObiReqIdle;
    // Enabled at the edge above; mtime counts from this edge on.
    cyc = 0;
    while (!irq && cyc < 200) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 50, $sformatf("irq after mtimecmp cycles: %0d", cyc));
    wr(PeriphTimerBase + 8, 32'h0001_0000);
    check(irq == 1'b0, "irq cleared by moving mtimecmp");
    rd_check(PeriphTimerBase + 16, 1, "ctrl readback");
    err_check(PeriphTimerBase + 20);
    finish_tb();
  end
endmodule
