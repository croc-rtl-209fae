// tb_gpio: self-checking test of the GPIO block.
//
// Checks output and output-enable registers against the pins, byte-enable
// writes, the two-cycle input synchroniser delay, the input-change interrupt
// (only for enabled pins), clearing it by writing ones to the pending
// register, and error answers for unknown offsets.
module tb_gpio;
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
  localparam int unsigned N = NumGpio;
  logic [N-1:0] pin_in, pin_out, pin_oe;
  logic         irq;

  gpio dut (.clk_i(clk), .rst_ni(rst_n), .obi_req_i(req), .obi_rsp_o(rsp),
            .gpio_i(pin_in), .gpio_o(pin_out), .gpio_oe_o(pin_oe), .irq_o(irq));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  initial begin
    data_t rd;
    logic  err;
    automatic logic [N-1:0] mask = '1;
    req = ObiReqIdle;
    pin_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(pin_out == '0 && pin_oe == '0, "outputs off after reset");
    for (int n = 0; n < 20; n++) begin
      automatic data_t v = $urandom;
      automatic data_t e = $urandom;
      wr(PeriphGpioBase + 4, v);
      wr(PeriphGpioBase + 8, e);
      check(pin_out == v[N-1:0], "gpio_o follows out register");
      check(pin_oe == e[N-1:0], "gpio_oe_o follows oe register");
      rd_check(PeriphGpioBase + 4, data_t'(v[N-1:0]), "out readback");
    end
    wr(PeriphGpioBase + 4, 32'h0);
    access(PeriphGpioBase + 4, 1'b1, 4'b0010, 32'hFFFF_FFFF, rd, err);
    check(pin_out == (N'(32'h0000_FF00) & mask), "byte-enable write to out");
    // Inputs: visible after the synchroniser.
    for (int n = 0; n < 20; n++) begin
      automatic logic [N-1:0] v = N'($urandom);
      @(negedge clk);
      pin_in = v;
      @(negedge clk);
      @(negedge clk);
      rd_check(PeriphGpioBase + 0, data_t'(v), "input register");
    end
    // Interrupt on change of enabled pins only.
    wr(PeriphGpioBase + 16, 32'hFFFF_FFFF);
    wr(PeriphGpioBase + 12, 32'h0000_0004);
    wr(PeriphGpioBase + 16, 32'hFFFF_FFFF);
    check(irq == 1'b0, "no irq pending");
    @(negedge clk);
    pin_in = pin_in ^ N'(32'h0000_0001);
    repeat (4) @(negedge clk);
    check(irq == 1'b0, "no irq for disabled pin");
    pin_in = pin_in ^ N'(32'h0000_0004);
    repeat (4) @(negedge clk);
    check(irq == 1'b1, "irq for enabled pin change");
    rd_check(PeriphGpioBase + 16, 32'h4, "pending bit");
    wr(PeriphGpioBase + 16, 32'h4);
    check(irq == 1'b0, "irq cleared");
    err_check(PeriphGpioBase + 20);
    finish_tb();
  end
endmodule
