// tb_uart: self-checking test of the UART.
//
// The transmitter output is decoded by a serial receiver model in the
// testbench that also measures the bit time in clock cycles; a serial
// transmitter model drives the receiver input. Checks: every byte sent
// arrives intact with the programmed bit time, tx_busy while sending, dropped
// writes while busy, received bytes, rx_valid and its clearing on read, the
// receive interrupt, the overrun flag, and a loopback of tx to rx.
module tb_uart;
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
  localparam int unsigned Div = 16;
  logic rx_line, tx_line, irq, loop;
  logic rx_in;

  assign rx_in = loop ? tx_line : rx_line;

  uart dut (.clk_i(clk), .rst_ni(rst_n), .obi_req_i(req), .obi_rsp_o(rsp),
            .uart_rx_i(rx_in), .uart_tx_o(tx_line), .irq_o(irq));

  // Serial receiver model: times the start bit (the clock period is 10
  // time units) and samples each bit in its middle.
  logic [7:0] got [$];
  int         bad_bit_time = 0;
  initial begin
    forever begin
      time        t0;
      logic [7:0] b;
      @(negedge tx_line);
      t0 = $time;
      // Bytes are sent with bit 0 set, so the line rises after the start bit.
      @(posedge tx_line);
      if (($time - t0) != Div * 10) bad_bit_time++;
      #(Div * 10 / 2);
      for (int i = 0; i < 8; i++) begin
        if (i > 0) #(Div * 10);
        b[i] = tx_line;
      end
      #(Div * 10);
      if (tx_line) got.push_back(b);
      else bad_bit_time++;
    end
  end

  task automatic send_serial(input logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx_line = f[i];
      repeat (Div) @(posedge clk);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  initial begin
    data_t rd;
    logic  err;
    logic [7:0] sent [$];
    req = ObiReqIdle;
    rx_line = 1'b1;
    loop = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    rd_check(PeriphUartBase + 8, 694, "divisor reset value");
    wr(PeriphUartBase + 8, Div);
    rd_check(PeriphUartBase + 8, Div, "divisor");
    // Transmit bytes with odd LSB (so the receiver model times the start bit).
    for (int n = 0; n < 6; n++) begin
      automatic logic [7:0] b = 8'($urandom) | 8'h01;
      wr(PeriphUartBase + 0, data_t'(b));
      sent.push_back(b);
      rd_check(PeriphUartBase + 4, 32'h1, "tx_busy while sending");
      // Dropped: a second write while busy.
      wr(PeriphUartBase + 0, 32'h0000_00FF);
      do access(PeriphUartBase + 4, 1'b0, 4'hF, '0, rd, err); while (rd[0]);
    end
    repeat (4 * Div) @(negedge clk);
    check(got.size() == sent.size(), $sformatf("bytes sent %0d received %0d", sent.size(), got.size()));
    for (int i = 0; i < sent.size() && i < got.size(); i++)
      check(got[i] == sent[i], $sformatf("tx byte %0d", i));
    check(bad_bit_time == 0, "bit time equals the divisor");
    // Receive.
    wr(PeriphUartBase + 12, 1);
    for (int n = 0; n < 6; n++) begin
      automatic logic [7:0] b = 8'($urandom);
      send_serial(b);
      repeat (4) @(negedge clk);
      check(irq == 1'b1, "rx interrupt");
      rd_check(PeriphUartBase + 4, 32'h2, "rx_valid");
      rd_check(PeriphUartBase + 0, data_t'(b), "received byte");
      check(irq == 1'b0, "rx interrupt cleared by read");
    end
    // Overrun.
    send_serial(8'h11);
    send_serial(8'h22);
    repeat (4) @(negedge clk);
    rd_check(PeriphUartBase + 4, 32'h6, "overrun flagged");
    rd_check(PeriphUartBase + 0, 32'h22, "newest byte kept");
    wr(PeriphUartBase + 4, 32'h4);
    rd_check(PeriphUartBase + 4, 32'h0, "overrun cleared");
    // Loopback.
    loop = 1'b1;
    wr(PeriphUartBase + 0, 32'h5A);
    repeat (11 * Div + 8) @(negedge clk);
    rd_check(PeriphUartBase + 0, 32'h5A, "loopback byte");
    err_check(PeriphUartBase + 16);
    finish_tb();
  end
endmodule
