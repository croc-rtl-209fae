// tb_croc_soc: end-to-end test of the Croc domain at its default size.
//
// The processor core, the debug module and the user domain are not part of
// croc_soc; the testbench plays them on their OBI ports:
//   - the debug port loads a program image into I-Mem and a data array into
//     D-Mem, sets the boot address and raises fetch enable, as a debugger
//     would before starting the core;
//   - the core's instruction port then fetches the image back to back from
//     the boot address while its data port streams the data array from
//     D-Mem. Both must finish N accesses in N+1 cycles: one fetch and one
//     load per cycle, the rate the two-bank, single-cycle interconnect is
//     built for;
//   - the core's data port then drives the peripherals: UART (a byte string
//     decoded from the serial pin), GPIO outputs and inputs, the timer
//     interrupt, the status register;
//   - the user-domain manager writes into D-Mem while the core's data port
//     reads I-Mem against a concurrent fetch stream, so arbitration stalls
//     occur; the core reaches the user-domain and debug subordinate ports;
//     unmapped addresses get error answers; user interrupts reach the
//     core's fast interrupt lines.
// Each mechanism is counted and a failure is counted for one that never
// happened. Everything runs with croc_soc's default parameters.
module tb_croc_soc;
  import croc_pkg::*;

  localparam int unsigned NPorts = 4;  // 0 core instr, 1 core data, 2 debug, 3 user
  localparam int unsigned UartDiv = 8;
  localparam int unsigned ProgWords = 128;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  obi_req_t m_req [NPorts];
  obi_rsp_t m_rsp [NPorts];
  obi_req_t dbg_sub_req, user_sub_req;
  obi_rsp_t dbg_sub_rsp, user_sub_rsp;
  logic [NumUserIrq-1:0] user_irq;
  logic        irq_timer;
  logic [15:0] irq_fast;
  addr_t       boot_addr;
  logic        fetch_en;
  data_t       core_status;
  logic [1:0]  boot_mode;
  logic [NumGpio-1:0] gpio_in, gpio_out, gpio_oe;
  logic        uart_rx, uart_tx;

  croc_soc dut (
    .clk_i            ( clk ),
    .rst_ni           ( rst_n ),
    .core_instr_req_i ( m_req[0] ),
    .core_instr_rsp_o ( m_rsp[0] ),
    .core_data_req_i  ( m_req[1] ),
    .core_data_rsp_o  ( m_rsp[1] ),
    .irq_timer_o      ( irq_timer ),
    .irq_fast_o       ( irq_fast ),
    .boot_addr_o      ( boot_addr ),
    .fetch_en_o       ( fetch_en ),
    .core_status_o    ( core_status ),
    .boot_mode_o      ( boot_mode ),
    .dbg_mgr_req_i    ( m_req[2] ),
    .dbg_mgr_rsp_o    ( m_rsp[2] ),
    .dbg_sub_req_o    ( dbg_sub_req ),
    .dbg_sub_rsp_i    ( dbg_sub_rsp ),
    .user_mgr_req_i   ( m_req[3] ),
    .user_mgr_rsp_o   ( m_rsp[3] ),
    .user_sub_req_o   ( user_sub_req ),
    .user_sub_rsp_i   ( user_sub_rsp ),
    .user_irq_i       ( user_irq ),
    .gpio_i           ( gpio_in ),
    .gpio_o           ( gpio_out ),
    .gpio_oe_o        ( gpio_oe ),
    .uart_rx_i        ( uart_rx ),
    .uart_tx_o        ( uart_tx )
  );

  int checks = 0;
  int failures = 0;

  // Mechanism counters.
  int n_parallel_fetch_load = 0;  // instruction and data port granted in one cycle
  int n_contention = 0;           // a request held back by arbitration
  int n_periph = 0;               // accesses through the peripheral demux
  int n_user_sub = 0;             // accesses reaching the user-domain subordinate
  int n_dbg_sub = 0;              // accesses reaching the debug subordinate
  int n_user_mgr = 0;             // accesses by the user-domain manager
  int n_err = 0;                  // error answers
  int n_uart_tx = 0, n_uart_rx = 0, n_timer_irq = 0, n_user_irq = 0, n_gpio = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, msg);
    end
  endtask

  always @(posedge clk) begin
    if (m_req[0].req && m_rsp[0].gnt && m_req[1].req && m_rsp[1].gnt) n_parallel_fetch_load++;
    for (int p = 0; p < NPorts; p++) if (m_req[p].req && !m_rsp[p].gnt) n_contention++;
    if (dut.sub_req[SubPeriph].req && dut.sub_rsp[SubPeriph].gnt) n_periph++;
    if (m_req[3].req && m_rsp[3].gnt) n_user_mgr++;
  end

  // ------------------------------------------------ external subordinates
  // Single-cycle memories standing in for the debug module's memory and a
  // user-domain peripheral.
  data_t dbg_mem [16];
  data_t user_mem [16];
  logic  dbg_rv_q, user_rv_q;
  data_t dbg_rd_q, user_rd_q;
  id_t   dbg_id_q, user_id_q;
  always_comb begin
    dbg_sub_rsp         = ObiRspIdle;
    dbg_sub_rsp.gnt     = dbg_sub_req.req;
    dbg_sub_rsp.rvalid  = dbg_rv_q;
    dbg_sub_rsp.r.rdata = dbg_rd_q;
    dbg_sub_rsp.r.rid   = dbg_id_q;
    user_sub_rsp         = ObiRspIdle;
    user_sub_rsp.gnt     = user_sub_req.req;
    user_sub_rsp.rvalid  = user_rv_q;
    user_sub_rsp.r.rdata = user_rd_q;
    user_sub_rsp.r.rid   = user_id_q;
  end
  always @(posedge clk) begin
    dbg_rv_q  <= dbg_sub_req.req;
    user_rv_q <= user_sub_req.req;
    if (dbg_sub_req.req) begin
      n_dbg_sub++;
      dbg_id_q <= dbg_sub_req.a.aid;
      dbg_rd_q <= dbg_mem[dbg_sub_req.a.addr[5:2]];
      if (dbg_sub_req.a.we) dbg_mem[dbg_sub_req.a.addr[5:2]] = dbg_sub_req.a.wdata;
    end
    if (user_sub_req.req) begin
      n_user_sub++;
      user_id_q <= user_sub_req.a.aid;
      user_rd_q <= user_mem[user_sub_req.a.addr[5:2]];
      if (user_sub_req.a.we) user_mem[user_sub_req.a.addr[5:2]] = user_sub_req.a.wdata;
    end
  end

  // ------------------------------------------------ UART serial models
  logic [7:0] uart_got [$];
  initial begin
    forever begin
      time        t0;
      logic [7:0] b;
      @(negedge uart_tx);
      t0 = $time;
      #(UartDiv * 10 * 3 / 2);
      for (int i = 0; i < 8; i++) begin
        if (i > 0) #(UartDiv * 10);
        b[i] = uart_tx;
      end
      #(UartDiv * 10);
      if (uart_tx) begin
        uart_got.push_back(b);
        n_uart_tx++;
      end
    end
  end

  task automatic uart_send(input logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rx = f[i];
      repeat (UartDiv) @(posedge clk);
    end
  endtask

  // ------------------------------------------------ manager port tasks
  data_t log_data [NPorts][ProgWords];
  logic  log_err  [NPorts][ProgWords];

  function automatic data_t pattern(addr_t a, data_t seed);
    return (a * 32'h9E37_79B1) ^ seed;
  endfunction

  // Back-to-back stream of n word accesses from base on port p: a new
  // request every cycle, held while gnt is low. Returns the number of cycles
  // from the first request to the last response. Writes store pattern().
  task automatic stream(input int p, input addr_t base, input int n, input logic we,
                        input data_t seed, output int cycles);
    int issued = 0;
    int got = 0;
    logic pend = 1'b0;
    cycles = 0;
    while (got < n) begin
      @(negedge clk);
      cycles++;
      if (pend) begin
        check(m_rsp[p].rvalid, "stream: response one cycle after grant");
        log_data[p][got] = m_rsp[p].r.rdata;
        log_err[p][got]  = m_rsp[p].r.err;
        got++;
      end
      pend = 1'b0;
      if (issued < n) begin
        m_req[p].req     = 1'b1;
        m_req[p].a.addr  = base + addr_t'(issued * 4);
        m_req[p].a.we    = we;
        m_req[p].a.be    = 4'hF;
        m_req[p].a.wdata = pattern(base + addr_t'(issued * 4), seed);
        m_req[p].a.aid   = id_t'(p);
        #1;
        if (m_rsp[p].gnt) begin
          issued++;
          pend = 1'b1;
        end
      end else begin
        m_req[p] = ObiReqIdle;
      end
    end
    m_req[p] = ObiReqIdle;
  endtask

  task automatic access(input int p, input addr_t a, input logic we, input data_t wd,
                        output data_t rd, output logic err);
    @(negedge clk);
    m_req[p].req = 1'b1; m_req[p].a.addr = a; m_req[p].a.we = we;
    m_req[p].a.be = 4'hF; m_req[p].a.wdata = wd; m_req[p].a.aid = id_t'(p);
    #1;
    while (!m_rsp[p].gnt) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    m_req[p] = ObiReqIdle;
    check(m_rsp[p].rvalid, "response one cycle after grant");
    rd  = m_rsp[p].r.rdata;
    err = m_rsp[p].r.err;
    if (err) n_err++;
  endtask

  task automatic wr(input int p, input addr_t a, input data_t wd);
    data_t rd;
    logic  err;
    access(p, a, 1'b1, wd, rd, err);
    check(!err, $sformatf("write 0x%08h", a));
  endtask

  task automatic rd_check(input int p, input addr_t a, input data_t exp, input string msg);
    data_t rd;
    logic  err;
    access(p, a, 1'b0, '0, rd, err);
    check(!err && rd == exp, $sformatf("%s: 0x%08h read 0x%08h expected 0x%08h", msg, a, rd, exp));
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int    cyc_i, cyc_d, cyc_u;
    data_t rd, sum, exp_sum;
    logic  err;
    automatic string msg = "Croc";

    for (int p = 0; p < NPorts; p++) m_req[p] = ObiReqIdle;
    for (int i = 0; i < 16; i++) begin
      dbg_mem[i]  = '0;
      user_mem[i] = '0;
    end
    user_irq = '0;
    gpio_in  = '0;
    uart_rx  = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(fetch_en == 1'b0, "core held after reset");

    // 1. Debugger loads the program image and the data, then starts the core.
    stream(2, ImemBase, ProgWords, 1'b1, 32'h1111_0000, cyc_i);
    stream(2, DmemBase, ProgWords, 1'b1, 32'h2222_0000, cyc_d);
    check(cyc_i == ProgWords + 1 && cyc_d == ProgWords + 1, "debug load at one word per cycle");
    wr(2, PeriphRegsBase + 0, ImemBase + 32'h40);
    wr(2, PeriphRegsBase + 4, 1);
    check(fetch_en == 1'b1 && boot_addr == ImemBase + 32'h40, "boot address and fetch enable set");

    // 2. Core: fetch stream from the boot address and load stream from
    //    D-Mem in parallel, one of each per cycle.
    fork
      stream(0, boot_addr, ProgWords - 16, 1'b0, '0, cyc_i);
      stream(1, DmemBase, ProgWords, 1'b0, '0, cyc_d);
    join
    check(cyc_i == ProgWords - 16 + 1, $sformatf("fetch: %0d words in %0d cycles", ProgWords - 16, cyc_i));
    check(cyc_d == ProgWords + 1, $sformatf("load: %0d words in %0d cycles", ProgWords, cyc_d));
    exp_sum = '0;
    sum = '0;
    for (int i = 0; i < ProgWords - 16; i++)
      check(log_data[0][i] == pattern(ImemBase + 32'h40 + addr_t'(i * 4), 32'h1111_0000), "fetched word");
    for (int i = 0; i < ProgWords; i++) begin
      check(log_data[1][i] == pattern(DmemBase + addr_t'(i * 4), 32'h2222_0000), "loaded word");
      exp_sum += pattern(DmemBase + addr_t'(i * 4), 32'h2222_0000);
      sum += log_data[1][i];
    end
    // Core stores the result and reports it.
    wr(1, DmemBase + 32'h7FC, sum);
    rd_check(2, DmemBase + 32'h7FC, exp_sum, "result visible to the debugger");

    // 3. Contention: data port reads I-Mem while the instruction port fetches
    //    there, and the user domain writes D-Mem while the debugger reads it.
    fork
      stream(0, ImemBase, 64, 1'b0, '0, cyc_i);
      stream(1, ImemBase + 32'h100, 64, 1'b0, '0, cyc_d);
      stream(3, DmemBase + 32'h400, 64, 1'b1, 32'h3333_0000, cyc_u);
    join
    check(cyc_i + cyc_d > 2 * 65, "shared bank slows the two streams down");
    check(cyc_i <= 2 * 64 + 1 && cyc_d <= 2 * 64 + 1, "round robin: each gets at least every other cycle");
    for (int i = 0; i < 64; i++) begin
      check(log_data[0][i] == pattern(ImemBase + addr_t'(i * 4), 32'h1111_0000), "fetch under contention");
      check(log_data[1][i] == pattern(ImemBase + 32'h100 + addr_t'(i * 4), 32'h1111_0000), "load under contention");
    end
    stream(2, DmemBase + 32'h400, 64, 1'b0, '0, cyc_d);
    for (int i = 0; i < 64; i++)
      check(log_data[2][i] == pattern(DmemBase + 32'h400 + addr_t'(i * 4), 32'h3333_0000), "user-domain write landed in D-Mem");

    // 4. UART: send "Croc", receive one byte.
    wr(1, PeriphUartBase + 8, UartDiv);
    foreach (msg[i]) begin
      wr(1, PeriphUartBase + 0, data_t'(msg[i]));
      do access(1, PeriphUartBase + 4, 1'b0, '0, rd, err); while (rd[0]);
    end
    repeat (3 * UartDiv) @(negedge clk);
    check(uart_got.size() == 4, "four bytes on the serial line");
    foreach (uart_got[i]) if (i < 4) check(uart_got[i] == msg[i], "UART byte");
    wr(1, PeriphUartBase + 12, 1);
    uart_send(8'hA7);
    repeat (4) @(negedge clk);
    check(irq_fast[0], "UART receive interrupt on irq_fast[0]");
    rd_check(1, PeriphUartBase + 0, 32'hA7, "UART received byte");
    n_uart_rx++;

    // 5. GPIO.
    wr(1, PeriphGpioBase + 8, 32'h03FF_FFFF);
    wr(1, PeriphGpioBase + 4, 32'h0155_AA55);
    check(gpio_oe == '1 && gpio_out == NumGpio'(32'h0155_AA55), "GPIO drives the pins");
    gpio_in = NumGpio'(32'h02AB_CDEF);
    repeat (3) @(negedge clk);
    rd_check(1, PeriphGpioBase + 0, 32'h02AB_CDEF, "GPIO reads the pins");
    wr(1, PeriphGpioBase + 12, 32'h1);
    gpio_in[0] = ~gpio_in[0];
    repeat (4) @(negedge clk);
    check(irq_fast[1], "GPIO change interrupt on irq_fast[1]");
    n_gpio++;

    // 6. Timer interrupt after 100 cycles.
    wr(1, PeriphTimerBase + 12, 0);
    wr(1, PeriphTimerBase + 8, 100);
    wr(1, PeriphTimerBase + 16, 1);
    check(!irq_timer, "no timer interrupt yet");
    repeat (120) @(negedge clk);
    check(irq_timer, "timer interrupt");
    if (irq_timer) n_timer_irq++;
    wr(1, PeriphTimerBase + 16, 0);

    // 7. User domain and debug subordinates, user interrupts, errors.
    wr(1, UserBase + 32'h8, 32'hCAFE_0001);
    rd_check(1, UserBase + 32'h8, 32'hCAFE_0001, "user-domain subordinate");
    check(user_mem[2] == 32'hCAFE_0001, "write reached the user domain");
    wr(1, DebugBase + 32'h4, 32'hD0D0_0004);
    rd_check(0, DebugBase + 32'h4, 32'hD0D0_0004, "debug memory through the instruction port");
    user_irq = 4'b1010;
    #1 check(irq_fast[5:2] == 4'b1010, "user interrupts reach irq_fast[5:2]");
    if (irq_fast[5:2] == 4'b1010) n_user_irq++;
    user_irq = '0;
    access(1, 32'h4000_0000, 1'b0, '0, rd, err);
    check(err, "unmapped address answers err");
    access(1, PeriphBase + 32'h1000, 1'b0, '0, rd, err);
    check(err, "unmapped peripheral answers err");

    // 8. Core reports the result through the status register.
    wr(1, PeriphRegsBase + 8, sum);
    check(core_status == exp_sum, "core status carries the result");

    $display("mechanisms: parallel=%0d contention=%0d periph=%0d user_mgr=%0d user_sub=%0d dbg_sub=%0d err=%0d uart_tx=%0d uart_rx=%0d gpio_irq=%0d timer_irq=%0d user_irq=%0d",
             n_parallel_fetch_load, n_contention, n_periph, n_user_mgr, n_user_sub, n_dbg_sub,
             n_err, n_uart_tx, n_uart_rx, n_gpio, n_timer_irq, n_user_irq);
    check(n_parallel_fetch_load > 0, "mechanism: parallel fetch and load");
    check(n_contention > 0, "mechanism: arbitration stall");
    check(n_periph > 0, "mechanism: peripheral demux");
    check(n_user_mgr > 0, "mechanism: user-domain manager");
    check(n_user_sub > 0, "mechanism: user-domain subordinate");
    check(n_dbg_sub > 0, "mechanism: debug subordinate");
    check(n_err > 0, "mechanism: error answer");
    check(n_uart_tx > 0 && n_uart_rx > 0, "mechanism: UART");
    check(n_gpio > 0, "mechanism: GPIO interrupt");
    check(n_timer_irq > 0, "mechanism: timer interrupt");
    check(n_user_irq > 0, "mechanism: user interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
