// tb_croc_program: runs a RISC-V program on the Croc domain.
//
// Two copies of croc_soc, each with the behavioural core model
// rv32_core_model on its core ports, run the same program: sum a 16-word
// array, store the sum after the array, write it to the status register,
// and print "OK" on the UART, polling the transmitter's busy flag. The
// testbench acts as the debugger: it loads program and array through the
// debug system-bus port, sets the boot address and raises fetch enable.
//   System 0 keeps the array in D-Mem: instruction fetch and data accesses
//   use different banks, and the core must retire one instruction per cycle
//   with no stall at all.
//   System 1 keeps the array in the upper half of I-Mem: each load now
//   competes with an instruction fetch for the same bank, and the
//   arbitration stalls must show up as lost cycles.
// Checked: the results in memory, the status register and the UART line,
// cycles == retired instructions + stall cycles, and the stall counts.
module tb_croc_program;
  import croc_pkg::*;

  localparam int unsigned NSys = 2;
  localparam int unsigned UartDiv = 8;
  localparam int unsigned NElem = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, msg);
    end
  endtask

  // ------------------------------------------------ RV32I encoders
  function automatic data_t enc_i(int imm, int rs1, int f3, int rd, logic [6:0] opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), opc};
  endfunction
  function automatic data_t enc_s(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic data_t enc_b(int off, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic data_t enc_r(int f7, int rs2, int rs1, int f3, int rd);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'b0110011};
  endfunction
  function automatic data_t lui(int rd, int imm20);  return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic data_t addi(int rd, int rs1, int imm); return enc_i(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic data_t andi(int rd, int rs1, int imm); return enc_i(imm, rs1, 7, rd, 7'b0010011); endfunction
  function automatic data_t lw(int rd, int rs1, int imm);   return enc_i(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic data_t sw(int rs2, int rs1, int imm);  return enc_s(imm, rs2, rs1, 2); endfunction
  function automatic data_t add(int rd, int rs1, int rs2);  return enc_r(0, rs2, rs1, 0, rd); endfunction
  function automatic data_t bne(int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 1); endfunction
  localparam data_t Ebreak = 32'h0010_0073;

  // Program; x1 = array base, given as two halves for LUI/ADDI.
  data_t prog [NSys][32];
  int    prog_len;
  function automatic void build(int s, addr_t arr);
    int n = 0;
    logic [19:0] hi = 20'((arr + 32'h800) >> 12);
    int lo = int'(arr[11:0]);
    if (lo >= 2048) lo -= 4096;
    prog[s][n++] = lui(1, int'(hi));
    prog[s][n++] = addi(1, 1, lo);
    prog[s][n++] = addi(3, 0, NElem);
    prog[s][n++] = addi(4, 0, 0);
    prog[s][n++] = lw(5, 1, 0);          // loop:
    prog[s][n++] = add(4, 4, 5);         //   load result used at once
    prog[s][n++] = addi(1, 1, 4);
    prog[s][n++] = addi(3, 3, -1);
    prog[s][n++] = bne(3, 0, -16);
    prog[s][n++] = sw(4, 1, 0);          // sum after the array
    prog[s][n++] = lui(6, 32'h03000);    // soc_regs
    prog[s][n++] = sw(4, 6, 8);          // core_status = sum
    prog[s][n++] = lui(7, 32'h03002);    // uart
    prog[s][n++] = addi(8, 0, UartDiv);
    prog[s][n++] = sw(8, 7, 8);          // divisor
    prog[s][n++] = addi(8, 0, 32'h4F);    // 'O'
    prog[s][n++] = sw(8, 7, 0);
    prog[s][n++] = lw(9, 7, 4);          // poll: status
    prog[s][n++] = andi(9, 9, 1);
    prog[s][n++] = bne(9, 0, -8);
    prog[s][n++] = addi(8, 0, 32'h4B);    // 'K'
    prog[s][n++] = sw(8, 7, 0);
    prog[s][n++] = lw(9, 7, 4);          // poll again before stopping
    prog[s][n++] = andi(9, 9, 1);
    prog[s][n++] = bne(9, 0, -8);
    prog[s][n++] = Ebreak;
    prog_len = n;
  endfunction

  // ------------------------------------------------ systems
  obi_req_t dbg_req [NSys];
  obi_rsp_t dbg_rsp [NSys];
  logic     halted [NSys];
  int       retired [NSys], cycles [NSys], stalls [NSys], illegal [NSys];
  data_t    status [NSys];
  logic     tx [NSys];
  logic [7:0] uart_got [NSys][$];

  for (genvar s = 0; s < NSys; s++) begin : g_sys
    obi_req_t ireq, dreq, dsub_req, usub_req;
    obi_rsp_t irsp, drsp;
    addr_t    boot_addr;
    logic     fetch_en;
    logic [NumGpio-1:0] gpo, gpoe;
    logic     irq_t;
    logic [15:0] irq_f;
    logic [1:0]  bmode;

    croc_soc i_soc (
      .clk_i(clk), .rst_ni(rst_n),
      .core_instr_req_i(ireq), .core_instr_rsp_o(irsp),
      .core_data_req_i(dreq), .core_data_rsp_o(drsp),
      .irq_timer_o(irq_t), .irq_fast_o(irq_f),
      .boot_addr_o(boot_addr), .fetch_en_o(fetch_en), .core_status_o(status[s]),
      .boot_mode_o(bmode),
      .dbg_mgr_req_i(dbg_req[s]), .dbg_mgr_rsp_o(dbg_rsp[s]),
      .dbg_sub_req_o(dsub_req), .dbg_sub_rsp_i(ObiRspIdle),
      .user_mgr_req_i(ObiReqIdle), .user_mgr_rsp_o(),
      .user_sub_req_o(usub_req), .user_sub_rsp_i(ObiRspIdle),
      .user_irq_i('0),
      .gpio_i('0), .gpio_o(gpo), .gpio_oe_o(gpoe),
      .uart_rx_i(1'b1), .uart_tx_o(tx[s]));

    rv32_core_model i_core (
      .clk_i(clk), .rst_ni(rst_n), .fetch_en_i(fetch_en), .boot_addr_i(boot_addr),
      .instr_req_o(ireq), .instr_rsp_i(irsp), .data_req_o(dreq), .data_rsp_i(drsp),
      .halted_o(halted[s]), .retired_o(retired[s]), .cycles_o(cycles[s]),
      .stalls_o(stalls[s]), .illegal_o(illegal[s]));

    // Serial receiver on the UART pin.
    initial begin
      forever begin
        logic [7:0] b;
        @(negedge tx[s]);
        #(UartDiv * 10 * 3 / 2);
        for (int i = 0; i < 8; i++) begin
          if (i > 0) #(UartDiv * 10);
          b[i] = tx[s];
        end
        #(UartDiv * 10);
        if (tx[s]) uart_got[s].push_back(b);
      end
    end
  end

  task automatic dbg_access(input int s, input addr_t a, input logic we, input data_t wd,
                            output data_t rd);
    @(negedge clk);
    dbg_req[s].req = 1'b1; dbg_req[s].a.addr = a; dbg_req[s].a.we = we;
    dbg_req[s].a.be = 4'hF; dbg_req[s].a.wdata = wd; dbg_req[s].a.aid = '0;
    #1;
    while (!dbg_rsp[s].gnt) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    dbg_req[s] = ObiReqIdle;
    check(dbg_rsp[s].rvalid && !dbg_rsp[s].r.err, "debug access answered");
    rd = dbg_rsp[s].r.rdata;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t arr [NSys];
    data_t exp_sum, rd;
    arr[0] = DmemBase + 32'h100;
    arr[1] = ImemBase + 32'h400;
    for (int s = 0; s < NSys; s++) dbg_req[s] = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    exp_sum = '0;
    for (int i = 0; i < NElem; i++) exp_sum += data_t'(i * 32'h0101_0101 + 7);
    for (int s = 0; s < NSys; s++) begin
      build(s, arr[s]);
      for (int i = 0; i < prog_len; i++)
        dbg_access(s, ImemBase + addr_t'(i * 4), 1'b1, prog[s][i], rd);
      for (int i = 0; i < NElem; i++)
        dbg_access(s, arr[s] + addr_t'(i * 4), 1'b1, data_t'(i * 32'h0101_0101 + 7), rd);
      dbg_access(s, PeriphRegsBase + 0, 1'b1, ImemBase, rd);
    end
    // Start both cores in the same cycle.
    @(negedge clk);
    for (int s = 0; s < NSys; s++) begin
      dbg_req[s].req = 1'b1; dbg_req[s].a.addr = PeriphRegsBase + 4; dbg_req[s].a.we = 1'b1;
      dbg_req[s].a.be = 4'hF; dbg_req[s].a.wdata = 1;
    end
    @(negedge clk);
    for (int s = 0; s < NSys; s++) dbg_req[s] = ObiReqIdle;
    wait (halted[0] && halted[1]);
    repeat (2 * 10 * UartDiv) @(negedge clk);
    for (int s = 0; s < NSys; s++) begin
      $display("system %0d: retired=%0d cycles=%0d stalls=%0d illegal=%0d",
               s, retired[s], cycles[s], stalls[s], illegal[s]);
      check(illegal[s] == 0, "no illegal instruction");
      check(status[s] == exp_sum, "status register holds the sum");
      dbg_access(s, arr[s] + addr_t'(NElem * 4), 1'b0, '0, rd);
      check(rd == exp_sum, "sum stored after the array");
      check(uart_got[s].size() == 2 && uart_got[s][0] == 8'h4F && uart_got[s][1] == 8'h4B,
            "\"OK\" on the UART");
      check(cycles[s] == retired[s] + stalls[s], "cycles = instructions + stalls");
    end
    check(stalls[0] == 0, "separate banks: one instruction per cycle");
    check(stalls[1] >= int'(NElem), "shared bank: every load stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
