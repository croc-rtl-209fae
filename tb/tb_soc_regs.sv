// tb_soc_regs: self-checking test of the SoC control registers.
//
// Checks reset values, that every register reads back what was written,
// that byte enables act per byte, that the core-facing outputs follow the
// registers (boot address, fetch enable, status word, boot mode), the
// masking of fetch_en and boot_mode to their widths, and error answers for
// offsets outside the register set. Every access also checks the single-cycle
// OBI timing (gnt at once, response one cycle later).
module tb_soc_regs;
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
  addr_t      boot_addr;
  logic       fetch_en;
  data_t      status;
  logic [1:0] mode;

  soc_regs dut (.clk_i(clk), .rst_ni(rst_n), .obi_req_i(req), .obi_rsp_o(rsp),
                .boot_addr_o(boot_addr), .fetch_en_o(fetch_en),
                .core_status_o(status), .boot_mode_o(mode));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  initial begin
    data_t rd;
    logic  err;
    req = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(boot_addr == ImemBase, "boot address reset value");
    check(fetch_en == 1'b0, "fetch enable off after reset");
    rd_check(PeriphRegsBase + 0, ImemBase, "boot_addr reset");
    rd_check(PeriphRegsBase + 4, 0, "fetch_en reset");
    wr(PeriphRegsBase + 0, 32'h1000_0080);
    rd_check(PeriphRegsBase + 0, 32'h1000_0080, "boot_addr");
    check(boot_addr == 32'h1000_0080, "boot_addr_o");
    wr(PeriphRegsBase + 4, 32'hFFFF_FFFF);
    rd_check(PeriphRegsBase + 4, 32'h1, "fetch_en masked to 1 bit");
    check(fetch_en == 1'b1, "fetch_en_o");
    wr(PeriphRegsBase + 8, 32'hDEAD_BEEF);
    rd_check(PeriphRegsBase + 8, 32'hDEAD_BEEF, "core_status");
    check(status == 32'hDEAD_BEEF, "core_status_o");
    access(PeriphRegsBase + 8, 1'b1, 4'b0100, 32'h0055_0000, rd, err);
    rd_check(PeriphRegsBase + 8, 32'hDE55_BEEF, "byte enable write");
    wr(PeriphRegsBase + 12, 32'h7);
    rd_check(PeriphRegsBase + 12, 32'h3, "boot_mode masked to 2 bits");
    check(mode == 2'd3, "boot_mode_o");
    for (int n = 0; n < 50; n++) begin
      automatic data_t v = $urandom;
      wr(PeriphRegsBase + 8, v);
      rd_check(PeriphRegsBase + 8, v, "status random");
      check(status == v, "status_o random");
    end
    err_check(PeriphRegsBase + 16);
    err_check(PeriphRegsBase + 32'h100);
    wr(PeriphRegsBase + 4, 32'h0);
    check(fetch_en == 1'b0, "fetch_en cleared");
    finish_tb();
  end
endmodule
