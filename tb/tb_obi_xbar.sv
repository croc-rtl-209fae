// tb_obi_xbar: self-checking test of the OBI crossbar.
//
// Four random managers issue reads and writes to all five subordinates and
// to unmapped addresses at once. The subordinates are single-cycle memory
// models in the testbench; the two that stand for external blocks (debug and
// user domain) hold gnt low at random to make managers wait. Each manager
// writes only its own words, so a per-manager reference model predicts every
// read. Checked: data, error answers for unmapped addresses, the response one
// cycle after the grant, that each subordinate only sees its own addresses,
// and that round-robin arbitration makes no manager wait more than
// NumMgr-1 cycles for a subordinate that keeps granting. Counted and
// required: parallel grants to different subordinates in one cycle,
// contention stalls, subordinate stalls and error answers.
module tb_obi_xbar;
  import croc_pkg::*;

  localparam int unsigned M = NumMgr;
  localparam int unsigned S = NumSub;
  localparam int unsigned SlotWords = 8;   // words per manager per subordinate

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  logic     run = 1'b0;
  logic     stop = 1'b0;
  obi_req_t mreq [M];
  obi_rsp_t mrsp [M];
  obi_req_t sreq [S];
  obi_rsp_t srsp [S];

  int checks = 0;
  int failures = 0;
  int n_parallel = 0, n_contention = 0, n_sub_stall = 0, n_err = 0, n_done = 0;

  always #5 clk = ~clk;

  obi_xbar dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mgr_req_i(mreq), .mgr_rsp_o(mrsp), .sub_req_o(sreq), .sub_rsp_i(srsp));

  function automatic addr_t sub_base(int s);
    case (s)
      0: return DebugBase;
      1: return ImemBase;
      2: return DmemBase;
      3: return PeriphBase;
      default: return UserBase;
    endcase
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, msg);
    end
  endtask

  // ---------------------------------------------------------- subordinates
  data_t smem [S][M*SlotWords];
  logic  sgnt_en [S];
  logic  s_rvalid_q [S];
  data_t s_rdata_q [S];
  id_t   s_rid_q [S];

  for (genvar s = 0; s < S; s++) begin : g_sub
    assign srsp[s].gnt     = sreq[s].req && sgnt_en[s];
    assign srsp[s].rvalid  = s_rvalid_q[s];
    assign srsp[s].r.rdata = s_rdata_q[s];
    assign srsp[s].r.rid   = s_rid_q[s];
    assign srsp[s].r.err   = 1'b0;
    always @(posedge clk) begin
      int w;
      w = int'((sreq[s].a.addr - sub_base(s)) >> 2) % (M * SlotWords);
      s_rvalid_q[s] <= srsp[s].gnt;
      if (srsp[s].gnt) begin
        s_rid_q[s]   <= sreq[s].a.aid;
        s_rdata_q[s] <= sreq[s].a.we ? '0 : smem[s][w];
        if (sreq[s].a.we) smem[s][w] = sreq[s].a.wdata;
      end
    end
    always @(negedge clk) begin
      sgnt_en[s] = (s == 0 || s == 4) ? ($urandom_range(3) != 0) : 1'b1;
      if (sreq[s].req) check(xbar_decode(sreq[s].a.addr) == s, "request routed to the wrong subordinate");
    end
  end

  // ---------------------------------------------------------- managers
  data_t ref_mem [M][S][SlotWords];
  logic  granted_q [M];
  int    wait_cnt [M];

  for (genvar m = 0; m < M; m++) begin : g_mgr
    logic  exp_err;
    logic  exp_we;
    data_t exp_data;
    id_t   exp_id;

    always @(posedge clk) granted_q[m] <= mreq[m].req && mrsp[m].gnt;

    always @(negedge clk) begin
      if (!run) begin
        mreq[m] = ObiReqIdle;
        wait_cnt[m] = 0;
      end else begin
        if (granted_q[m]) begin
          n_done++;
          check(mrsp[m].rvalid, "response one cycle after grant");
          check(mrsp[m].r.rid == exp_id, "rid");
          check(mrsp[m].r.err == exp_err, "err flag");
          if (!exp_we && !exp_err) check(mrsp[m].r.rdata == exp_data, $sformatf("mgr %0d read data", m));
          if (exp_err) n_err++;
        end else begin
          check(!mrsp[m].rvalid, "no spurious response");
        end
        if (mreq[m].req && !granted_q[m]) begin
          // Still waiting: the request stays unchanged.
          wait_cnt[m]++;
        end else if (!stop && $urandom_range(3) != 0) begin
          automatic int s = int'($urandom_range(S));      // S means an unmapped address
          automatic int w = int'($urandom_range(SlotWords - 1));
          mreq[m].req     = 1'b1;
          mreq[m].a.we    = logic'($urandom_range(1));
          mreq[m].a.be    = 4'hF;
          mreq[m].a.wdata = $urandom;
          mreq[m].a.aid   = id_t'($urandom);
          mreq[m].a.addr  = (s == S) ? 32'h4000_0000 + addr_t'(w * 4)
                                     : sub_base(s) + addr_t'((m * SlotWords + w) * 4);
          wait_cnt[m] = 0;
        end else begin
          mreq[m].req = 1'b0;
        end
      end
    end

    // Predict the answer at the grant (the subordinate acts at this edge).
    always @(posedge clk) begin
      if (run && mreq[m].req && mrsp[m].gnt) begin
        int s;
        int w;
        s = xbar_decode(mreq[m].a.addr);
        w = int'(mreq[m].a.addr[4:2]);
        exp_id  <= mreq[m].a.aid;
        exp_we  <= mreq[m].a.we;
        exp_err <= (s < 0);
        if (s >= 0) begin
          exp_data <= ref_mem[m][s][w];
          if (mreq[m].a.we) ref_mem[m][s][w] = mreq[m].a.wdata;
        end
      end
    end
  end

  // Statistics and the round-robin bound.
  always @(posedge clk) begin
    if (run) begin
      int ng;
      ng = 0;
      for (int m = 0; m < M; m++) begin
        if (mreq[m].req && mrsp[m].gnt) ng++;
        if (mreq[m].req && !mrsp[m].gnt) begin
          int s;
          s = xbar_decode(mreq[m].a.addr);
          if (s >= 0 && !sgnt_en[s]) n_sub_stall++;
          else n_contention++;
          if (s == 1 || s == 2 || s == 3)
            check(wait_cnt[m] < int'(M), "round-robin: waited longer than NumMgr-1 cycles");
        end
      end
      if (ng >= 2) n_parallel++;
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < M; m++) begin
      mreq[m] = ObiReqIdle;
      for (int s = 0; s < S; s++) for (int w = 0; w < SlotWords; w++) ref_mem[m][s][w] = '0;
    end
    for (int s = 0; s < S; s++) for (int w = 0; w < M * SlotWords; w++) smem[s][w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run = 1'b1;
    repeat (5000) @(negedge clk);
    stop = 1'b1;
    repeat (40) @(negedge clk);
    run = 1'b0;
    $display("transactions=%0d parallel=%0d contention=%0d sub_stall=%0d err=%0d",
             n_done, n_parallel, n_contention, n_sub_stall, n_err);
    check(n_done > 1000, "enough transactions");
    check(n_parallel > 0, "parallel grants happened");
    check(n_contention > 0, "contention happened");
    check(n_sub_stall > 0, "subordinate stalls happened");
    check(n_err > 0, "error answers happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
