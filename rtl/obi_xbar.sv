// obi_xbar: the Croc domain's OBI crossbar.
//
// Every manager (core instruction port, core data port, debug system-bus
// port, user-domain manager) can reach every subordinate (debug memory,
// I-Mem, D-Mem, peripheral demux, user domain). Requests to different
// subordinates pass in the same cycle, so the core's fetch (to I-Mem) and its
// load/store (to D-Mem) never wait on each other. When several managers ask
// for the same subordinate in one cycle, a round-robin arbiter per
// subordinate picks one; the others see gnt low and keep their request up.
//
// The crossbar adds no register stage: a request reaches its subordinate in
// the cycle it is issued, and the manager's gnt is the subordinate's gnt. It
// relies on every subordinate answering exactly one cycle after the grant
// (asserted), so each manager only has to remember which subordinate it was
// granted by last cycle to pick up its response. An address no subordinate
// decodes is granted at once and answered one cycle later with err = 1.
//
// Which managers and subordinates exist follows the platform's block
// diagram; the round-robin policy, the fixed one-cycle response and the
// error answer are this design's own choices.
module obi_xbar
  import croc_pkg::*;
#(
  parameter int unsigned NumMgrs = croc_pkg::NumMgr,
  parameter int unsigned NumSubs = croc_pkg::NumSub
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t mgr_req_i [NumMgrs],
  output obi_rsp_t mgr_rsp_o [NumMgrs],
  output obi_req_t sub_req_o [NumSubs],
  input  obi_rsp_t sub_rsp_i [NumSubs]
);

  localparam int unsigned MgrIdxW = (NumMgrs > 1) ? $clog2(NumMgrs) : 1;
  // Target index NumSubs stands for the internal error subordinate.
  localparam int unsigned TgtIdxW = $clog2(NumSubs + 1);
  typedef logic [TgtIdxW-1:0] tgt_t;
  typedef logic [MgrIdxW-1:0] mgr_t;

  tgt_t mgr_tgt [NumMgrs];
  logic mgr_gnt [NumMgrs];

  logic sub_busy [NumSubs];
  mgr_t sub_win  [NumSubs];
  mgr_t rr_q     [NumSubs];

  logic pend_q [NumMgrs];
  tgt_t sel_q  [NumMgrs];
  id_t  aid_q  [NumMgrs];

  // Address decode per manager.
  always_comb begin
    for (int m = 0; m < NumMgrs; m++) begin
      int d;
      d = xbar_decode(mgr_req_i[m].a.addr);
      if (d < 0 || d >= int'(NumSubs)) mgr_tgt[m] = tgt_t'(NumSubs);
      else                             mgr_tgt[m] = tgt_t'(d);
    end
  end

  // Round-robin arbitration per subordinate: the search starts at rr_q.
  always_comb begin
    for (int s = 0; s < NumSubs; s++) begin
      sub_busy[s] = 1'b0;
      sub_win[s]  = '0;
      for (int k = 0; k < NumMgrs; k++) begin
        mgr_t m;
        m = mgr_t'((int'(rr_q[s]) + k) % NumMgrs);
        if (!sub_busy[s] && mgr_req_i[m].req && mgr_tgt[m] == tgt_t'(s)) begin
          sub_busy[s] = 1'b1;
          sub_win[s]  = m;
        end
      end
      sub_req_o[s] = sub_busy[s] ? mgr_req_i[sub_win[s]] : ObiReqIdle;
    end
  end

  // Grants back to the managers.
  always_comb begin
    for (int m = 0; m < NumMgrs; m++) begin
      mgr_gnt[m] = 1'b0;
      if (mgr_req_i[m].req) begin
        if (mgr_tgt[m] == tgt_t'(NumSubs)) begin
          mgr_gnt[m] = 1'b1;
        end else begin
          for (int s = 0; s < NumSubs; s++) begin
            if (mgr_tgt[m] == tgt_t'(s) && sub_busy[s] && sub_win[s] == mgr_t'(m))
              mgr_gnt[m] = sub_rsp_i[s].gnt;
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < NumSubs; s++) rr_q[s] <= '0;
      for (int m = 0; m < NumMgrs; m++) begin
        pend_q[m] <= 1'b0;
        sel_q[m]  <= '0;
        aid_q[m]  <= '0;
      end
    end else begin
      for (int s = 0; s < NumSubs; s++) begin
        if (sub_busy[s] && sub_rsp_i[s].gnt)
          rr_q[s] <= mgr_t'((int'(sub_win[s]) + 1) % NumMgrs);
      end
      for (int m = 0; m < NumMgrs; m++) begin
        pend_q[m] <= mgr_gnt[m];
        if (mgr_gnt[m]) begin
          sel_q[m] <= mgr_tgt[m];
          aid_q[m] <= mgr_req_i[m].a.aid;
        end
      end
    end
  end

  // Responses: taken from the subordinate that granted last cycle.
  always_comb begin
    for (int m = 0; m < NumMgrs; m++) begin
      mgr_rsp_o[m]     = ObiRspIdle;
      mgr_rsp_o[m].gnt = mgr_gnt[m];
      if (pend_q[m]) begin
        if (sel_q[m] == tgt_t'(NumSubs)) begin
          mgr_rsp_o[m].rvalid  = 1'b1;
          mgr_rsp_o[m].r.rdata = ErrRdata;
          mgr_rsp_o[m].r.rid   = aid_q[m];
          mgr_rsp_o[m].r.err   = 1'b1;
        end else begin
          for (int s = 0; s < NumSubs; s++) begin
            if (sel_q[m] == tgt_t'(s)) begin
              mgr_rsp_o[m].rvalid = sub_rsp_i[s].rvalid;
              mgr_rsp_o[m].r      = sub_rsp_i[s].r;
            end
          end
        end
      end
    end
  end

  // Every granted request must be answered in the next cycle.
  for (genvar m = 0; m < NumMgrs; m++) begin : gen_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      pend_q[m] |-> mgr_rsp_o[m].rvalid)
      else $error("obi_xbar: subordinate did not answer one cycle after grant");
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      (mgr_req_i[m].req && !mgr_gnt[m]) |=> mgr_req_i[m].req)
      else $error("obi_xbar: manager dropped an ungranted request");
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      (mgr_req_i[m].req && !mgr_gnt[m]) |=> $stable(mgr_req_i[m].a))
      else $error("obi_xbar: manager changed an ungranted request");
  end

endmodule
