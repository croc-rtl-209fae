// obi_demux: splits the crossbar's peripheral port among the peripherals.
//
// The single OBI manager port (from the crossbar) is steered by address to
// one of the peripheral subordinates (Regs, UART, GPIO, Timer, in the order
// of croc_pkg::periph_idx_e). The request is forwarded in the same cycle and
// the selected peripheral's gnt is returned; the index of the peripheral that
// granted is registered so its response, which arrives one cycle later, is
// passed back. An address inside the peripheral window that no peripheral
// decodes is granted at once and answered next cycle with err = 1.
//
// The demux itself is part of the platform's block diagram; its address map
// and its error answer are this design's own choices.
module obi_demux
  import croc_pkg::*;
#(
  parameter int unsigned NumSubs = croc_pkg::NumPeriph
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t mgr_req_i,
  output obi_rsp_t mgr_rsp_o,
  output obi_req_t sub_req_o [NumSubs],
  input  obi_rsp_t sub_rsp_i [NumSubs]
);

  localparam int unsigned SelW = $clog2(NumSubs + 1);
  typedef logic [SelW-1:0] sel_t;

  sel_t sel, sel_q;
  logic pend_q;
  id_t  aid_q;
  logic gnt;

  always_comb begin
    int d;
    d = periph_decode(mgr_req_i.a.addr);
    if (d < 0 || d >= int'(NumSubs)) sel = sel_t'(NumSubs);
    else                             sel = sel_t'(d);
  end

  always_comb begin
    gnt = 1'b0;
    for (int s = 0; s < NumSubs; s++) begin
      sub_req_o[s] = ObiReqIdle;
      if (sel == sel_t'(s)) begin
        sub_req_o[s] = mgr_req_i;
        gnt          = sub_rsp_i[s].gnt;
      end
    end
    if (sel == sel_t'(NumSubs)) gnt = 1'b1;
    gnt = gnt & mgr_req_i.req;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0;
      sel_q  <= '0;
      aid_q  <= '0;
    end else begin
      pend_q <= gnt;
      if (gnt) begin
        sel_q <= sel;
        aid_q <= mgr_req_i.a.aid;
      end
    end
  end

  always_comb begin
    mgr_rsp_o     = ObiRspIdle;
    mgr_rsp_o.gnt = gnt;
    if (pend_q) begin
      if (sel_q == sel_t'(NumSubs)) begin
        mgr_rsp_o.rvalid  = 1'b1;
        mgr_rsp_o.r.rdata = ErrRdata;
        mgr_rsp_o.r.rid   = aid_q;
        mgr_rsp_o.r.err   = 1'b1;
      end else begin
        for (int s = 0; s < NumSubs; s++) begin
          if (sel_q == sel_t'(s)) begin
            mgr_rsp_o.rvalid = sub_rsp_i[s].rvalid;
            mgr_rsp_o.r      = sub_rsp_i[s].r;
          end
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q |-> mgr_rsp_o.rvalid)
    else $error("obi_demux: peripheral did not answer one cycle after grant");

endmodule
