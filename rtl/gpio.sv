// gpio: general-purpose I/O of the Croc domain.
//
// Each of the NumPins pins has an output value, an output enable and an
// input read through a two-flop synchroniser. An input that changes while
// its interrupt enable bit is set latches a pending bit; irq_o is high while
// any pending bit is set. Register map (word offsets from the block base):
//   0x00 in       R    synchronised pad inputs
//   0x04 out      R/W  pad output values
//   0x08 oe       R/W  pad output enables
//   0x0C irq_en   R/W  per-pin interrupt enable
//   0x10 irq_pend R/W1C per-pin pending input changes, write 1 to clear
// Other offsets answer err = 1. gnt = req, response one cycle later.
//
// The default pin count (26) is the GPIO count of the first chip built on this
// platform; the register map and the change interrupt are this design's
// own choices.
module gpio
  import croc_pkg::*;
#(
  parameter int unsigned NumPins = croc_pkg::NumGpio
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  obi_req_t           obi_req_i,
  output obi_rsp_t           obi_rsp_o,
  input  logic [NumPins-1:0] gpio_i,
  output logic [NumPins-1:0] gpio_o,
  output logic [NumPins-1:0] gpio_oe_o,
  output logic               irq_o
);

  typedef logic [NumPins-1:0] pins_t;

  pins_t sync0_q, sync1_q, prev_q;
  pins_t out_q, oe_q, en_q, pend_q;
  logic  rvalid_q, err_q;
  data_t rdata_q;
  id_t   rid_q;

  logic [3:0] word;
  logic       hit;
  data_t      rdata;
  pins_t      wmask, wval, change;

  assign word   = obi_req_i.a.addr[5:2];
  assign change = (sync1_q ^ prev_q) & en_q;

  always_comb begin
    hit   = (obi_req_i.a.addr[11:6] == '0) && (word < 5);
    rdata = '0;
    case (word)
      4'd0:    rdata = data_t'(sync1_q);
      4'd1:    rdata = data_t'(out_q);
      4'd2:    rdata = data_t'(oe_q);
      4'd3:    rdata = data_t'(en_q);
      4'd4:    rdata = data_t'(pend_q);
      default: rdata = '0;
    endcase
    for (int i = 0; i < NumPins; i++) wmask[i] = obi_req_i.a.be[i/8];
    wval = obi_req_i.a.wdata[NumPins-1:0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sync0_q  <= '0;
      sync1_q  <= '0;
      prev_q   <= '0;
      out_q    <= '0;
      oe_q     <= '0;
      en_q     <= '0;
      pend_q   <= '0;
      rvalid_q <= 1'b0;
      err_q    <= 1'b0;
      rdata_q  <= '0;
      rid_q    <= '0;
    end else begin
      sync0_q <= gpio_i;
      sync1_q <= sync0_q;
      prev_q  <= sync1_q;
      pend_q  <= pend_q | change;
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !hit;
        rdata_q <= (hit && !obi_req_i.a.we) ? rdata : '0;
        if (hit && obi_req_i.a.we) begin
          case (word)
            4'd1: out_q  <= (out_q & ~wmask) | (wval & wmask);
            4'd2: oe_q   <= (oe_q  & ~wmask) | (wval & wmask);
            4'd3: en_q   <= (en_q  & ~wmask) | (wval & wmask);
            4'd4: pend_q <= (pend_q & ~(wval & wmask)) | change;
            default: ;
          endcase
        end
      end
    end
  end

  assign gpio_o    = out_q;
  assign gpio_oe_o = oe_q;
  assign irq_o     = |pend_q;

  always_comb begin
    obi_rsp_o         = ObiRspIdle;
    obi_rsp_o.gnt     = obi_req_i.req;
    obi_rsp_o.rvalid  = rvalid_q;
    obi_rsp_o.r.rdata = rdata_q;
    obi_rsp_o.r.rid   = rid_q;
    obi_rsp_o.r.err   = err_q;
  end

endmodule
