// timer: machine timer of the Croc domain.
//
// A 64-bit counter (mtime) counts clock cycles while the enable bit is set;
// irq_o (the core's timer interrupt) is high while the timer is enabled and
// mtime >= mtimecmp. Software clears the interrupt by moving mtimecmp ahead.
// Register map (offsets from the block base):
//   0x00 mtime[31:0]     R/W
//   0x04 mtime[63:32]    R/W
//   0x08 mtimecmp[31:0]  R/W  (reset: all ones)
//   0x0C mtimecmp[63:32] R/W  (reset: all ones)
//   0x10 ctrl            R/W  bit 0: enable
// Other offsets answer err = 1. gnt = req, response one cycle later; a
// write to mtime replaces the count at the grant's clock edge (the counter
// does not also advance in that cycle).
//
// The platform names this block only as "Timer"; the RISC-V machine-timer
// style register set is this design's own choice.
module timer
  import croc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output logic     irq_o
);

  logic [63:0] mtime_q, mtimecmp_q;
  logic        en_q;
  logic        rvalid_q, err_q;
  data_t       rdata_q;
  id_t         rid_q;

  logic [3:0] word;
  logic       hit, wr;
  data_t      rdata;

  assign word = obi_req_i.a.addr[5:2];
  assign wr   = obi_req_i.req && obi_req_i.a.we && hit;

  always_comb begin
    hit   = (obi_req_i.a.addr[11:6] == '0) && (word < 5);
    case (word)
      4'd0:    rdata = mtime_q[31:0];
      4'd1:    rdata = mtime_q[63:32];
      4'd2:    rdata = mtimecmp_q[31:0];
      4'd3:    rdata = mtimecmp_q[63:32];
      4'd4:    rdata = {31'b0, en_q};
      default: rdata = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q    <= '0;
      mtimecmp_q <= '1;
      en_q       <= 1'b0;
      rvalid_q   <= 1'b0;
      err_q      <= 1'b0;
      rdata_q    <= '0;
      rid_q      <= '0;
    end else begin
      if (en_q) mtime_q <= mtime_q + 64'd1;
      if (wr) begin
        case (word)
          4'd0: mtime_q[31:0]     <= apply_be(mtime_q[31:0],     obi_req_i.a.wdata, obi_req_i.a.be);
          4'd1: mtime_q[63:32]    <= apply_be(mtime_q[63:32],    obi_req_i.a.wdata, obi_req_i.a.be);
          4'd2: mtimecmp_q[31:0]  <= apply_be(mtimecmp_q[31:0],  obi_req_i.a.wdata, obi_req_i.a.be);
          4'd3: mtimecmp_q[63:32] <= apply_be(mtimecmp_q[63:32], obi_req_i.a.wdata, obi_req_i.a.be);
          4'd4: if (obi_req_i.a.be[0]) en_q <= obi_req_i.a.wdata[0];
          default: ;
        endcase
      end
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !hit;
        rdata_q <= (hit && !obi_req_i.a.we) ? rdata : '0;
      end
    end
  end

  assign irq_o = en_q && (mtime_q >= mtimecmp_q);

  always_comb begin
    obi_rsp_o         = ObiRspIdle;
    obi_rsp_o.gnt     = obi_req_i.req;
    obi_rsp_o.rvalid  = rvalid_q;
    obi_rsp_o.r.rdata = rdata_q;
    obi_rsp_o.r.rid   = rid_q;
    obi_rsp_o.r.err   = err_q;
  end

endmodule
