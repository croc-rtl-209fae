// sram_bank: one SRAM bank of the Croc domain, seen as an OBI subordinate.
//
// Croc has two of these banks, one holding instructions (I-Mem) and one
// holding data (D-Mem), so that the core's fetch and load/store ports never
// compete for the same bank. The bank accepts every request in the cycle it
// arrives (gnt = req) and answers exactly one cycle later: a read returns the
// addressed word, a write merges wdata into the word under the byte enables
// and returns rdata = 0. The address is a byte address; bits [1:0] are
// ignored and the word index wraps inside the bank.
//
// Interface: clk_i, rst_ni (asynchronous, active low), obi_req_i/obi_rsp_o.
// Timing: gnt combinational from req, rvalid/rdata registered (1 cycle).
//
// In silicon the bank is an SRAM macro; here it is a plain array that
// synthesis maps to a memory. The storage itself is not reset, like an SRAM;
// only the response state is. The bank size is this design's choice.
module sram_bank
  import croc_pkg::*;
#(
  parameter int unsigned NumWords = croc_pkg::SramNumWords
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o
);

  localparam int unsigned IdxWidth = (NumWords > 1) ? $clog2(NumWords) : 1;

  data_t mem_q [NumWords];

  logic              rvalid_q;
  data_t             rdata_q;
  id_t               rid_q;
  logic [IdxWidth-1:0] idx;

  assign idx = obi_req_i.a.addr[2 +: IdxWidth];

  always_ff @(posedge clk_i) begin
    if (obi_req_i.req && obi_req_i.a.we) begin
      for (int i = 0; i < DataWidth / 8; i++) begin
        if (obi_req_i.a.be[i]) mem_q[idx][8*i +: 8] <= obi_req_i.a.wdata[8*i +: 8];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      rid_q    <= '0;
    end else begin
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        rdata_q <= obi_req_i.a.we ? '0 : mem_q[idx];
      end
    end
  end

  always_comb begin
    obi_rsp_o          = ObiRspIdle;
    obi_rsp_o.gnt      = obi_req_i.req;
    obi_rsp_o.rvalid   = rvalid_q;
    obi_rsp_o.r.rdata  = rdata_q;
    obi_rsp_o.r.rid    = rid_q;
    obi_rsp_o.r.err    = 1'b0;
  end

endmodule
