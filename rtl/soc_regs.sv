// soc_regs: the SoC control registers ("Regs") of the Croc domain.
//
// A small OBI register file holding what the core needs from outside the
// core itself, and a word software uses to report its result:
//   0x0 boot_addr   R/W  address the core starts fetching from
//   0x4 fetch_en    R/W  bit 0: core may fetch
//   0x8 core_status R/W  free word, written by software (e.g. exit code)
//   0xC boot_mode   R/W  bits 1:0
// Byte enables apply to every register. Other offsets answer err = 1.
//
// Timing: gnt = req; rvalid/rdata one cycle later; a write takes effect at
// the clock edge of the grant. The register set is this design's own choice:
// the platform names the block only as "Regs".
module soc_regs
  import croc_pkg::*;
#(
  parameter addr_t BootAddrDefault = croc_pkg::ImemBase
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output addr_t    boot_addr_o,
  output logic     fetch_en_o,
  output data_t    core_status_o,
  output logic [1:0] boot_mode_o
);

  data_t boot_addr_q, fetch_en_q, status_q, mode_q;
  logic  rvalid_q, err_q;
  data_t rdata_q;
  id_t   rid_q;

  logic [3:0] word;
  assign word = obi_req_i.a.addr[5:2];

  logic  hit;
  data_t rdata;
  always_comb begin
    hit   = (obi_req_i.a.addr[11:6] == '0) && (word < 4);
    rdata = '0;
    unique case (word)
      4'd0:    rdata = boot_addr_q;
      4'd1:    rdata = fetch_en_q;
      4'd2:    rdata = status_q;
      4'd3:    rdata = mode_q;
      default: rdata = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      boot_addr_q <= BootAddrDefault;
      fetch_en_q  <= '0;
      status_q    <= '0;
      mode_q      <= '0;
      rvalid_q    <= 1'b0;
      err_q       <= 1'b0;
      rdata_q     <= '0;
      rid_q       <= '0;
    end else begin
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !hit;
        rdata_q <= (hit && !obi_req_i.a.we) ? rdata : '0;
        if (hit && obi_req_i.a.we) begin
          case (word)
            4'd0: boot_addr_q <= apply_be(boot_addr_q, obi_req_i.a.wdata, obi_req_i.a.be);
            4'd1: fetch_en_q  <= apply_be(fetch_en_q,  obi_req_i.a.wdata, obi_req_i.a.be) & 32'h1;
            4'd2: status_q    <= apply_be(status_q,    obi_req_i.a.wdata, obi_req_i.a.be);
            4'd3: mode_q      <= apply_be(mode_q,      obi_req_i.a.wdata, obi_req_i.a.be) & 32'h3;
            default: ;
          endcase
        end
      end
    end
  end

  assign boot_addr_o   = boot_addr_q;
  assign fetch_en_o    = fetch_en_q[0];
  assign core_status_o = status_q;
  assign boot_mode_o   = mode_q[1:0];

  always_comb begin
    obi_rsp_o         = ObiRspIdle;
    obi_rsp_o.gnt     = obi_req_i.req;
    obi_rsp_o.rvalid  = rvalid_q;
    obi_rsp_o.r.rdata = rdata_q;
    obi_rsp_o.r.rid   = rid_q;
    obi_rsp_o.r.err   = err_q;
  end

endmodule
