// rv32_core_model: behavioural stand-in for the processor core, for
// testbenches only (not synthesizable, not part of the design).
//
// Executes an RV32I subset (LUI, AUIPC, JAL, JALR, branches, LW, SW, the
// register-immediate and register-register ALU operations) from memory over
// two OBI manager ports, the way a core with separate instruction and data
// ports uses the Croc domain. It is an ideal core: in the cycle an
// instruction is executed, the fetch of the next instruction and the
// instruction's own load or store are issued together, and a load's result
// is available to the next instruction. With single-cycle memory on both
// ports it therefore retires one instruction per cycle; every cycle in which
// a request is not granted (for instance because instruction and data go to
// the same bank) costs a stall cycle. EBREAK halts the model.
//
// Timing: requests are driven just after the falling clock edge, the grant
// is looked at shortly after and the response at the next falling edge.
// The model waits for fetch_en_i and then starts at boot_addr_i.
module rv32_core_model
  import croc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     fetch_en_i,
  input  addr_t    boot_addr_i,
  output obi_req_t instr_req_o,
  input  obi_rsp_t instr_rsp_i,
  output obi_req_t data_req_o,
  input  obi_rsp_t data_rsp_i,
  output logic     halted_o,
  output int       retired_o,
  output int       cycles_o,
  output int       stalls_o,
  output int       illegal_o
);

  data_t regs [32];

  initial begin
    addr_t pc_f;
    logic  f_req, f_pend, d_req, d_pend, d_load, ibuf_valid, started;
    data_t ibuf;
    addr_t ibuf_pc;
    logic [4:0] d_rd;
    obi_req_t dreq;

    instr_req_o = ObiReqIdle;
    data_req_o  = ObiReqIdle;
    halted_o    = 1'b0;
    retired_o   = 0;
    cycles_o    = 0;
    stalls_o    = 0;
    illegal_o   = 0;
    for (int i = 0; i < 32; i++) regs[i] = '0;
    f_req = 1'b0; f_pend = 1'b0; d_req = 1'b0; d_pend = 1'b0; d_load = 1'b0;
    ibuf_valid = 1'b0; started = 1'b0; ibuf = '0; ibuf_pc = '0; d_rd = '0;
    pc_f = '0;
    dreq = ObiReqIdle;

    while (!halted_o) begin
      @(negedge clk_i);
      if (!rst_ni) continue;
      if (!started) begin
        if (!fetch_en_i) continue;
        started = 1'b1;
        pc_f    = boot_addr_i;
        f_req   = 1'b1;
      end else begin
        cycles_o++;
      end
      // Responses to last cycle's grants.
      if (f_pend) begin
        ibuf       = instr_rsp_i.r.rdata;
        ibuf_pc    = pc_f;
        ibuf_valid = 1'b1;
        f_pend     = 1'b0;
      end
      if (d_pend) begin
        if (d_load && d_rd != 0) regs[d_rd] = data_rsp_i.r.rdata;
        d_pend = 1'b0;
      end
      // Execute when both ports are free.
      if (ibuf_valid && !f_req && !d_req) begin
        logic [6:0]  opc;
        logic [4:0]  rd, rs1, rs2;
        logic [2:0]  f3;
        logic [6:0]  f7;
        data_t       a, b, immi, imms, immb, immu, immj, res;
        addr_t       npc;
        logic        wb;
        opc  = ibuf[6:0];   rd  = ibuf[11:7];  f3 = ibuf[14:12];
        rs1  = ibuf[19:15]; rs2 = ibuf[24:20]; f7 = ibuf[31:25];
        a    = regs[rs1];   b   = regs[rs2];
        immi = {{20{ibuf[31]}}, ibuf[31:20]};
        imms = {{20{ibuf[31]}}, ibuf[31:25], ibuf[11:7]};
        immb = {{19{ibuf[31]}}, ibuf[31], ibuf[7], ibuf[30:25], ibuf[11:8], 1'b0};
        immu = {ibuf[31:12], 12'b0};
        immj = {{11{ibuf[31]}}, ibuf[31], ibuf[19:12], ibuf[20], ibuf[30:21], 1'b0};
        npc  = ibuf_pc + 4;
        wb   = 1'b0;
        res  = '0;
        ibuf_valid = 1'b0;
        retired_o++;
        case (opc)
          7'b0110111: begin res = immu; wb = 1'b1; end                       // LUI
          7'b0010111: begin res = ibuf_pc + immu; wb = 1'b1; end             // AUIPC
          7'b1101111: begin res = npc; wb = 1'b1; npc = ibuf_pc + immj; end  // JAL
          7'b1100111: begin res = npc; wb = 1'b1; npc = (a + immi) & ~32'h1; end  // JALR
          7'b1100011: begin                                                  // branches
            logic t;
            case (f3)
              3'b000: t = (a == b);
              3'b001: t = (a != b);
              3'b100: t = ($signed(a) < $signed(b));
              3'b101: t = ($signed(a) >= $signed(b));
              3'b110: t = (a < b);
              3'b111: t = (a >= b);
              default: begin t = 1'b0; illegal_o++; end
            endcase
            if (t) npc = ibuf_pc + immb;
          end
          7'b0000011, 7'b0100011: begin                                      // LW, SW
            if (f3 != 3'b010) illegal_o++;
            d_load = (opc == 7'b0000011);
            d_rd   = rd;
            dreq.req     = 1'b1;
            dreq.a.addr  = a + (d_load ? immi : imms);
            dreq.a.we    = !d_load;
            dreq.a.be    = 4'hF;
            dreq.a.wdata = b;
            dreq.a.aid   = '0;
            d_req = 1'b1;
          end
          7'b0010011, 7'b0110011: begin                                      // ALU
            data_t op2;
            logic  alt;
            op2 = (opc == 7'b0010011) ? immi : b;
            alt = (opc == 7'b0110011) ? f7[5] : 1'b0;
            wb  = 1'b1;
            case (f3)
              3'b000: res = alt ? a - op2 : a + op2;
              3'b001: res = a << op2[4:0];
              3'b010: res = data_t'($signed(a) < $signed(op2));
              3'b011: res = data_t'(a < op2);
              3'b100: res = a ^ op2;
              3'b101: res = f7[5] ? data_t'($signed(a) >>> op2[4:0]) : a >> op2[4:0];
              3'b110: res = a | op2;
              default: res = a & op2;
            endcase
          end
          7'b1110011: begin halted_o = 1'b1; end                             // EBREAK
          default: illegal_o++;
        endcase
        if (wb && rd != 0) regs[rd] = res;
        if (!halted_o) begin
          pc_f  = npc;
          f_req = 1'b1;
        end
      end
      // Drive the ports and look at the grants.
      instr_req_o = ObiReqIdle;
      if (f_req) begin
        instr_req_o.req    = 1'b1;
        instr_req_o.a.addr = pc_f;
        instr_req_o.a.be   = 4'hF;
      end
      data_req_o = d_req ? dreq : ObiReqIdle;
      #1;
      if ((f_req && !instr_rsp_i.gnt) || (d_req && !data_rsp_i.gnt)) stalls_o++;
      if (f_req && instr_rsp_i.gnt) begin f_req = 1'b0; f_pend = 1'b1; end
      if (d_req && data_rsp_i.gnt)  begin d_req = 1'b0; d_pend = 1'b1; end
    end
    @(negedge clk_i);
    instr_req_o = ObiReqIdle;
    data_req_o  = ObiReqIdle;
  end

endmodule
