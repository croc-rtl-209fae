// uart: serial port of the Croc domain (8 data bits, no parity, 1 stop bit).
//
// Transmit: writing the data register while the transmitter is idle starts a
// frame: start bit (0), 8 data bits LSB first, stop bit (1), each held for
// `div` clock cycles. Writes while a frame is going out are dropped.
// Receive: the input passes a two-flop synchroniser; a falling edge on the
// idle line starts a frame, which is checked at half a bit time and then
// sampled in the middle of each data bit and of the stop bit. A frame with a
// good stop bit is stored in the receive buffer and sets rx_valid; reading
// the data register clears rx_valid. A byte arriving while rx_valid is still
// set overwrites the buffer and sets the sticky overrun flag.
// Register map (offsets from the block base):
//   0x0 data    W: byte to send   R: received byte (clears rx_valid)
//   0x4 status  R: bit0 tx_busy, bit1 rx_valid, bit2 overrun;
//               W: writing bit2 = 1 clears overrun
//   0x8 div     R/W: clock cycles per bit (minimum 2)
//   0xC irq_en  R/W: bit0 enables irq_o while rx_valid
// Other offsets answer err = 1. gnt = req, response one cycle later.
//
// The platform has a UART but does not describe it; the frame format, the
// single-byte buffers and the register map are this design's own choices.
// The reset divisor, 694, gives 115200 baud at an 80 MHz clock.
module uart
  import croc_pkg::*;
#(
  parameter int unsigned DivWidth   = 16,
  parameter int unsigned DivDefault = 694
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  input  logic     uart_rx_i,
  output logic     uart_tx_o,
  output logic     irq_o
);

  typedef logic [DivWidth-1:0] div_t;

  // Register interface.
  logic [3:0] word;
  logic       hit, wr, rd;
  data_t      rdata;
  logic       rvalid_q, err_q;
  data_t      rdata_q;
  id_t        rid_q;

  div_t       div_q;
  logic       irq_en_q;

  // Transmitter.
  logic       tx_busy_q;
  logic [9:0] tx_shift_q;
  logic [3:0] tx_bits_q;
  div_t       tx_cnt_q;

  // Receiver.
  typedef enum logic [1:0] { RxIdle, RxStart, RxData, RxStop } rx_state_e;
  rx_state_e  rx_state_q;
  logic       rx_sync0_q, rx_sync1_q;
  div_t       rx_cnt_q;
  logic [2:0] rx_bit_q;
  logic [7:0] rx_shift_q, rx_data_q;
  logic       rx_valid_q, overrun_q;

  assign word = obi_req_i.a.addr[5:2];
  assign wr   = obi_req_i.req && obi_req_i.a.we && hit;
  assign rd   = obi_req_i.req && !obi_req_i.a.we && hit;

  always_comb begin
    hit = (obi_req_i.a.addr[11:6] == '0) && (word < 4);
    case (word)
      4'd0:    rdata = {24'b0, rx_data_q};
      4'd1:    rdata = {29'b0, overrun_q, rx_valid_q, tx_busy_q};
      4'd2:    rdata = data_t'(div_q);
      4'd3:    rdata = {31'b0, irq_en_q};
      default: rdata = '0;
    endcase
  end

  // Register writes and the bus response.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q    <= div_t'(DivDefault);
      irq_en_q <= 1'b0;
      rvalid_q <= 1'b0;
      err_q    <= 1'b0;
      rdata_q  <= '0;
      rid_q    <= '0;
    end else begin
      if (wr && word == 4'd2) begin
        div_q <= (div_t'(obi_req_i.a.wdata) < div_t'(2)) ? div_t'(2) : div_t'(obi_req_i.a.wdata);
      end
      if (wr && word == 4'd3) irq_en_q <= obi_req_i.a.wdata[0];
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !hit;
        rdata_q <= rd ? rdata : '0;
      end
    end
  end

  // Transmitter: shift register of start, data and stop bits.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tx_busy_q  <= 1'b0;
      tx_shift_q <= '1;
      tx_bits_q  <= '0;
      tx_cnt_q   <= '0;
    end else if (!tx_busy_q) begin
      if (wr && word == 4'd0) begin
        tx_busy_q  <= 1'b1;
        tx_shift_q <= {1'b1, obi_req_i.a.wdata[7:0], 1'b0};
        tx_bits_q  <= 4'd10;
        tx_cnt_q   <= div_q - div_t'(1);
      end
    end else if (tx_cnt_q != '0) begin
      tx_cnt_q <= tx_cnt_q - div_t'(1);
    end else begin
      tx_shift_q <= {1'b1, tx_shift_q[9:1]};
      tx_bits_q  <= tx_bits_q - 4'd1;
      tx_cnt_q   <= div_q - div_t'(1);
      if (tx_bits_q == 4'd1) tx_busy_q <= 1'b0;
    end
  end

  assign uart_tx_o = tx_busy_q ? tx_shift_q[0] : 1'b1;

  // Receiver.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_sync0_q <= 1'b1;
      rx_sync1_q <= 1'b1;
      rx_state_q <= RxIdle;
      rx_cnt_q   <= '0;
      rx_bit_q   <= '0;
      rx_shift_q <= '0;
      rx_data_q  <= '0;
      rx_valid_q <= 1'b0;
      overrun_q  <= 1'b0;
    end else begin
      rx_sync0_q <= uart_rx_i;
      rx_sync1_q <= rx_sync0_q;
      if (rd && word == 4'd0) rx_valid_q <= 1'b0;
      if (wr && word == 4'd1 && obi_req_i.a.wdata[2]) overrun_q <= 1'b0;
      unique case (rx_state_q)
        RxIdle: begin
          if (!rx_sync1_q) begin
            rx_state_q <= RxStart;
            rx_cnt_q   <= (div_q >> 1) - div_t'(1);
          end
        end
        RxStart: begin
          if (rx_cnt_q != '0) rx_cnt_q <= rx_cnt_q - div_t'(1);
          else if (rx_sync1_q) rx_state_q <= RxIdle;  // glitch, not a start bit
          else begin
            rx_state_q <= RxData;
            rx_cnt_q   <= div_q - div_t'(1);
            rx_bit_q   <= '0;
          end
        end
        RxData: begin
          if (rx_cnt_q != '0) rx_cnt_q <= rx_cnt_q - div_t'(1);
          else begin
            rx_shift_q <= {rx_sync1_q, rx_shift_q[7:1]};
            rx_cnt_q   <= div_q - div_t'(1);
            rx_bit_q   <= rx_bit_q + 3'd1;
            if (rx_bit_q == 3'd7) rx_state_q <= RxStop;
          end
        end
        RxStop: begin
          if (rx_cnt_q != '0) rx_cnt_q <= rx_cnt_q - div_t'(1);
          else begin
            rx_state_q <= RxIdle;
            if (rx_sync1_q) begin
              rx_data_q  <= rx_shift_q;
              rx_valid_q <= 1'b1;
              if (rx_valid_q && !(rd && word == 4'd0)) overrun_q <= 1'b1;
            end
          end
        end
        default: rx_state_q <= RxIdle;
      endcase
    end
  end

  assign irq_o = irq_en_q && rx_valid_q;

  always_comb begin
    obi_rsp_o         = ObiRspIdle;
    obi_rsp_o.gnt     = obi_req_i.req;
    obi_rsp_o.rvalid  = rvalid_q;
    obi_rsp_o.r.rdata = rdata_q;
    obi_rsp_o.r.rid   = rid_q;
    obi_rsp_o.r.err   = err_q;
  end

endmodule
