// uart: serial port, 8 data bits, no parity, 1 stop bit (8N1).
//
// Register map (byte offsets):
//   0x0 DATA    write: send the low byte (ignored while TX is busy, which
//               sets STATUS[4]); read: the last received byte, clears
//               STATUS[1]
//   0x4 STATUS  bit 0 TX busy, bit 1 RX byte valid, bit 2 RX overrun (a
//               byte arrived while the previous one was unread), bit 3 RX
//               framing error (stop bit low), bit 4 TX dropped; bits 2..4
//               clear when 1 is written to them
//   0x8 DIV     clock cycles per bit (reset DefaultDiv, minimum 2)
//   0xC IRQEN   bit 0: interrupt while RX byte valid; bit 1: interrupt
//               while TX idle
// The transmitter sends start bit, data bits LSB first, stop bit, each DIV
// cycles long. The receiver synchronises rx_i with two flip-flops, waits for
// a falling edge, checks the start bit half a bit later and then samples
// every DIV cycles in the middle of each bit. Buffers are one byte deep.
// Grant in the request cycle, response one cycle later. The frame format,
// register layout and buffer depth are this design's own choices; the
// source names the block and its pins only.
module uart #(
  parameter int unsigned DefaultDiv = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o,
  input  logic               rx_i,
  output logic               tx_o,
  output logic               irq_o
);
  import croc_pkg::*;

  typedef enum logic [1:0] {Idle, Start, Data, Stop} uart_state_e;

  // ------------------------------------------------------------ registers
  logic [15:0] div_q;
  logic [1:0]  irqen_q;
  logic        rx_valid_q, rx_ovr_q, rx_ferr_q, tx_drop_q;
  logic [7:0]  rx_byte_q;

  // ---------------------------------------------------------- transmitter
  uart_state_e tx_state_q;
  logic [15:0] tx_cnt_q;
  logic [2:0]  tx_bit_q;
  logic [7:0]  tx_shift_q;
  logic        tx_busy;

  // -------------------------------------------------------------- receiver
  uart_state_e rx_state_q;
  logic [15:0] rx_cnt_q;
  logic [2:0]  rx_bit_q;
  logic [7:0]  rx_shift_q;
  logic [2:0]  rx_sync_q;          // two sync stages + previous value
  logic        rx_s;

  // ------------------------------------------------------------------ bus
  logic        rvalid_q, err_q;
  id_t         rid_q;
  data_t       rdata_q, rdata_d;
  logic        valid_off, wr, rd;
  logic [1:0]  idx;
  data_t       div_word;
  logic [15:0] div_wr;

  assign idx       = obi_req_i.a.addr[3:2];
  assign valid_off = (obi_req_i.a.addr[11:4] == '0);
  assign wr        = obi_req_i.req && valid_off &&  obi_req_i.a.we;
  assign rd        = obi_req_i.req && valid_off && !obi_req_i.a.we;
  assign div_word  = apply_be({16'b0, div_q}, obi_req_i.a.wdata, obi_req_i.a.be);
  assign div_wr    = div_word[15:0];
  assign tx_busy   = (tx_state_q != Idle);
  assign rx_s      = rx_sync_q[1];

  always_comb begin
    unique case (idx)
      2'd0:    rdata_d = {24'b0, rx_byte_q};
      2'd1:    rdata_d = {27'b0, tx_drop_q, rx_ferr_q, rx_ovr_q, rx_valid_q, tx_busy};
      2'd2:    rdata_d = {16'b0, div_q};
      default: rdata_d = {30'b0, irqen_q};
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q      <= 16'(DefaultDiv);
      irqen_q    <= '0;
      rx_valid_q <= 1'b0;
      rx_ovr_q   <= 1'b0;
      rx_ferr_q  <= 1'b0;
      tx_drop_q  <= 1'b0;
      rx_byte_q  <= '0;
      tx_state_q <= Idle;
      tx_cnt_q   <= '0;
      tx_bit_q   <= '0;
      tx_shift_q <= '0;
      tx_o       <= 1'b1;
      rx_state_q <= Idle;
      rx_cnt_q   <= '0;
      rx_bit_q   <= '0;
      rx_shift_q <= '0;
      rx_sync_q  <= '1;
      rvalid_q   <= 1'b0;
      err_q      <= 1'b0;
      rid_q      <= '0;
      rdata_q    <= '0;
    end else begin
      // ---------------- transmitter
      unique case (tx_state_q)
        Idle: tx_o <= 1'b1;
        Start, Data, Stop: begin
          if (tx_cnt_q == div_q - 16'd1) begin
            tx_cnt_q <= '0;
            unique case (tx_state_q)
              Start: begin
                tx_state_q <= Data;
                tx_o       <= tx_shift_q[0];
              end
              Data: begin
                if (tx_bit_q == 3'd7) begin
                  tx_state_q <= Stop;
                  tx_o       <= 1'b1;
                end else begin
                  tx_bit_q   <= tx_bit_q + 3'd1;
                  tx_o       <= tx_shift_q[tx_bit_q + 3'd1];
                end
              end
              default: tx_state_q <= Idle;   // end of stop bit
            endcase
          end else begin
            tx_cnt_q <= tx_cnt_q + 16'd1;
          end
        end
      endcase

      // ---------------- receiver
      rx_sync_q <= {rx_sync_q[1:0], rx_i};
      unique case (rx_state_q)
        Idle: begin
          if (rx_sync_q[2] && !rx_s) begin     // falling edge: start bit
            rx_state_q <= Start;
            rx_cnt_q   <= '0;
          end
        end
        Start: begin
          if (rx_cnt_q == (div_q >> 1) - 16'd1) begin
            rx_cnt_q   <= '0;
            rx_bit_q   <= '0;
            rx_state_q <= rx_s ? Idle : Data;  // glitch: back to idle
          end else rx_cnt_q <= rx_cnt_q + 16'd1;
        end
        Data: begin
          if (rx_cnt_q == div_q - 16'd1) begin
            rx_cnt_q   <= '0;
            rx_shift_q <= {rx_s, rx_shift_q[7:1]};
            if (rx_bit_q == 3'd7) rx_state_q <= Stop;
            else                  rx_bit_q   <= rx_bit_q + 3'd1;
          end else rx_cnt_q <= rx_cnt_q + 16'd1;
        end
        default: begin                          // Stop
          if (rx_cnt_q == div_q - 16'd1) begin
            rx_cnt_q   <= '0;
            rx_state_q <= Idle;
            if (!rx_s) rx_ferr_q <= 1'b1;
            if (rx_valid_q && !(rd && idx == 2'd0)) rx_ovr_q <= 1'b1;
            rx_byte_q  <= rx_shift_q;
            rx_valid_q <= 1'b1;
          end else rx_cnt_q <= rx_cnt_q + 16'd1;
        end
      endcase

      // ---------------- bus
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !valid_off;
        rdata_q <= valid_off ? rdata_d : '0;
      end
      if (rd && idx == 2'd0 && !(rx_state_q == Stop && rx_cnt_q == div_q - 16'd1)) begin
        rx_valid_q <= 1'b0;
      end
      if (wr) begin
        unique case (idx)
          2'd0: if (obi_req_i.a.be[0]) begin
            if (tx_busy) begin
              tx_drop_q <= 1'b1;
            end else begin
              tx_shift_q <= obi_req_i.a.wdata[7:0];
              tx_state_q <= Start;
              tx_cnt_q   <= '0;
              tx_bit_q   <= '0;
              tx_o       <= 1'b0;
            end
          end
          2'd1: if (obi_req_i.a.be[0]) begin
            if (obi_req_i.a.wdata[2]) rx_ovr_q  <= 1'b0;
            if (obi_req_i.a.wdata[3]) rx_ferr_q <= 1'b0;
            if (obi_req_i.a.wdata[4]) tx_drop_q <= 1'b0;
          end
          2'd2: begin
            div_q <= (div_wr < 16'd2) ? 16'd2 : div_wr;
          end
          default: if (obi_req_i.a.be[0]) irqen_q <= obi_req_i.a.wdata[1:0];
        endcase
      end
    end
  end

  assign obi_rsp_o.gnt     = obi_req_i.req;
  assign obi_rsp_o.rvalid  = rvalid_q;
  assign obi_rsp_o.r.rdata = rdata_q;
  assign obi_rsp_o.r.err   = err_q;
  assign obi_rsp_o.r.rid   = rid_q;

  assign irq_o = (irqen_q[0] && rx_valid_q) || (irqen_q[1] && !tx_busy);

endmodule
