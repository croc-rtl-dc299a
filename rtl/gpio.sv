// gpio: general-purpose I/O pins.
//
// Register map (byte offsets, one bit per pin):
//   0x00 DIR      1 = pin driven by OUT (gpio_oe_o), 0 = input
//   0x04 OUT      output values (gpio_o)
//   0x08 IN       pin values after a two-flip-flop synchroniser (read only)
//   0x0C IRQEN    per-pin enable of the change interrupt
//   0x10 IRQSTAT  per-pin "input changed" flags, set when the synchronised
//                 input of an enabled pin changes; write 1 to clear
// irq_o is high while any IRQSTAT bit is set. Unlisted offsets answer with
// err = 1. Grant in the request cycle, response one cycle later. The pin
// count and the register set are this design's own choices; the source
// names the block and its pins only.
module gpio #(
  parameter int unsigned NumGpio = 32
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o,
  input  logic [NumGpio-1:0] gpio_i,
  output logic [NumGpio-1:0] gpio_o,
  output logic [NumGpio-1:0] gpio_oe_o,
  output logic               irq_o
);
  import croc_pkg::*;

  typedef logic [NumGpio-1:0] pins_t;

  pins_t dir_q, out_q, sync0_q, in_q, in_prev_q, irqen_q, stat_q;
  logic  rvalid_q, err_q;
  id_t   rid_q;
  data_t rdata_q, rdata_d;
  logic  valid_off, wr;
  logic [2:0] idx;
  pins_t wmask, stat_clr;

  assign idx       = obi_req_i.a.addr[4:2];
  assign valid_off = (obi_req_i.a.addr[11:5] == '0) && (idx <= 3'd4);
  assign wr        = obi_req_i.req && obi_req_i.a.we && valid_off;

  // byte enables expanded to a pin mask
  always_comb begin
    for (int unsigned i = 0; i < NumGpio; i++) wmask[i] = obi_req_i.a.be[(i / 8) % 4];
  end

  assign stat_clr = (wr && idx == 3'd4) ? (obi_req_i.a.wdata[NumGpio-1:0] & wmask) : '0;

  always_comb begin
    rdata_d = '0;
    unique case (idx)
      3'd0:    rdata_d[NumGpio-1:0] = dir_q;
      3'd1:    rdata_d[NumGpio-1:0] = out_q;
      3'd2:    rdata_d[NumGpio-1:0] = in_q;
      3'd3:    rdata_d[NumGpio-1:0] = irqen_q;
      default: rdata_d[NumGpio-1:0] = stat_q;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dir_q     <= '0;
      out_q     <= '0;
      sync0_q   <= '0;
      in_q      <= '0;
      in_prev_q <= '0;
      irqen_q   <= '0;
      stat_q    <= '0;
      rvalid_q  <= 1'b0;
      err_q     <= 1'b0;
      rid_q     <= '0;
      rdata_q   <= '0;
    end else begin
      sync0_q   <= gpio_i;
      in_q      <= sync0_q;
      in_prev_q <= in_q;

      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !valid_off;
        rdata_q <= valid_off ? rdata_d : '0;
      end

      // change flags: new events set, write-1 clears (set wins)
      stat_q <= (stat_q & ~stat_clr) | ((in_q ^ in_prev_q) & irqen_q);

      if (wr) begin
        unique case (idx)
          3'd0: dir_q   <= (dir_q   & ~wmask) | (obi_req_i.a.wdata[NumGpio-1:0] & wmask);
          3'd1: out_q   <= (out_q   & ~wmask) | (obi_req_i.a.wdata[NumGpio-1:0] & wmask);
          3'd3: irqen_q <= (irqen_q & ~wmask) | (obi_req_i.a.wdata[NumGpio-1:0] & wmask);
          default: ;
        endcase
      end
    end
  end

  assign obi_rsp_o.gnt     = obi_req_i.req;
  assign obi_rsp_o.rvalid  = rvalid_q;
  assign obi_rsp_o.r.rdata = rdata_q;
  assign obi_rsp_o.r.err   = err_q;
  assign obi_rsp_o.r.rid   = rid_q;

  assign gpio_o    = out_q;
  assign gpio_oe_o = dir_q;
  assign irq_o     = |stat_q;

endmodule
