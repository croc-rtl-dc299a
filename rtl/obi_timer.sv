// obi_timer: general-purpose 32-bit timer with compare interrupt.
//
// Register map (byte offsets):
//   0x0 CTRL    bit 0 enable, bit 1 auto-restart (counter returns to 0 on a
//               match), bits 15:8 prescaler P: the counter advances once
//               every P+1 clock cycles
//   0x4 COUNT   current count (writable)
//   0x8 CMP     compare value (reset all ones)
//   0xC STATUS  bit 0 match pending; write 1 to clear
// When the enabled counter advances onto CMP, STATUS[0] is set (and the
// counter restarts if auto-restart is on). irq_o = STATUS[0]. Unlisted
// offsets answer with err = 1. Grant in the request cycle, response one
// cycle later. The register set is this design's own; the source names the
// block only.
module obi_timer (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o,
  output logic               irq_o
);
  import croc_pkg::*;

  logic        en_q, auto_q, pend_q;
  logic [7:0]  presc_q, pcnt_q;
  data_t       cnt_q, cmp_q;
  logic        rvalid_q, err_q;
  id_t         rid_q;
  data_t       rdata_q, rdata_d;
  logic        valid_off, wr, tick;
  logic [1:0]  idx;
  data_t       cnt_next;

  assign idx       = obi_req_i.a.addr[3:2];
  assign valid_off = (obi_req_i.a.addr[11:4] == '0);
  assign wr        = obi_req_i.req && obi_req_i.a.we && valid_off;
  assign tick      = en_q && (pcnt_q == presc_q);
  assign cnt_next  = cnt_q + 32'd1;

  always_comb begin
    unique case (idx)
      2'd0:    rdata_d = {16'b0, presc_q, 6'b0, auto_q, en_q};
      2'd1:    rdata_d = cnt_q;
      2'd2:    rdata_d = cmp_q;
      default: rdata_d = {31'b0, pend_q};
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q     <= 1'b0;
      auto_q   <= 1'b0;
      presc_q  <= '0;
      pcnt_q   <= '0;
      cnt_q    <= '0;
      cmp_q    <= '1;
      pend_q   <= 1'b0;
      rvalid_q <= 1'b0;
      err_q    <= 1'b0;
      rid_q    <= '0;
      rdata_q  <= '0;
    end else begin
      // counting
      if (en_q) pcnt_q <= tick ? '0 : pcnt_q + 8'd1;
      if (tick) begin
        if (cnt_next == cmp_q) begin
          pend_q <= 1'b1;
          cnt_q  <= auto_q ? '0 : cnt_next;
        end else begin
          cnt_q  <= cnt_next;
        end
      end
      // bus
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !valid_off;
        rdata_q <= valid_off ? rdata_d : '0;
      end
      if (wr) begin
        unique case (idx)
          2'd0: begin
            if (obi_req_i.a.be[0]) begin
              en_q   <= obi_req_i.a.wdata[0];
              auto_q <= obi_req_i.a.wdata[1];
              pcnt_q <= '0;
            end
            if (obi_req_i.a.be[1]) presc_q <= obi_req_i.a.wdata[15:8];
          end
          2'd1: cnt_q <= apply_be(cnt_q, obi_req_i.a.wdata, obi_req_i.a.be);
          2'd2: cmp_q <= apply_be(cmp_q, obi_req_i.a.wdata, obi_req_i.a.be);
          default: if (obi_req_i.a.be[0] && obi_req_i.a.wdata[0]) pend_q <= 1'b0;
        endcase
      end
    end
  end

  assign obi_rsp_o.gnt     = obi_req_i.req;
  assign obi_rsp_o.rvalid  = rvalid_q;
  assign obi_rsp_o.r.rdata = rdata_q;
  assign obi_rsp_o.r.err   = err_q;
  assign obi_rsp_o.r.rid   = rid_q;

  assign irq_o = pend_q;

endmodule
