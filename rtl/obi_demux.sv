// obi_demux: one OBI manager port fanned out to NumSbr subordinates.
//
// Sits on the crossbar's peripheral port and selects one of the peripherals
// (debug, boot ROM, CLINT, SoC registers, UART, GPIO, timer) from the
// address and AddrMap. Request fields go to the selected subordinate only;
// its grant comes straight back. The index of the subordinate that granted
// is registered and used one cycle later to return its response, so every
// peripheral must answer exactly one cycle after its grant. An address that
// matches no window is granted and answered with err = 1 one cycle later.
// The windows and the error behaviour are this design's own choices.
module obi_demux #(
  parameter int unsigned NumSbr = croc_pkg::NumPeriph,
  parameter croc_pkg::addr_rule_t [NumSbr-1:0] AddrMap = croc_pkg::PeriphAddrMap
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  croc_pkg::obi_req_t              mgr_req_i,
  output croc_pkg::obi_rsp_t              mgr_rsp_o,
  output croc_pkg::obi_req_t [NumSbr-1:0] sbr_req_o,
  input  croc_pkg::obi_rsp_t [NumSbr-1:0] sbr_rsp_i
);
  import croc_pkg::*;
  localparam int unsigned IdxW = (NumSbr > 1) ? $clog2(NumSbr) : 1;

  logic [IdxW-1:0] sel, sel_q;
  logic            hit, pend_q, err_q;
  id_t             err_id_q;

  always_comb begin
    sel = '0;
    hit = 1'b0;
    for (int unsigned s = 0; s < NumSbr; s++) begin
      if (!hit && mgr_req_i.a.addr >= AddrMap[s].base &&
          mgr_req_i.a.addr - AddrMap[s].base < AddrMap[s].size) begin
        sel = IdxW'(s);
        hit = 1'b1;
      end
    end
  end

  always_comb begin
    for (int unsigned s = 0; s < NumSbr; s++) begin
      sbr_req_o[s]     = '0;
      sbr_req_o[s].a   = mgr_req_i.a;
      sbr_req_o[s].req = mgr_req_i.req && hit && (sel == IdxW'(s));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q   <= 1'b0;
      sel_q    <= '0;
      err_q    <= 1'b0;
      err_id_q <= '0;
    end else begin
      pend_q <= mgr_req_i.req && hit && sbr_rsp_i[sel].gnt;
      if (mgr_req_i.req && hit) sel_q <= sel;
      err_q  <= mgr_req_i.req && !hit;
      if (mgr_req_i.req && !hit) err_id_q <= mgr_req_i.a.aid;
    end
  end

  always_comb begin
    mgr_rsp_o     = '0;
    mgr_rsp_o.gnt = mgr_req_i.req && (hit ? sbr_rsp_i[sel].gnt : 1'b1);
    if (pend_q) begin
      mgr_rsp_o.rvalid = sbr_rsp_i[sel_q].rvalid;
      mgr_rsp_o.r      = sbr_rsp_i[sel_q].r;
    end else if (err_q) begin
      mgr_rsp_o.rvalid = 1'b1;
      mgr_rsp_o.r.err  = 1'b1;
      mgr_rsp_o.r.rid  = err_id_q;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q |-> sbr_rsp_i[sel_q].rvalid)
    else $error("obi_demux: subordinate missed its one-cycle response");

endmodule
