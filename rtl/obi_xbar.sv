// obi_xbar: the main OBI crossbar of the SoC.
//
// NumMgr managers (core instruction port, core data port, debug unit, user
// domain) reach NumSbr subordinates (SRAM bank 0, SRAM bank 1, peripheral
// demux, user domain). Each manager's address is decoded against AddrMap;
// each subordinate has its own round-robin arbiter, so managers that target
// different subordinates are all served in the same cycle. This is what
// lets the core fetch from one bank and load/store to the other at one
// access per cycle each.
//
// Timing: the grant is combinational (same cycle as the request). Every
// subordinate must answer exactly one cycle after it granted; the crossbar
// registers the index of the granted manager per subordinate and steers the
// response back with it. Since a manager receives at most one grant per
// cycle, it receives at most one response per cycle. A request that matches
// no window is granted at once and answered one cycle later with err = 1.
// The fixed one-cycle response rule and the round-robin policy are this
// design's own choices; the source only calls the interconnect single-cycle.
module obi_xbar #(
  parameter int unsigned NumMgr = croc_pkg::XbarNumMgr,
  parameter int unsigned NumSbr = croc_pkg::XbarNumSbr,
  parameter croc_pkg::addr_rule_t [NumSbr-1:0] AddrMap = croc_pkg::XbarAddrMap
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  croc_pkg::obi_req_t [NumMgr-1:0] mgr_req_i,
  output croc_pkg::obi_rsp_t [NumMgr-1:0] mgr_rsp_o,
  output croc_pkg::obi_req_t [NumSbr-1:0] sbr_req_o,
  input  croc_pkg::obi_rsp_t [NumSbr-1:0] sbr_rsp_i
);
  import croc_pkg::*;
  localparam int unsigned MgrIdxW = (NumMgr > 1) ? $clog2(NumMgr) : 1;
  localparam int unsigned SbrIdxW = (NumSbr > 1) ? $clog2(NumSbr) : 1;

  // ------------------------------------------------------- address decode
  logic [NumMgr-1:0][SbrIdxW-1:0] sel;
  logic [NumMgr-1:0]              hit;

  always_comb begin
    for (int unsigned m = 0; m < NumMgr; m++) begin
      sel[m] = '0;
      hit[m] = 1'b0;
      for (int unsigned s = 0; s < NumSbr; s++) begin
        if (!hit[m] && mgr_req_i[m].a.addr >= AddrMap[s].base &&
            mgr_req_i[m].a.addr - AddrMap[s].base < AddrMap[s].size) begin
          sel[m] = SbrIdxW'(s);
          hit[m] = 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------- arbitration
  logic [NumSbr-1:0][NumMgr-1:0]  sbr_reqs;   // who wants subordinate s
  logic [NumSbr-1:0][NumMgr-1:0]  sbr_win;    // one-hot winner per subordinate
  logic [NumSbr-1:0][MgrIdxW-1:0] sbr_win_idx;

  always_comb begin
    for (int unsigned s = 0; s < NumSbr; s++) begin
      for (int unsigned m = 0; m < NumMgr; m++) begin
        sbr_reqs[s][m] = mgr_req_i[m].req && hit[m] && (sel[m] == SbrIdxW'(s));
      end
    end
  end

  for (genvar s = 0; s < NumSbr; s++) begin : gen_arb
    rr_arbiter #(.N(NumMgr)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i     (sbr_reqs[s]),
      .advance_i (sbr_rsp_i[s].gnt),
      .gnt_o     (sbr_win[s]),
      .idx_o     (sbr_win_idx[s])
    );

    always_comb begin
      sbr_req_o[s]     = '0;
      sbr_req_o[s].req = |sbr_reqs[s];
      sbr_req_o[s].a   = mgr_req_i[sbr_win_idx[s]].a;
    end
  end

  // ------------------------------------------------- response bookkeeping
  logic [NumSbr-1:0]              rsp_pend_q;  // subordinate s granted last cycle
  logic [NumSbr-1:0][MgrIdxW-1:0] rsp_mgr_q;   // ... to this manager
  logic [NumMgr-1:0]              err_pend_q;  // decode error to answer
  id_t  [NumMgr-1:0]              err_id_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_pend_q <= '0;
      rsp_mgr_q  <= '0;
      err_pend_q <= '0;
      err_id_q   <= '0;
    end else begin
      for (int unsigned s = 0; s < NumSbr; s++) begin
        rsp_pend_q[s] <= sbr_req_o[s].req && sbr_rsp_i[s].gnt;
        if (sbr_req_o[s].req && sbr_rsp_i[s].gnt) rsp_mgr_q[s] <= sbr_win_idx[s];
      end
      for (int unsigned m = 0; m < NumMgr; m++) begin
        err_pend_q[m] <= mgr_req_i[m].req && !hit[m];
        if (mgr_req_i[m].req && !hit[m]) err_id_q[m] <= mgr_req_i[m].a.aid;
      end
    end
  end

  always_comb begin
    for (int unsigned m = 0; m < NumMgr; m++) begin
      mgr_rsp_o[m] = '0;
      // grant: decode error, or this manager won a subordinate that accepted
      if (mgr_req_i[m].req && !hit[m]) mgr_rsp_o[m].gnt = 1'b1;
      for (int unsigned s = 0; s < NumSbr; s++) begin
        if (sbr_win[s][m] && sbr_rsp_i[s].gnt) mgr_rsp_o[m].gnt = 1'b1;
        if (rsp_pend_q[s] && rsp_mgr_q[s] == MgrIdxW'(m)) begin
          mgr_rsp_o[m].rvalid = sbr_rsp_i[s].rvalid;
          mgr_rsp_o[m].r      = sbr_rsp_i[s].r;
        end
      end
      if (err_pend_q[m]) begin
        mgr_rsp_o[m].rvalid  = 1'b1;
        mgr_rsp_o[m].r.err   = 1'b1;
        mgr_rsp_o[m].r.rid   = err_id_q[m];
        mgr_rsp_o[m].r.rdata = '0;
      end
    end
  end

  // A subordinate answers exactly one cycle after its grant.
  for (genvar s = 0; s < NumSbr; s++) begin : gen_sva
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      sbr_rsp_i[s].rvalid |-> rsp_pend_q[s])
      else $error("obi_xbar: unexpected response on subordinate %0d", s);
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      rsp_pend_q[s] |-> sbr_rsp_i[s].rvalid)
      else $error("obi_xbar: subordinate %0d missed its one-cycle response", s);
  end

endmodule
