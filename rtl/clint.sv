// clint: RISC-V core-local interruptor for the single hart of the SoC.
//
// Register map (byte offsets from the block base, the usual CLINT layout):
//   0x0000 MSIP        bit 0 drives the machine software interrupt
//   0x4000 MTIMECMP    low word   (reset all ones, so no interrupt)
//   0x4004 MTIMECMPH   high word
//   0xBFF8 MTIME       low word   (reset 0)
//   0xBFFC MTIMEH      high word
// mtime counts up by one every clock cycle; a write to either half loads
// that half (the write wins over the increment). timer_irq_o is high while
// mtime >= mtimecmp, sw_irq_o follows MSIP[0]. Unlisted offsets answer
// with err = 1. Grant in the request cycle, response one cycle later. The
// layout and the tick rate are this design's choices; the source only
// names the block.
module clint (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o,
  output logic               timer_irq_o,
  output logic               sw_irq_o
);
  import croc_pkg::*;

  localparam logic [15:0] OffMsip     = 16'h0000;
  localparam logic [15:0] OffCmpLo    = 16'h4000;
  localparam logic [15:0] OffCmpHi    = 16'h4004;
  localparam logic [15:0] OffMtimeLo  = 16'hBFF8;
  localparam logic [15:0] OffMtimeHi  = 16'hBFFC;

  logic [63:0] mtime_q, mtimecmp_q;
  logic        msip_q;
  logic        rvalid_q, err_q;
  id_t         rid_q;
  data_t       rdata_q, rdata_d;
  logic        valid_off;
  logic [15:0] off;
  logic        wr;

  assign off = obi_req_i.a.addr[15:0];
  assign wr  = obi_req_i.req && obi_req_i.a.we;

  always_comb begin
    valid_off = 1'b1;
    unique case (off)
      OffMsip:    rdata_d = {31'b0, msip_q};
      OffCmpLo:   rdata_d = mtimecmp_q[31:0];
      OffCmpHi:   rdata_d = mtimecmp_q[63:32];
      OffMtimeLo: rdata_d = mtime_q[31:0];
      OffMtimeHi: rdata_d = mtime_q[63:32];
      default: begin
        rdata_d   = '0;
        valid_off = 1'b0;
      end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q    <= '0;
      mtimecmp_q <= '1;
      msip_q     <= 1'b0;
      rvalid_q   <= 1'b0;
      err_q      <= 1'b0;
      rid_q      <= '0;
      rdata_q    <= '0;
    end else begin
      mtime_q  <= mtime_q + 64'd1;
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !valid_off;
        rdata_q <= rdata_d;
      end
      if (wr) begin
        unique case (off)
          OffMsip:    if (obi_req_i.a.be[0]) msip_q <= obi_req_i.a.wdata[0];
          OffCmpLo:   mtimecmp_q[31:0]  <= apply_be(mtimecmp_q[31:0],  obi_req_i.a.wdata, obi_req_i.a.be);
          OffCmpHi:   mtimecmp_q[63:32] <= apply_be(mtimecmp_q[63:32], obi_req_i.a.wdata, obi_req_i.a.be);
          OffMtimeLo: mtime_q[31:0]     <= apply_be(mtime_q[31:0],     obi_req_i.a.wdata, obi_req_i.a.be);
          OffMtimeHi: mtime_q[63:32]    <= apply_be(mtime_q[63:32],    obi_req_i.a.wdata, obi_req_i.a.be);
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

  assign timer_irq_o = (mtime_q >= mtimecmp_q);
  assign sw_irq_o    = msip_q;

endmodule
