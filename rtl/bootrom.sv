// bootrom: read-only boot code behind an OBI subordinate port.
//
// The core starts here after reset. The ROM holds two RV32I instructions
// that jump to BootTarget (the start of SRAM by default), where a program
// loaded through the debug port waits:
//   word 0: lui  t0, %hi(BootTarget)
//   word 1: jalr x0, %lo(BootTarget)(t0)
// The words are computed from BootTarget at elaboration; every other word
// reads as zero. The ROM content is this design's own choice; the source
// names the block only. Reads return data one cycle after the (immediate)
// grant; writes are granted and answered with err = 1.
module bootrom #(
  parameter croc_pkg::addr_t BootTarget = croc_pkg::SramBase
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o
);
  import croc_pkg::*;

  localparam logic [19:0] Hi = 20'((BootTarget + 32'h800) >> 12);
  localparam logic [11:0] Lo = BootTarget[11:0];
  localparam data_t LuiT0 = {Hi, 5'd5, 7'b0110111};
  localparam data_t JalrT0 = {Lo, 5'd5, 3'b000, 5'd0, 7'b1100111};

  logic  rvalid_q, err_q;
  id_t   rid_q;
  data_t rdata_q, rdata_d;

  always_comb begin
    unique case (obi_req_i.a.addr[11:2])
      10'd0:   rdata_d = LuiT0;
      10'd1:   rdata_d = JalrT0;
      default: rdata_d = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      err_q    <= 1'b0;
      rid_q    <= '0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= obi_req_i.a.we;
        rdata_q <= obi_req_i.a.we ? '0 : rdata_d;
      end
    end
  end

  assign obi_rsp_o.gnt     = obi_req_i.req;
  assign obi_rsp_o.rvalid  = rvalid_q;
  assign obi_rsp_o.r.rdata = rdata_q;
  assign obi_rsp_o.r.err   = err_q;
  assign obi_rsp_o.r.rid   = rid_q;

endmodule
