// soc_ctrl: SoC control registers.
//
// Register map (byte offsets, 32-bit registers, reset value in brackets):
//   0x0 BOOTADDR   [BootAddrReset]  address the core starts fetching from
//   0x4 FETCHEN    [0]              bit 0: allow the core to fetch
//   0x8 CORESTATUS [0]              written by software; bit 31 marks the
//                                   end of a program, bits 30:0 its result
//   0xC SCRATCH    [0]              free word for software
// Writes honour byte enables. Unlisted offsets answer with err = 1.
// fetch_en_o is FETCHEN[0] OR the chip's fetch-enable pin, so a chip can
// boot either from the pin or after a debugger has loaded a program and set
// the bit. The register set is this design's own choice; the source names
// the block only. Grant in the request cycle, response one cycle later.
module soc_ctrl #(
  parameter croc_pkg::addr_t BootAddrReset = croc_pkg::BootromBase
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o,
  input  logic               fetch_en_i,
  output croc_pkg::addr_t    boot_addr_o,
  output logic               fetch_en_o,
  output croc_pkg::data_t    core_status_o
);
  import croc_pkg::*;

  typedef enum logic [1:0] {
    RegBootAddr = 2'd0,
    RegFetchEn  = 2'd1,
    RegStatus   = 2'd2,
    RegScratch  = 2'd3
  } reg_e;

  data_t regs_q [4];
  logic  rvalid_q, err_q;
  id_t   rid_q;
  data_t rdata_q;
  logic  in_range;
  reg_e  idx;

  assign in_range = (obi_req_i.a.addr[11:4] == '0);
  assign idx      = reg_e'(obi_req_i.a.addr[3:2]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_q[RegBootAddr] <= BootAddrReset;
      regs_q[RegFetchEn]  <= '0;
      regs_q[RegStatus]   <= '0;
      regs_q[RegScratch]  <= '0;
      rvalid_q <= 1'b0;
      err_q    <= 1'b0;
      rid_q    <= '0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rid_q   <= obi_req_i.a.aid;
        err_q   <= !in_range;
        rdata_q <= in_range ? regs_q[idx] : '0;
        if (in_range && obi_req_i.a.we) begin
          regs_q[idx] <= apply_be(regs_q[idx], obi_req_i.a.wdata, obi_req_i.a.be);
        end
      end
    end
  end

  assign obi_rsp_o.gnt     = obi_req_i.req;
  assign obi_rsp_o.rvalid  = rvalid_q;
  assign obi_rsp_o.r.rdata = rdata_q;
  assign obi_rsp_o.r.err   = err_q;
  assign obi_rsp_o.r.rid   = rid_q;

  assign boot_addr_o   = regs_q[RegBootAddr];
  assign fetch_en_o    = regs_q[RegFetchEn][0] | fetch_en_i;
  assign core_status_o = regs_q[RegStatus];

endmodule
