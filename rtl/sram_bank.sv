// sram_bank: one bank of on-chip SRAM behind an OBI subordinate port.
//
// The SoC has two of these banks (bank 0 and bank 1) on the main crossbar.
// Every request is granted at once; read data (or the write acknowledge)
// returns exactly one cycle later, as a synchronous single-port SRAM would
// deliver it. Writes honour the four byte enables. The word index is
// taken from address bits [2 +: log2(NumWords)]; the crossbar has already
// selected the bank, so the upper bits are ignored.
//
// The default size, 1024 x 32 bit = 4 KiB per bank, gives the 8 kB total
// of the baseline chip. The array is written as plain synthesizable RTL; on
// silicon it is the process' SRAM macro. The storage is not reset.
module sram_bank #(
  parameter int unsigned NumWords = croc_pkg::SramBankWords
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  croc_pkg::obi_req_t obi_req_i,
  output croc_pkg::obi_rsp_t obi_rsp_o
);
  import croc_pkg::*;
  localparam int unsigned AW = $clog2(NumWords);

  data_t        mem_q [NumWords];
  logic [AW-1:0] word_idx;
  logic         rvalid_q;
  id_t          rid_q;
  data_t        rdata_q;

  assign word_idx = obi_req_i.a.addr[2 +: AW];

  always_ff @(posedge clk_i) begin
    if (obi_req_i.req) begin
      if (obi_req_i.a.we) begin
        mem_q[word_idx] <= apply_be(mem_q[word_idx], obi_req_i.a.wdata, obi_req_i.a.be);
      end
      rdata_q <= mem_q[word_idx];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rid_q    <= '0;
    end else begin
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) rid_q <= obi_req_i.a.aid;
    end
  end

  assign obi_rsp_o.gnt      = obi_req_i.req;
  assign obi_rsp_o.rvalid   = rvalid_q;
  assign obi_rsp_o.r.rdata  = rdata_q;
  assign obi_rsp_o.r.err    = 1'b0;
  assign obi_rsp_o.r.rid    = rid_q;

endmodule
