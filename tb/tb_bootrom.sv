// tb_bootrom: checks the boot ROM words against the RV32I encodings of
// "lui t0, 0x10000" (0x100002B7) and "jalr x0, 0(t0)" (0x00028067),
// zeros elsewhere, and the error response to writes. Also checks the
// encoding for a boot target whose low 12 bits are not zero.
module tb_bootrom;
  localparam int unsigned WATCHDOG = 5000;

  import croc_pkg::*;

  logic     clk_i = 1'b0;
  logic     rst_ni = 1'b0;
  obi_req_t req;
  obi_rsp_t rsp;
  int       checks = 0;
  int       failures = 0;
  int       stall_cycles = 0;

  always #5 clk_i = ~clk_i;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // One OBI access: request at a falling edge, wait for the grant, then
  // expect the response exactly one cycle after the granting edge.
  task automatic bus(input logic we, input addr_t addr, input data_t wdata, input strb_t be,
                     output data_t rdata, output logic err);
    @(negedge clk_i);
    req        = '0;
    req.req    = 1'b1;
    req.a.addr = addr;
    req.a.we   = we;
    req.a.be   = be;
    req.a.wdata = wdata;
    req.a.aid  = id_t'(addr[2]);
    #1;
    while (!rsp.gnt) begin
      stall_cycles++;
      @(negedge clk_i);
      #1;
    end
    @(negedge clk_i);
    req = '0;
    check(rsp.rvalid, $sformatf("response one cycle after grant (addr %h)", addr));
    check(rsp.r.rid == id_t'(addr[2]), "response id");
    rdata = rsp.r.rdata;
    err   = rsp.r.err;
  endtask

  task automatic wr(input addr_t addr, input data_t wdata);
    data_t d;
    logic  e;
    bus(1'b1, addr, wdata, 4'hF, d, e);
    check(!e, $sformatf("write to %h without error", addr));
  endtask

  task automatic rd(input addr_t addr, output data_t rdata);
    logic e;
    bus(1'b0, addr, '0, 4'hF, rdata, e);
    check(!e, $sformatf("read of %h without error", addr));
  endtask

  task automatic rd_expect(input addr_t addr, input data_t exp, input string msg);
    data_t d;
    rd(addr, d);
    check(d == exp, $sformatf("%s: read %h, expected %h", msg, d, exp));
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk_i);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  obi_req_t req2;
  obi_rsp_t rsp2;
  bootrom dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp));
  // second instance: target 0x1000_0C00 -> lui t0,0x10001 ; jalr x0,-1024(t0)
  bootrom #(.BootTarget(32'h1000_0C00)) dut2 (.clk_i, .rst_ni, .obi_req_i(req2), .obi_rsp_o(rsp2));

  initial begin
    data_t d;
    logic  e;
    req = '0;
    req2 = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    rd_expect(BootromBase + 32'h0, 32'h1000_02B7, "lui t0, 0x10000");
    rd_expect(BootromBase + 32'h4, 32'h0002_8067, "jalr x0, 0(t0)");
    rd_expect(BootromBase + 32'h8, 32'h0, "empty word");
    rd_expect(BootromBase + 32'hFFC, 32'h0, "last word");
    bus(1'b1, BootromBase, 32'h1234_5678, 4'hF, d, e);
    check(e, "write is an error");
    rd_expect(BootromBase + 32'h0, 32'h1000_02B7, "unchanged after write");
    // second instance, read directly
    @(negedge clk_i);
    req2.req = 1'b1;
    req2.a.addr = BootromBase;
    @(negedge clk_i);
    check(rsp2.rvalid && rsp2.r.rdata == 32'h1000_12B7, "lui with rounding");
    req2.a.addr = BootromBase + 4;
    @(negedge clk_i);
    check(rsp2.rvalid && rsp2.r.rdata == 32'hC002_8067, "jalr with negative offset");
    req2 = '0;
    finish_tb();
  end

endmodule
