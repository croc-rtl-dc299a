// tb_sram_bank: self-checking test of one SRAM bank.
// Writes random words to random locations and reads them back against a
// reference array, checks byte-enable merging, and checks that reads can
// be issued back to back, one per cycle, each answered one cycle later.
module tb_sram_bank;
  localparam int unsigned WATCHDOG = 20000;

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

  sram_bank #(.NumWords(1024)) dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp));

  data_t model [1024];
  bit    written [1024];

  initial begin
    data_t d;
    logic  e;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    // random writes, then read everything written back
    for (int i = 0; i < 200; i++) begin
      int unsigned a;
      data_t v;
      a = $urandom_range(0, 1023);
      v = $urandom;
      wr(SramBase + addr_t'(a * 4), v);
      model[a] = v;
      written[a] = 1'b1;
    end
    for (int a = 0; a < 1024; a++) begin
      if (written[a]) rd_expect(SramBase + addr_t'(a * 4), model[a], "random data");
    end
    // byte enables: 0x11223344 then write only bytes 1 and 3 with 0xAABBCCDD
    wr(SramBase + 32'h40, 32'h1122_3344);
    bus(1'b1, SramBase + 32'h40, 32'hAABB_CCDD, 4'b1010, d, e);
    rd_expect(SramBase + 32'h40, 32'hAA22_CC44, "byte enables");
    // top word of the bank
    wr(SramBase + 32'hFFC, 32'hDEAD_BEEF);
    rd_expect(SramBase + 32'hFFC, 32'hDEAD_BEEF, "last word");
    // back-to-back reads: a new request every cycle, a response every cycle
    for (int a = 0; a < 8; a++) wr(SramBase + addr_t'(a * 4), 32'h100 + a);
    @(negedge clk_i);
    for (int a = 0; a < 8; a++) begin
      req = '0;
      req.req = 1'b1;
      req.a.addr = SramBase + addr_t'(a * 4);
      req.a.be = 4'hF;
      #1;
      check(rsp.gnt, "pipelined grant");
      if (a > 0) check(rsp.rvalid && rsp.r.rdata == 32'h100 + a - 1, "pipelined response");
      @(negedge clk_i);
    end
    req = '0;
    check(rsp.rvalid && rsp.r.rdata == 32'h107, "last pipelined response");
    @(negedge clk_i);
    check(!rsp.rvalid, "no response without request");
    finish_tb();
  end

endmodule
