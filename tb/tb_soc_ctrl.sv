// tb_soc_ctrl: checks reset values, read/write of the four registers, the
// byte enables, the boot address and fetch enable outputs (register OR
// pin) and the error response for an unused offset.
module tb_soc_ctrl;
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

  logic  fetch_en_pin = 1'b0;
  addr_t boot_addr;
  logic  fetch_en;
  data_t status;
  soc_ctrl dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp), .fetch_en_i(fetch_en_pin),
                .boot_addr_o(boot_addr), .fetch_en_o(fetch_en), .core_status_o(status));

  initial begin
    data_t d;
    logic  e;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    rd_expect(SocCtrlBase + 32'h0, 32'h0200_0000, "boot address reset");
    rd_expect(SocCtrlBase + 32'h4, 32'h0, "fetch enable reset");
    check(boot_addr == 32'h0200_0000 && !fetch_en, "outputs after reset");
    fetch_en_pin = 1'b1;
    #1 check(fetch_en, "fetch enable from pin");
    fetch_en_pin = 1'b0;
    #1 check(!fetch_en, "fetch enable follows pin");
    wr(SocCtrlBase + 32'h0, 32'h1000_0000);
    check(boot_addr == 32'h1000_0000, "boot address output");
    wr(SocCtrlBase + 32'h4, 32'h1);
    check(fetch_en, "fetch enable from register");
    wr(SocCtrlBase + 32'h8, 32'h8000_002A);
    check(status == 32'h8000_002A, "core status output");
    wr(SocCtrlBase + 32'hC, 32'hCAFE_F00D);
    bus(1'b1, SocCtrlBase + 32'hC, 32'h1111_1111, 4'b0001, d, e);
    rd_expect(SocCtrlBase + 32'hC, 32'hCAFE_F011, "byte enable");
    rd_expect(SocCtrlBase + 32'h0, 32'h1000_0000, "boot address");
    bus(1'b0, SocCtrlBase + 32'h10, '0, 4'hF, d, e);
    check(e, "unused offset is an error");
    finish_tb();
  end

endmodule
