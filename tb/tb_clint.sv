// tb_clint: checks that mtime advances by one per cycle, that the timer
// interrupt rises exactly when mtime reaches mtimecmp, that writing
// mtimecmp clears it, the software interrupt bit and the error response.
module tb_clint;
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

  logic timer_irq, sw_irq;
  clint dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp), .timer_irq_o(timer_irq), .sw_irq_o(sw_irq));

  initial begin
    data_t t0, t1, d;
    logic  e;
    int    wait_cycles;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    check(!timer_irq && !sw_irq, "no interrupt after reset");
    rd_expect(ClintBase + 32'h4000, 32'hFFFF_FFFF, "mtimecmp reset");
    // two back-to-back reads are 2 cycles apart (one access = 2 cycles)
    rd(ClintBase + 32'hBFF8, t0);
    rd(ClintBase + 32'hBFF8, t1);
    check(t1 - t0 == 2, $sformatf("mtime increments per cycle (%0d)", t1 - t0));
    // load mtime, then arm mtimecmp 40 cycles ahead
    wr(ClintBase + 32'hBFFC, 32'h0);
    wr(ClintBase + 32'hBFF8, 32'h0000_1000);
    wr(ClintBase + 32'h4004, 32'h0);
    rd(ClintBase + 32'hBFF8, t0);
    wr(ClintBase + 32'h4000, t0 + 40);
    check(!timer_irq, "timer interrupt not yet");
    // now at least 2 cycles after the read: irq expected within 38 cycles
    wait_cycles = 0;
    while (!timer_irq && wait_cycles < 100) begin
      @(negedge clk_i);
      wait_cycles++;
    end
    rd(ClintBase + 32'hBFF8, t1);
    check(timer_irq, "timer interrupt raised");
    check(t1 - t0 >= 40 && t1 - t0 <= 44, $sformatf("interrupt at mtimecmp (%0d)", t1 - t0));
    wr(ClintBase + 32'h4004, 32'h1);
    check(!timer_irq, "timer interrupt cleared by larger mtimecmp");
    wr(ClintBase + 32'h0, 32'h1);
    check(sw_irq, "software interrupt set");
    rd_expect(ClintBase + 32'h0, 32'h1, "msip read");
    wr(ClintBase + 32'h0, 32'h0);
    check(!sw_irq, "software interrupt cleared");
    bus(1'b0, ClintBase + 32'h100, '0, 4'hF, d, e);
    check(e, "unused offset is an error");
    finish_tb();
  end

endmodule
