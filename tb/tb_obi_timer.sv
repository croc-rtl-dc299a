// tb_obi_timer: checks counting with and without prescaler, the compare
// match interrupt and its cycle, auto-restart, write-1-to-clear of the
// pending flag and the error response.
module tb_obi_timer;
  localparam int unsigned WATCHDOG = 10000;

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

  logic irq;
  obi_timer dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp), .irq_o(irq));

  initial begin
    data_t c0, c1, d;
    logic  e;
    int    n;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    rd_expect(TimerBase + 32'h8, 32'hFFFF_FFFF, "compare reset");
    rd_expect(TimerBase + 32'h4, 32'h0, "count reset");
    // free running, no prescaler: +2 per access
    wr(TimerBase + 32'h0, 32'h1);
    rd(TimerBase + 32'h4, c0);
    rd(TimerBase + 32'h4, c1);
    check(c1 - c0 == 2, $sformatf("count per cycle (%0d)", c1 - c0));
    // prescaler 3: one step per 4 cycles; 8 accesses = 16 cycles = 4 steps
    wr(TimerBase + 32'h0, 32'h0000_0301);
    rd(TimerBase + 32'h4, c0);
    repeat (7) rd(TimerBase + 32'h8, d);
    rd(TimerBase + 32'h4, c1);
    check(c1 - c0 == 4, $sformatf("prescaled count (%0d)", c1 - c0));
    // compare match with auto restart, count from 0 to 10
    wr(TimerBase + 32'h0, 32'h0);
    wr(TimerBase + 32'h4, 32'h0);
    wr(TimerBase + 32'h8, 32'd10);
    check(!irq, "no interrupt before start");
    @(negedge clk_i);
    req = '0; req.req = 1'b1; req.a.addr = TimerBase; req.a.we = 1'b1; req.a.be = 4'hF; req.a.wdata = 32'h3;
    @(negedge clk_i);
    req = '0;
    // enabled at the last edge; the 10th tick after it matches
    n = 0;
    while (!irq && n < 100) begin
      @(negedge clk_i);
      n++;
    end
    check(irq, "match interrupt");
    check(n == 10, $sformatf("match 10 cycles after enable (%0d)", n));
    rd(TimerBase + 32'h4, c0);
    check(c0 < 10, $sformatf("auto restart (count %0d)", c0));
    rd_expect(TimerBase + 32'hC, 32'h1, "pending flag");
    wr(TimerBase + 32'hC, 32'h1);
    check(!irq, "pending cleared");
    wr(TimerBase + 32'h0, 32'h0);
    bus(1'b0, TimerBase + 32'h10, '0, 4'hF, d, e);
    check(e, "unused offset is an error");
    finish_tb();
  end

endmodule
