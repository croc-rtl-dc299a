// tb_gpio: checks direction and output registers, the two-cycle input
// synchroniser, byte-enabled writes, the change interrupt with
// write-1-to-clear, and the error response.
module tb_gpio;
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

  logic [31:0] pins_in = '0;
  logic [31:0] pins_out, pins_oe;
  logic        irq;
  gpio #(.NumGpio(32)) dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp), .gpio_i(pins_in),
                            .gpio_o(pins_out), .gpio_oe_o(pins_oe), .irq_o(irq));

  initial begin
    data_t d;
    logic  e;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    check(pins_oe == '0 && pins_out == '0, "outputs off after reset");
    wr(GpioBase + 32'h0, 32'h0000_FFFF);
    wr(GpioBase + 32'h4, 32'hA5A5_1234);
    check(pins_oe == 32'h0000_FFFF, "direction");
    check(pins_out == 32'hA5A5_1234, "output values");
    bus(1'b1, GpioBase + 32'h4, 32'hFFFF_FFFF, 4'b0100, d, e);
    check(pins_out == 32'hA5FF_1234, "byte-enabled write");
    // input synchroniser: value visible after two clock edges
    @(negedge clk_i);
    pins_in = 32'h0F0F_0001;
    @(negedge clk_i);
    check(dut.in_q != 32'h0F0F_0001, "not visible after one edge");
    @(negedge clk_i);
    rd_expect(GpioBase + 32'h8, 32'h0F0F_0001, "input value");
    // change interrupt on pin 4 only
    wr(GpioBase + 32'hC, 32'h0000_0010);
    pins_in = 32'h0F0F_0003;  // pin 1 changes: not enabled
    repeat (4) @(negedge clk_i);
    check(!irq, "no interrupt from a disabled pin");
    pins_in = 32'h0F0F_0013;  // pin 4 changes
    repeat (4) @(negedge clk_i);
    check(irq, "interrupt from pin 4");
    rd_expect(GpioBase + 32'h10, 32'h0000_0010, "status flag");
    wr(GpioBase + 32'h10, 32'h0000_0010);
    check(!irq, "interrupt cleared");
    bus(1'b0, GpioBase + 32'h14, '0, 4'hF, d, e);
    check(e, "unused offset is an error");
    finish_tb();
  end

endmodule
