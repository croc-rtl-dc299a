// tb_uart: checks the transmitted frame bit by bit against an independent
// sampler (start bit, 8 data bits LSB first, stop bit, DIV cycles each),
// reception of bytes sent by the testbench, the overrun and framing error
// flags, the dropped-transmit flag and the interrupts.
module tb_uart;
  localparam int unsigned WATCHDOG = 40000;

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

  logic tx, rx = 1'b1, irq;
  localparam int unsigned Div = 8;
  uart #(.DefaultDiv(16)) dut (.clk_i, .rst_ni, .obi_req_i(req), .obi_rsp_o(rsp),
                               .rx_i(rx), .tx_o(tx), .irq_o(irq));

  // drive one frame onto rx; stop_bit = 0 makes a framing error
  task automatic send_rx(input logic [7:0] b, input logic stop_bit);
    rx = 1'b0;
    repeat (Div) @(negedge clk_i);
    for (int i = 0; i < 8; i++) begin
      rx = b[i];
      repeat (Div) @(negedge clk_i);
    end
    rx = stop_bit;
    repeat (Div) @(negedge clk_i);
    rx = 1'b1;
    repeat (Div) @(negedge clk_i);
  endtask

  initial begin
    data_t d;
    logic  e;
    logic [9:0] frame;
    int    start_t, n;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    rd_expect(UartBase + 32'h8, 32'd16, "divisor reset");
    wr(UartBase + 32'h8, Div);
    check(tx == 1'b1, "line idle high");
    // transmit 0x5A, then sample the line in the middle of each bit
    fork
      wr(UartBase + 32'h0, 32'h5A);
      begin
        n = 0;
        while (tx && n < 100) begin @(negedge clk_i); n++; end
        repeat (Div / 2) @(negedge clk_i);
        for (int i = 0; i < 10; i++) begin
          frame[i] = tx;
          repeat (Div) @(negedge clk_i);
        end
      end
    join
    check(frame[0] == 1'b0, "start bit");
    check(frame[8:1] == 8'h5A, $sformatf("data bits %h", frame[8:1]));
    check(frame[9] == 1'b1, "stop bit");
    rd_expect(UartBase + 32'h4, 32'h0, "transmitter idle again");
    // frame length: busy for 10 bit times
    wr(UartBase + 32'h0, 32'hC3);
    n = 0;
    while (dut.tx_busy && n < 1000) begin @(negedge clk_i); n++; end
    check(n >= 10 * Div - 3 && n <= 10 * Div, $sformatf("frame takes 10 bit times (%0d)", n));
    // dropped transmit while busy
    wr(UartBase + 32'h0, 32'h11);
    wr(UartBase + 32'h0, 32'h22);
    rd(UartBase + 32'h4, d);
    check(d[4] && d[0], "dropped transmit flagged");
    wr(UartBase + 32'h4, 32'h10);
    repeat (12 * Div) @(negedge clk_i);
    // receive
    wr(UartBase + 32'hC, 32'h1);
    check(!irq, "no rx interrupt yet");
    send_rx(8'h96, 1'b1);
    check(irq, "rx interrupt");
    rd_expect(UartBase + 32'h4, 32'h2, "rx valid");
    rd_expect(UartBase + 32'h0, 32'h96, "received byte");
    check(!irq, "rx interrupt cleared by read");
    // overrun: two bytes without reading
    send_rx(8'h01, 1'b1);
    send_rx(8'h02, 1'b1);
    rd(UartBase + 32'h4, d);
    check(d[2], "overrun flagged");
    rd_expect(UartBase + 32'h0, 32'h02, "newest byte kept");
    wr(UartBase + 32'h4, 32'h4);
    // framing error
    send_rx(8'h7E, 1'b0);
    rd(UartBase + 32'h4, d);
    check(d[3], "framing error flagged");
    // tx-idle interrupt
    wr(UartBase + 32'hC, 32'h2);
    check(irq, "tx idle interrupt");
    bus(1'b0, UartBase + 32'h10, '0, 4'hF, d, e);
    check(e, "unused offset is an error");
    finish_tb();
  end

endmodule
