// tb_obi_demux: self-checking test of the peripheral demux.
// Seven subordinate models (16-word memories whose read data is tagged
// with their index) sit behind the demux. Checked: each peripheral window
// reaches exactly its own subordinate, writes land only there, back-to-back
// requests to different subordinates are answered one per cycle with the
// right data, a subordinate that withholds its grant stalls the manager,
// and addresses outside every window are answered with err = 1.
module tb_obi_demux;
  import croc_pkg::*;

  localparam int unsigned WATCHDOG = 50000;
  localparam int unsigned NS = NumPeriph;

  logic clk_i = 1'b0;
  logic rst_ni = 1'b0;
  obi_req_t req;
  obi_rsp_t rsp;
  obi_req_t [NS-1:0] sreq;
  obi_rsp_t [NS-1:0] srsp;
  logic [NS-1:0] hold_gnt = '0;   // subordinate s withholds its grant
  int checks = 0;
  int failures = 0;
  int stalls = 0;

  always #5 clk_i = ~clk_i;

  obi_demux dut (.clk_i, .rst_ni, .mgr_req_i(req), .mgr_rsp_o(rsp), .sbr_req_o(sreq), .sbr_rsp_i(srsp));

  localparam addr_t Bases [NS] = '{DebugBase, BootromBase, ClintBase, SocCtrlBase,
                                   UartBase, GpioBase, TimerBase};

  logic [23:0] smem [NS][16];
  for (genvar s = 0; s < NS; s++) begin : gen_sbr
    logic  rv_q;
    data_t rd_q;
    always_ff @(posedge clk_i) begin
      rv_q <= sreq[s].req && !hold_gnt[s];
      if (sreq[s].req && !hold_gnt[s]) begin
        rd_q <= {8'(s), smem[s][sreq[s].a.addr[5:2]]};
        if (sreq[s].a.we) smem[s][sreq[s].a.addr[5:2]] <= sreq[s].a.wdata[23:0];
      end
    end
    assign srsp[s].gnt     = !hold_gnt[s];
    assign srsp[s].rvalid  = rv_q;
    assign srsp[s].r.rdata = rd_q;
    assign srsp[s].r.err   = 1'b0;
    assign srsp[s].r.rid   = '0;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  task automatic bus(input logic we, input addr_t addr, input data_t wdata,
                     output data_t rdata, output logic err);
    @(negedge clk_i);
    req         = '0;
    req.req     = 1'b1;
    req.a.addr  = addr;
    req.a.we    = we;
    req.a.be    = 4'hF;
    req.a.wdata = wdata;
    #1;
    while (!rsp.gnt) begin
      stalls++;
      @(negedge clk_i);
      #1;
    end
    @(negedge clk_i);
    req = '0;
    check(rsp.rvalid, "response one cycle after grant");
    rdata = rsp.r.rdata;
    err   = rsp.r.err;
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk_i);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  initial begin
    data_t d;
    logic  e;
    req = '0;
    for (int s = 0; s < NS; s++) for (int w = 0; w < 16; w++) smem[s][w] = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;

    // every window reaches its own subordinate; writes stay there
    for (int s = 0; s < NS; s++) begin
      bus(1'b1, Bases[s] + 32'h8, 32'h0000_1100 + s, d, e);
      check(!e, "write ok");
    end
    for (int s = 0; s < NS; s++) begin
      bus(1'b0, Bases[s] + 32'h8, '0, d, e);
      check(!e && d == {8'(s), 24'h1100 + 24'(s)}, $sformatf("subordinate %0d data %h", s, d));
    end
    // only one subordinate sees a request
    @(negedge clk_i);
    req = '0; req.req = 1'b1; req.a.addr = UartBase + 32'h4;
    #1;
    check(sreq[PerUart].req && $countones({sreq[6].req, sreq[5].req, sreq[4].req, sreq[3].req,
          sreq[2].req, sreq[1].req, sreq[0].req}) == 1, "one-hot select");
    @(negedge clk_i);
    req = '0;
    // back to back, one per cycle, alternating subordinates
    @(negedge clk_i);
    for (int i = 0; i < NS; i++) begin
      req = '0; req.req = 1'b1; req.a.addr = Bases[i] + 32'h8;
      #1;
      check(rsp.gnt, "pipelined grant");
      if (i > 0) check(rsp.rvalid && rsp.r.rdata[31:24] == 8'(i - 1), "pipelined response");
      @(negedge clk_i);
    end
    req = '0;
    check(rsp.rvalid && rsp.r.rdata[31:24] == 8'(NS - 1), "last pipelined response");
    // a withheld grant stalls the manager
    hold_gnt[PerGpio] = 1'b1;
    fork
      bus(1'b0, GpioBase + 32'h8, '0, d, e);
      begin
        repeat (3) @(negedge clk_i);
        hold_gnt[PerGpio] = 1'b0;
      end
    join
    check(stalls >= 2 && d[31:24] == 8'(PerGpio), $sformatf("stall then response (%0d)", stalls));
    // holes in the map
    bus(1'b0, 32'h0100_0000, '0, d, e);
    check(e, "hole below boot ROM is an error");
    bus(1'b1, 32'h0300_1000, 32'h1, d, e);
    check(e, "hole between SoC registers and UART is an error");
    bus(1'b0, 32'h0FFF_FFFC, '0, d, e);
    check(e, "top of the peripheral space is an error");
    finish_tb();
  end

endmodule
