// tb_obi_xbar: self-checking test of the main crossbar.
// Four manager processes drive the manager ports; four subordinate models
// (small memories that may withhold their grant at random) sit on the
// subordinate ports. Checked:
//   * four managers to four different subordinates are all granted in the
//     same cycle (the parallelism that gives one instruction per cycle),
//   * four managers to one subordinate are served one per cycle, each once
//     in four cycles (round robin), and the losers stall,
//   * an unmapped address is answered with err = 1,
//   * random concurrent traffic returns the data each manager wrote, with
//     every response one cycle after its grant.
module tb_obi_xbar;
  import croc_pkg::*;

  localparam int unsigned WATCHDOG = 200000;
  localparam int unsigned NM = 4;
  localparam int unsigned NS = 4;

  logic clk_i = 1'b0;
  logic rst_ni = 1'b0;
  obi_req_t [NM-1:0] mreq;
  obi_rsp_t [NM-1:0] mrsp;
  obi_req_t [NS-1:0] sreq;
  obi_rsp_t [NS-1:0] srsp;
  int checks = 0;
  int failures = 0;
  int stalls = 0;
  bit random_gnt = 1'b0;

  always #5 clk_i = ~clk_i;

  obi_xbar dut (.clk_i, .rst_ni, .mgr_req_i(mreq), .mgr_rsp_o(mrsp), .sbr_req_o(sreq), .sbr_rsp_i(srsp));

  // subordinate models: 1024-word memories, response one cycle after grant
  data_t smem [NS][1024];
  logic [NS-1:0] sgnt;
  for (genvar s = 0; s < NS; s++) begin : gen_sbr
    logic  rv_q;
    data_t rd_q;
    id_t   id_q;
    always_ff @(posedge clk_i) begin
      sgnt[s] <= random_gnt ? 1'($urandom_range(0, 3) != 0) : 1'b1;
      rv_q <= sreq[s].req && sgnt[s];
      if (sreq[s].req && sgnt[s]) begin
        id_q <= sreq[s].a.aid;
        rd_q <= smem[s][sreq[s].a.addr[11:2]];
        if (sreq[s].a.we) smem[s][sreq[s].a.addr[11:2]] <= sreq[s].a.wdata;
      end
    end
    assign srsp[s].gnt     = sgnt[s];
    assign srsp[s].rvalid  = rv_q;
    assign srsp[s].r.rdata = rd_q;
    assign srsp[s].r.err   = 1'b0;
    assign srsp[s].r.rid   = id_q;
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

  // one access from manager m; waits for the grant
  task automatic mbus(input int m, input logic we, input addr_t addr, input data_t wdata,
                      output data_t rdata, output logic err);
    @(negedge clk_i);
    mreq[m]         = '0;
    mreq[m].req     = 1'b1;
    mreq[m].a.addr  = addr;
    mreq[m].a.we    = we;
    mreq[m].a.be    = 4'hF;
    mreq[m].a.wdata = wdata;
    mreq[m].a.aid   = id_t'(m);
    #1;
    while (!mrsp[m].gnt) begin
      stalls++;
      @(negedge clk_i);
      #1;
    end
    @(negedge clk_i);
    mreq[m] = '0;
    check(mrsp[m].rvalid, $sformatf("mgr %0d: response one cycle after grant", m));
    check(mrsp[m].r.rid == id_t'(m), $sformatf("mgr %0d: response id", m));
    rdata = mrsp[m].r.rdata;
    err   = mrsp[m].r.err;
  endtask

  function automatic addr_t sbr_addr(int s, int m, int w);
    addr_t base [NS] = '{32'h1000_0000, 32'h1000_1000, 32'h0000_0000, 32'h2000_0000};
    return base[s] + addr_t'((m * 256 + w) * 4);
  endfunction

  // random writes and read-backs of manager m in its own slice of every
  // subordinate, checked against a private model
  task automatic mgr_traffic(input int m);
    data_t model [NS][16];
    bit    valid [NS][16];
    for (int i = 0; i < 150; i++) begin
      int    s = $urandom_range(0, NS - 1);
      int    w = $urandom_range(0, 15);
      data_t rd;
      logic  er;
      if ($urandom_range(0, 1) == 0 || !valid[s][w]) begin
        data_t v = $urandom;
        mbus(m, 1'b1, sbr_addr(s, m, w), v, rd, er);
        model[s][w] = v;
        valid[s][w] = 1'b1;
      end else begin
        mbus(m, 1'b0, sbr_addr(s, m, w), '0, rd, er);
        check(rd == model[s][w], $sformatf("mgr %0d sbr %0d word %0d data", m, s, w));
      end
      check(!er, "no error");
    end
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
    int    granted [NM];
    mreq = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;

    // 1. four managers, four subordinates, same cycle
    @(negedge clk_i);
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0;
      mreq[m].req = 1'b1;
      mreq[m].a.we = 1'b1;
      mreq[m].a.be = 4'hF;
      mreq[m].a.addr = sbr_addr(m, m, 0);
      mreq[m].a.wdata = 32'hA000 + m;
      mreq[m].a.aid = id_t'(m);
    end
    #1;
    for (int m = 0; m < NM; m++) check(mrsp[m].gnt, $sformatf("parallel grant mgr %0d", m));
    for (int s = 0; s < NS; s++) check(sreq[s].req && sreq[s].a.wdata == 32'hA000 + s, "routed to subordinate");
    @(negedge clk_i);
    mreq = '0;
    for (int m = 0; m < NM; m++) check(mrsp[m].rvalid, $sformatf("parallel response mgr %0d", m));

    // 2. four managers, one subordinate: one grant per cycle, round robin
    @(negedge clk_i);
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0;
      mreq[m].req = 1'b1;
      mreq[m].a.addr = sbr_addr(0, m, 1);
      mreq[m].a.be = 4'hF;
      mreq[m].a.aid = id_t'(m);
      granted[m] = 0;
    end
    for (int c = 0; c < NM; c++) begin
      automatic int n = 0;
      #1;
      for (int m = 0; m < NM; m++) if (mrsp[m].gnt) begin
        n++;
        granted[m]++;
      end
      check(n == 1, $sformatf("one grant per cycle under contention (%0d) %b %b", n, {mrsp[3].gnt, mrsp[2].gnt, mrsp[1].gnt, mrsp[0].gnt}, {mreq[3].req, mreq[2].req, mreq[1].req, mreq[0].req}));
      if (n > 0) stalls += NM - c - 1;
      @(negedge clk_i);
      for (int m = 0; m < NM; m++) if (mreq[m].req && granted[m] > 0) mreq[m] = '0;
    end
    for (int m = 0; m < NM; m++) check(granted[m] == 1, $sformatf("mgr %0d served once in 4 cycles", m));
    mreq = '0;

    // 3. unmapped address
    mbus(1, 1'b0, 32'h3000_0000, '0, d, e);
    check(e, "decode error");

    // 4. random concurrent traffic with random subordinate stalls
    random_gnt = 1'b1;
    fork
      mgr_traffic(0);
      mgr_traffic(1);
      mgr_traffic(2);
      mgr_traffic(3);
    join
    check(stalls > 0, "stalls happened");
    finish_tb();
  end

endmodule
