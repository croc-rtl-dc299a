// tb_dbg_jtag: self-checking test of the JTAG debug unit.
// A JTAG driver (TCK = clock / 8) walks the TAP state machine. Checked:
// IDCODE after reset, the instruction capture pattern 00001, the one-bit
// BYPASS delay, the DTMCS contents, DMI reads and writes of the
// debug-module registers (dmstatus, dmcontrol, abstractcs with its
// "not supported" command error, sbcs), system-bus writes and reads with
// auto-increment, read-on-address and read-on-data against a memory model
// on the manager port that withholds its grant at random (and on request
// for a long time) and reports an error for one address range, sberror for
// bus errors and unsupported sizes, sbbusyerror, the halt request through
// dmcontrol and its reset by dmactive = 0, TRST, and the mailbox
// subordinate port. The expected values come from the register layout of
// the RISC-V debug specification 0.13 that the unit implements.
module tb_dbg_jtag;
  localparam int unsigned WATCHDOG = 200000;

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

  localparam logic [31:0] IdCode = 32'h1c0c_0001;
  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, trst_n = 1'b1, tdo;
  obi_req_t mreq;
  obi_rsp_t mrsp;
  logic     halt;
  dbg_jtag #(.IdCode(IdCode)) dut (.clk_i, .rst_ni, .jtag_tck_i(tck), .jtag_tms_i(tms), .jtag_tdi_i(tdi),
    .jtag_trst_ni(trst_n), .jtag_tdo_o(tdo), .mgr_req_o(mreq), .mgr_rsp_i(mrsp),
    .sbr_req_i(req), .sbr_rsp_o(rsp), .debug_req_o(halt));

  // memory model on the manager port; grant withheld at random
  data_t bmem [256];
  logic  bgnt, brv_q, berr_q;
  data_t brd_q;
  int    bus_stalls = 0;
  logic  block_gnt = 1'b0;
  always_ff @(posedge clk_i) begin
    bgnt  <= !block_gnt && 1'($urandom_range(0, 2) != 0);
    brv_q <= mreq.req && bgnt;
    if (mreq.req && !bgnt) bus_stalls <= bus_stalls + 1;
    if (mreq.req && bgnt) begin
      berr_q <= (mreq.a.addr[31:28] == 4'hE);
      brd_q  <= bmem[mreq.a.addr[9:2]];
      if (mreq.a.we && mreq.a.addr[31:28] != 4'hE) bmem[mreq.a.addr[9:2]] <= mreq.a.wdata;
    end
  end
  assign mrsp.gnt     = bgnt;
  assign mrsp.rvalid  = brv_q;
  assign mrsp.r.rdata = brd_q;
  assign mrsp.r.err   = berr_q;
  assign mrsp.r.rid   = '0;

  // one TCK period: drive TMS/TDI while low, sample TDO just before the rise
  task automatic jclk(input logic tms_v, input logic tdi_v, output logic tdo_v);
    tms = tms_v;
    tdi = tdi_v;
    repeat (4) @(negedge clk_i);
    tdo_v = tdo;
    tck = 1'b1;
    repeat (4) @(negedge clk_i);
    tck = 1'b0;
  endtask

  task automatic jtag_reset();
    logic t;
    repeat (6) jclk(1'b1, 1'b0, t);
    jclk(1'b0, 1'b0, t);             // Run-Test/Idle
  endtask

  // from Run-Test/Idle, shift n bits through IR or DR, back to Run-Test/Idle
  task automatic jshift(input bit ir, input int n, input logic [65:0] din, output logic [65:0] dout);
    logic t;
    dout = '0;
    jclk(1'b1, 1'b0, t);             // Select-DR
    if (ir) jclk(1'b1, 1'b0, t);     // Select-IR
    jclk(1'b0, 1'b0, t);             // Capture
    jclk(1'b0, 1'b0, t);             // Shift
    for (int i = 0; i < n; i++) begin
      jclk(i == n - 1, din[i], t);
      dout[i] = t;
    end
    jclk(1'b1, 1'b0, t);             // Update
    jclk(1'b0, 1'b0, t);             // Run-Test/Idle
  endtask

  // one DMI access (op 1 read, 2 write); returns the capture of the previous one
  task automatic dmi(input logic [1:0] op, input logic [6:0] a, input data_t d,
                     output logic [65:0] o);
    jshift(1'b0, 41, {25'b0, a, d, op}, o);
    repeat (8) @(negedge clk_i);
  endtask

  // read a debug-module register (a read followed by a no-op to capture it)
  task automatic dm_rd(input logic [6:0] a, output data_t d);
    logic [65:0] o;
    dmi(2'd1, a, '0, o);
    dmi(2'd0, '0, '0, o);
    check(o[1:0] == 2'd0 && o[40:34] == a, $sformatf("DMI read of %h: status/address", a));
    d = o[33:2];
  endtask

  task automatic dm_expect(input logic [6:0] a, input data_t exp, input string msg);
    data_t d;
    dm_rd(a, d);
    check(d == exp, $sformatf("%s: %h, expected %h", msg, d, exp));
  endtask

  localparam data_t SbcsRo   = 32'h2000_0404;   // sbversion 1, sbasize 32, sbaccess32
  localparam data_t SbcsAuto = 32'h0015_8000;   // readonaddr, access 2, autoinc, readondata

  initial begin
    logic [65:0] o;
    data_t d;
    logic  e;
    req = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    jtag_reset();
    // IDCODE is selected after reset
    jshift(1'b0, 32, '0, o);
    check(o[31:0] == IdCode, $sformatf("IDCODE %h", o[31:0]));
    // IR capture pattern, and BYPASS: one-bit delay
    jshift(1'b1, 5, 66'h1F, o);
    check(o[4:0] == 5'b00001, $sformatf("IR capture %b", o[4:0]));
    jshift(1'b0, 8, 66'hB5, o);
    check(o[7:0] == 8'h6A, $sformatf("bypass delays by one bit (%h)", o[7:0]));
    // DTMCS: version 1, abits 7, idle 1
    jshift(1'b1, 5, 66'h10, o);
    jshift(1'b0, 32, '0, o);
    check(o[31:0] == 32'h0000_1071, $sformatf("DTMCS %h", o[31:0]));
    // debug-module registers
    jshift(1'b1, 5, 66'h11, o);
    dm_expect(7'h11, 32'h0000_0082, "dmstatus: version 2, authenticated");
    dmi(2'd2, 7'h10, 32'h0000_0001, o);
    dm_expect(7'h10, 32'h0000_0001, "dmcontrol.dmactive");
    dm_expect(7'h38, SbcsRo | 32'h0004_0000, "sbcs after reset");
    dmi(2'd2, 7'h17, 32'h0022_1000, o);                 // an abstract command
    dm_expect(7'h16, 32'h0000_0200, "abstractcs: cmderr 2, no data, no progbuf");
    dmi(2'd2, 7'h16, 32'h0000_0700, o);
    dm_expect(7'h16, 32'h0000_0000, "cmderr cleared");
    // system-bus writes with auto-increment
    dmi(2'd2, 7'h38, SbcsAuto, o);
    dm_expect(7'h38, SbcsRo | SbcsAuto, "sbcs configured");
    dmi(2'd2, 7'h39, 32'h0000_0040, o);                 // read on address: reads 0x40
    dmi(2'd2, 7'h3C, 32'hDEAD_BEEF, o);                 // write 0x44
    dmi(2'd2, 7'h3C, 32'h1234_5678, o);                 // write 0x48
    check(bmem[17] == 32'hDEAD_BEEF && bmem[18] == 32'h1234_5678, "system-bus writes reached memory");
    dm_expect(7'h39, 32'h0000_004C, "sbaddress0 auto-incremented");
    // reads: on address, then on data
    bmem[16] = 32'hA5A5_0001;
    dmi(2'd2, 7'h39, 32'h0000_0040, o);
    dm_expect(7'h3C, 32'hA5A5_0001, "read on address");
    dm_expect(7'h3C, 32'hDEAD_BEEF, "read on data, next word");
    dm_expect(7'h3C, 32'h1234_5678, "read on data, third word");
    dm_expect(7'h38, SbcsRo | SbcsAuto, "no error, not busy");
    // bus error: sberror 2, later accesses are blocked until cleared
    dmi(2'd2, 7'h39, 32'hE000_0000, o);
    dm_expect(7'h38, SbcsRo | SbcsAuto | 32'h0000_2000, "sberror 2 on bus error");
    dmi(2'd2, 7'h38, SbcsAuto, o);
    dmi(2'd2, 7'h39, 32'h0000_0060, o);
    d = bmem[24];
    dmi(2'd2, 7'h3C, 32'h5555_AAAA, o);
    check(bmem[24] == d, "no access while sberror is set");
    dmi(2'd2, 7'h38, 32'h0004_7000, o);                 // clear sberror, no read on address
    dmi(2'd2, 7'h39, 32'h0000_0060, o);
    dmi(2'd2, 7'h3C, 32'h5555_AAAA, o);
    check(bmem[24] == 32'h5555_AAAA, "access after sberror cleared");
    // unsupported access size
    dmi(2'd2, 7'h38, 32'h0000_0000, o);                 // sbaccess 0 (8 bit)
    dmi(2'd2, 7'h3C, 32'h0000_0011, o);
    dm_expect(7'h38, SbcsRo | 32'h0000_4000, "sberror 4 on unsupported size");
    dmi(2'd2, 7'h38, 32'h0004_7000, o);
    // access while busy
    block_gnt = 1'b1;
    dmi(2'd2, 7'h39, 32'h0000_0070, o);
    dmi(2'd2, 7'h3C, 32'h0000_0001, o);
    dmi(2'd2, 7'h3C, 32'h0000_0002, o);
    dm_rd(7'h38, d);
    check(d[22] && d[21], $sformatf("sbbusyerror and sbbusy while stalled (%h)", d));
    block_gnt = 1'b0;
    repeat (20) @(negedge clk_i);
    check(bmem[28] == 32'h0000_0001, "stalled write completes with its own data");
    dmi(2'd2, 7'h38, 32'h0044_0000, o);
    dm_expect(7'h38, SbcsRo | 32'h0004_0000, "sbbusyerror cleared");
    check(bus_stalls > 0, "bus stalls happened");
    // halt request
    check(!halt, "no halt request");
    dmi(2'd2, 7'h10, 32'h8000_0001, o);
    check(halt, "haltreq sets the halt request");
    rd_expect(DebugBase + 32'h8, 32'h1, "halt visible in STATUS");
    dmi(2'd2, 7'h10, 32'h4000_0001, o);
    check(!halt, "resumereq clears it");
    dmi(2'd2, 7'h10, 32'h8000_0001, o);
    dmi(2'd2, 7'h10, 32'h0000_0000, o);
    check(!halt, "dmactive = 0 clears it");
    dmi(2'd2, 7'h10, 32'h8000_0001, o);
    trst_n = 1'b0;
    repeat (4) @(negedge clk_i);
    trst_n = 1'b1;
    repeat (4) @(negedge clk_i);
    jtag_reset();
    jshift(1'b0, 32, '0, o);
    check(o[31:0] == IdCode, "IDCODE after TRST");
    // mailbox subordinate
    wr(DebugBase + 32'h0, 32'hAAAA_5555);
    wr(DebugBase + 32'h4, 32'h0F0F_F0F0);
    rd_expect(DebugBase + 32'h0, 32'hAAAA_5555, "DATA0");
    rd_expect(DebugBase + 32'h4, 32'h0F0F_F0F0, "DATA1");
    bus(1'b1, DebugBase + 32'h8, 32'h1, 4'hF, d, e);
    check(e, "STATUS is read only");
    bus(1'b0, DebugBase + 32'hC, '0, 4'hF, d, e);
    check(e, "unused offset is an error");
    finish_tb();
  end

endmodule
