// tb_croc_soc: end-to-end test of the SoC at its default parameters.
//
// The testbench stands in for the two parts outside croc_soc: the RISC-V
// core (driving the instruction and data OBI ports) and the user domain
// (a manager driving its OBI port and a memory model on its subordinate
// port). A host drives the JTAG pins. The UART transmit pin is looped back
// to its receive pin. The sequence follows how the chip is brought up and
// used:
//   1. the host loads a program into SRAM bank 0 and data into bank 1
//      through JTAG system-bus access, points the boot address at SRAM and
//      sets fetch enable; the testbench checks the core-side outputs,
//   2. the "core" fetches the boot ROM, then streams instruction fetches
//      from bank 0 while loading/storing bank 1: both ports must be granted
//      in every cycle (one instruction per cycle),
//   3. fetch and data access to the same bank: one of them stalls,
//   4. the core programs UART (transmit + loopback receive), GPIO, timer,
//      CLINT and reads/writes the user domain; the user domain's manager
//      writes SRAM; interrupts reach the core-side interrupt outputs,
//   5. an unmapped access returns an error, the debug unit raises a halt
//      request, and the program's end is reported through CORESTATUS.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_croc_soc;
  import croc_pkg::*;

  localparam int unsigned WATCHDOG = 400000;
  localparam int unsigned NumGpio = 32;
  localparam int unsigned NumUserIrq = 4;

  logic clk_i = 1'b0;
  logic rst_ni = 1'b0;
  int   checks = 0;
  int   failures = 0;

  always #5 clk_i = ~clk_i;

  // ------------------------------------------------------------- the DUT
  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, trst_n = 1'b1, tdo;
  logic uart_line;
  logic [NumGpio-1:0] gpio_in = '0, gpio_out, gpio_oe;
  obi_req_t mreq [3];           // 0 core instruction, 1 core data, 2 user manager
  obi_rsp_t mrsp [3];
  obi_req_t user_sreq;
  obi_rsp_t user_srsp;
  addr_t    boot_addr;
  logic     fetch_en, debug_req, timer_irq, sw_irq;
  logic [NumUserIrq+2:0] fast_irq;
  data_t    core_status;
  logic [NumUserIrq-1:0] user_irq = '0;

  croc_soc dut (
    .clk_i, .rst_ni, .fetch_en_i(1'b0),
    .jtag_tck_i(tck), .jtag_tms_i(tms), .jtag_tdi_i(tdi), .jtag_trst_ni(trst_n), .jtag_tdo_o(tdo),
    .uart_rx_i(uart_line), .uart_tx_o(uart_line),
    .gpio_i(gpio_in), .gpio_o(gpio_out), .gpio_oe_o(gpio_oe),
    .core_instr_req_i(mreq[0]), .core_instr_rsp_o(mrsp[0]),
    .core_data_req_i(mreq[1]), .core_data_rsp_o(mrsp[1]),
    .core_boot_addr_o(boot_addr), .core_fetch_en_o(fetch_en), .core_debug_req_o(debug_req),
    .core_timer_irq_o(timer_irq), .core_sw_irq_o(sw_irq), .core_fast_irq_o(fast_irq),
    .core_status_o(core_status),
    .user_mgr_req_i(mreq[2]), .user_mgr_rsp_o(mrsp[2]),
    .user_sbr_req_o(user_sreq), .user_sbr_rsp_i(user_srsp), .user_irq_i(user_irq)
  );

  // ---------------------------------------------- user subordinate model
  data_t umem [64];
  logic  urv_q;
  data_t urd_q;
  id_t   uid_q;
  int    user_sbr_accesses = 0;
  always_ff @(posedge clk_i) begin
    urv_q <= user_sreq.req;
    if (user_sreq.req) begin
      user_sbr_accesses <= user_sbr_accesses + 1;
      uid_q <= user_sreq.a.aid;
      urd_q <= umem[user_sreq.a.addr[7:2]];
      if (user_sreq.a.we) umem[user_sreq.a.addr[7:2]] <= user_sreq.a.wdata;
    end
  end
  assign user_srsp.gnt     = user_sreq.req;
  assign user_srsp.rvalid  = urv_q;
  assign user_srsp.r.rdata = urd_q;
  assign user_srsp.r.err   = 1'b0;
  assign user_srsp.r.rid   = uid_q;

  // ---------------------------------------------------- mechanism counters
  int parallel_cycles = 0;    // instr and data port both granted
  int bank_conflicts  = 0;    // a core port waited for a grant
  int uart_frames     = 0;
  int irq_events [string];
  int sba_accesses    = 0;
  int decode_errors   = 0;
  int user_mgr_accesses = 0;

  always @(posedge clk_i) begin
    if (rst_ni && mreq[0].req && mreq[1].req && mrsp[0].gnt && mrsp[1].gnt) parallel_cycles++;
    if (rst_ni && ((mreq[0].req && !mrsp[0].gnt) || (mreq[1].req && !mrsp[1].gnt))) bank_conflicts++;
    if (rst_ni && dut.xbar_mgr_req[MgrDebug].req && dut.xbar_mgr_rsp[MgrDebug].gnt) sba_accesses++;
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

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk_i);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  // ------------------------------------------------------- OBI managers
  task automatic mbus(input int m, input logic we, input addr_t addr, input data_t wdata,
                      input strb_t be, output data_t rdata, output logic err);
    @(negedge clk_i);
    mreq[m]         = '0;
    mreq[m].req     = 1'b1;
    mreq[m].a.addr  = addr;
    mreq[m].a.we    = we;
    mreq[m].a.be    = be;
    mreq[m].a.wdata = wdata;
    mreq[m].a.aid   = id_t'(m);
    #1;
    while (!mrsp[m].gnt) begin
      @(negedge clk_i);
      #1;
    end
    @(negedge clk_i);
    mreq[m] = '0;
    check(mrsp[m].rvalid, $sformatf("port %0d: response one cycle after grant (%h)", m, addr));
    check(mrsp[m].r.rid == id_t'(m), "response id");
    rdata = mrsp[m].r.rdata;
    err   = mrsp[m].r.err;
    if (err) decode_errors++;
  endtask

  task automatic dwr(input addr_t a, input data_t d);
    data_t r;
    logic  e;
    mbus(1, 1'b1, a, d, 4'hF, r, e);
    check(!e, $sformatf("write %h ok", a));
  endtask

  task automatic drd(input addr_t a, output data_t d);
    logic e;
    mbus(1, 1'b0, a, '0, 4'hF, d, e);
    check(!e, $sformatf("read %h ok", a));
  endtask

  task automatic drd_expect(input addr_t a, input data_t exp, input string msg);
    data_t d;
    drd(a, d);
    check(d == exp, $sformatf("%s: %h, expected %h", msg, d, exp));
  endtask

  // ---------------------------------------------------------------- JTAG
  task automatic jclk(input logic tms_v, input logic tdi_v, output logic tdo_v);
    tms = tms_v;
    tdi = tdi_v;
    repeat (4) @(negedge clk_i);
    tdo_v = tdo;
    tck = 1'b1;
    repeat (4) @(negedge clk_i);
    tck = 1'b0;
  endtask

  task automatic jshift(input bit ir, input int n, input logic [65:0] din, output logic [65:0] dout);
    logic t;
    dout = '0;
    jclk(1'b1, 1'b0, t);
    if (ir) jclk(1'b1, 1'b0, t);
    jclk(1'b0, 1'b0, t);
    jclk(1'b0, 1'b0, t);
    for (int i = 0; i < n; i++) begin
      jclk(i == n - 1, din[i], t);
      dout[i] = t;
    end
    jclk(1'b1, 1'b0, t);
    jclk(1'b0, 1'b0, t);
  endtask

  // one DMI access (op 1 read, 2 write); returns the capture of the previous one
  task automatic dmi(input logic [1:0] op, input logic [6:0] a, input data_t d,
                     output logic [65:0] o);
    jshift(1'b0, 41, {25'b0, a, d, op}, o);
    repeat (8) @(negedge clk_i);
  endtask

  // activate the debug module, 32-bit system-bus accesses, read on address
  task automatic dm_init();
    logic [65:0] o;
    jshift(1'b1, 5, 66'h11, o);                   // select DMI
    dmi(2'd2, 7'h10, 32'h0000_0001, o);           // dmcontrol.dmactive
    dmi(2'd2, 7'h38, 32'h0014_0000, o);           // sbcs: sbreadonaddr, sbaccess 2
  endtask

  task automatic sba_write(input addr_t a, input data_t d);
    logic [65:0] o;
    dmi(2'd2, 7'h39, a, o);
    dmi(2'd2, 7'h3C, d, o);
  endtask

  task automatic sba_read(input addr_t a, output data_t d);
    logic [65:0] o;
    dmi(2'd2, 7'h39, a, o);                       // starts the read
    dmi(2'd1, 7'h3C, '0, o);
    dmi(2'd0, '0, '0, o);
    check(o[1:0] == 2'd0 && o[40:34] == 7'h3C, "DMI read status");
    d = o[33:2];
  endtask

  // ----------------------------------------------------- UART sampler
  localparam int unsigned Div = 8;
  logic [7:0] uart_seen;
  initial begin : uart_sampler
    forever begin
      @(negedge uart_line);
      repeat (Div / 2) @(negedge clk_i);
      if (!uart_line) begin
        for (int i = 0; i < 8; i++) begin
          repeat (Div) @(negedge clk_i);
          uart_seen[i] = uart_line;
        end
        repeat (Div) @(negedge clk_i);
        if (uart_line) uart_frames++;
      end
    end
  end

  // ------------------------------------------------------------ program
  localparam int unsigned NInstr = 64;
  function automatic data_t instr_word(int i);
    return 32'h0000_0013 | (data_t'(i) << 20);   // addi x0, x0, i
  endfunction

  initial begin
    data_t d;
    logic  e;
    logic [65:0] o;
    int    t0;
    mreq[0] = '0;
    mreq[1] = '0;
    mreq[2] = '0;
    for (int i = 0; i < 64; i++) umem[i] = '0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;

    // ---- 1. bring-up through JTAG
    check(!fetch_en && boot_addr == BootromBase, "core held after reset, boot from ROM");
    repeat (6) jclk(1'b1, 1'b0, o[0]);
    jclk(1'b0, 1'b0, o[0]);
    jshift(1'b0, 32, '0, o);
    check(o[31:0] == 32'h1c0c_0001, "IDCODE through the SoC pins");
    dm_init();
    for (int i = 0; i < 4; i++) sba_write(SramBase + addr_t'(4 * i), instr_word(i));
    sba_write(SramBase + SramBankSize, 32'h0000_0005);          // data in bank 1
    sba_read(SramBase + 32'h8, d);
    check(d == instr_word(2), "program word read back over JTAG");
    sba_write(SocCtrlBase + 32'h0, SramBase);
    sba_write(SocCtrlBase + 32'h4, 32'h1);
    check(fetch_en && boot_addr == SramBase, "fetch enable and boot address set over JTAG");

    // ---- 2. boot ROM fetch, then one instruction per cycle
    mbus(0, 1'b0, BootromBase, '0, 4'hF, d, e);
    check(!e && d == 32'h1000_02B7, "boot ROM word 0 through the crossbar and demux");
    mbus(0, 1'b0, BootromBase + 4, '0, 4'hF, d, e);
    check(!e && d == 32'h0002_8067, "boot ROM word 1");
    for (int i = 4; i < NInstr; i++) dwr(SramBase + addr_t'(4 * i), instr_word(i));
    // stream: instruction port reads bank 0, data port stores to bank 1
    @(negedge clk_i);
    t0 = parallel_cycles;
    for (int i = 0; i < NInstr; i++) begin
      mreq[0] = '0;
      mreq[0].req = 1'b1;
      mreq[0].a.addr = SramBase + addr_t'(4 * i);
      mreq[0].a.be = 4'hF;
      mreq[1] = '0;
      mreq[1].req = 1'b1;
      mreq[1].a.we = 1'b1;
      mreq[1].a.be = 4'hF;
      mreq[1].a.aid = 1'b1;
      mreq[1].a.addr = SramBase + SramBankSize + addr_t'(4 * i);
      mreq[1].a.wdata = 32'hD000_0000 + i;
      #1;
      check(mrsp[0].gnt && mrsp[1].gnt, "both core ports granted every cycle");
      if (i > 0) check(mrsp[0].rvalid && mrsp[0].r.rdata == instr_word(i - 1), "fetched instruction");
      if (i > 0) check(mrsp[1].rvalid && !mrsp[1].r.err, "store acknowledged");
      @(negedge clk_i);
    end
    mreq[0] = '0;
    mreq[1] = '0;
    check(mrsp[0].rvalid && mrsp[0].r.rdata == instr_word(NInstr - 1), "last fetch");
    check(parallel_cycles - t0 == NInstr, $sformatf("%0d instructions in %0d cycles", NInstr,
          parallel_cycles - t0));
    drd_expect(SramBase + SramBankSize + 32'h10, 32'hD000_0004, "stored data in bank 1");

    // ---- 3. same bank for fetch and data: one port stalls
    t0 = bank_conflicts;
    fork
      mbus(0, 1'b0, SramBase + 32'h0, '0, 4'hF, d, e);
      mbus(1, 1'b0, SramBase + 32'h4, '0, 4'hF, d, e);
    join
    check(bank_conflicts > t0, "bank conflict stalls one port");

    // ---- 4. peripherals
    // UART: transmit 0x3C, loop back into the receiver
    dwr(UartBase + 32'h8, Div);
    dwr(UartBase + 32'hC, 32'h1);
    t0 = uart_frames;
    dwr(UartBase + 32'h0, 32'h3C);
    repeat (12 * Div) @(negedge clk_i);
    check(uart_frames == t0 + 1 && uart_seen == 8'h3C, "UART frame on the pin");
    check(fast_irq[0], "UART receive interrupt at the core");
    if (fast_irq[0]) irq_events["uart"]++;
    drd_expect(UartBase + 32'h0, 32'h3C, "UART loopback byte");
    // GPIO
    dwr(GpioBase + 32'h0, 32'h0000_00FF);
    dwr(GpioBase + 32'h4, 32'h0000_00A5);
    check(gpio_oe == 32'h0000_00FF && gpio_out[7:0] == 8'hA5, "GPIO pins driven");
    dwr(GpioBase + 32'hC, 32'h0000_0100);
    gpio_in = 32'h0000_0100;
    repeat (4) @(negedge clk_i);
    drd_expect(GpioBase + 32'h8, 32'h0000_0100, "GPIO input");
    check(fast_irq[1], "GPIO interrupt at the core");
    if (fast_irq[1]) irq_events["gpio"]++;
    dwr(GpioBase + 32'h10, 32'h0000_0100);
    check(!fast_irq[1], "GPIO interrupt cleared");
    // timer
    dwr(TimerBase + 32'h8, 32'd20);
    dwr(TimerBase + 32'h0, 32'h1);
    repeat (30) @(negedge clk_i);
    check(fast_irq[2], "timer interrupt at the core");
    if (fast_irq[2]) irq_events["timer"]++;
    dwr(TimerBase + 32'h0, 32'h0);
    dwr(TimerBase + 32'hC, 32'h1);
    // CLINT
    drd(ClintBase + 32'hBFF8, d);
    dwr(ClintBase + 32'h4004, 32'h0);
    dwr(ClintBase + 32'h4000, d + 30);
    check(!timer_irq, "machine timer not yet");
    repeat (30) @(negedge clk_i);
    check(timer_irq, "machine timer interrupt at the core");
    if (timer_irq) irq_events["mtimer"]++;
    dwr(ClintBase + 32'h0, 32'h1);
    check(sw_irq, "software interrupt at the core");
    if (sw_irq) irq_events["msip"]++;
    dwr(ClintBase + 32'h0, 32'h0);
    // user domain: subordinate port and manager port
    dwr(UserBase + 32'h10, 32'h5555_AAAA);
    check(umem[4] == 32'h5555_AAAA, "core write reached the user domain");
    drd_expect(UserBase + 32'h10, 32'h5555_AAAA, "core read from the user domain");
    mbus(2, 1'b1, SramBase + SramBankSize + 32'h100, 32'hFEED_0001, 4'hF, d, e);
    user_mgr_accesses++;
    check(!e, "user manager write");
    mbus(2, 1'b0, SocCtrlBase + 32'hC, '0, 4'hF, d, e);
    user_mgr_accesses++;
    check(!e, "user manager reaches peripherals");
    drd_expect(SramBase + SramBankSize + 32'h100, 32'hFEED_0001, "user manager data in SRAM");
    user_irq = 4'b1010;
    #1 check(fast_irq[6:3] == 4'b1010, "user interrupts at the core");
    if (fast_irq[6:3] != 0) irq_events["user"]++;
    user_irq = '0;

    // ---- 5. errors, halt request, end of program
    mbus(1, 1'b0, 32'h5000_0000, '0, 4'hF, d, e);
    check(e, "unmapped address: error");
    mbus(1, 1'b1, 32'h0300_1000, 32'h1, 4'hF, d, e);
    check(e, "hole in the peripheral map: error");
    dmi(2'd2, 7'h10, 32'h8000_0001, o);           // dmcontrol.haltreq
    check(debug_req, "halt request at the core");
    drd_expect(DebugBase + 32'h8, 32'h1, "halt visible to the core");
    dmi(2'd2, 7'h10, 32'h4000_0001, o);           // resumereq
    check(!debug_req, "halt request withdrawn");
    dwr(SocCtrlBase + 32'h8, 32'h8000_0000 | 32'd42);
    check(core_status == 32'h8000_002A, "end of program reported");

    // every mechanism happened
    check(parallel_cycles >= NInstr, "mechanism: fetch and data in the same cycle");
    check(bank_conflicts > 0, "mechanism: bank conflict stall");
    check(uart_frames > 0, "mechanism: UART frame");
    check(sba_accesses > 0, "mechanism: JTAG system-bus access");
    check(decode_errors >= 2, "mechanism: decode error");
    check(user_sbr_accesses > 0 && user_mgr_accesses > 0, "mechanism: user domain ports");
    foreach (irq_events[k]) $display("irq %s: %0d", k, irq_events[k]);
    check(irq_events.num() == 6, "mechanism: all interrupt sources");
    $display("parallel=%0d conflicts=%0d uart=%0d sba=%0d errors=%0d user=%0d/%0d",
             parallel_cycles, bank_conflicts, uart_frames, sba_accesses, decode_errors,
             user_mgr_accesses, user_sbr_accesses);
    finish_tb();
  end

endmodule
