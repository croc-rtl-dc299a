// tb_croc_workload: runs an integer program on the whole SoC.
//
// A behavioural RV32IM core (rv32_core_model) is attached to the SoC's
// core ports. The workload is a 32-element integer dot product, the kind
// of integer computation a microcontroller-class chip is measured on.
// Program and data are loaded through JTAG system-bus access, fetch enable
// is set over JTAG, the core boots from the boot ROM, which jumps to SRAM,
// computes, stores the result to SRAM, sends its low byte over the UART and
// reports the end through CORESTATUS. The program is assembled here by the
// encoder functions below (RV32I formats R/I/S/B/U/J).
//
// The program runs twice:
//   run 1: code in bank 0, data in bank 1. Fetches and loads never collide,
//          so the core must retire one instruction per cycle (checked:
//          cycles - instructions <= 2, the pipeline fill),
//   run 2: code and data both in bank 0. Every load collides with the
//          fetch of its successor; the result must be the same, and the
//          collisions must show up as stall cycles.
// Expected result: sum over i = 0..31 of (i + 1) * (3i - 7), modulo 2^32.
module tb_croc_workload;
  import croc_pkg::*;

  localparam int unsigned WATCHDOG = 600000;
  localparam int unsigned N = 32;

  logic clk_i = 1'b0;
  logic rst_ni = 1'b0;
  int   checks = 0;
  int   failures = 0;

  always #5 clk_i = ~clk_i;

  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, tdo;
  logic uart_tx;
  logic [31:0] gpio_out, gpio_oe;
  obi_req_t ireq, dreq, ureq, usreq;
  obi_rsp_t irsp, drsp, ursp, usrsp;
  addr_t    boot_addr;
  logic     fetch_en, debug_req, timer_irq, sw_irq;
  logic [6:0] fast_irq;
  data_t    core_status;

  croc_soc dut (
    .clk_i, .rst_ni, .fetch_en_i(1'b0),
    .jtag_tck_i(tck), .jtag_tms_i(tms), .jtag_tdi_i(tdi), .jtag_trst_ni(1'b1), .jtag_tdo_o(tdo),
    .uart_rx_i(1'b1), .uart_tx_o(uart_tx),
    .gpio_i('0), .gpio_o(gpio_out), .gpio_oe_o(gpio_oe),
    .core_instr_req_i(ireq), .core_instr_rsp_o(irsp),
    .core_data_req_i(dreq), .core_data_rsp_o(drsp),
    .core_boot_addr_o(boot_addr), .core_fetch_en_o(fetch_en), .core_debug_req_o(debug_req),
    .core_timer_irq_o(timer_irq), .core_sw_irq_o(sw_irq), .core_fast_irq_o(fast_irq),
    .core_status_o(core_status),
    .user_mgr_req_i(ureq), .user_mgr_rsp_o(ursp),
    .user_sbr_req_o(usreq), .user_sbr_rsp_i(usrsp), .user_irq_i('0)
  );

  rv32_core_model i_core (
    .clk_i, .rst_ni, .fetch_en_i(fetch_en), .boot_addr_i(boot_addr),
    .instr_req_o(ireq), .instr_rsp_i(irsp), .data_req_o(dreq), .data_rsp_i(drsp)
  );

  // idle user domain: no requests; its subordinate answers on time
  logic usrv_q;
  always_ff @(posedge clk_i) usrv_q <= usreq.req;
  assign ureq          = '0;
  assign usrsp.gnt     = usreq.req;
  assign usrsp.rvalid  = usrv_q;
  assign usrsp.r       = '0;

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

  // ------------------------------------------------------- RV32 encoders
  function automatic data_t enc_r(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3, int rd, logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic data_t enc_i(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic data_t enc_s(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), f3, m[4:0], 7'b0100011};
  endfunction
  function automatic data_t enc_b(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [12:0] m = 13'(imm);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), f3, m[4:1], m[11], 7'b1100011};
  endfunction
  function automatic data_t enc_u(data_t imm20, int rd, logic [6:0] op);
    return {imm20[19:0], 5'(rd), op};
  endfunction
  function automatic data_t enc_j(int imm, int rd);
    logic [20:0] m = 21'(imm);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'b1101111};
  endfunction

  data_t prog [$];
  function automatic void emit(data_t w);
    prog.push_back(w);
  endfunction
  function automatic void li(int rd, data_t v);            // lui + addi
    data_t hi = (v + 32'h800) >> 12;
    emit(enc_u(hi, rd, 7'b0110111));
    emit(enc_i(int'(v - (hi << 12)), rd, 3'b000, rd, 7'b0010011));
  endfunction
  function automatic void addi(int rd, int rs1, int imm);
    emit(enc_i(imm, rs1, 3'b000, rd, 7'b0010011));
  endfunction

  function automatic void assemble(addr_t data_base);
    prog.delete();
    li(10, data_base);                                      // x10 = &A
    addi(11, 10, 4 * N);                                    // x11 = &B
    addi(12, 0, N);                                         // x12 = n
    addi(13, 0, 0);                                         // x13 = acc
    emit(enc_i(0, 10, 3'b010, 14, 7'b0000011));             // loop: lw x14, 0(x10)
    emit(enc_i(0, 11, 3'b010, 15, 7'b0000011));             //       lw x15, 0(x11)
    emit(enc_r(7'b0000001, 15, 14, 3'b000, 16, 7'b0110011));//       mul x16, x14, x15
    emit(enc_r(7'b0000000, 16, 13, 3'b000, 13, 7'b0110011));//       add x13, x13, x16
    addi(10, 10, 4);
    addi(11, 11, 4);
    addi(12, 12, -1);
    emit(enc_b(-28, 0, 12, 3'b001));                        //       bne x12, x0, loop
    li(17, data_base);
    emit(enc_s(256, 13, 17, 3'b010));                       // sw x13, 256(x17)
    li(18, SocCtrlBase);
    emit(enc_i(1, 13, 3'b001, 19, 7'b0010011));             // slli x19, x13, 1
    emit(enc_i(1, 19, 3'b101, 19, 7'b0010011));             // srli x19, x19, 1
    emit(enc_u(32'h80000, 20, 7'b0110111));                 // lui x20, 0x80000
    emit(enc_r(7'b0000000, 20, 19, 3'b110, 19, 7'b0110011));// or x19, x19, x20
    li(21, UartBase);
    emit(enc_s(0, 13, 21, 3'b000));                         // sb x13, 0(x21)
    emit(enc_s(8, 19, 18, 3'b010));                         // sw x19, 8(x18): CORESTATUS
    emit(enc_j(0, 0));                                      // j .
  endfunction

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
    d = o[33:2];
  endtask

  // ------------------------------------------------------ UART sampler
  logic [7:0] uart_byte;
  int         uart_frames = 0;
  initial begin : uart_sampler
    forever begin
      @(negedge uart_tx);
      repeat (8) @(negedge clk_i);              // half of the reset divisor 16
      if (!uart_tx) begin
        for (int i = 0; i < 8; i++) begin
          repeat (16) @(negedge clk_i);
          uart_byte[i] = uart_tx;
        end
        repeat (16) @(negedge clk_i);
        if (uart_tx) uart_frames++;
      end
    end
  end

  // --------------------------------------------------------------- runs
  task automatic run(input addr_t data_base, input bit expect_ipc1, input data_t expected);
    logic [65:0] o;
    data_t d;
    int    frames0, n;
    assemble(data_base);
    rst_ni = 1'b0;
    repeat (3) @(negedge clk_i);
    rst_ni = 1'b1;
    repeat (6) jclk(1'b1, 1'b0, o[0]);
    jclk(1'b0, 1'b0, o[0]);
    dm_init();
    foreach (prog[i]) sba_write(SramBase + addr_t'(4 * i), prog[i]);
    for (int i = 0; i < int'(N); i++) begin
      sba_write(data_base + addr_t'(4 * i), data_t'(i + 1));
      sba_write(data_base + addr_t'(4 * (N + i)), data_t'(3 * i - 7));
    end
    sba_read(SramBase + 32'h4, d);
    check(d == prog[1], "program readback over JTAG");
    frames0 = uart_frames;
    check(!fetch_en, "core waits for fetch enable");
    sba_write(SocCtrlBase + 32'h4, 32'h1);
    n = 0;
    while (!core_status[31] && n < 20000) begin
      @(negedge clk_i);
      n++;
    end
    check(core_status[31], "program reported its end");
    check(core_status[30:0] == expected[30:0], $sformatf("CORESTATUS result %h, expected %h",
          core_status[30:0], expected[30:0]));
    $display("data at %h: %0d instructions in %0d cycles, %0d stall cycles",
             data_base, i_core.instret, i_core.cycles, i_core.stall_cycles);
    // 2 boot ROM + 5 setup + 8 per element + 13 epilogue (the last one the CORESTATUS store)
    check(i_core.instret >= 8 * N + 20 && i_core.instret <= 8 * N + 21,
          $sformatf("instructions retired (%0d)", i_core.instret));
    check(i_core.bus_errors == 0, "no bus errors");
    if (expect_ipc1) begin
      check(i_core.cycles - i_core.instret <= 2, "one instruction per cycle with code and data in separate banks");
    end else begin
      check(i_core.stall_cycles >= 2 * int'(N), "bank conflicts stall the core when code and data share a bank");
    end
    repeat (200) @(negedge clk_i);
    check(uart_frames == frames0 + 1 && uart_byte == expected[7:0], "result byte on the UART pin");
    sba_read(data_base + 32'd256, d);
    check(d == expected, "result stored in SRAM");
  endtask

  initial begin
    data_t expected = '0;
    for (int i = 0; i < int'(N); i++) expected += data_t'(i + 1) * data_t'(3 * i - 7);
    repeat (2) @(negedge clk_i);
    run(SramBase + SramBankSize, 1'b1, expected);           // data in bank 1
    run(SramBase + 32'h800, 1'b0, expected);                // data in bank 0
    finish_tb();
  end

endmodule
