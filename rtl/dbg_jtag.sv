// dbg_jtag: JTAG debug unit with RISC-V style system-bus access.
//
// A host reaches the SoC through the four JTAG pins. The unit follows the
// transport and the system-bus part of the RISC-V debug specification
// (version 0.13):
//   * a TAP controller (IEEE 1149.1) with a 5-bit instruction register:
//     IDCODE 0x01, DTMCS 0x10, DMI 0x11, everything else BYPASS;
//   * DTMCS (32 bit): version 1, abits 7, idle hint 1; dmistat stays 0
//     because a DMI access can neither fail nor stall (see below);
//   * DMI (41 bit, {address[6:0], data[31:0], op[1:0]}, LSB first). On
//     Update-DR op 1 reads and op 2 writes the debug-module register at
//     address. The access completes in one clock cycle; the next Capture-DR
//     returns {address, read data, status 0};
//   * debug-module registers: dmcontrol (0x10: dmactive, haltreq,
//     resumereq clears haltreq), dmstatus (0x11: version 2, authenticated),
//     abstractcs (0x16: no data registers, no program buffer; a write to
//     command 0x17 sets cmderr 2, "not supported"), sbcs (0x38), sbaddress0
//     (0x39) and sbdata0 (0x3C). System-bus access supports 32-bit accesses
//     with read-on-address, read-on-data and auto-increment; sberror 2
//     reports a bus error, 4 an unsupported size, sbbusyerror an access
//     started while busy. Bus accesses go through the unit's OBI manager
//     port on the crossbar, so the host can load programs into SRAM and set
//     SoC registers (boot address, fetch enable);
//   * haltreq drives the core's halt request;
//   * an OBI subordinate port (on the peripheral demux) with two mailbox
//     words DATA0 (0x0) and DATA1 (0x4) and a read-only STATUS (0x8, bit 0
//     halt request) that the core and the host (via system-bus access) can
//     both use.
// JTAG timing: the pins are sampled with the system clock through
// two-flip-flop synchronisers and TCK edges are detected in the system
// clock domain, so the whole unit runs on clk_i and needs TCK below about
// a quarter of the system clock. TDO changes after a falling TCK edge.
// What follows the source: a debug block with JTAG pins that is both a
// manager on the crossbar and a subordinate on the demux. The choice of
// the RISC-V debug transport is this design's; so is leaving out abstract
// commands, the program buffer and the debug ROM (no register access to a
// halted core), and the mailbox subordinate. dmstatus does not report the
// core's halted/running state, which the core does not export here.
module dbg_jtag #(
  parameter logic [31:0] IdCode = 32'h1c0c_0001
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // JTAG pins
  input  logic               jtag_tck_i,
  input  logic               jtag_tms_i,
  input  logic               jtag_tdi_i,
  input  logic               jtag_trst_ni,
  output logic               jtag_tdo_o,
  // bus manager (to the crossbar)
  output croc_pkg::obi_req_t mgr_req_o,
  input  croc_pkg::obi_rsp_t mgr_rsp_i,
  // bus subordinate (from the peripheral demux)
  input  croc_pkg::obi_req_t sbr_req_i,
  output croc_pkg::obi_rsp_t sbr_rsp_o,
  // halt request to the core
  output logic               debug_req_o
);
  import croc_pkg::*;

  typedef enum logic [3:0] {
    TestLogicReset, RunTestIdle,
    SelectDrScan, CaptureDr, ShiftDr, Exit1Dr, PauseDr, Exit2Dr, UpdateDr,
    SelectIrScan, CaptureIr, ShiftIr, Exit1Ir, PauseIr, Exit2Ir, UpdateIr
  } tap_state_e;

  localparam logic [4:0] IrIdcode = 5'h01;
  localparam logic [4:0] IrDtmcs  = 5'h10;
  localparam logic [4:0] IrDmi    = 5'h11;
  localparam int unsigned DmiLen  = 41;

  // debug-module register addresses
  typedef enum logic [6:0] {
    DmControl  = 7'h10,
    DmStatus   = 7'h11,
    AbstractCs = 7'h16,
    Command    = 7'h17,
    SbCs       = 7'h38,
    SbAddress0 = 7'h39,
    SbData0    = 7'h3C
  } dm_reg_e;

  // ------------------------------------------------ pin synchronisers
  logic [1:0] tck_s_q, tms_s_q, tdi_s_q, trst_s_q;
  logic       tck_prev_q, tck_rise, tck_fall, tap_rst;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tck_s_q    <= '0;
      tms_s_q    <= '1;
      tdi_s_q    <= '0;
      trst_s_q   <= '0;
      tck_prev_q <= 1'b0;
    end else begin
      tck_s_q    <= {tck_s_q[0], jtag_tck_i};
      tms_s_q    <= {tms_s_q[0], jtag_tms_i};
      tdi_s_q    <= {tdi_s_q[0], jtag_tdi_i};
      trst_s_q   <= {trst_s_q[0], jtag_trst_ni};
      tck_prev_q <= tck_s_q[1];
    end
  end

  assign tck_rise = tck_s_q[1] && !tck_prev_q;
  assign tck_fall = !tck_s_q[1] && tck_prev_q;
  assign tap_rst  = !trst_s_q[1];

  // ------------------------------------------------------ TAP controller
  tap_state_e state_q, state_d;
  logic       tms;
  assign tms = tms_s_q[1];

  always_comb begin
    unique case (state_q)
      TestLogicReset: state_d = tms ? TestLogicReset : RunTestIdle;
      RunTestIdle:    state_d = tms ? SelectDrScan   : RunTestIdle;
      SelectDrScan:   state_d = tms ? SelectIrScan   : CaptureDr;
      CaptureDr:      state_d = tms ? Exit1Dr        : ShiftDr;
      ShiftDr:        state_d = tms ? Exit1Dr        : ShiftDr;
      Exit1Dr:        state_d = tms ? UpdateDr       : PauseDr;
      PauseDr:        state_d = tms ? Exit2Dr        : PauseDr;
      Exit2Dr:        state_d = tms ? UpdateDr       : ShiftDr;
      UpdateDr:       state_d = tms ? SelectDrScan   : RunTestIdle;
      SelectIrScan:   state_d = tms ? TestLogicReset : CaptureIr;
      CaptureIr:      state_d = tms ? Exit1Ir        : ShiftIr;
      ShiftIr:        state_d = tms ? Exit1Ir        : ShiftIr;
      Exit1Ir:        state_d = tms ? UpdateIr       : PauseIr;
      PauseIr:        state_d = tms ? Exit2Ir        : PauseIr;
      Exit2Ir:        state_d = tms ? UpdateIr       : ShiftIr;
      default:        state_d = tms ? SelectDrScan   : RunTestIdle;  // UpdateIr
    endcase
  end

  // ------------------------------------------------------ TAP registers
  logic [4:0]        ir_q, ir_shift_q;
  logic [DmiLen-1:0] dr_q;
  logic              tdo_q;
  logic [6:0]        dmi_addr_q;      // address of the last DMI access
  data_t             dmi_rdata_q;     // its read data
  localparam logic [1:0] DmiStat = 2'd0;  // DMI accesses never fail or stall
  logic              dmi_req;         // DMI access this cycle
  logic              dmi_we;
  logic [6:0]        dmi_addr;
  data_t             dmi_wdata;
  data_t             dtmcs;

  assign dtmcs     = {14'b0, 1'b0, 1'b0, 1'b0, 3'd1, DmiStat, 6'd7, 4'd1};
  assign dmi_addr  = dr_q[40:34];
  assign dmi_wdata = dr_q[33:2];
  assign dmi_we    = (dr_q[1:0] == 2'd2);
  assign dmi_req   = tck_fall && !tap_rst && state_q == UpdateDr && ir_q == IrDmi &&
                     (dr_q[1:0] == 2'd1 || dr_q[1:0] == 2'd2);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= TestLogicReset;
      ir_q       <= IrIdcode;
      ir_shift_q <= '0;
      dr_q       <= '0;
      tdo_q      <= 1'b0;
    end else if (tap_rst) begin
      state_q <= TestLogicReset;
      ir_q    <= IrIdcode;
    end else begin
      if (tck_rise) begin
        state_q <= state_d;
        unique case (state_q)
          TestLogicReset: ir_q <= IrIdcode;
          CaptureIr:      ir_shift_q <= 5'b00001;
          ShiftIr:        ir_shift_q <= {tdi_s_q[1], ir_shift_q[4:1]};
          CaptureDr: begin
            unique case (ir_q)
              IrIdcode: dr_q <= {9'b0, IdCode};
              IrDtmcs:  dr_q <= {9'b0, dtmcs};
              IrDmi:    dr_q <= {dmi_addr_q, dmi_rdata_q, DmiStat};
              default:  dr_q <= '0;
            endcase
          end
          ShiftDr: begin
            unique case (ir_q)
              IrIdcode, IrDtmcs: dr_q <= {9'b0, tdi_s_q[1], dr_q[31:1]};
              IrDmi:             dr_q <= {tdi_s_q[1], dr_q[40:1]};
              default:           dr_q <= {40'b0, tdi_s_q[1]};     // BYPASS
            endcase
          end
          default: ;
        endcase
      end
      if (tck_fall) begin
        unique case (state_q)
          ShiftIr:  tdo_q <= ir_shift_q[0];
          ShiftDr:  tdo_q <= dr_q[0];
          UpdateIr: ir_q  <= ir_shift_q;
          default: ;
        endcase
      end
    end
  end

  assign jtag_tdo_o = tdo_q;

  // ----------------------------------------------------- debug module
  logic        dmactive_q, halt_q;
  logic [2:0]  cmderr_q;
  logic        sbbusy, sbbusyerror_q, sbreadonaddr_q, sbautoinc_q, sbreadondata_q;
  logic [2:0]  sbaccess_q, sberror_q;
  addr_t       sbaddr_q;
  data_t       sbdata_q;
  logic        sb_req_q, sb_wait_q, sb_we_q;
  logic        sb_start, sb_start_we;
  data_t       dm_rdata;
  data_t       sbcs;

  assign sbbusy = sb_req_q || sb_wait_q;
  assign sbcs   = {3'd1, 6'b0, sbbusyerror_q, sbbusy, sbreadonaddr_q, sbaccess_q,
                   sbautoinc_q, sbreadondata_q, sberror_q, 7'd32, 5'b00100};

  always_comb begin
    unique case (dmi_addr)
      DmControl:  dm_rdata = {halt_q, 30'b0, dmactive_q};
      DmStatus:   dm_rdata = {24'b0, 1'b1, 3'b0, 4'd2};      // authenticated, v0.13
      AbstractCs: dm_rdata = {19'b0, 1'b0, 1'b0, cmderr_q, 8'b0};
      SbCs:       dm_rdata = sbcs;
      SbAddress0: dm_rdata = sbaddr_q;
      SbData0:    dm_rdata = sbdata_q;
      default:    dm_rdata = '0;
    endcase
  end

  // system-bus access starts: write to sbdata0, read on address / data
  always_comb begin
    sb_start    = 1'b0;
    sb_start_we = 1'b0;
    if (dmi_req && sberror_q == 3'd0 && !sbbusyerror_q && !sbbusy) begin
      if (dmi_we && dmi_addr == SbData0) begin
        sb_start    = 1'b1;
        sb_start_we = 1'b1;
      end else if (dmi_we && dmi_addr == SbAddress0 && sbreadonaddr_q) begin
        sb_start    = 1'b1;
      end else if (!dmi_we && dmi_addr == SbData0 && sbreadondata_q) begin
        sb_start    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dmi_addr_q     <= '0;
      dmi_rdata_q    <= '0;
      dmactive_q     <= 1'b0;
      halt_q         <= 1'b0;
      cmderr_q       <= '0;
      sbbusyerror_q  <= 1'b0;
      sbreadonaddr_q <= 1'b0;
      sbautoinc_q    <= 1'b0;
      sbreadondata_q <= 1'b0;
      sbaccess_q     <= 3'd2;
      sberror_q      <= '0;
      sbaddr_q       <= '0;
      sbdata_q       <= '0;
      sb_req_q       <= 1'b0;
      sb_wait_q      <= 1'b0;
      sb_we_q        <= 1'b0;
    end else begin
      // ---- DMI accesses from the TAP
      if (dmi_req) begin
        dmi_addr_q  <= dmi_addr;
        dmi_rdata_q <= dm_rdata;
        if (dmi_we) begin
          unique case (dmi_addr)
            DmControl: begin
              dmactive_q <= dmi_wdata[0];
              if (dmi_wdata[31])      halt_q <= 1'b1;
              else if (dmi_wdata[30]) halt_q <= 1'b0;
            end
            AbstractCs: if (dmi_wdata[10:8] != '0) cmderr_q <= '0;     // W1C
            Command:    cmderr_q <= 3'd2;                             // not supported
            SbCs: begin
              if (dmi_wdata[22]) sbbusyerror_q <= 1'b0;
              if (dmi_wdata[14:12] != '0) sberror_q <= '0;
              sbreadonaddr_q <= dmi_wdata[20];
              sbaccess_q     <= dmi_wdata[19:17];
              sbautoinc_q    <= dmi_wdata[16];
              sbreadondata_q <= dmi_wdata[15];
            end
            SbAddress0: begin
              if (sbbusy) sbbusyerror_q <= 1'b1;
              else        sbaddr_q      <= dmi_wdata;
            end
            SbData0: begin
              if (sbbusy) sbbusyerror_q <= 1'b1;
              else        sbdata_q      <= dmi_wdata;
            end
            default: ;
          endcase
        end else if (dmi_addr == SbData0 && sbbusy) begin
          sbbusyerror_q <= 1'b1;
        end
      end

      // ---- system-bus accesses
      if (sb_start) begin
        if (sbaccess_q != 3'd2) begin
          sberror_q <= 3'd4;                                           // size not supported
        end else begin
          sb_req_q <= 1'b1;
          sb_we_q  <= sb_start_we;
        end
      end
      if (sb_req_q && mgr_rsp_i.gnt) begin
        sb_req_q  <= 1'b0;
        sb_wait_q <= 1'b1;
      end
      if (sb_wait_q && mgr_rsp_i.rvalid) begin
        sb_wait_q <= 1'b0;
        if (mgr_rsp_i.r.err) begin
          sberror_q <= 3'd2;
        end else begin
          if (!sb_we_q) sbdata_q <= mgr_rsp_i.r.rdata;
          if (sbautoinc_q) sbaddr_q <= sbaddr_q + 32'd4;
        end
      end
      if (!dmactive_q) begin
        halt_q   <= 1'b0;
        cmderr_q <= '0;
      end
    end
  end

  always_comb begin
    mgr_req_o         = '0;
    mgr_req_o.req     = sb_req_q;
    mgr_req_o.a.addr  = {sbaddr_q[31:2], 2'b00};
    mgr_req_o.a.we    = sb_we_q;
    mgr_req_o.a.be    = '1;
    mgr_req_o.a.wdata = sbdata_q;
  end

  assign debug_req_o = halt_q;

  // ------------------------------------------------ subordinate port
  data_t mbox_q [2];
  logic  rvalid_q, err_q;
  id_t   rid_q;
  data_t rdata_q;
  logic [1:0] sidx;
  logic  svalid;

  assign sidx   = sbr_req_i.a.addr[3:2];
  assign svalid = (sbr_req_i.a.addr[11:4] == '0) && (sidx != 2'd3) &&
                  !(sidx == 2'd2 && sbr_req_i.a.we);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mbox_q[0] <= '0;
      mbox_q[1] <= '0;
      rvalid_q  <= 1'b0;
      err_q     <= 1'b0;
      rid_q     <= '0;
      rdata_q   <= '0;
    end else begin
      rvalid_q <= sbr_req_i.req;
      if (sbr_req_i.req) begin
        rid_q   <= sbr_req_i.a.aid;
        err_q   <= !svalid;
        rdata_q <= !svalid      ? '0 :
                   sidx == 2'd2 ? {31'b0, halt_q} : mbox_q[sidx[0]];
        if (svalid && sbr_req_i.a.we) begin
          mbox_q[sidx[0]] <= apply_be(mbox_q[sidx[0]], sbr_req_i.a.wdata, sbr_req_i.a.be);
        end
      end
    end
  end

  assign sbr_rsp_o.gnt     = sbr_req_i.req;
  assign sbr_rsp_o.rvalid  = rvalid_q;
  assign sbr_rsp_o.r.rdata = rdata_q;
  assign sbr_rsp_o.r.err   = err_q;
  assign sbr_rsp_o.r.rid   = rid_q;

  // a bus access holds its request until granted
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    mgr_req_o.req && !mgr_rsp_i.gnt |=> mgr_req_o.req && $stable(mgr_req_o.a));

endmodule
