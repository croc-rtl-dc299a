// rv32_core_model: behavioural RV32IM core for testbenches (not synthesizable).
//
// Stands in for the SoC's RISC-V core so that programs can run on the
// real interconnect, memories and peripherals. It executes RV32I plus the
// MUL instruction of the M extension; SYSTEM instructions (CSR access,
// fence, ecall, wfi) are treated as no-ops and interrupts are not taken.
//
// Timing model (two stages, the ideal case of an in-order core with
// separate instruction and data ports): an instruction whose fetch was
// answered in this cycle executes in this cycle and, in the same cycle, the
// fetch of its successor is requested (branch targets are known at once,
// so taken branches cost nothing). A load or store issues its data request
// in its execute cycle; its response arrives together with the next
// instruction, and load data are forwarded to it. So the model retires one
// instruction per cycle as long as every request is granted at once; a
// withheld grant (e.g. fetch and data access to the same SRAM bank)
// stalls it. Requests are held until granted, as OBI requires.
//
// Ports: OBI instruction and data manager ports (croc_pkg structs), boot
// address and fetch enable inputs. Counters `instret`, `cycles` (from the
// first fetch) and `stall_cycles` can be read hierarchically.
module rv32_core_model (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               fetch_en_i,
  input  croc_pkg::addr_t    boot_addr_i,
  output croc_pkg::obi_req_t instr_req_o,
  input  croc_pkg::obi_rsp_t instr_rsp_i,
  output croc_pkg::obi_req_t data_req_o,
  input  croc_pkg::obi_rsp_t data_rsp_i
);
  import croc_pkg::*;

  data_t regs [32];
  addr_t fetch_addr;          // address of the fetch in flight
  logic  started;
  logic  f_active, f_wait;    // fetch: request held / response due
  logic  d_active, d_wait;    // data: request held / response due
  logic  ibuf_valid;
  data_t ibuf;
  addr_t ibuf_pc;
  logic  ld_pending;
  logic  [4:0] ld_rd;
  logic  [2:0] ld_f3;
  logic  [1:0] ld_off;
  int    instret = 0;
  int    cycles = 0;
  int    stall_cycles = 0;
  int    bus_errors = 0;

  function automatic data_t load_ext(data_t w, logic [1:0] off, logic [2:0] f3);
    data_t s = w >> (8 * off);
    unique case (f3)
      3'b000:  return {{24{s[7]}}, s[7:0]};
      3'b001:  return {{16{s[15]}}, s[15:0]};
      3'b100:  return {24'b0, s[7:0]};
      3'b101:  return {16'b0, s[15:0]};
      default: return w;
    endcase
  endfunction

  always @(negedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      instr_req_o = '0;
      data_req_o  = '0;
      started     = 1'b0;
      f_active    = 1'b0;
      f_wait      = 1'b0;
      d_active    = 1'b0;
      d_wait      = 1'b0;
      ibuf_valid  = 1'b0;
      ld_pending  = 1'b0;
      instret     = 0;
      cycles      = 0;
      stall_cycles = 0;
      bus_errors  = 0;
      for (int i = 0; i < 32; i++) regs[i] = '0;
    end else begin
      addr_t next_pc;
      logic  do_fetch;
      // ---------------- responses of last cycle's grants
      if (f_wait) begin
        if (instr_rsp_i.rvalid) begin
          ibuf       = instr_rsp_i.r.rdata;
          ibuf_pc    = fetch_addr;
          ibuf_valid = 1'b1;
          if (instr_rsp_i.r.err) bus_errors++;
        end
        f_wait = 1'b0;
      end
      if (d_wait) begin
        if (data_rsp_i.rvalid && ld_pending && ld_rd != 0) begin
          regs[ld_rd] = load_ext(data_rsp_i.r.rdata, ld_off, ld_f3);
        end
        if (data_rsp_i.r.err) bus_errors++;
        ld_pending = 1'b0;
        d_wait     = 1'b0;
      end
      if (started) cycles++;
      // requests granted at the last edge are withdrawn
      if (!f_active) instr_req_o = '0;
      if (!d_active) data_req_o  = '0;

      // ---------------- execute
      do_fetch = 1'b0;
      next_pc  = '0;
      if (!started && fetch_en_i) begin
        started  = 1'b1;
        do_fetch = 1'b1;
        next_pc  = boot_addr_i;
      end else if (ibuf_valid && !d_active) begin
        data_t ins, a, b, imm_i, imm_s, imm_b, imm_u, imm_j, res;
        logic [4:0] rd;
        logic [2:0] f3;
        logic       wb;
        ins   = ibuf;
        rd    = ins[11:7];
        f3    = ins[14:12];
        a     = regs[ins[19:15]];
        b     = regs[ins[24:20]];
        imm_i = {{20{ins[31]}}, ins[31:20]};
        imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
        imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
        imm_u = {ins[31:12], 12'b0};
        imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
        next_pc = ibuf_pc + 4;
        wb  = 1'b0;
        res = '0;
        unique case (ins[6:0])
          7'b0110111: begin res = imm_u; wb = 1'b1; end                       // lui
          7'b0010111: begin res = ibuf_pc + imm_u; wb = 1'b1; end             // auipc
          7'b1101111: begin res = ibuf_pc + 4; wb = 1'b1; next_pc = ibuf_pc + imm_j; end
          7'b1100111: begin res = ibuf_pc + 4; wb = 1'b1; next_pc = (a + imm_i) & ~32'd1; end
          7'b1100011: begin                                                    // branches
            logic take;
            unique case (f3)
              3'b000:  take = (a == b);
              3'b001:  take = (a != b);
              3'b100:  take = ($signed(a) <  $signed(b));
              3'b101:  take = ($signed(a) >= $signed(b));
              3'b110:  take = (a <  b);
              default: take = (a >= b);
            endcase
            if (take) next_pc = ibuf_pc + imm_b;
          end
          7'b0000011, 7'b0100011: begin                                        // load, store
            addr_t ea;
            logic  st;
            st = ins[5];
            ea = a + (st ? imm_s : imm_i);
            data_req_o         = '0;
            data_req_o.req     = 1'b1;
            data_req_o.a.addr  = {ea[31:2], 2'b00};
            data_req_o.a.we    = st;
            data_req_o.a.wdata = b << (8 * ea[1:0]);
            data_req_o.a.be    = (f3[1:0] == 2'b00) ? (4'b0001 << ea[1:0]) :
                                 (f3[1:0] == 2'b01) ? (4'b0011 << ea[1:0]) : 4'b1111;
            d_active   = 1'b1;
            ld_pending = !st;
            ld_rd      = rd;
            ld_f3      = f3;
            ld_off     = ea[1:0];
          end
          7'b0010011, 7'b0110011: begin                                        // ALU
            data_t op2;
            logic  is_reg;
            is_reg = ins[5];
            op2 = is_reg ? b : imm_i;
            wb  = 1'b1;
            if (is_reg && ins[25]) begin
              res = a * b;                                                     // mul
            end else begin
              unique case (f3)
                3'b000:  res = (is_reg && ins[30]) ? a - op2 : a + op2;
                3'b001:  res = a << op2[4:0];
                3'b010:  res = data_t'($signed(a) < $signed(op2));
                3'b011:  res = data_t'(a < op2);
                3'b100:  res = a ^ op2;
                3'b101:  res = ins[30] ? data_t'($signed(a) >>> op2[4:0]) : a >> op2[4:0];
                3'b110:  res = a | op2;
                default: res = a & op2;
              endcase
            end
          end
          default: ;                                                           // SYSTEM, FENCE: no-op
        endcase
        if (wb && rd != 0) regs[rd] = res;
        ibuf_valid = 1'b0;
        instret++;
        do_fetch = 1'b1;
      end else if (started) begin
        stall_cycles++;
      end

      // ---------------- fetch
      if (do_fetch) begin
        instr_req_o        = '0;
        instr_req_o.req    = 1'b1;
        instr_req_o.a.addr = next_pc;
        instr_req_o.a.be   = 4'hF;
        fetch_addr         = next_pc;
        f_active           = 1'b1;
      end

      // ---------------- grants (combinational, same cycle)
      #1;
      if (f_active && instr_rsp_i.gnt) begin
        f_active = 1'b0;
        f_wait   = 1'b1;
      end
      if (d_active && data_rsp_i.gnt) begin
        d_active = 1'b0;
        d_wait   = 1'b1;
      end
    end
  end

endmodule
