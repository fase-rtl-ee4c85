// tb_rv_core: behavioural model of a small RV64 core for the testbenches
// (not synthesizable, not part of the design).
//
// It stands in for a target core whose pipeline was modified to expose the
// FASE interface. It presents the pipeline-side signals that fase_core_adapter
// expects: a fetch unit, a one-entry instruction queue (IQ), one execution
// stage of EX_LAT cycles, a register file whose read port 0 and write port go
// through the adapter's multiplexers, a front-end request for taken branches,
// traps and mret, and the privilege level.
//
// At most one instruction is in flight, so there is no speculation. The model
// executes a subset of RV64: lui, addi, add, sub, ld, sd, beq, bne, jal, ecall,
// csrrw/csrrs/csrrc on mstatus (MPP only), mepc, mcause, mtval and satp, mret,
// sfence.vma and fence.i (counted, otherwise no-ops). Any other instruction
// raises an illegal-instruction trap (cause 2). ecall in U-mode traps with
// cause 8, mepc = its PC. A level interrupt taken in U-mode traps with cause
// 0x8000_0000_0000_000B. Traps jump to TRAP_VEC, where fetch is held because
// StopFetch is high in M-mode. Injected instructions do not move the fetch PC.
// Memory is reached through a fetch port and a data port, 64-bit words.
module tb_rv_core
  import fase_pkg::*;
#(
  parameter int unsigned    EX_LAT   = 2,
  parameter int unsigned    MW       = 16,          // word address width
  parameter logic [63:0]    TRAP_VEC = 64'h0
) (
  input  logic             clk,
  input  logic             rst_n,
  output pipe_in_t         pin,
  input  pipe_out_t        pout,
  output logic [MW-1:0]    f_addr,
  input  logic [63:0]      f_rdata,
  output logic [MW-1:0]    d_addr,
  input  logic [63:0]      d_rdata,
  output logic             d_we,
  output logic [63:0]      d_wdata
);
  logic [63:0] regs [32];
  logic [63:0] fpc;
  logic [1:0]  priv;
  logic [1:0]  mpp;
  logic [63:0] mepc, mcause, mtval, satp;

  logic        iq_v, iq_inj;
  logic [31:0] iq_inst;
  logic [63:0] iq_pc;
  logic        ex_v, ex_inj;
  logic [31:0] ex_inst;
  logic [63:0] ex_pc;
  int unsigned ex_cnt;

  // statistics read by testbenches
  int unsigned n_sfence, n_fencei, n_injected, n_user, n_irq;

  wire iq_ready = !iq_v && !ex_v;

  // fetch unit
  assign f_addr            = fpc[MW+2:3];
  assign pin.fetch_valid   = iq_ready && !(pout.irq && priv == PRIV_U);
  assign pin.fetch_inst    = fpc[2] ? f_rdata[63:32] : f_rdata[31:0];
  assign pin.iq_ready      = iq_ready;
  assign pin.pipe_empty    = !iq_v && !ex_v;
  assign pin.priv          = priv;
  assign pin.rf_rdata      = (pout.rf_raddr == 5'd0) ? 64'd0 : regs[pout.rf_raddr];

  // decode of the executing instruction
  wire [6:0]  opc = ex_inst[6:0];
  wire [2:0]  f3  = ex_inst[14:12];
  wire [4:0]  rd  = ex_inst[11:7];
  wire [4:0]  rs1 = ex_inst[19:15];
  wire [4:0]  rs2 = ex_inst[24:20];
  wire [11:0] csr = ex_inst[31:20];
  wire [63:0] imm_i = {{52{ex_inst[31]}}, ex_inst[31:20]};
  wire [63:0] imm_s = {{52{ex_inst[31]}}, ex_inst[31:25], ex_inst[11:7]};
  wire [63:0] imm_b = {{51{ex_inst[31]}}, ex_inst[31], ex_inst[7], ex_inst[30:25], ex_inst[11:8], 1'b0};
  wire [63:0] imm_j = {{43{ex_inst[31]}}, ex_inst[31], ex_inst[19:12], ex_inst[20], ex_inst[30:21], 1'b0};
  wire [63:0] v1 = (rs1 == 0) ? 64'd0 : regs[rs1];
  wire [63:0] v2 = (rs2 == 0) ? 64'd0 : regs[rs2];
  wire        fin = ex_v && (ex_cnt == 0);

  assign pin.dec_raddr = rs1;

  function automatic logic [63:0] csr_read(input logic [11:0] a);
    unique case (a)
      CSR_MSTATUS: return {51'd0, mpp, 11'd0};
      CSR_MEPC:    return mepc;
      CSR_MCAUSE:  return mcause;
      CSR_MTVAL:   return mtval;
      CSR_SATP:    return satp;
      default:     return 64'd0;
    endcase
  endfunction

  // result of the finishing instruction (combinational write-back)
  logic        wb_en, br_taken, trap, is_mret, is_csr, legal;
  logic [63:0] wb_val, br_tgt, csr_old, csr_new, cause;
  always_comb begin
    wb_en = 1'b0; wb_val = '0; br_taken = 1'b0; br_tgt = '0; trap = 1'b0;
    is_mret = 1'b0; is_csr = 1'b0; legal = 1'b1; cause = '0;
    csr_old = csr_read(csr); csr_new = csr_old;
    d_we = 1'b0; d_wdata = v2; d_addr = '0;
    if (fin) begin
      unique case (opc)
        7'b0110111: begin wb_en = 1; wb_val = {{32{ex_inst[31]}}, ex_inst[31:12], 12'd0}; end
        7'b0010011: if (f3 == 3'b000) begin wb_en = 1; wb_val = v1 + imm_i; end else legal = 0;
        7'b0110011: if (f3 == 3'b000 && ex_inst[31:25] == 7'd0) begin wb_en = 1; wb_val = v1 + v2; end
                    else if (f3 == 3'b000 && ex_inst[31:25] == 7'h20) begin wb_en = 1; wb_val = v1 - v2; end
                    else legal = 0;
        7'b0000011: if (f3 == 3'b011) begin
                      d_addr = MW'((v1 + imm_i) >> 3); wb_en = 1; wb_val = d_rdata;
                    end else legal = 0;
        7'b0100011: if (f3 == 3'b011) begin
                      d_addr = MW'((v1 + imm_s) >> 3); d_we = 1;
                    end else legal = 0;
        7'b1100011: if (f3 == 3'b000 || f3 == 3'b001) begin
                      br_taken = (f3 == 3'b000) ? (v1 == v2) : (v1 != v2);
                      br_tgt   = ex_pc + imm_b;
                    end else legal = 0;
        7'b1101111: begin wb_en = 1; wb_val = ex_pc + 4; br_taken = 1; br_tgt = ex_pc + imm_j; end
        7'b0001111: if (f3 != 3'b001) legal = 0;                       // fence.i only
        7'b1110011: begin
          if (f3 == 3'b000) begin
            if (ex_inst == 32'h0000_0073) begin trap = 1; cause = (priv == PRIV_U) ? 64'd8 : 64'd11; end
            else if (ex_inst == INST_MRET && priv == PRIV_M) is_mret = 1;
            else if (ex_inst[31:25] == 7'b0001001 && priv != PRIV_U) ;  // sfence.vma
            else legal = 0;
          end else if (priv == PRIV_M && f3 inside {3'b001, 3'b010, 3'b011}) begin
            is_csr = 1; wb_en = 1; wb_val = csr_old;
            unique case (f3)
              3'b001: csr_new = v1;
              3'b010: csr_new = csr_old | v1;
              default: csr_new = csr_old & ~v1;
            endcase
          end else legal = 0;
        end
        default: legal = 0;
      endcase
      if (!legal) begin trap = 1; cause = 64'd2; wb_en = 0; d_we = 0; end
      if (trap) wb_en = 0;
    end
  end
  assign pin.wb_en   = wb_en && (rd != 0);
  assign pin.wb_idx  = rd;
  assign pin.wb_data = wb_val;

  // front-end request: taken branch, trap, mret
  wire irq_take = pout.irq && priv == PRIV_U && pin.pipe_empty;
  always_comb begin
    pin.fe_req_valid   = 1'b0;
    pin.fe_req_reissue = 1'b0;
    if (fin && (trap || is_mret || br_taken)) pin.fe_req_valid = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fpc <= TRAP_VEC; priv <= PRIV_M; mpp <= PRIV_M;
      mepc <= '0; mcause <= '0; mtval <= '0; satp <= '0;
      iq_v <= 0; iq_inj <= 0; iq_inst <= '0; iq_pc <= '0;
      ex_v <= 0; ex_inj <= 0; ex_inst <= '0; ex_pc <= '0; ex_cnt <= 0;
      for (int i = 0; i < 32; i++) regs[i] <= '0;
      n_sfence <= 0; n_fencei <= 0; n_injected <= 0; n_user <= 0; n_irq <= 0;
    end else begin
      // register file write port (through the adapter multiplexer)
      if (pout.rf_wen && pout.rf_widx != 0) regs[pout.rf_widx] <= pout.rf_wdata;
      // IQ enqueue
      if (pout.iq_valid && iq_ready) begin
        iq_v <= 1; iq_inst <= pout.iq_inst; iq_inj <= pout.iq_injected; iq_pc <= fpc;
        if (!pout.iq_injected) fpc <= fpc + 4;
      end
      // IQ -> EX
      if (iq_v && !ex_v) begin
        ex_v <= 1; ex_inst <= iq_inst; ex_inj <= iq_inj; ex_pc <= iq_pc; ex_cnt <= EX_LAT - 1;
        iq_v <= 0;
      end
      if (ex_v && ex_cnt != 0) ex_cnt <= ex_cnt - 1;
      // interrupt at an instruction boundary in U-mode
      if (irq_take) begin
        mepc <= fpc; mcause <= 64'h8000_0000_0000_000B; mtval <= '0;
        mpp <= priv; priv <= PRIV_M; fpc <= TRAP_VEC; n_irq <= n_irq + 1;
      end
      if (fin) begin
        ex_v <= 0;
        if (ex_inj) n_injected <= n_injected + 1;
        if (priv == PRIV_U) n_user <= n_user + 1;
        if (opc == 7'b0001111 && legal) n_fencei <= n_fencei + 1;
        if (opc == 7'b1110011 && ex_inst[31:25] == 7'b0001001 && legal) n_sfence <= n_sfence + 1;
        if (is_csr) begin
          unique case (csr)
            CSR_MSTATUS: mpp <= csr_new[12:11];
            CSR_MEPC:    mepc <= csr_new;
            CSR_MCAUSE:  mcause <= csr_new;
            CSR_MTVAL:   mtval <= csr_new;
            CSR_SATP:    satp <= csr_new;
            default: ;
          endcase
        end
        if (trap) begin
          mepc <= ex_pc; mcause <= cause; mtval <= '0; mpp <= priv; priv <= PRIV_M;
        end else if (is_mret) begin
          priv <= mpp; mpp <= PRIV_U;
        end
        if (pout.fe_req_valid)
          fpc <= trap ? TRAP_VEC : (is_mret ? mepc : br_tgt);
      end
    end
  end
endmodule
