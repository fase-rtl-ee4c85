// fase_pkg: types and constants shared by the FASE controller and the per-core
// interface logic.
//
// It holds three groups of definitions:
//  * the CPU port bundles of the FASE CPU interface (Priv, Reg, Inject and the
//    optional Interrupt), split into the part the operation state machines drive
//    through the CPU select and the per-core lines the controller holds itself;
//  * the wire encoding of the Host-Target Protocol (HTP) requests. The set of
//    requests and what each one does follow the paper; the opcode values, the
//    byte layout of a request and of a response are this design's own choice;
//  * RV64 instruction encoders used to build the instructions injected into a
//    core (csrr/csrw/csrc, mret, ld/sd, addi, sfence.vma, fence.i).
package fase_pkg;

  localparam int unsigned XLEN = 64;
  localparam int unsigned ILEN = 32;

  // RISC-V privilege encodings (mstatus.MPP / current privilege)
  localparam logic [1:0] PRIV_U = 2'd0;
  localparam logic [1:0] PRIV_S = 2'd1;
  localparam logic [1:0] PRIV_M = 2'd3;

  // ---------------------------------------------------------------------------
  // CPU interface bundles
  // ---------------------------------------------------------------------------
  // Handshake part of one CPU port, driven by the operation state machines.
  // RegData of the paper is bidirectional; here it is split in wdata / rdata.
  typedef struct packed {
    logic             inject_valid;  // Inject (vld)
    logic [ILEN-1:0]  inject_inst;   // InjectInst
    logic             reg_valid;     // RegAccess (vld)
    logic             reg_wen;       // RegWEN
    logic [4:0]       reg_idx;       // RegIdx
    logic [XLEN-1:0]  reg_wdata;     // RegData, FASE -> CPU
  } port_req_t;

  typedef struct packed {
    logic             inject_ready;  // Inject (rdy)
    logic             inject_busy;   // InjectBusy: execution pipeline not empty
    logic             reg_ready;     // RegAccess (rdy)
    logic [XLEN-1:0]  reg_rdata;     // RegData, CPU -> FASE
  } port_rsp_t;

  // Full FASE -> CPU bundle of one core
  typedef struct packed {
    logic       stop_fetch;          // StopFetch
    logic       irq;                 // optional Interrupt
    port_req_t  port;
  } cpu_req_t;

  // Full CPU -> FASE bundle of one core
  typedef struct packed {
    logic [1:0] priv;                // Priv
    port_rsp_t  port;
  } cpu_rsp_t;

  // Pipeline side of the per-core adapter (what the modified core exposes
  // around its instruction queue, front-end request and register file).
  typedef struct packed {
    logic             fetch_valid;   // fetch unit offers an instruction
    logic [ILEN-1:0]  fetch_inst;
    logic             iq_ready;      // instruction queue can accept
    logic             pipe_empty;    // no instruction in IQ or execution stages
    logic             fe_req_valid;  // front-end request from the commit stage
    logic             fe_req_reissue;// that request is a replay (reissue)
    logic [4:0]       dec_raddr;     // decode read-port index
    logic             wb_en;         // register write-back
    logic [4:0]       wb_idx;
    logic [XLEN-1:0]  wb_data;
    logic [XLEN-1:0]  rf_rdata;      // register file read-port data
    logic [1:0]       priv;          // privilege level from the CSR unit
  } pipe_in_t;

  typedef struct packed {
    logic             fetch_ready;   // fetch unit output accepted
    logic             iq_valid;      // instruction queue enqueue
    logic [ILEN-1:0]  iq_inst;
    logic             iq_injected;   // the enqueued instruction was injected
    logic             fe_req_valid;  // front-end request after the gate
    logic [4:0]       rf_raddr;      // register file read-port index
    logic             rf_wen;        // register file write port
    logic [4:0]       rf_widx;
    logic [XLEN-1:0]  rf_wdata;
    logic             irq;           // external interrupt line
  } pipe_out_t;

  // ---------------------------------------------------------------------------
  // HTP requests (opcode byte values are this design's choice)
  // ---------------------------------------------------------------------------
  typedef enum logic [7:0] {
    OP_REDIRECT  = 8'h01,  // cpu, addr            -> -
    OP_NEXT      = 8'h02,  // -                    -> cpu, mcause, mepc, mtval
    OP_SETMMU    = 8'h03,  // cpu, satp fields     -> -
    OP_FLUSHTLB  = 8'h04,  // cpu                  -> -
    OP_SYNCI     = 8'h05,  // cpu                  -> -
    OP_HFSET     = 8'h06,  // cpu, addr            -> -
    OP_HFCLR     = 8'h07,  // cpu, addr            -> -
    OP_HFCLRALL  = 8'h08,  // cpu                  -> -
    OP_REGR      = 8'h09,  // cpu, idx             -> data
    OP_REGW      = 8'h0A,  // cpu, idx, data       -> -
    OP_MEMR      = 8'h0B,  // cpu, addr            -> data
    OP_MEMW      = 8'h0C,  // cpu, addr, data      -> -
    OP_PAGES     = 8'h0D,  // cpu, ppn, val        -> -
    OP_PAGECP    = 8'h0E,  // cpu, srcppn, dstppn  -> -
    OP_PAGER     = 8'h0F,  // cpu, ppn             -> 512 words
    OP_PAGEW     = 8'h10,  // cpu, ppn, 512 words  -> -
    OP_TICK      = 8'h11,  // -                    -> ticks
    OP_UTICK     = 8'h12,  // cpu                  -> U-mode ticks of cpu
    OP_INTR      = 8'h13   // cpu, level byte      -> -
  } htp_op_e;

  // Request layout after the opcode byte:
  //   [cpu id, 1 byte] if has_cpu, [index/level, 1 byte] if has_idx,
  //   then n_words 64-bit little-endian argument words.
  typedef struct packed {
    logic       valid;
    logic       has_cpu;
    logic       has_idx;
    logic [1:0] n_words;
    logic       uses_port;  // needs the CPU ports, so the CPU must be stopped
    logic [2:0] n_resp;     // response words sent from the Resp Regs
  } htp_fmt_t;

  function automatic htp_fmt_t htp_format(input logic [7:0] op);
    htp_fmt_t f;
    f = '0;
    f.valid = 1'b1;
    unique case (op)
      OP_REDIRECT: begin f.has_cpu = 1; f.n_words = 1; f.uses_port = 1; end
      OP_NEXT:     begin f.n_resp = 4; end
      OP_SETMMU:   begin f.has_cpu = 1; f.n_words = 1; f.uses_port = 1; end
      OP_FLUSHTLB: begin f.has_cpu = 1; f.uses_port = 1; end
      OP_SYNCI:    begin f.has_cpu = 1; f.uses_port = 1; end
      OP_HFSET:    begin f.has_cpu = 1; f.n_words = 1; end
      OP_HFCLR:    begin f.has_cpu = 1; f.n_words = 1; end
      OP_HFCLRALL: begin f.has_cpu = 1; end
      OP_REGR:     begin f.has_cpu = 1; f.has_idx = 1; f.uses_port = 1; f.n_resp = 1; end
      OP_REGW:     begin f.has_cpu = 1; f.has_idx = 1; f.n_words = 1; f.uses_port = 1; end
      OP_MEMR:     begin f.has_cpu = 1; f.n_words = 1; f.uses_port = 1; f.n_resp = 1; end
      OP_MEMW:     begin f.has_cpu = 1; f.n_words = 2; f.uses_port = 1; end
      OP_PAGES:    begin f.has_cpu = 1; f.n_words = 2; f.uses_port = 1; end
      OP_PAGECP:   begin f.has_cpu = 1; f.n_words = 2; f.uses_port = 1; end
      OP_PAGER:    begin f.has_cpu = 1; f.n_words = 1; f.uses_port = 1; end
      OP_PAGEW:    begin f.has_cpu = 1; f.n_words = 1; f.uses_port = 1; end
      OP_TICK:     begin f.n_resp = 1; end
      OP_UTICK:    begin f.has_cpu = 1; f.n_resp = 1; end
      OP_INTR:     begin f.has_cpu = 1; f.has_idx = 1; end
      default:     f.valid = 1'b0;
    endcase
    return f;
  endfunction

  // ---------------------------------------------------------------------------
  // RISC-V constants and instruction encoders
  // ---------------------------------------------------------------------------
  localparam logic [11:0] CSR_SATP    = 12'h180;
  localparam logic [11:0] CSR_MSTATUS = 12'h300;
  localparam logic [11:0] CSR_MEPC    = 12'h341;
  localparam logic [11:0] CSR_MCAUSE  = 12'h342;
  localparam logic [11:0] CSR_MTVAL   = 12'h343;

  localparam logic [XLEN-1:0] MSTATUS_MPP = 64'h1800;  // 3 << 11

  localparam logic [XLEN-1:0] CAUSE_ECALL_U = 64'd8;
  localparam logic [XLEN-1:0] SYS_FUTEX     = 64'd98;   // riscv64 Linux syscall number
  localparam logic [XLEN-1:0] FUTEX_WAKE    = 64'd1;
  localparam logic [XLEN-1:0] FUTEX_CMD_MASK = 64'h7F;  // drops PRIVATE (128) / CLOCK_REALTIME (256)

  localparam logic [4:0] R_X1 = 5'd1, R_X2 = 5'd2, R_X3 = 5'd3;
  localparam logic [4:0] R_A0 = 5'd10, R_A1 = 5'd11, R_A7 = 5'd17;

  localparam logic [ILEN-1:0] INST_MRET       = 32'h3020_0073;
  localparam logic [ILEN-1:0] INST_SFENCE_VMA = 32'h1200_0073;
  localparam logic [ILEN-1:0] INST_FENCE_I    = 32'h0000_100F;

  function automatic logic [ILEN-1:0] enc_csr(input logic [2:0] f3, input logic [4:0] rd,
                                               input logic [11:0] csr, input logic [4:0] rs1);
    return {csr, rs1, f3, rd, 7'b1110011};
  endfunction
  function automatic logic [ILEN-1:0] enc_csrrw(input logic [4:0] rd, input logic [11:0] csr,
                                                 input logic [4:0] rs1);
    return enc_csr(3'b001, rd, csr, rs1);
  endfunction
  function automatic logic [ILEN-1:0] enc_csrrs(input logic [4:0] rd, input logic [11:0] csr,
                                                 input logic [4:0] rs1);
    return enc_csr(3'b010, rd, csr, rs1);
  endfunction
  function automatic logic [ILEN-1:0] enc_csrrc(input logic [4:0] rd, input logic [11:0] csr,
                                                 input logic [4:0] rs1);
    return enc_csr(3'b011, rd, csr, rs1);
  endfunction
  function automatic logic [ILEN-1:0] enc_ld_o(input logic [4:0] rd, input logic [4:0] rs1,
                                                input logic [11:0] imm);
    return {imm, rs1, 3'b011, rd, 7'b0000011};
  endfunction
  function automatic logic [ILEN-1:0] enc_sd_o(input logic [4:0] rs2, input logic [4:0] rs1,
                                                input logic [11:0] imm);
    return {imm[11:5], rs2, rs1, 3'b011, imm[4:0], 7'b0100011};
  endfunction
  function automatic logic [ILEN-1:0] enc_ld(input logic [4:0] rd, input logic [4:0] rs1);
    return enc_ld_o(rd, rs1, 12'd0);
  endfunction
  function automatic logic [ILEN-1:0] enc_sd(input logic [4:0] rs2, input logic [4:0] rs1);
    return enc_sd_o(rs2, rs1, 12'd0);
  endfunction
  function automatic logic [ILEN-1:0] enc_addi(input logic [4:0] rd, input logic [4:0] rs1,
                                                input logic [11:0] imm);
    return {imm, rs1, 3'b000, rd, 7'b0010011};
  endfunction

endpackage
