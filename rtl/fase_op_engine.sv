// fase_op_engine: the operation state machines of the FASE controller.
//
// Every HTP request is carried out as a fixed sequence of steps on the CPU
// port of one core: write a register (Reg port, write), read a register (Reg
// port, read), or inject one instruction (Inject port) and wait until the
// pipeline is empty again. The sequences are the execution patterns of the
// HTP table of the paper, for example MemR is "x1 = addr; inject ld x2,0(x1);
// send x2". Scratch registers (x1..x3, x1..x<BATCH+1> for PageR / PageW) are read first and written back at the end
// so that the interrupted user program does not see them change.
//
// The sequences are held in a small micro-program (function ucode, indexed by
// request and step) and one executor walks through it. A step is one of:
//   RD / WR   register access, INJ  inject and drain, RECV  take a 64-bit word
//   from the RX buffer (PageW), LOOP  repeat a page body (PAGE_WORDS times,
//   or PAGE_WORDS / BATCH times for PageR / PageW), BLOOP  repeat the steps
//   since its target for bi = 0 .. BATCH-1 (a batched step uses register
//   x<rg + bi> and, for ld / sd, offset 8 * bi),
//   WAITEXC  block on the Exception Event Queue (Next), BR_*  the HFutex
//   tests, FASTRET  resume a core after a filtered futex wake, RELEASE
//   drop StopFetch after a Redirect, MISC  requests that need no CPU port.
// Results go to the Resp Regs of the main state machine (resp_* port); PageR
// streams its words straight into the TX buffer, PageW takes them straight from
// the RX buffer, as the paper describes for the PageRW state machine.
//
// Hardware futex (HFutex): after Next has read mcause/mepc/mtval of a core, if
// the cause is an ecall from U-mode it also reads a7, a1 and a0. For a futex
// system call (a7 = 98) with command FUTEX_WAKE whose address a0 hits the
// HFutex mask of that core, the engine writes a0 = 0 (the call returns 0),
// redirects the core to mepc + 4 and goes back to waiting on the queue, so the
// host never sees that call. Otherwise the exception is reported to the host.
//
// A request whose CPU is out of range or not stopped (it is running user code)
// is executed in "nop mode": no CPU port is used, every register read returns
// all ones, but the request still consumes and produces the same bytes so the
// byte stream stays aligned.
//
// Timing: an injected instruction costs the inject handshake plus the time the
// core needs to drain its pipeline; a register access costs the handshake.
// PageR / PageW are batched as the paper describes ("issuing consecutive
// accesses to 8 or 16 registers and injecting multiple load/store instructions
// within each iteration"): with BATCH = 8 one iteration injects 8 ld (or sd) through x2..x9 with offsets 0..56, one addi x1,x1,64,
// and makes 8 register reads (or writes). x1..x<BATCH+1> are saved and restored.
// Single-instruction injection follows the paper (Rocket needs it because of
// its reissue behaviour). Redirect uses "csrc mstatus, MPP" where the paper's
// table prints "csrs": clearing MPP is what makes mret enter U-mode, as the text
// requires. The micro-program form, nop mode and scratch handling of Next's
// HFutex reads are this design's choices.
module fase_op_engine
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU      = 4,
  parameter int unsigned PAGE_WORDS = 512,
  parameter bit          HFUTEX_EN  = 1'b1,
  parameter int unsigned BATCH      = 8,
  parameter int unsigned IDW        = (N_CPU > 1) ? $clog2(N_CPU) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // request from the main state machine (Arg Regs)
  input  logic                       start,
  input  logic [7:0]                 op,
  input  logic [IDW-1:0]             arg_cpu,
  input  logic [7:0]                 arg_idx,
  input  logic [XLEN-1:0]            arg_a0,
  input  logic [XLEN-1:0]            arg_a1,
  input  logic                       nop_mode,
  output logic                       busy,
  output logic                       done,
  // Resp Regs write port
  output logic                       resp_we,
  output logic [1:0]                 resp_widx,
  output logic [XLEN-1:0]            resp_wdata,
  // CPU port through the CPU select
  output logic                       sel_en,
  output logic [IDW-1:0]             sel_cpu,
  output port_req_t                  port_req,
  input  port_rsp_t                  port_rsp,
  // Exception Event Queue
  input  logic                       exq_valid,
  input  logic [IDW-1:0]             exq_id,
  output logic                       exq_ready,
  output logic                       release_valid,
  output logic [IDW-1:0]             release_id,
  // UART buffers (PageR / PageW streaming)
  input  logic                       rx_empty,
  input  logic [7:0]                 rx_data,
  output logic                       rx_pop,
  input  logic                       tx_full,
  output logic                       tx_push,
  output logic [7:0]                 tx_data,
  // HFutex masks
  output logic                       hf_set,
  output logic                       hf_clr,
  output logic                       hf_clrall,
  output logic [IDW-1:0]             hf_cpu,
  output logic [XLEN-1:0]            hf_addr,
  output logic [IDW-1:0]             lk_cpu,
  output logic [XLEN-1:0]            lk_addr,
  input  logic                       lk_hit,
  // performance counters
  input  logic [XLEN-1:0]            tick,
  input  logic [N_CPU-1:0][XLEN-1:0] utick,
  // optional interrupt lines
  output logic                       intr_we,
  output logic [IDW-1:0]             intr_cpu,
  output logic                       intr_level,
  // statistics: futex wakes completed inside the controller
  output logic [31:0]                hf_filtered
);

  // ---------------------------------------------------------------------------
  // micro-program
  // ---------------------------------------------------------------------------
  typedef enum logic [3:0] {
    U_END, U_RD, U_WR, U_INJ, U_RECV, U_LOOP, U_WAITEXC,
    U_BR_ECALL, U_BR_HFHIT, U_FASTRET, U_RELEASE, U_MISC, U_BLOOP
  } ukind_e;

  typedef enum logic [3:0] {
    S_A0, S_A1, S_A0PAGE, S_A1PAGE, S_MPP, S_SAVE, S_ZERO, S_RECV, S_TGT
  } src_e;

  typedef enum logic [2:0] {
    D_SAVE, D_RESP, D_TX, D_T0, D_T1, D_T7
  } dst_e;

  typedef struct packed {
    ukind_e          kind;
    logic [4:0]      rg;       // register index
    logic            arg_rg;   // take the register index from the request
    src_e            src;
    dst_e            dst;
    logic [1:0]      ri;       // Resp Regs word for D_RESP
    logic [ILEN-1:0] inst;
    logic [4:0]      tgt;      // branch / loop target step
    logic            bat;      // batched: register + bi, ld/sd offset 8 * bi
  } uop_t;

  function automatic uop_t u_end();
    uop_t u; u = '0; u.kind = U_END; return u;
  endfunction
  function automatic uop_t u_rd(input logic [4:0] rg, input dst_e d, input logic [1:0] ri);
    uop_t u; u = '0; u.kind = U_RD; u.rg = rg; u.dst = d; u.ri = ri; return u;
  endfunction
  function automatic uop_t u_wr(input logic [4:0] rg, input src_e s);
    uop_t u; u = '0; u.kind = U_WR; u.rg = rg; u.src = s; return u;
  endfunction
  function automatic uop_t u_inj(input logic [ILEN-1:0] i);
    uop_t u; u = '0; u.kind = U_INJ; u.inst = i; return u;
  endfunction
  function automatic uop_t u_k(input ukind_e k, input logic [4:0] t);
    uop_t u; u = '0; u.kind = k; u.tgt = t; return u;
  endfunction
  // save / restore of scratch register x<n>
  function automatic uop_t u_save(input logic [4:0] rg);
    return u_rd(rg, D_SAVE, 2'd0);
  endfunction
  function automatic uop_t u_rest(input logic [4:0] rg);
    return u_wr(rg, S_SAVE);
  endfunction
  // batched form of a step: applies to x<rg + bi> for bi = 0 .. BATCH-1
  function automatic uop_t u_b(input uop_t x);
    uop_t u; u = x; u.bat = 1'b1; return u;
  endfunction

  function automatic uop_t ucode(input logic [7:0] o, input logic [4:0] s);
    uop_t u;
    u = u_end();
    unique case (o)
      OP_REDIRECT: unique case (s)
        0: u = u_save(R_X1);
        1: u = u_save(R_X2);
        2: u = u_wr(R_X1, S_TGT);
        3: u = u_wr(R_X2, S_MPP);
        4: u = u_inj(enc_csrrc(5'd0, CSR_MSTATUS, R_X2));
        5: u = u_inj(enc_csrrw(5'd0, CSR_MEPC, R_X1));
        6: u = u_rest(R_X1);
        7: u = u_rest(R_X2);
        8: u = u_inj(INST_MRET);
        9: u = u_k(U_RELEASE, 5'd0);
        default: u = u_end();
      endcase
      OP_NEXT: unique case (s)
        0:  u = u_k(U_WAITEXC, 5'd0);
        1:  u = u_save(R_X1);
        2:  u = u_save(R_X2);
        3:  u = u_save(R_X3);
        4:  u = u_inj(enc_csrrs(R_X1, CSR_MCAUSE, 5'd0));
        5:  u = u_inj(enc_csrrs(R_X2, CSR_MEPC, 5'd0));
        6:  u = u_inj(enc_csrrs(R_X3, CSR_MTVAL, 5'd0));
        7:  u = u_rd(R_X1, D_RESP, 2'd1);
        8:  u = u_rd(R_X2, D_RESP, 2'd2);
        9:  u = u_rd(R_X3, D_RESP, 2'd3);
        10: u = u_rest(R_X1);
        11: u = u_rest(R_X2);
        12: u = u_rest(R_X3);
        13: u = u_k(U_BR_ECALL, 5'd20);
        14: u = u_rd(R_A7, D_T7, 2'd0);
        15: u = u_rd(R_A1, D_T1, 2'd0);
        16: u = u_rd(R_A0, D_T0, 2'd0);
        17: u = u_k(U_BR_HFHIT, 5'd20);
        18: u = u_wr(R_A0, S_ZERO);
        19: u = u_k(U_FASTRET, 5'd0);
        default: u = u_end();
      endcase
      OP_SETMMU: unique case (s)
        0: u = u_save(R_X1);
        1: u = u_wr(R_X1, S_A0);
        2: u = u_inj(enc_csrrw(5'd0, CSR_SATP, R_X1));
        3: u = u_rest(R_X1);
        default: u = u_end();
      endcase
      OP_FLUSHTLB: u = (s == 0) ? u_inj(INST_SFENCE_VMA) : u_end();
      OP_SYNCI:    u = (s == 0) ? u_inj(INST_FENCE_I) : u_end();
      OP_REGR: if (s == 0) begin u = u_rd(5'd0, D_RESP, 2'd0); u.arg_rg = 1'b1; end
      OP_REGW: if (s == 0) begin u = u_wr(5'd0, S_A0); u.arg_rg = 1'b1; end
      OP_MEMR: unique case (s)
        0: u = u_save(R_X1);
        1: u = u_save(R_X2);
        2: u = u_wr(R_X1, S_A0);
        3: u = u_inj(enc_ld(R_X2, R_X1));
        4: u = u_rd(R_X2, D_RESP, 2'd0);
        5: u = u_rest(R_X1);
        6: u = u_rest(R_X2);
        default: u = u_end();
      endcase
      OP_MEMW: unique case (s)
        0: u = u_save(R_X1);
        1: u = u_save(R_X2);
        2: u = u_wr(R_X1, S_A0);
        3: u = u_wr(R_X2, S_A1);
        4: u = u_inj(enc_sd(R_X2, R_X1));
        5: u = u_rest(R_X1);
        6: u = u_rest(R_X2);
        default: u = u_end();
      endcase
      OP_PAGES: unique case (s)
        0: u = u_save(R_X1);
        1: u = u_save(R_X2);
        2: u = u_wr(R_X1, S_A0PAGE);
        3: u = u_wr(R_X2, S_A1);
        4: u = u_inj(enc_sd(R_X2, R_X1));
        5: u = u_inj(enc_addi(R_X1, R_X1, 12'd8));
        6: u = u_k(U_LOOP, 5'd4);
        7: u = u_rest(R_X1);
        8: u = u_rest(R_X2);
        default: u = u_end();
      endcase
      OP_PAGECP: unique case (s)
        0:  u = u_save(R_X1);
        1:  u = u_save(R_X2);
        2:  u = u_save(R_X3);
        3:  u = u_wr(R_X1, S_A0PAGE);
        4:  u = u_wr(R_X2, S_A1PAGE);
        5:  u = u_inj(enc_ld(R_X3, R_X1));
        6:  u = u_inj(enc_sd(R_X3, R_X2));
        7:  u = u_inj(enc_addi(R_X1, R_X1, 12'd8));
        8:  u = u_inj(enc_addi(R_X2, R_X2, 12'd8));
        9:  u = u_k(U_LOOP, 5'd5);
        10: u = u_rest(R_X1);
        11: u = u_rest(R_X2);
        12: u = u_rest(R_X3);
        default: u = u_end();
      endcase
      // PageR / PageW batch BATCH registers (x2 ..) per loop iteration
      OP_PAGER: unique case (s)
        0:  u = u_save(R_X1);
        1:  u = u_b(u_save(R_X2));
        2:  u = u_k(U_BLOOP, 5'd1);
        3:  u = u_wr(R_X1, S_A0PAGE);
        4:  u = u_b(u_inj(enc_ld(R_X2, R_X1)));
        5:  u = u_k(U_BLOOP, 5'd4);
        6:  u = u_inj(enc_addi(R_X1, R_X1, 12'(8 * BATCH)));
        7:  u = u_b(u_rd(R_X2, D_TX, 2'd0));
        8:  u = u_k(U_BLOOP, 5'd7);
        9:  u = u_k(U_LOOP, 5'd4);
        10: u = u_rest(R_X1);
        11: u = u_b(u_rest(R_X2));
        12: u = u_k(U_BLOOP, 5'd11);
        default: u = u_end();
      endcase
      OP_PAGEW: unique case (s)
        0:  u = u_save(R_X1);
        1:  u = u_b(u_save(R_X2));
        2:  u = u_k(U_BLOOP, 5'd1);
        3:  u = u_wr(R_X1, S_A0PAGE);
        4:  u = u_k(U_RECV, 5'd0);
        5:  u = u_b(u_wr(R_X2, S_RECV));
        6:  u = u_k(U_BLOOP, 5'd4);
        7:  u = u_b(u_inj(enc_sd(R_X2, R_X1)));
        8:  u = u_k(U_BLOOP, 5'd7);
        9:  u = u_inj(enc_addi(R_X1, R_X1, 12'(8 * BATCH)));
        10: u = u_k(U_LOOP, 5'd4);
        11: u = u_rest(R_X1);
        12: u = u_b(u_rest(R_X2));
        13: u = u_k(U_BLOOP, 5'd12);
        default: u = u_end();
      endcase
      OP_TICK, OP_UTICK, OP_HFSET, OP_HFCLR, OP_HFCLRALL, OP_INTR:
        u = (s == 0) ? u_k(U_MISC, 5'd0) : u_end();
      default: u = u_end();
    endcase
    return u;
  endfunction

  // ---------------------------------------------------------------------------
  // executor
  // ---------------------------------------------------------------------------
  typedef enum logic [2:0] {E_IDLE, E_RUN, E_INJ_GAP, E_INJ_DRAIN, E_RECV, E_SEND} estate_e;

  localparam int unsigned CNTW   = $clog2(PAGE_WORDS + 1);
  localparam int unsigned NSAVE  = (BATCH + 1 > 3) ? BATCH + 1 : 3;   // x1 .. x<NSAVE>
  localparam int unsigned SW     = $clog2(NSAVE);
  localparam int unsigned BW     = (BATCH > 1) ? $clog2(BATCH) : 1;
  if (BATCH < 1 || BATCH > 16 || PAGE_WORDS % BATCH != 0) begin : g_bad_batch
    $error("BATCH must be 1..16 and divide PAGE_WORDS");
  end

  estate_e          st;
  logic [7:0]       cur_op;
  logic [4:0]       step;
  logic [CNTW-1:0]  cnt;
  logic [IDW-1:0]   cpu;
  logic             nop;
  logic             resume_next;
  logic [XLEN-1:0]  tgt;            // Redirect target
  logic [XLEN-1:0]  save [NSAVE];   // x1 .. x<NSAVE>
  logic [BW-1:0]    bi;             // register index within a batch
  logic [XLEN-1:0]  t0, t1, t7;     // a0, a1, a7 of a trapped core
  logic [XLEN-1:0]  cause, epc;
  logic [XLEN-1:0]  word;           // RECV / SEND shift register
  logic [2:0]       bcnt;           // byte counter for RECV / SEND

  uop_t u;
  assign u = ucode(cur_op, step);

  wire [4:0]       reg_sel = u.arg_rg ? arg_idx[4:0] : (u.bat ? u.rg + 5'(bi) : u.rg);
  wire [SW-1:0]    save_i  = SW'(reg_sel - 5'd1);

  // injected instruction; batched ld / sd use register x<rg + bi> and offset 8 * bi
  logic [ILEN-1:0] inj_inst;
  always_comb begin
    inj_inst = u.inst;
    if (u.bat) begin
      if (u.inst[6:0] == 7'b0000011)
        inj_inst = enc_ld_o(u.inst[11:7] + 5'(bi), u.inst[19:15], 12'(8 * int'(bi)));
      else
        inj_inst = enc_sd_o(u.inst[24:20] + 5'(bi), u.inst[19:15], 12'(8 * int'(bi)));
    end
  end

  logic [XLEN-1:0] wval;
  always_comb begin
    unique case (u.src)
      S_A0:     wval = arg_a0;
      S_A1:     wval = arg_a1;
      S_A0PAGE: wval = arg_a0 << 12;
      S_A1PAGE: wval = arg_a1 << 12;
      S_MPP:    wval = MSTATUS_MPP;
      S_SAVE:   wval = save[save_i];
      S_ZERO:   wval = '0;
      S_RECV:   wval = word;
      S_TGT:    wval = tgt;
      default:  wval = '0;
    endcase
  end

  wire futex_wake = (t7 == SYS_FUTEX) && ((t1 & FUTEX_CMD_MASK) == FUTEX_WAKE);

  // CPU port drive
  always_comb begin
    port_req = '0;
    port_req.reg_idx   = reg_sel;
    port_req.reg_wdata = wval;
    port_req.inject_inst = inj_inst;
    if (st == E_RUN && !nop) begin
      port_req.reg_valid    = (u.kind == U_RD) || (u.kind == U_WR);
      port_req.reg_wen      = (u.kind == U_WR);
      port_req.inject_valid = (u.kind == U_INJ);
    end
  end
  assign sel_en  = (st != E_IDLE) && !nop;
  assign sel_cpu = cpu;

  assign busy      = (st != E_IDLE);
  assign exq_ready = (st == E_RUN) && (u.kind == U_WAITEXC) && exq_valid;

  assign lk_cpu  = cpu;
  assign lk_addr = t0;

  assign rx_pop  = (st == E_RECV) && !rx_empty;
  assign tx_push = (st == E_SEND) && !tx_full;
  assign tx_data = word[7:0];

  assign hf_cpu  = cpu;
  assign hf_addr = arg_a0;
  assign intr_cpu   = cpu;
  assign intr_level = arg_idx[0];
  assign release_id = cpu;

  wire misc = (st == E_RUN) && (u.kind == U_MISC) && !nop;
  assign hf_set    = misc && (cur_op == OP_HFSET);
  assign hf_clr    = misc && (cur_op == OP_HFCLR);
  assign hf_clrall = misc && (cur_op == OP_HFCLRALL);
  assign intr_we   = misc && (cur_op == OP_INTR);
  assign release_valid = (st == E_RUN) && (u.kind == U_RELEASE) && !nop;

  // register read result in this cycle
  wire            rd_fire = (st == E_RUN) && (u.kind == U_RD) && (nop || port_rsp.reg_ready);
  wire [XLEN-1:0] rd_val  = nop ? '1 : port_rsp.reg_rdata;

  always_comb begin
    resp_we    = 1'b0;
    resp_widx  = '0;
    resp_wdata = '0;
    if (rd_fire && u.dst == D_RESP) begin
      resp_we = 1'b1; resp_widx = u.ri; resp_wdata = rd_val;
    end else if (exq_ready) begin
      resp_we = 1'b1; resp_widx = 2'd0; resp_wdata = XLEN'(exq_id);
    end else if (st == E_RUN && u.kind == U_MISC && cur_op == OP_TICK) begin
      resp_we = 1'b1; resp_wdata = tick;
    end else if (st == E_RUN && u.kind == U_MISC && cur_op == OP_UTICK) begin
      resp_we = 1'b1; resp_wdata = nop ? '1 : utick[cpu];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= E_IDLE;
      cur_op      <= '0;
      step        <= '0;
      cnt         <= '0;
      cpu         <= '0;
      nop         <= 1'b0;
      resume_next <= 1'b0;
      tgt         <= '0;
      save        <= '{default: '0};
      bi          <= '0;
      t0          <= '0;
      t1          <= '0;
      t7          <= '0;
      cause       <= '0;
      epc         <= '0;
      word        <= '0;
      bcnt        <= '0;
      done        <= 1'b0;
      hf_filtered <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        E_IDLE: if (start) begin
          st          <= E_RUN;
          cur_op      <= op;
          step        <= '0;
          cnt         <= (op == OP_PAGER || op == OP_PAGEW) ? CNTW'(PAGE_WORDS / BATCH)
                                                              : CNTW'(PAGE_WORDS);
          bi          <= '0;
          cpu         <= arg_cpu;
          nop         <= nop_mode;
          resume_next <= 1'b0;
          tgt         <= arg_a0;
        end

        E_RUN: unique case (u.kind)
          U_END: begin
            if (resume_next) begin
              cur_op      <= OP_NEXT;
              step        <= '0;
              resume_next <= 1'b0;
            end else begin
              st   <= E_IDLE;
              done <= 1'b1;
            end
          end
          U_RD: if (rd_fire) begin
            unique case (u.dst)
              D_SAVE: save[save_i] <= rd_val;
              D_T0:   t0 <= rd_val;
              D_T1:   t1 <= rd_val;
              D_T7:   t7 <= rd_val;
              D_RESP: begin
                if (u.ri == 2'd1) cause <= rd_val;
                if (u.ri == 2'd2) epc   <= rd_val;
              end
              D_TX: begin
                word <= rd_val;
                bcnt <= '0;
                st   <= E_SEND;
              end
              default: ;
            endcase
            step <= step + 1'b1;
          end
          U_WR: if (nop || port_rsp.reg_ready) step <= step + 1'b1;
          U_INJ: begin
            if (nop) step <= step + 1'b1;
            else if (port_rsp.inject_ready) st <= E_INJ_GAP;
          end
          U_RECV: begin
            bcnt <= '0;
            st   <= E_RECV;
          end
          U_LOOP: begin
            if (cnt > CNTW'(1)) begin
              cnt  <= cnt - 1'b1;
              step <= u.tgt;
            end else begin
              step <= step + 1'b1;
            end
          end
          U_BLOOP: begin
            if (32'(bi) != BATCH - 1) begin
              bi   <= bi + 1'b1;
              step <= u.tgt;
            end else begin
              bi   <= '0;
              step <= step + 1'b1;
            end
          end
          U_WAITEXC: if (exq_valid) begin
            cpu  <= exq_id;
            step <= step + 1'b1;
          end
          U_BR_ECALL: step <= (HFUTEX_EN && cause == CAUSE_ECALL_U) ? step + 1'b1 : u.tgt;
          U_BR_HFHIT: step <= (futex_wake && lk_hit) ? step + 1'b1 : u.tgt;
          U_FASTRET: begin
            hf_filtered <= hf_filtered + 1'b1;
            tgt         <= epc + 64'd4;
            cur_op      <= OP_REDIRECT;
            step        <= '0;
            resume_next <= 1'b1;
          end
          default: step <= step + 1'b1;   // U_RELEASE, U_MISC
        endcase

        E_INJ_GAP: st <= E_INJ_DRAIN;     // let InjectBusy reflect the new instruction
        E_INJ_DRAIN: if (!port_rsp.inject_busy) begin
          st   <= E_RUN;
          step <= step + 1'b1;
        end

        E_RECV: if (!rx_empty) begin
          word <= {rx_data, word[XLEN-1:8]};      // little endian
          bcnt <= bcnt + 1'b1;
          if (bcnt == 3'd7) begin
            st   <= E_RUN;
            step <= step + 1'b1;
          end
        end

        E_SEND: if (!tx_full) begin
          word <= word >> 8;
          bcnt <= bcnt + 1'b1;
          if (bcnt == 3'd7) st <= E_RUN;
        end

        default: st <= E_IDLE;
      endcase
    end
  end

  // Handshake rules on the CPU port: a request is held until it is accepted.
  a_inject_hold: assert property (@(posedge clk) disable iff (!rst_n)
    port_req.inject_valid && !port_rsp.inject_ready |=> port_req.inject_valid);
  a_reg_hold: assert property (@(posedge clk) disable iff (!rst_n)
    port_req.reg_valid && !port_rsp.reg_ready |=> port_req.reg_valid);
endmodule
