// fase_main_fsm: main state machine of the FASE controller, with the Arg Regs
// and Resp Regs.
//
// The main state machine takes HTP requests byte by byte from the RX buffer,
// parses them, hands each one to the operation state machines and sends the
// result words back through the TX buffer. Its four states are the four of the
// paper: Recv -> Parse -> Op -> Send -> Recv.
//
//  Recv   collects one request into the Arg Regs: the opcode byte, then, as the
//         opcode requires, a CPU ID byte, an index byte (register number for
//         RegR/RegW, level for Interrupt) and up to two 64-bit little-endian
//         argument words. A byte that is not a known opcode is dropped.
//  Parse  checks the CPU ID. A request that needs the CPU ports of a core that
//         does not exist or is not stopped (still running user code) is run in
//         nop mode (see fase_op_engine), so that the byte stream keeps its
//         framing and the host still receives the expected number of bytes.
//  Op     starts the operation state machine and waits until it is done. While
//         it runs, PageR / PageW stream words directly through the UART buffers.
//  Send   pushes the Resp Regs words the request returns (0, 1 or 4 words of 8
//         bytes, little endian) into the TX buffer.
//
// The state names, the Arg/Resp Regs and the overlap of UART traffic with
// execution follow the paper; the byte format of requests and responses, and
// the nop-mode handling, are this design's choice (the paper gives no wire
// format). Request format: see htp_format() in fase_pkg.
module fase_main_fsm
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU = 4,
  parameter int unsigned IDW   = (N_CPU > 1) ? $clog2(N_CPU) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // RX buffer
  input  logic              rx_empty,
  input  logic [7:0]        rx_data,
  output logic              rx_pop,
  // TX buffer
  input  logic              tx_full,
  output logic              tx_push,
  output logic [7:0]        tx_data,
  // core state
  input  logic [N_CPU-1:0]  stopped,
  // operation state machines
  output logic              eng_start,
  output logic [7:0]        eng_op,
  output logic [IDW-1:0]    eng_cpu,
  output logic [7:0]        eng_idx,
  output logic [XLEN-1:0]   eng_a0,
  output logic [XLEN-1:0]   eng_a1,
  output logic              eng_nop,
  input  logic              eng_done,
  input  logic              resp_we,
  input  logic [1:0]        resp_widx,
  input  logic [XLEN-1:0]   resp_wdata,
  // status
  output logic              idle,
  output logic [31:0]       req_count,
  output logic [31:0]       nop_count
);
  typedef enum logic [1:0] {M_RECV, M_PARSE, M_OP, M_SEND} mstate_e;
  typedef enum logic [1:0] {F_OPC, F_CPU, F_IDX, F_WORD} field_e;

  mstate_e        st;
  field_e         fld;
  htp_fmt_t       fmt;
  logic [3:0]     bcnt;            // byte index within the argument words
  logic [2:0]     wcnt;            // response word index
  // Arg Regs
  logic [7:0]     a_op, a_cpu, a_idx;
  logic [XLEN-1:0] a_w [2];
  // Resp Regs
  logic [XLEN-1:0] resp [4];

  htp_fmt_t rx_fmt;
  assign rx_fmt = htp_format(rx_data);

  // field that follows the current one
  function automatic field_e after(input htp_fmt_t f, input field_e cur, output logic last);
    field_e n;
    last = 1'b0;
    n    = F_OPC;
    if (cur == F_OPC && f.has_cpu)                   n = F_CPU;
    else if ((cur == F_OPC || cur == F_CPU) && f.has_idx) n = F_IDX;
    else if (cur != F_WORD && f.n_words != 0)        n = F_WORD;
    else last = 1'b1;
    return n;
  endfunction

  field_e nxt;
  logic   nxt_last;
  always_comb nxt = after((fld == F_OPC) ? rx_fmt : fmt, fld, nxt_last);

  assign rx_pop  = (st == M_RECV) && !rx_empty;
  assign tx_push = (st == M_SEND) && !tx_full && (wcnt < fmt.n_resp);
  assign tx_data = resp[wcnt[1:0]][8*bcnt[2:0] +: 8];
  assign idle    = (st == M_RECV) && (fld == F_OPC);

  assign eng_op  = a_op;
  assign eng_cpu = IDW'(a_cpu);
  assign eng_idx = a_idx;
  assign eng_a0  = a_w[0];
  assign eng_a1  = a_w[1];

  wire cpu_ok  = (32'(a_cpu) < N_CPU);
  wire nop_req = fmt.has_cpu && (!cpu_ok || (fmt.uses_port && !stopped[IDW'(a_cpu)]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= M_RECV;
      fld       <= F_OPC;
      fmt       <= '0;
      bcnt      <= '0;
      wcnt      <= '0;
      a_op      <= '0;
      a_cpu     <= '0;
      a_idx     <= '0;
      a_w       <= '{default: '0};
      resp      <= '{default: '0};
      eng_start <= 1'b0;
      eng_nop   <= 1'b0;
      req_count <= '0;
      nop_count <= '0;
    end else begin
      eng_start <= 1'b0;
      if (resp_we) resp[resp_widx] <= resp_wdata;
      unique case (st)
        M_RECV: if (!rx_empty) begin
          unique case (fld)
            F_OPC: if (rx_fmt.valid) begin
              a_op <= rx_data;
              fmt  <= rx_fmt;
              bcnt <= '0;
            end
            F_CPU:  a_cpu <= rx_data;
            F_IDX:  a_idx <= rx_data;
            F_WORD: begin
              a_w[bcnt[3]][8*bcnt[2:0] +: 8] <= rx_data;
              bcnt <= bcnt + 1'b1;
            end
            default: ;
          endcase
          if (fld == F_OPC && !rx_fmt.valid) begin
            fld <= F_OPC;                           // unknown opcode: drop the byte
          end else if (fld == F_WORD) begin
            if (bcnt == 4'(8 * fmt.n_words - 1)) begin
              fld <= F_OPC;
              st  <= M_PARSE;
            end
          end else if (nxt_last) begin
            fld <= F_OPC;
            st  <= M_PARSE;
          end else begin
            fld <= nxt;
          end
        end
        M_PARSE: begin
          eng_start <= 1'b1;
          eng_nop   <= nop_req;
          req_count <= req_count + 1'b1;
          if (nop_req) nop_count <= nop_count + 1'b1;
          st <= M_OP;
        end
        M_OP: if (eng_done) begin
          st   <= M_SEND;
          wcnt <= '0;
          bcnt <= '0;
        end
        M_SEND: begin
          if (wcnt >= fmt.n_resp) begin
            st <= M_RECV;
          end else if (!tx_full) begin
            bcnt <= bcnt + 1'b1;
            if (bcnt[2:0] == 3'd7) begin
              bcnt <= '0;
              wcnt <= wcnt + 1'b1;
            end
          end
        end
        default: st <= M_RECV;
      endcase
    end
  end
endmodule
