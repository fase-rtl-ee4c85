// fase_controller: the FASE hardware controller.
//
// It connects the host (through a byte stream from and to the UART) to the CPU
// interfaces of N_CPU cores, and carries out Host-Target Protocol requests on
// them. Its parts are those of the paper's controller diagram:
//   RX buffer -> main state machine (Recv/Parse/Op/Send, Arg Regs, Resp Regs)
//   -> operation state machines (fase_op_engine) -> CPU select -> CPU ports,
//   TX buffer <- main state machine / PageR stream,
//   state monitor + Exception Event Queue (fase_exc_queue), which also holds
//   the StopFetch lines, HFutex masks, Tick/UTick counters and the optional
//   interrupt lines (one level register per core, set by the Interrupt
//   request).
// The RX and TX buffers are shared by the main state machine and the
// operation state machines; the operation state machines use them only while
// a PageR/PageW request is in the Op state, when the main state machine is
// idle on both.
//
// Interface: rx_valid/rx_data is the byte strobe of the UART receiver (no
// back-pressure: bytes arriving when the RX buffer is full are lost and counted
// in rx_overflow); tx_valid/tx_data/tx_ready feed the UART transmitter;
// cpu_req/cpu_rsp are the CPU interfaces of the cores.
// Timing: a request starts executing within three cycles after its last byte
// enters the RX buffer (Recv -> Parse -> Op); its response bytes enter the TX buffer one
// per cycle after the operation ends. The block structure follows the paper's
// controller diagram; the sharing of the buffers, the interrupt registers and
// the status counters are this design's choice.
module fase_controller
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU      = 4,
  parameter int unsigned PAGE_WORDS = 512,
  parameter bit          HFUTEX_EN  = 1'b1,
  parameter int unsigned BATCH      = 8,
  parameter int unsigned HF_ENTRIES = 4,
  parameter int unsigned RX_DEPTH   = 64,
  parameter int unsigned TX_DEPTH   = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rx_valid,
  input  logic [7:0]            rx_data,
  output logic                  tx_valid,
  output logic [7:0]            tx_data,
  input  logic                  tx_ready,
  output cpu_req_t [N_CPU-1:0]  cpu_req,
  input  cpu_rsp_t [N_CPU-1:0]  cpu_rsp,
  // status
  output logic [31:0]           req_count,
  output logic [31:0]           nop_count,
  output logic [31:0]           hf_filtered,
  output logic [31:0]           rx_overflow
);
  localparam int unsigned IDW = (N_CPU > 1) ? $clog2(N_CPU) : 1;

  // ---------------- UART buffers ----------------
  logic       rxb_pop, rxb_full, rxb_empty;
  logic [7:0] rxb_data;
  logic       txb_push, txb_full, txb_empty;
  logic [7:0] txb_wdata;

  fase_byte_fifo #(.WIDTH(8), .DEPTH(RX_DEPTH)) u_rx_buf (
    .clk, .rst_n,
    .push(rx_valid && !rxb_full), .wdata(rx_data),
    .pop(rxb_pop), .rdata(rxb_data),
    .full(rxb_full), .empty(rxb_empty), .count()
  );
  fase_byte_fifo #(.WIDTH(8), .DEPTH(TX_DEPTH)) u_tx_buf (
    .clk, .rst_n,
    .push(txb_push), .wdata(txb_wdata),
    .pop(tx_ready && !txb_empty), .rdata(tx_data),
    .full(txb_full), .empty(txb_empty), .count()
  );
  assign tx_valid = !txb_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_overflow <= '0;
    else if (rx_valid && rxb_full) rx_overflow <= rx_overflow + 1'b1;
  end

  // ---------------- state monitor / exception queue ----------------
  logic [N_CPU-1:0][1:0] priv;
  logic [N_CPU-1:0]      stop_fetch, user_mode;
  logic                  exq_valid, exq_ready, rel_valid;
  logic [IDW-1:0]        exq_id, rel_id;

  always_comb for (int i = 0; i < N_CPU; i++) priv[i] = cpu_rsp[i].priv;

  fase_exc_queue #(.N_CPU(N_CPU)) u_exq (
    .clk, .rst_n, .priv,
    .release_valid(rel_valid), .release_id(rel_id),
    .stop_fetch, .deq_valid(exq_valid), .deq_id(exq_id), .deq_ready(exq_ready),
    .user_mode
  );

  // ---------------- performance counters ----------------
  logic [XLEN-1:0]             tick;
  logic [N_CPU-1:0][XLEN-1:0]  utick;
  fase_perf_counters #(.N_CPU(N_CPU)) u_perf (.clk, .rst_n, .priv, .tick, .utick);

  // ---------------- HFutex masks ----------------
  logic            hf_set, hf_clr, hf_clrall, lk_hit;
  logic [IDW-1:0]  hf_cpu, lk_cpu;
  logic [XLEN-1:0] hf_addr, lk_addr;
  fase_hfutex_mask #(.N_CPU(N_CPU), .ENTRIES(HF_ENTRIES), .AW(XLEN)) u_hfm (
    .clk, .rst_n,
    .set_valid(hf_set), .clr_valid(hf_clr), .clrall_valid(hf_clrall),
    .upd_cpu(hf_cpu), .upd_addr(hf_addr),
    .lk_cpu, .lk_addr, .lk_hit
  );

  // ---------------- main state machine ----------------
  logic            m_rx_pop, m_tx_push;
  logic [7:0]      m_tx_data;
  logic            eng_start, eng_nop, eng_done, eng_busy;
  logic [7:0]      eng_op, eng_idx;
  logic [IDW-1:0]  eng_cpu;
  logic [XLEN-1:0] eng_a0, eng_a1;
  logic            resp_we;
  logic [1:0]      resp_widx;
  logic [XLEN-1:0] resp_wdata;

  fase_main_fsm #(.N_CPU(N_CPU)) u_main (
    .clk, .rst_n,
    .rx_empty(rxb_empty || eng_busy), .rx_data(rxb_data), .rx_pop(m_rx_pop),
    .tx_full(txb_full || eng_busy), .tx_push(m_tx_push), .tx_data(m_tx_data),
    .stopped(stop_fetch),
    .eng_start, .eng_op, .eng_cpu, .eng_idx, .eng_a0, .eng_a1, .eng_nop,
    .eng_done, .resp_we, .resp_widx, .resp_wdata,
    .idle(), .req_count, .nop_count
  );

  // ---------------- operation state machines ----------------
  logic            e_rx_pop, e_tx_push;
  logic [7:0]      e_tx_data;
  logic            sel_en;
  logic [IDW-1:0]  sel_cpu;
  port_req_t       op_req;
  port_rsp_t       op_rsp;
  logic            intr_we, intr_level;
  logic [IDW-1:0]  intr_cpu;

  fase_op_engine #(.N_CPU(N_CPU), .PAGE_WORDS(PAGE_WORDS), .HFUTEX_EN(HFUTEX_EN),
                 .BATCH(BATCH)) u_ops (
    .clk, .rst_n,
    .start(eng_start), .op(eng_op), .arg_cpu(eng_cpu), .arg_idx(eng_idx),
    .arg_a0(eng_a0), .arg_a1(eng_a1), .nop_mode(eng_nop),
    .busy(eng_busy), .done(eng_done),
    .resp_we, .resp_widx, .resp_wdata,
    .sel_en, .sel_cpu, .port_req(op_req), .port_rsp(op_rsp),
    .exq_valid, .exq_id, .exq_ready,
    .release_valid(rel_valid), .release_id(rel_id),
    .rx_empty(rxb_empty), .rx_data(rxb_data), .rx_pop(e_rx_pop),
    .tx_full(txb_full), .tx_push(e_tx_push), .tx_data(e_tx_data),
    .hf_set, .hf_clr, .hf_clrall, .hf_cpu, .hf_addr, .lk_cpu, .lk_addr, .lk_hit,
    .tick, .utick,
    .intr_we, .intr_cpu, .intr_level,
    .hf_filtered
  );

  assign rxb_pop   = eng_busy ? e_rx_pop  : m_rx_pop;
  assign txb_push  = eng_busy ? e_tx_push : m_tx_push;
  assign txb_wdata = eng_busy ? e_tx_data : m_tx_data;

  // ---------------- CPU select ----------------
  port_req_t [N_CPU-1:0] sel_req;
  port_rsp_t [N_CPU-1:0] sel_rsp;
  fase_cpu_select #(.N_CPU(N_CPU)) u_sel (
    .en(sel_en), .sel(sel_cpu), .op_req, .op_rsp, .cpu_req(sel_req), .cpu_rsp(sel_rsp)
  );

  // ---------------- interrupt lines ----------------
  logic [N_CPU-1:0] intr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) intr <= '0;
    else if (intr_we) intr[intr_cpu] <= intr_level;
  end

  always_comb begin
    for (int i = 0; i < N_CPU; i++) begin
      sel_rsp[i]            = cpu_rsp[i].port;
      cpu_req[i].port       = sel_req[i];
      cpu_req[i].stop_fetch = stop_fetch[i];
      cpu_req[i].irq  = intr[i];
    end
  end

  // user_mode is the monitor's registered view; kept for debug visibility
  logic unused_ok;
  assign unused_ok = ^user_mode;
endmodule
