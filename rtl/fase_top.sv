// fase_top: the FPGA side of FASE for an N_CPU-core target.
//
// It holds everything FASE adds to the FPGA: the UART receiver and transmitter
// of the host-target channel (8N2 frame, 921600 bit/s at 100 MHz), the FASE
// controller, and one interface adapter per core that turns the core's fetch
// unit, instruction queue, front-end request and register file ports into the
// FASE CPU interface. The cores themselves (with their caches, the memory bus,
// L2 and DDR) are not part of this design: their pipeline-side signals are the
// ports pipe_in / pipe_out, one struct per core.
//
// Defaults are the evaluated configuration: 4 cores, 100 MHz, 921600 bit/s,
// 4 KiB pages (512 words), PageR / PageW batched 8 words per iteration (the
// paper gives 8 or 16), HFutex enabled. The HFutex mask size (4 entries per
// core) and the buffer depths (64 bytes) are this design's choice.
//
// Interface: uart_rxd / uart_txd are the serial lines to the host; pipe_in /
// pipe_out carry each core's pipeline signals; req_count, nop_count,
// hf_filtered and rx_overflow are free-running status counters.
// Timing: one byte on the serial line takes 11 bit times of 109 cycles
// (about 12 us); request handling inside the controller takes a few cycles per
// register access and a few cycles per injected instruction, plus the core's
// own execution time for it.
module fase_top
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU      = 4,
  parameter int unsigned CLK_HZ     = 100_000_000,
  parameter int unsigned BAUD       = 921_600,
  parameter int unsigned PAGE_WORDS = 512,
  parameter bit          HFUTEX_EN  = 1'b1,
  parameter int unsigned BATCH      = 8,
  parameter int unsigned HF_ENTRIES = 4,
  parameter int unsigned RX_DEPTH   = 64,
  parameter int unsigned TX_DEPTH   = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   uart_rxd,
  output logic                   uart_txd,
  input  pipe_in_t  [N_CPU-1:0]  pipe_in,
  output pipe_out_t [N_CPU-1:0]  pipe_out,
  output logic [31:0]            req_count,
  output logic [31:0]            nop_count,
  output logic [31:0]            hf_filtered,
  output logic [31:0]            rx_overflow,
  output logic                   uart_frame_err
);
  logic       rx_valid, tx_valid, tx_ready;
  logic [7:0] rx_data, tx_data;

  fase_uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_urx (
    .clk, .rst_n, .rxd(uart_rxd),
    .out_valid(rx_valid), .out_data(rx_data), .frame_err(uart_frame_err)
  );
  fase_uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD), .STOP_BITS(2)) u_utx (
    .clk, .rst_n, .in_valid(tx_valid), .in_data(tx_data), .in_ready(tx_ready),
    .txd(uart_txd)
  );

  cpu_req_t [N_CPU-1:0] cpu_req;
  cpu_rsp_t [N_CPU-1:0] cpu_rsp;

  fase_controller #(
    .N_CPU(N_CPU), .PAGE_WORDS(PAGE_WORDS), .HFUTEX_EN(HFUTEX_EN), .BATCH(BATCH),
    .HF_ENTRIES(HF_ENTRIES), .RX_DEPTH(RX_DEPTH), .TX_DEPTH(TX_DEPTH)
  ) u_ctrl (
    .clk, .rst_n,
    .rx_valid, .rx_data, .tx_valid, .tx_data, .tx_ready,
    .cpu_req, .cpu_rsp,
    .req_count, .nop_count, .hf_filtered, .rx_overflow
  );

  for (genvar i = 0; i < N_CPU; i++) begin : g_core
    fase_core_adapter u_adapt (
      .clk, .rst_n,
      .fase_req(cpu_req[i]), .fase_rsp(cpu_rsp[i]),
      .pipe_in(pipe_in[i]), .pipe_out(pipe_out[i])
    );
  end
endmodule
