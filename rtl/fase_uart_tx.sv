// fase_uart_tx: UART transmitter of the host-target channel.
//
// Sends bytes in the 8N2 frame of the evaluated system: a start bit (low),
// eight data bits LSB first, then two stop bits (high), each bit lasting
// CLKS_PER_BIT = round(CLK_HZ / BAUD) clock cycles (109 cycles at 100 MHz and
// 921600 bit/s). One frame therefore takes 11 * CLKS_PER_BIT cycles.
//
// Interface: in_valid / in_ready handshake for one byte; in_ready is high only
// while the transmitter is idle, so a byte is taken in the cycle the handshake
// completes and the start bit appears on txd in the next cycle. txd idles high.
// Frame format and rate follow the paper; the rest is this design's choice.
module fase_uart_tx #(
  parameter int unsigned CLK_HZ    = 100_000_000,
  parameter int unsigned BAUD      = 921_600,
  parameter int unsigned STOP_BITS = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_data,
  output logic       in_ready,
  output logic       txd
);
  localparam int unsigned CLKS_PER_BIT = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam int unsigned NBITS = 1 + 8 + STOP_BITS;

  logic              busy;
  logic [CW-1:0]     cnt;
  logic [3:0]        bits_left;
  logic [NBITS-1:0]  frame;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      bits_left <= '0;
      frame     <= '1;
      txd       <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (in_valid) begin
        busy      <= 1'b1;
        // {stop bits, data, start bit}; shifted out LSB first
        frame     <= {{STOP_BITS{1'b1}}, in_data, 1'b0} >> 1;
        txd       <= 1'b0;
        cnt       <= CW'(CLKS_PER_BIT - 1);
        bits_left <= 4'(NBITS - 1);
      end
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;
    end else if (bits_left != 0) begin
      txd       <= frame[0];
      frame     <= {1'b1, frame[NBITS-1:1]};
      bits_left <= bits_left - 1'b1;
      cnt       <= CW'(CLKS_PER_BIT - 1);
    end else begin
      busy <= 1'b0;
      txd  <= 1'b1;
    end
  end
endmodule
