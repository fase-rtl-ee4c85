// fase_uart_rx: UART receiver of the host-target channel.
//
// The host reaches the FASE controller over a serial line with an 8N2 frame
// (one start bit, eight data bits LSB first, no parity, two stop bits) at
// 921600 bit/s from a 100 MHz clock, as in the evaluated system. The line is
// brought in through a two-flop synchroniser. A falling edge starts a frame;
// the start bit is re-checked half a bit later, then every data bit is sampled
// in the middle of its bit time. The byte is delivered when the middle of the
// first stop bit is reached; a low stop bit is reported as a framing error and
// the byte is dropped. The second stop bit is not waited for, so a
// back-to-back frame is never missed.
//
// Interface: rxd (serial in, idle high); out_valid is a one-cycle strobe with
// out_data; frame_err is a one-cycle strobe. There is no back-pressure: the RX
// buffer behind this block must keep up (it does by a wide margin).
// The bit timing uses CLKS_PER_BIT = round(CLK_HZ / BAUD). The frame format and
// rate follow the paper; the sampling scheme is this design's own.
module fase_uart_rx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 921_600
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       out_valid,
  output logic [7:0] out_data,
  output logic       frame_err
);
  localparam int unsigned CLKS_PER_BIT = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;

  state_e          state;
  logic [CW-1:0]   cnt;
  logic [2:0]      bit_idx;
  logic [7:0]      shreg;
  logic [1:0]      sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= 2'b11;
    else        sync <= {sync[0], rxd};
  end
  wire rx_s = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      bit_idx   <= '0;
      shreg     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      frame_err <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        S_IDLE: if (!rx_s) begin
          state <= S_START;
          cnt   <= CW'(CLKS_PER_BIT / 2 - 1);
        end
        S_START: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else if (rx_s) state <= S_IDLE;          // glitch, not a start bit
          else begin
            state   <= S_DATA;
            cnt     <= CW'(CLKS_PER_BIT - 1);
            bit_idx <= '0;
          end
        end
        S_DATA: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin
            shreg   <= {rx_s, shreg[7:1]};
            cnt     <= CW'(CLKS_PER_BIT - 1);
            bit_idx <= bit_idx + 1'b1;
            if (bit_idx == 3'd7) state <= S_STOP;
          end
        end
        S_STOP: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin
            state <= S_IDLE;
            if (rx_s) begin
              out_valid <= 1'b1;
              out_data  <= shreg;
            end else begin
              frame_err <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
