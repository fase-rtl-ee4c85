// tb_fase_uart_tx: checks the 8N2 transmitter at its default rate (100 MHz,
// 921600 bit/s, CLKS_PER_BIT = 109). Every byte is decoded from txd by sampling in the
// middle of each bit; start bit, data bits (LSB first) and both stop bits are
// checked, and so is the frame time of 11 bit times per byte.
`timescale 1ns/1ps
module tb_fase_uart_tx;
  localparam int CPB = (100_000_000 + 921_600 / 2) / 921_600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, txd;
  logic [7:0] in_data = 0;
  int checks = 0, failures = 0;

  fase_uart_tx dut (.*);

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] sent [$];
  // independent decoder
  initial begin
    forever begin
      logic [7:0] b; logic ok;
      @(negedge txd);
      ok = 1;
      repeat (CPB / 2) @(posedge clk);
      if (txd !== 1'b0) ok = 0;
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = txd; end
      repeat (CPB) @(posedge clk); if (txd !== 1'b1) ok = 0;   // stop bit 1
      repeat (CPB) @(posedge clk); if (txd !== 1'b1) ok = 0;   // stop bit 2
      checks++;
      if (!ok || sent.size() == 0 || b != sent[0]) begin
        failures++; $display("FAIL: byte %h framing %0d", b, ok);
      end
      if (sent.size() > 0) void'(sent.pop_front());
    end
  end

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    checks++; if (txd !== 1'b1) failures++;             // idle high
    for (int n = 0; n < 20; n++) begin
      logic [7:0] d;
      d = (n < 2) ? ((n == 0) ? 8'h00 : 8'hFF) : 8'($urandom);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_data = d; sent.push_back(d);
      @(posedge clk); t0 = $time;
      @(negedge clk); in_valid = 0;
      while (!in_ready) @(negedge clk);
      t1 = $time;
      checks++;
      // ready returns 11 bit times after the byte was taken
      if ((t1 - t0) / 10 != 11 * CPB) begin
        failures++; $display("FAIL: frame took %0d cycles", (t1 - t0) / 10);
      end
    end
    repeat (3 * CPB) @(posedge clk);
    checks++; if (sent.size() != 0) begin failures++; $display("FAIL: bytes not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
