// tb_fase_uart_rx: checks the 8N2 receiver at its default rate (100 MHz,
// 921600 bit/s, CLKS_PER_BIT = 109). Random bytes are sent back to back with two stop bits, with a slightly
// fast and a slightly slow bit time, and the delivered bytes are compared.
// A frame with a low stop bit must raise frame_err and deliver nothing, and a
// short glitch on the idle line must not start a frame.
`timescale 1ns/1ps
module tb_fase_uart_rx;
  localparam int CPB = (100_000_000 + 921_600 / 2) / 921_600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rxd = 1, out_valid, frame_err;
  logic [7:0] out_data;
  int checks = 0, failures = 0, errs = 0;
  logic [7:0] exp_q [$];

  fase_uart_rx dut (.*);

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0 || exp_q[0] != out_data) begin
        failures++; $display("FAIL: got %h", out_data);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (rst_n && frame_err) errs++;
  end

  task automatic send(input logic [7:0] b, input int bt, input bit good_stop);
    rxd = 0; repeat (bt) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (bt) @(posedge clk); end
    rxd = good_stop; repeat (bt) @(posedge clk);
    rxd = 1; repeat (bt) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    for (int n = 0; n < 30; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      exp_q.push_back(b);
      send(b, (n % 3 == 0) ? CPB - 3 : ((n % 3 == 1) ? CPB : CPB + 3), 1);   // +-2.7 %
    end
    // glitch shorter than half a bit
    rxd = 0; repeat (2) @(posedge clk); rxd = 1; repeat (3 * CPB) @(posedge clk);
    // bad stop bit
    send(8'h5A, CPB, 0);
    repeat (2 * CPB) @(posedge clk);
    checks++; if (errs != 1) begin failures++; $display("FAIL: frame errors %0d", errs); end
    exp_q.push_back(8'hC3); send(8'hC3, CPB, 1);
    repeat (2 * CPB) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: missing bytes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
