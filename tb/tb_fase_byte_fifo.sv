// tb_fase_byte_fifo: random pushes and pops against a queue model; checks data
// order, first-word-fall-through output, full / empty flags and the fill count.
`timescale 1ns/1ps
module tb_fase_byte_fifo;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [7:0] wdata = 0, rdata;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [7:0] q [$];

  fase_byte_fifo dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int saw_full = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || count != q.size()) begin
        failures++; $display("FAIL: flags empty=%0d full=%0d count=%0d model=%0d", empty, full, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rdata != q[0]) begin failures++; $display("FAIL: data %h exp %h", rdata, q[0]); end
      end
      if (full) saw_full++;
      // biased phases: fill, then drain
      push = !full && ($urandom % 100 < ((n / 500) % 2 ? 30 : 70));
      pop  = !empty && ($urandom % 100 < ((n / 500) % 2 ? 70 : 30));
      wdata = 8'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++; if (saw_full == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
