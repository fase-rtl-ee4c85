// tb_fase_exc_queue: drives the privilege level of four cores and checks the
// State Monitor and Exception Event Queue. Every U -> M switch must enqueue the
// core's ID exactly once, in order of detection (lowest ID first when several
// switch in the same cycle), StopFetch must rise with the switch and stay high
// until the core is released, and must fall only on release while in U-mode.
`timescale 1ns/1ps
module tb_fase_exc_queue;
  import fase_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0][1:0] priv;
  logic release_valid = 0, deq_ready = 0;
  logic [1:0] release_id = 0, deq_id;
  logic [N-1:0] stop_fetch, user_mode;
  logic deq_valid;
  int checks = 0, failures = 0;
  int exp_q [$];

  fase_exc_queue dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s at %0t", msg, $time); end
  endtask

  // pop everything and compare with the expected order
  task automatic drain();
    repeat (3) @(posedge clk);
    while (exp_q.size() > 0) begin
      @(negedge clk);
      chk(deq_valid, "queue empty too early");
      chk(deq_id == 2'(exp_q[0]), $sformatf("deq id %0d exp %0d", deq_id, exp_q[0]));
      void'(exp_q.pop_front());
      deq_ready = 1; @(posedge clk); #1 deq_ready = 0;
    end
    @(negedge clk);
    chk(!deq_valid, "queue not empty");
  endtask

  initial begin
    for (int i = 0; i < N; i++) priv[i] = PRIV_M;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk(stop_fetch == '1, "stop after reset");
    // release all cores into U-mode: the way Redirect does it (mret, then release)
    for (int i = 0; i < N; i++) begin
      priv[i] = PRIV_U; @(negedge clk);
      chk(stop_fetch[i], "stop held until release");
      release_valid = 1; release_id = 2'(i); @(negedge clk); release_valid = 0;
      chk(!stop_fetch[i], "stop dropped on release");
    end
    repeat (2) @(negedge clk);
    chk(!deq_valid, "no event yet");
    chk(user_mode == '1, "all in user mode");
    // single exception on core 2
    priv[2] = PRIV_M; exp_q.push_back(2);
    #1 chk(stop_fetch[2], "stop rises with switch");
    drain();
    // simultaneous exceptions on 3, 1, 0
    priv[3] = PRIV_M; priv[1] = PRIV_M; priv[0] = PRIV_M;
    exp_q.push_back(0); exp_q.push_back(1); exp_q.push_back(3);
    drain();
    chk(stop_fetch == '1, "all stopped");
    // a release without returning to U keeps StopFetch high (M-mode)
    release_valid = 1; release_id = 1; @(negedge clk); release_valid = 0;
    chk(stop_fetch[1], "M-mode keeps stop");
    // staggered random rounds
    for (int r = 0; r < 40; r++) begin
      int c;
      c = $urandom % N;
      priv[c] = PRIV_U; release_valid = 1; release_id = 2'(c); @(negedge clk); release_valid = 0;
      chk(!stop_fetch[c], "released");
      repeat ($urandom % 4) @(negedge clk);
      priv[c] = PRIV_M; exp_q.push_back(c);
      @(negedge clk);
      if ($urandom % 2) drain();
    end
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
