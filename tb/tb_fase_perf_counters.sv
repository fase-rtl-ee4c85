// tb_fase_perf_counters: drives random privilege levels on four cores and
// compares tick and the per-core U-mode ticks with counts kept by the bench.
`timescale 1ns/1ps
module tb_fase_perf_counters;
  import fase_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0][1:0] priv;
  logic [63:0] tick;
  logic [N-1:0][63:0] utick;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint uc [N];

  fase_perf_counters dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    priv = '0;
    for (int i = 0; i < N; i++) uc[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      checks++;
      if (tick != 64'(cyc)) begin failures++; $display("FAIL: tick %0d exp %0d", tick, cyc); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (utick[i] != 64'(uc[i])) begin failures++; $display("FAIL: utick%0d %0d exp %0d", i, utick[i], uc[i]); end
      end
      for (int i = 0; i < N; i++) begin
        int r;
        r = $urandom % 3;
        unique case (r)
          0: priv[i] = PRIV_M;
          1: priv[i] = PRIV_S;
          default: priv[i] = PRIV_U;
        endcase
      end
      if (n > 1500) priv[2] = PRIV_M;
      @(posedge clk);
      cyc++;
      for (int i = 0; i < N; i++) if (priv[i] == PRIV_U) uc[i]++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
