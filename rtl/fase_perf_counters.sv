// fase_perf_counters: the Tick and UTick counters of the FASE controller.
//
// tick counts every clock cycle since reset (HTP request Tick). utick[i] counts
// the cycles in which core i reported U-mode (HTP request UTick), which is how
// FASE measures the user CPU time of a workload without any OS support.
// Counters are 64 bits wide and wrap. Both are registered: the value read in
// cycle t includes cycles up to t-1. What is counted follows the paper; the
// width and wrap-around are this design's choice.
module fase_perf_counters
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_CPU-1:0][1:0]       priv,
  output logic [XLEN-1:0]             tick,
  output logic [N_CPU-1:0][XLEN-1:0]  utick
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick  <= '0;
      utick <= '0;
    end else begin
      tick <= tick + 1'b1;
      for (int i = 0; i < N_CPU; i++)
        if (priv[i] == PRIV_U) utick[i] <= utick[i] + 1'b1;
    end
  end
endmodule
