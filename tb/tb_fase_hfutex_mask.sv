// tb_fase_hfutex_mask: random set / clear / clear-all updates and lookups on
// the per-core futex mask table (four cores, four entries each), compared with
// a model. The model keeps the same replacement rule (first free entry, else a
// per-core round-robin victim), so hits and misses must match exactly.
`timescale 1ns/1ps
module tb_fase_hfutex_mask;
  localparam int N = 4, E = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic set_valid = 0, clr_valid = 0, clrall_valid = 0, lk_hit;
  logic [1:0] upd_cpu = 0, lk_cpu = 0;
  logic [63:0] upd_addr = 0, lk_addr = 0;
  int checks = 0, failures = 0;

  fase_hfutex_mask dut (.*);

  bit          mv [N][E];
  logic [63:0] ma [N][E];
  int          vic [N];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit m_hit(int c, logic [63:0] a);
    for (int e = 0; e < E; e++) if (mv[c][e] && ma[c][e] == a) return 1;
    return 0;
  endfunction

  function automatic logic [63:0] pick_addr();
    return 64'h3000 + 64'(($urandom % 8) * 8);   // small pool, so hits happen
  endfunction

  initial begin
    int hits = 0;
    for (int c = 0; c < N; c++) begin vic[c] = 0; for (int e = 0; e < E; e++) mv[c][e] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int k;
      k = $urandom % 100;
      @(negedge clk);
      // lookup
      lk_cpu = 2'($urandom); lk_addr = pick_addr();
      #1;
      checks++;
      if (lk_hit != m_hit(lk_cpu, lk_addr)) begin
        failures++; $display("FAIL: lookup cpu %0d addr %h got %0d", lk_cpu, lk_addr, lk_hit);
      end
      if (lk_hit) hits++;
      // update
      upd_cpu = 2'($urandom); upd_addr = pick_addr();
      set_valid = k < 50; clr_valid = k >= 50 && k < 80; clrall_valid = k >= 98;
      @(posedge clk);
      if (clrall_valid) begin
        for (int e = 0; e < E; e++) mv[upd_cpu][e] = 0;
      end else if (clr_valid) begin
        for (int e = 0; e < E; e++) if (mv[upd_cpu][e] && ma[upd_cpu][e] == upd_addr) begin mv[upd_cpu][e] = 0; break; end
      end else if (set_valid && !m_hit(upd_cpu, upd_addr)) begin
        int f;
        f = -1;
        for (int e = 0; e < E; e++) if (!mv[upd_cpu][e]) begin f = e; break; end
        if (f < 0) begin f = vic[upd_cpu]; vic[upd_cpu] = (vic[upd_cpu] + 1) % E; end
        mv[upd_cpu][f] = 1; ma[upd_cpu][f] = upd_addr;
      end
      #1 set_valid = 0; clr_valid = 0; clrall_valid = 0;
    end
    checks++;
    if (hits < 100) begin failures++; $display("FAIL: too few hits %0d", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
