// tb_fase_controller: byte-level test of the FASE controller at its default
// size: four core models and 512-word pages.
//
// The bench sends HTP requests as bytes on the rx_valid / rx_data strobe, one
// byte every RX_GAP cycles, and collects response bytes from tx_valid /
// tx_data with random tx_ready back-pressure. It checks MemW / MemR, RegW /
// RegR, PageW with the page streamed while the operation runs, PageR, PageS,
// PageCP, Redirect + Next on both cores, the HFutex fast path, a request to a
// running core (nop mode), SetMMU / FlushTLB / SyncI, Tick / UTick and the
// Interrupt line, and that the RX buffer never overflows.
`timescale 1ns/1ps
module tb_fase_controller;
  import fase_pkg::*;
  import tb_asm_pkg::*;

  localparam int N = 4, MW = 12, PW = 512, RX_GAP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx_valid = 0, tx_valid, tx_ready = 0;
  logic [7:0] rx_data = 0, tx_data;
  cpu_req_t [N-1:0] cpu_req; cpu_rsp_t [N-1:0] cpu_rsp;
  logic [31:0] req_count, nop_count, hf_filtered, rx_overflow;

  fase_controller dut (.*);

  logic [63:0] mem [1 << MW];
  pipe_in_t [N-1:0] pin; pipe_out_t [N-1:0] pout;
  logic [MW-1:0] f_addr [N], d_addr [N]; logic [63:0] d_wdata [N]; logic [N-1:0] d_we;
  for (genvar i = 0; i < N; i++) begin : g_core
    fase_core_adapter u_adapt (.clk, .rst_n, .fase_req(cpu_req[i]), .fase_rsp(cpu_rsp[i]),
      .pipe_in(pin[i]), .pipe_out(pout[i]));
    tb_rv_core #(.MW(MW), .EX_LAT(2)) core (.clk, .rst_n, .pin(pin[i]), .pout(pout[i]),
      .f_addr(f_addr[i]), .f_rdata(mem[f_addr[i]]),
      .d_addr(d_addr[i]), .d_rdata(mem[d_addr[i]]), .d_we(d_we[i]), .d_wdata(d_wdata[i]));
  end
  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) if (d_we[i]) mem[d_addr[i]] <= d_wdata[i];

  int checks = 0, failures = 0, overlap = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host side
  task automatic send_byte(input logic [7:0] b);
    @(negedge clk); rx_valid = 1; rx_data = b;
    @(negedge clk); rx_valid = 0;
    repeat (RX_GAP - 1) @(negedge clk);
  endtask
  task automatic send_word(input logic [63:0] w);
    for (int i = 0; i < 8; i++) send_byte(w[8*i +: 8]);
  endtask
  logic [7:0] txq [$];
  always @(negedge clk) tx_ready = ($urandom % 3 != 0);
  always @(posedge clk) if (tx_valid && tx_ready) txq.push_back(tx_data);
  task automatic recv_word(output logic [63:0] w);
    for (int i = 0; i < 8; i++) begin
      while (txq.size() == 0) @(posedge clk);
      w[8*i +: 8] = txq.pop_front();
    end
  endtask
  // RX bytes waiting while an operation runs: UART traffic overlaps execution
  always @(posedge clk) if (dut.eng_busy && !dut.rxb_empty) overlap++;

  task automatic req(input htp_op_e o, input int c, input int idx, input logic [63:0] a0, a1);
    htp_fmt_t f = htp_format(o);
    send_byte(o);
    if (f.has_cpu) send_byte(8'(c));
    if (f.has_idx) send_byte(8'(idx));
    if (f.n_words >= 1) send_word(a0);
    if (f.n_words >= 2) send_word(a1);
  endtask
  task automatic memw(input int c, input logic [63:0] a, v); req(OP_MEMW, c, 0, a, v); endtask
  task automatic memr(input int c, input logic [63:0] a, output logic [63:0] v);
    req(OP_MEMR, c, 0, a, 0); recv_word(v);
  endtask
  task automatic regr(input int c, input int r, output logic [63:0] v);
    req(OP_REGR, c, r, 0, 0); recv_word(v);
  endtask
  task automatic next(output logic [63:0] c, cause, epc, tval);
    req(OP_NEXT, 0, 0, 0, 0); recv_word(c); recv_word(cause); recv_word(epc); recv_word(tval);
  endtask
  task automatic quiet(); // wait until the controller has finished the last request
    repeat (5) @(posedge clk);
    while (!dut.u_main.idle || dut.eng_busy || !dut.rxb_empty) @(posedge clk);
  endtask

  function automatic logic [63:0] pat(input int i);
    return {32'(i) ^ 32'h0F0F_0000, 32'h7700_0000 + 32'(i)};
  endfunction

  initial begin
    logic [63:0] v, c, cause, epc, tval;
    for (int i = 0; i < (1 << MW); i++) mem[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);

    memw(0, 64'h100, 64'h0123_4567_89AB_CDEF); quiet();
    check(mem[64'h100 >> 3] == 64'h0123_4567_89AB_CDEF, "MemW");
    memr(1, 64'h100, v); check(v == 64'h0123_4567_89AB_CDEF, "MemR");
    req(OP_REGW, 1, 7, 64'h77, 0); regr(1, 7, v); check(v == 64'h77, "RegW / RegR");
    req(OP_SETMMU, 0, 0, 64'h8000_0000_0000_0005, 0);
    req(OP_FLUSHTLB, 0, 0, 0, 0); req(OP_SYNCI, 1, 0, 0, 0); quiet();
    check(g_core[0].core.satp == 64'h8000_0000_0000_0005, "SetMMU");
    check(g_core[0].core.n_sfence == 1 && g_core[1].core.n_fencei == 1, "FlushTLB / SyncI");

    // pages of 8 words
    send_byte(OP_PAGEW); send_byte(8'd1); send_word(64'd2);
    for (int i = 0; i < PW; i++) send_word(pat(i));
    quiet();
    begin
      int bad = 0;
      for (int i = 0; i < PW; i++) if (mem[(64'h2000 >> 3) + i] != pat(i)) bad++;
      check(bad == 0, "PageW");
    end
    req(OP_PAGECP, 0, 0, 64'd2, 64'd3);
    req(OP_PAGER, 1, 0, 64'd3, 0);
    begin
      int bad = 0;
      for (int i = 0; i < PW; i++) begin recv_word(v); if (v != pat(i)) bad++; end
      check(bad == 0, "PageCP + PageR");
    end
    req(OP_PAGES, 0, 0, 64'd4, 64'h5555); quiet();
    begin
      int bad = 0;
      for (int i = 0; i < PW; i++) if (mem[(64'h4000 >> 3) + i] != 64'h5555) bad++;
      check(bad == 0, "PageS");
    end

    // programs: core 0 does two futex wakes on 0x800 then exits;
    //           core 1 spins until interrupted
    begin
      logic [31:0] p [$];
      p = '{a_addi(17, 0, 98), a_addi(11, 0, 1), a_addi(10, 0, 12'h400), a_ecall(),
            a_addi(10, 0, 12'h400), a_ecall(), a_addi(17, 0, 93), a_ecall()};
      for (int i = 0; i < p.size(); i += 2) memw(0, 64'h1000 + 64'(4 * i), {p[i + 1], p[i]});
      memw(0, 64'h1800, {32'h0, a_jself()});
    end
    req(OP_HFSET, 0, 0, 64'h400, 0);
    req(OP_REDIRECT, 1, 0, 64'h1800, 0);
    req(OP_REDIRECT, 0, 0, 64'h1000, 0);
    next(c, cause, epc, tval);
    check(c == 0 && cause == 8 && epc == 64'h101C, $sformatf("exit reported (cpu %0d cause %0d epc %h)", c, cause, epc));
    check(hf_filtered == 2, $sformatf("two futex wakes filtered (%0d)", hf_filtered));
    regr(1, 7, v); check(v == '1, "nop mode for the running core");
    check(nop_count == 1, "nop counted");
    req(OP_UTICK, 1, 0, 0, 0); recv_word(v); check(v > 0, "UTick");
    req(OP_TICK, 0, 0, 0, 0); recv_word(v); check(v > 1000, "Tick");
    req(OP_INTR, 1, 1, 0, 0);
    next(c, cause, epc, tval);
    check(c == 1 && cause == 64'h8000_0000_0000_000B, "interrupt reported");
    req(OP_INTR, 1, 0, 0, 0); quiet();
    check(cpu_req[1].irq == 0, "interrupt cleared");
    check(rx_overflow == 0, "no RX overflow");
    check(overlap > 0, "UART traffic overlapped with execution");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
