// tb_fase_top: end-to-end test of the FASE FPGA side at its default size
// (4 cores, 100 MHz, 921600 bit/s 8N2 UART, 4 KiB pages, HFutex on).
//
// The testbench plays the host runtime: it sends HTP requests bit by bit on
// the serial line and decodes the controller's replies from the serial line,
// with its own UART code. Four core models (tb_rv_core) with a shared memory
// sit behind the per-core adapters. The test
//   * loads three user programs with MemW, then SyncI, SetMMU, FlushTLB;
//   * checks RegW/RegR, MemR, PageS, PageW, PageCP and PageR against the
//     memory contents;
//   * starts three cores with Redirect and serves their system calls with Next
//     (write, futex wake, exit) while they run concurrently, including a
//     request to a running core (nop mode) and an Interrupt;
//   * checks that the HFutex mask filters repeated futex wakes in the
//     controller once the host has set it, and that HFCLR / HFCLRALL stop the
//     filtering again;
//   * checks that scratch registers x1..x3, and x9 used by the batched PageW,
//     survive all of this, and reads
//     Tick and UTick.
// Every mechanism is counted and a mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_fase_top;
  import fase_pkg::*;
  import tb_asm_pkg::*;

  localparam int unsigned N   = 4;
  localparam int unsigned CPB = (100_000_000 + 921_600 / 2) / 921_600;
  localparam int unsigned MW  = 14;                // 128 KiB of target memory

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic uart_rxd = 1'b1, uart_txd;
  pipe_in_t  [N-1:0] pin;
  pipe_out_t [N-1:0] pout;
  logic [31:0] req_count, nop_count, hf_filtered, rx_overflow;
  logic        frame_err;

  fase_top dut (
    .clk, .rst_n, .uart_rxd, .uart_txd,
    .pipe_in(pin), .pipe_out(pout),
    .req_count, .nop_count, .hf_filtered, .rx_overflow, .uart_frame_err(frame_err)
  );

  // ---------------- target memory and cores ----------------
  logic [63:0] mem [1 << MW];
  logic [MW-1:0] f_addr [N], d_addr [N];
  logic [63:0]   d_wdata [N];
  logic [N-1:0]  d_we;

  for (genvar i = 0; i < N; i++) begin : g_core
    tb_rv_core #(.MW(MW), .EX_LAT(2)) core (
      .clk, .rst_n, .pin(pin[i]), .pout(pout[i]),
      .f_addr(f_addr[i]), .f_rdata(mem[f_addr[i]]),
      .d_addr(d_addr[i]), .d_rdata(mem[d_addr[i]]), .d_we(d_we[i]), .d_wdata(d_wdata[i])
    );
  end
  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) if (d_we[i]) mem[d_addr[i]] <= d_wdata[i];

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef enum int {
    M_REDIRECT, M_NEXT, M_SETMMU, M_FLUSHTLB, M_SYNCI, M_HFSET, M_HFCLR, M_HFCLRALL,
    M_REGR, M_REGW, M_MEMR, M_MEMW, M_PAGES, M_PAGECP, M_PAGER, M_PAGEW, M_TICK,
    M_UTICK, M_INTR, M_NOP, M_HF_FILTER, M_QUEUE2, M_INJ_WAIT, M_NUM
  } mech_e;
  int mech [M_NUM];

  // ---------------- host UART ----------------
  task automatic send_byte(input logic [7:0] b);
    uart_rxd = 1'b0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (CPB) @(posedge clk); end
    uart_rxd = 1'b1; repeat (2 * CPB) @(posedge clk);
  endtask
  task automatic send_word(input logic [63:0] w);
    for (int i = 0; i < 8; i++) send_byte(w[8*i +: 8]);
  endtask

  logic [7:0] rxq [$];
  initial begin : host_rx
    forever begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      if (uart_txd == 1'b0) begin
        logic [7:0] b;
        for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = uart_txd; end
        repeat (CPB) @(posedge clk);
        if (uart_txd !== 1'b1) begin failures++; $display("FAIL: stop bit"); end
        rxq.push_back(b);
      end
    end
  end
  task automatic recv_word(output logic [63:0] w);
    for (int i = 0; i < 8; i++) begin
      wait (rxq.size() > 0);
      w[8*i +: 8] = rxq.pop_front();
    end
  endtask

  // ---------------- HTP requests ----------------
  task automatic h_redirect(input int c, input logic [63:0] a);
    send_byte(OP_REDIRECT); send_byte(8'(c)); send_word(a); mech[M_REDIRECT]++;
  endtask
  task automatic h_next(output int c, output logic [63:0] cause, epc, tval);
    logic [63:0] w;
    send_byte(OP_NEXT);
    recv_word(w); c = int'(w); recv_word(cause); recv_word(epc); recv_word(tval);
    mech[M_NEXT]++;
  endtask
  task automatic h_regr(input int c, input int r, output logic [63:0] v);
    send_byte(OP_REGR); send_byte(8'(c)); send_byte(8'(r)); recv_word(v); mech[M_REGR]++;
  endtask
  task automatic h_regw(input int c, input int r, input logic [63:0] v);
    send_byte(OP_REGW); send_byte(8'(c)); send_byte(8'(r)); send_word(v); mech[M_REGW]++;
  endtask
  task automatic h_memr(input int c, input logic [63:0] a, output logic [63:0] v);
    send_byte(OP_MEMR); send_byte(8'(c)); send_word(a); recv_word(v); mech[M_MEMR]++;
  endtask
  task automatic h_memw(input int c, input logic [63:0] a, input logic [63:0] v);
    send_byte(OP_MEMW); send_byte(8'(c)); send_word(a); send_word(v); mech[M_MEMW]++;
  endtask
  task automatic h_cpu_only(input logic [7:0] op, input int c);
    send_byte(op); send_byte(8'(c));
  endtask
  task automatic h_hf(input logic [7:0] op, input int c, input logic [63:0] a);
    send_byte(op); send_byte(8'(c)); send_word(a);
  endtask
  task automatic h_tick(output logic [63:0] v);
    send_byte(OP_TICK); recv_word(v); mech[M_TICK]++;
  endtask
  task automatic h_utick(input int c, output logic [63:0] v);
    send_byte(OP_UTICK); send_byte(8'(c)); recv_word(v); mech[M_UTICK]++;
  endtask
  task automatic h_intr(input int c, input bit lvl);
    send_byte(OP_INTR); send_byte(8'(c)); send_byte({7'd0, lvl}); mech[M_INTR]++;
  endtask

  // ---------------- programs ----------------
  localparam logic [63:0] P0 = 64'h1000, P1 = 64'h2000, P2 = 64'h2800, FUTEX_ADDR = 64'h3000;
  task automatic load_prog(input int c, input logic [63:0] base, input logic [31:0] code [$]);
    while (code.size() % 2) code.push_back(32'h0);
    for (int i = 0; i < code.size(); i += 2)
      h_memw(c, base + 64'(4 * i), {code[i + 1], code[i]});
  endtask

  function automatic logic [63:0] pat(input int i);
    return {32'(i) ^ 32'hA5A5_0000, 32'hC0DE_0000 + 32'(i)};
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // queue depth and inject-wait monitors
  always @(posedge clk) begin
    if (dut.u_ctrl.u_exq.u_q.count >= 2) mech[M_QUEUE2]++;
    if (dut.u_ctrl.u_ops.st == 3'd3 && dut.u_ctrl.u_ops.port_rsp.inject_busy) mech[M_INJ_WAIT]++;
  end

  // ---------------- event loop of the "runtime" ----------------
  int host_futex [N];
  bit exited [N];
  int irq_seen;
  int phase;
  logic [63:0] wr_arg;

  task automatic serve_one();
    int c; logic [63:0] cause, epc, tval, a7, a0;
    h_next(c, cause, epc, tval);
    if (cause == 64'h8000_0000_0000_000B) begin
      irq_seen++;
      h_intr(c, 1'b0);
      h_redirect(c, epc);
    end else if (cause == 64'd8) begin
      h_regr(c, 17, a7);
      if (a7 == 64'd98) begin
        host_futex[c]++;
        h_regr(c, 10, a0);
        check(a0 == FUTEX_ADDR, "futex address in a0");
        if (phase == 1) begin h_hf(OP_HFSET, c, FUTEX_ADDR); mech[M_HFSET]++; end
        h_regw(c, 10, 64'd0);
        h_redirect(c, epc + 4);
      end else if (a7 == 64'd64) begin
        h_regr(c, 10, wr_arg);
        check(wr_arg == 64'd7, "write syscall argument");
        h_regw(c, 10, 64'd1);
        h_redirect(c, epc + 4);
      end else if (a7 == 64'd93) begin
        exited[c] = 1;
      end else begin
        check(0, $sformatf("unexpected syscall %0d", a7));
      end
    end else begin
      check(0, $sformatf("unexpected cause %h on cpu %0d", cause, c));
      exited[c] = 1;
    end
  endtask

  initial begin : host
    logic [63:0] v, t0, t1, u0;
    logic [31:0] p0 [$], p1 [$], p2 [$];
    for (int i = 0; i < (1 << MW); i++) mem[i] = 64'd0;
    mem[0] = {32'h0, a_jself()};               // trap vector: jal x0, 0
    for (int m = 0; m < M_NUM; m++) mech[m] = 0;
    repeat (20) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    h_tick(t0);
    check(t0 > 0, "tick runs");

    // program 0: three futex wakes on FUTEX_ADDR, then exit
    p0 = '{a_addi(17, 0, 12'd98), a_addi(11, 0, 12'd129), a_lui(10, 20'h3), a_ecall(),
           a_addi(5, 5, 12'd1), a_addi(6, 0, 12'd3), a_bne(5, 6, -13'sd24),
           a_addi(17, 0, 12'd93), a_ecall()};
    // program 1: write(7) then exit
    p1 = '{a_addi(17, 0, 12'd64), a_addi(10, 0, 12'd7), a_ecall(), a_addi(17, 0, 12'd93), a_ecall()};
    // program 2: long count-down loop then exit
    p2 = '{a_lui(5, 20'h20), a_addi(5, 5, -12'sd1), a_bne(5, 0, -13'sd4),
           a_addi(17, 0, 12'd93), a_ecall()};
    load_prog(0, P0, p0);
    load_prog(1, P1, p1);
    load_prog(2, P2, p2);
    check(mem[P0 >> 3] == {p0[1], p0[0]}, "MemW wrote program 0");
    check(mem[(P2 >> 3) + 2] == {32'h0, p2[4]}, "MemW wrote program 2 tail");

    for (int c = 0; c < 3; c++) begin h_cpu_only(OP_SYNCI, c); mech[M_SYNCI]++; end
    h_hf(OP_SETMMU, 0, 64'h8000_0000_0000_0123); mech[M_SETMMU]++;
    h_cpu_only(OP_FLUSHTLB, 0); mech[M_FLUSHTLB]++;
    h_memr(0, P1, v);                         // also orders the requests above
    check(v == {p1[1], p1[0]}, "MemR reads program 1");
    check(g_core[0].core.satp == 64'h8000_0000_0000_0123, "SetMMU wrote satp");
    check(g_core[0].core.n_sfence == 1, "FlushTLB injected sfence.vma");
    check(g_core[2].core.n_fencei == 1, "SyncI injected fence.i");

    // registers, including scratch registers that must survive
    h_regw(0, 1, 64'h1111); h_regw(0, 2, 64'h2222); h_regw(0, 3, 64'h3333);
    h_regw(0, 5, 64'd0);
    h_regw(3, 9, 64'hFEED_F00D_1234_5678);
    h_regr(3, 9, v);
    check(v == 64'hFEED_F00D_1234_5678, "RegW/RegR round trip");
    h_regr(3, 0, v);
    check(v == 64'd0, "x0 reads zero");

    // page operations
    h_hf(OP_PAGES, 2, 64'd8); send_word(64'h5555_AAAA_0000_1111); mech[M_PAGES]++;
    h_memr(2, 64'h8000 + 8 * 37, v);
    check(v == 64'h5555_AAAA_0000_1111, "PageS value");
    begin
      int bad = 0;
      for (int i = 0; i < 512; i++) if (mem[(64'h8000 >> 3) + i] != 64'h5555_AAAA_0000_1111) bad++;
      check(bad == 0, "PageS filled the whole page");
    end
    send_byte(OP_PAGEW); send_byte(8'd3); send_word(64'd9);
    for (int i = 0; i < 512; i++) send_word(pat(i));
    mech[M_PAGEW]++;
    send_byte(OP_PAGECP); send_byte(8'd3); send_word(64'd9); send_word(64'd10); mech[M_PAGECP]++;
    send_byte(OP_PAGER); send_byte(8'd2); send_word(64'd10);
    begin
      int bad = 0, badm = 0;
      for (int i = 0; i < 512; i++) begin
        recv_word(v);
        if (v != pat(i)) bad++;
        if (mem[(64'h9000 >> 3) + i] != pat(i)) badm++;
      end
      check(bad == 0, "PageR returns the page written by PageW and copied by PageCP");
      check(badm == 0, "PageW wrote memory");
    end
    mech[M_PAGER]++;
    check(mem[(64'h8000 >> 3) + 511] == 64'h5555_AAAA_0000_1111, "PageS page untouched by later pages");
    h_regr(3, 9, v);
    check(v == 64'hFEED_F00D_1234_5678, "x9 survives the batched PageW / PageCP");

    // ---- run the three programs ----
    phase = 1;
    h_redirect(0, P0);
    h_redirect(1, P1);
    h_redirect(2, P2);
    h_regr(2, 5, v);                          // core 2 is running: nop mode
    check(v == '1, "request to a running core is answered in nop mode");
    mech[M_NOP] += (dut.u_ctrl.nop_count != 0);
    h_intr(2, 1'b1);
    while (!(exited[0] && exited[1] && exited[2])) serve_one();
    check(irq_seen == 1, "interrupt reported by Next");
    check(g_core[2].core.n_irq == 1, "core 2 took one interrupt");
    check(host_futex[0] == 1, "only the first futex wake reached the host");
    check(hf_filtered == 2, "two futex wakes filtered in hardware");
    mech[M_HF_FILTER] = int'(hf_filtered);
    h_regr(0, 5, v);  check(v == 64'd3, "program 0 loop count");
    h_regr(0, 1, v);  check(v == 64'h1111, "x1 preserved");
    h_regr(0, 2, v);  check(v == 64'h2222, "x2 preserved");
    h_regr(0, 3, v);  check(v == 64'h3333, "x3 preserved");
    h_regr(1, 10, v); check(v == 64'd1, "write syscall result delivered");
    h_regr(2, 5, v);  check(v == 64'd0, "program 2 ran to completion");

    // ---- HFCLR: the address is no longer filtered ----
    phase = 2;
    h_hf(OP_HFCLR, 0, FUTEX_ADDR); mech[M_HFCLR]++;
    exited[0] = 0; host_futex[0] = 0;
    h_regw(0, 5, 64'd0);
    h_redirect(0, P0);
    while (!exited[0]) serve_one();
    check(host_futex[0] == 3, "after HFCLR every futex wake reaches the host");

    // ---- HFCLRALL ----
    phase = 3;
    h_hf(OP_HFSET, 0, FUTEX_ADDR); mech[M_HFSET]++;
    h_hf(OP_HFSET, 0, FUTEX_ADDR + 8); mech[M_HFSET]++;
    h_cpu_only(OP_HFCLRALL, 0); mech[M_HFCLRALL]++;
    exited[0] = 0; host_futex[0] = 0;
    h_regw(0, 5, 64'd0);
    h_redirect(0, P0);
    while (!exited[0]) serve_one();
    check(host_futex[0] == 3, "after HFCLRALL every futex wake reaches the host");
    check(hf_filtered == 2, "no more filtering");

    h_utick(2, u0);
    check(u0 > 64'd500_000, "UTick counts the long U-mode run of core 2");
    h_utick(3, v);
    check(v == 64'd0, "core 3 never ran in U-mode");
    h_tick(t1);
    check(t1 > t0 + u0, "Tick grows");
    check(frame_err == 1'b0, "no framing error");
    check(rx_overflow == 0, "no RX buffer overflow");

    for (int m = 0; m < M_NUM; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("mechanism %-12s happened %0d times", me.name(), mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s exercised", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
