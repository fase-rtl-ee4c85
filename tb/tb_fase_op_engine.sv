// tb_fase_op_engine: tests the operation state machines on four core models.
//
// The engine is connected through fase_cpu_select to four fase_core_adapter /
// tb_rv_core pairs with a shared memory, to a fase_exc_queue, a
// fase_hfutex_mask and fase_perf_counters. The UART buffers are played by the
// bench (byte queues), so the engine can be started directly with the
// arguments of each request and its Resp Regs writes and streamed bytes can be
// checked. Page size is the default 512 words.
//
// Checked: RegW / RegR, MemW / MemR, PageS, PageW, PageCP, PageR against the
// memory, SetMMU (satp), FlushTLB and SyncI (instruction counts), Redirect and
// Next (cause, epc), the HFutex fast path (a futex wake on a masked address is
// completed inside the engine, a0 = 0, and Next reports the following exit
// call instead), a non-ecall exception, nop mode, Tick, UTick, Interrupt,
// preservation of the scratch registers x1..x3, and the cycle counts of the
// register access (1 cycle, plus one to start and one to finish), of one
// injection, of PageS and of the batched PageW (8 words per iteration), and
// that the batch registers x4..x17 are preserved. The
// paper quotes PageS as about 0.01 ms at 100 MHz (1000 cycles); the bench
// prints the measured count and checks it against this design's own formula.
`timescale 1ns/1ps
module tb_fase_op_engine;
  import fase_pkg::*;
  import tb_asm_pkg::*;

  localparam int N = 4, MW = 14, PW = 512, B = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // engine
  logic start = 0, nop_mode = 0, busy, done;
  logic [7:0] op = 0, arg_idx = 0;
  logic [1:0] arg_cpu = 0;
  logic [63:0] arg_a0 = 0, arg_a1 = 0;
  logic resp_we; logic [1:0] resp_widx; logic [63:0] resp_wdata;
  logic sel_en; logic [1:0] sel_cpu;
  port_req_t port_req; port_rsp_t port_rsp;
  logic exq_valid, exq_ready, release_valid; logic [1:0] exq_id, release_id;
  logic rx_empty, rx_pop, tx_full = 0, tx_push; logic [7:0] rx_data, tx_data;
  logic hf_set, hf_clr, hf_clrall, lk_hit; logic [1:0] hf_cpu, lk_cpu; logic [63:0] hf_addr, lk_addr;
  logic [63:0] tick; logic [N-1:0][63:0] utick;
  logic intr_we, intr_level; logic [1:0] intr_cpu;
  logic [31:0] hf_filtered;

  fase_op_engine dut (.*);

  port_req_t [N-1:0] creq; port_rsp_t [N-1:0] crsp;
  fase_cpu_select u_sel (.en(sel_en), .sel(sel_cpu), .op_req(port_req),
    .op_rsp(port_rsp), .cpu_req(creq), .cpu_rsp(crsp));

  logic [N-1:0][1:0] priv; logic [N-1:0] stop_fetch, user_mode;
  fase_exc_queue u_exq (.clk, .rst_n, .priv, .release_valid, .release_id,
    .stop_fetch, .deq_valid(exq_valid), .deq_id(exq_id), .deq_ready(exq_ready), .user_mode);
  fase_hfutex_mask u_hfm (.clk, .rst_n, .set_valid(hf_set), .clr_valid(hf_clr),
    .clrall_valid(hf_clrall), .upd_cpu(hf_cpu), .upd_addr(hf_addr), .lk_cpu, .lk_addr, .lk_hit);
  fase_perf_counters u_perf (.clk, .rst_n, .priv, .tick, .utick);

  logic [63:0] mem [1 << MW];
  pipe_in_t [N-1:0] pin; pipe_out_t [N-1:0] pout;
  logic [MW-1:0] f_addr [N], d_addr [N]; logic [63:0] d_wdata [N]; logic [N-1:0] d_we;
  cpu_req_t [N-1:0] fq; cpu_rsp_t [N-1:0] fr;
  logic [N-1:0] irq_line = '0;
  for (genvar i = 0; i < N; i++) begin : g_core
    assign fq[i] = '{stop_fetch: stop_fetch[i], irq: irq_line[i], port: creq[i]};
    assign crsp[i] = fr[i].port;
    assign priv[i] = fr[i].priv;
    fase_core_adapter u_adapt (.clk, .rst_n, .fase_req(fq[i]), .fase_rsp(fr[i]),
      .pipe_in(pin[i]), .pipe_out(pout[i]));
    tb_rv_core #(.MW(MW), .EX_LAT(2)) core (.clk, .rst_n, .pin(pin[i]), .pout(pout[i]),
      .f_addr(f_addr[i]), .f_rdata(mem[f_addr[i]]),
      .d_addr(d_addr[i]), .d_rdata(mem[d_addr[i]]), .d_we(d_we[i]), .d_wdata(d_wdata[i]));
  end
  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) if (d_we[i]) mem[d_addr[i]] <= d_wdata[i];
  always_ff @(posedge clk) if (intr_we) irq_line[intr_cpu] <= intr_level;

  // RX / TX buffers played by the bench
  logic [7:0] rxq [$], txq [$];
  // outputs of the bench's RX buffer change only at the falling edge
  always @(negedge clk) begin
    rx_empty = (rxq.size() == 0);
    rx_data  = rx_empty ? 8'h00 : rxq[0];
  end
  always @(posedge clk) begin
    if (rx_pop) void'(rxq.pop_front());
    if (tx_push) txq.push_back(tx_data);
  end
  logic [63:0] resp [4];
  always @(posedge clk) if (resp_we) resp[resp_widx] <= resp_wdata;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one request; returns the cycles from start to done
  task automatic run(input htp_op_e o, input int c, input logic [7:0] idx,
                     input logic [63:0] a0, input logic [63:0] a1, output int cyc);
    @(negedge clk);
    op = o; arg_cpu = 2'(c); arg_idx = idx; arg_a0 = a0; arg_a1 = a1; start = 1;
    nop_mode = htp_format(o).uses_port && !stop_fetch[c];   // as the main FSM decides
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic regw(input int c, input int r, input logic [63:0] v);
    int cy; run(OP_REGW, c, 8'(r), v, 0, cy);
  endtask
  task automatic regr(input int c, input int r, output logic [63:0] v);
    int cy; run(OP_REGR, c, 8'(r), 0, 0, cy); v = resp[0];
  endtask

  function automatic logic [63:0] pat(input int i);
    return {32'(i) ^ 32'h5A5A_0000, 32'h1234_0000 + 32'(i)};
  endfunction

  initial begin
    int cy, cy_inj, cy_reg, c;
    logic [63:0] v, x1s, x2s, x3s;
    for (int i = 0; i < (1 << MW); i++) mem[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);

    // register access
    run(OP_REGW, 1, 8'd5, 64'hDEAD_BEEF_0000_0005, 0, cy_reg);
    check(g_core[1].core.regs[5] == 64'hDEAD_BEEF_0000_0005, "RegW");
    check(cy_reg == 3, $sformatf("RegW takes %0d cycles, expected 3", cy_reg));
    regr(1, 5, v); check(v == 64'hDEAD_BEEF_0000_0005, "RegR");
    regw(1, 0, 64'h55); regr(1, 0, v); check(v == 0, "x0 stays zero");
    // scratch values that must survive every request
    regw(1, 1, 64'h1111); regw(1, 2, 64'h2222); regw(1, 3, 64'h3333);
    for (int r = 4; r <= 17; r++) if (r != 5) regw(1, r, 64'(r) * 64'h1_0001);

    // one injection: FlushTLB and SyncI
    run(OP_FLUSHTLB, 1, 0, 0, 0, cy_inj);
    check(g_core[1].core.n_sfence == 1, "FlushTLB runs sfence.vma");
    run(OP_SYNCI, 1, 0, 0, 0, cy);
    check(g_core[1].core.n_fencei == 1, "SyncI runs fence.i");
    check(cy == cy_inj, "SyncI and FlushTLB take the same time");
    $display("one injection: %0d cycles including the finishing cycle", cy_inj);
    run(OP_SETMMU, 1, 0, 64'h8000_1234_0000_0042, 0, cy);
    check(g_core[1].core.satp == 64'h8000_1234_0000_0042, "SetMMU writes satp");
    check(cy == 1 + 3 + (cy_inj - 2) + 1, $sformatf("SetMMU takes %0d cycles", cy));

    // memory words
    run(OP_MEMW, 1, 0, 64'h800, 64'hCAFE_F00D_1234_5678, cy);
    check(mem[64'h800 >> 3] == 64'hCAFE_F00D_1234_5678, "MemW");
    run(OP_MEMR, 0, 0, 64'h800, 0, cy);
    check(resp[0] == 64'hCAFE_F00D_1234_5678, "MemR on the other core");

    // pages
    run(OP_PAGES, 1, 0, 64'd2, 64'hABCD_0000_0000_0001, cy);
    begin
      int bad = 0;
      for (int i = 0; i < PW; i++) if (mem[(64'h2000 >> 3) + i] != 64'hABCD_0000_0000_0001) bad++;
      check(bad == 0, $sformatf("PageS wrote %0d wrong words", bad));
    end
    // PageS = start + 2 saves + 2 writes + PW * (2 injections + loop step)
    //         + 2 restores + end; one injection is cy_inj - 2 cycles
    check(cy == 1 + 4 + PW * (2 * (cy_inj - 2) + 1) + 2 + 1,
          $sformatf("PageS took %0d cycles", cy));
    $display("PageS of %0d words: %0d cycles (paper: about 1000 cycles at 100 MHz)", PW, cy);

    for (int i = 0; i < PW; i++) for (int b = 0; b < 8; b++) rxq.push_back(pat(i)[8*b +: 8]);
    run(OP_PAGEW, 1, 0, 64'd3, 0, cy);
    begin
      int bad = 0;
      for (int i = 0; i < PW; i++) if (mem[(64'h3000 >> 3) + i] != pat(i)) bad++;
      check(bad == 0 && rxq.size() == 0, $sformatf("PageW wrote %0d wrong words", bad));
    end
    // PageW, batched by B = BATCH: start + (1 + 2B) saves + write x1
    //   + PW/B * (B * (RECV step + 8 bytes + write + BLOOP) + B * (sd + BLOOP) + addi + LOOP)
    //   + (1 + 2B) restores + end
    check(cy == 1 + (1 + 2 * B) + 1
               + (PW / B) * (B * (1 + 8 + 1 + 1) + B * ((cy_inj - 2) + 1) + (cy_inj - 2) + 1)
               + (1 + 2 * B) + 1,
          $sformatf("PageW took %0d cycles", cy));
    $display("PageW of %0d words in batches of %0d: %0d cycles", PW, B, cy);
    run(OP_PAGECP, 0, 0, 64'd3, 64'd4, cy);
    begin
      int bad = 0;
      for (int i = 0; i < PW; i++) if (mem[(64'h4000 >> 3) + i] != pat(i)) bad++;
      check(bad == 0, $sformatf("PageCP copied %0d wrong words", bad));
    end
    txq.delete();
    tx_full = 0;
    fork
      run(OP_PAGER, 1, 0, 64'd4, 0, cy);
      // back-pressure from a full TX buffer now and then
      repeat (20000) begin @(negedge clk); tx_full = ($urandom % 4 == 0); end
    join_any
    disable fork;
    tx_full = 0;
    begin
      int bad = 0;
      check(txq.size() == 8 * PW, $sformatf("PageR sent %0d bytes", txq.size()));
      for (int i = 0; i < PW && txq.size() >= 8; i++) begin
        for (int b = 0; b < 8; b++) v[8*b +: 8] = txq.pop_front();
        if (v != pat(i)) bad++;
      end
      check(bad == 0, $sformatf("PageR returned %0d wrong words", bad));
    end

    regr(1, 1, x1s); regr(1, 2, x2s); regr(1, 3, x3s);
    check(x1s == 64'h1111 && x2s == 64'h2222 && x3s == 64'h3333, "scratch registers kept");
    begin
      int bad = 0;
      for (int r = 4; r <= 17; r++) if (r != 5) begin regr(1, r, v); if (v != 64'(r) * 64'h1_0001) bad++; end
      check(bad == 0, $sformatf("%0d batch registers x4..x17 changed", bad));
    end

    // program: futex wake on 0x5000, then exit(0), then an illegal instruction
    begin
      logic [31:0] p [$];
      p = '{a_addi(17, 0, 98), a_addi(11, 0, 1), a_lui(10, 20'h5), a_ecall(),
            a_addi(17, 0, 93), a_ecall(), 32'hFFFF_FFFF, a_jself()};
      for (int i = 0; i < p.size(); i += 2) run(OP_MEMW, 1, 0, 64'h1000 + 64'(4 * i), {p[i + 1], p[i]}, cy);
    end
    run(OP_HFSET, 1, 0, 64'h5000, 0, cy);
    run(OP_REDIRECT, 1, 0, 64'h1000, 0, cy);
    check(!stop_fetch[1] && priv[1] == PRIV_U, "Redirect enters U-mode and releases fetch");
    run(OP_NEXT, 0, 0, 0, 0, cy);
    check(resp[0] == 1 && resp[1] == 64'd8 && resp[2] == 64'h1014,
          $sformatf("Next after filtered futex: cpu %0d cause %0d epc %h", resp[0], resp[1], resp[2]));
    check(hf_filtered == 1, "futex wake completed in the engine");
    regr(1, 10, v); check(v == 0, "filtered futex returns 0 in a0");
    regr(1, 1, v); check(v == 64'h1111, "x1 kept across Next and fast return");
    // host handles exit by resuming after it, next is the illegal instruction
    run(OP_REDIRECT, 1, 0, 64'h1018, 0, cy);
    run(OP_NEXT, 0, 0, 0, 0, cy);
    check(resp[0] == 1 && resp[1] == 64'd2 && resp[2] == 64'h1018, "illegal instruction reported");
    check(hf_filtered == 1, "no filtering for other causes");

    // same futex without the mask reaches the host
    run(OP_HFCLR, 1, 0, 64'h5000, 0, cy);
    run(OP_REDIRECT, 1, 0, 64'h1000, 0, cy);
    run(OP_NEXT, 0, 0, 0, 0, cy);
    check(resp[1] == 64'd8 && resp[2] == 64'h100C, "unmasked futex goes to host");
    check(hf_filtered == 1, "no filtering after HFClr");

    // nop mode: core 1 is running after a Redirect to a spin loop
    run(OP_REDIRECT, 1, 0, 64'h101C, 0, cy);
    repeat (50) @(posedge clk);
    regr(1, 5, v);
    check(v == '1, "RegR to a running core returns all ones (nop mode)");
    check(g_core[1].core.regs[5] == 64'hDEAD_BEEF_0000_0005, "nop mode leaves registers alone");
    run(OP_UTICK, 1, 0, 0, 0, cy);
    check(resp[0] > 50 && resp[0] <= utick[1], $sformatf("UTick counts U-mode cycles: %0d now %0d", resp[0], utick[1]));
    run(OP_TICK, 0, 0, 0, 0, cy);
    check(resp[0] > 0 && resp[0] < tick, "Tick");
    // interrupt brings the spinning core back
    run(OP_INTR, 1, 8'd1, 0, 0, cy);
    run(OP_NEXT, 0, 0, 0, 0, cy);
    check(resp[0] == 1 && resp[1] == 64'h8000_0000_0000_000B, "interrupt reported by Next");
    run(OP_INTR, 1, 8'd0, 0, 0, cy);
    check(irq_line == 0, "interrupt line lowered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
