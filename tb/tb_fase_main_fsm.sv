// tb_fase_main_fsm: byte-level test of the main state machine.
//
// The bench plays the RX / TX buffers and a simple operation engine: when the
// main FSM starts it, the fake engine records the parsed request, waits a
// random time, writes Resp Regs words derived from the arguments and signals
// done. Random requests of every opcode, with random CPU ids (some out of
// range), random stopped flags, stray non-opcode bytes and TX back-pressure,
// are checked for: the parsed opcode, CPU, index and argument words, the nop
// decision, and the exact response bytes (0, 1 or 4 little-endian words).
// The request format is written out here independently of the package.
`timescale 1ns/1ps
module tb_fase_main_fsm;
  import fase_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx_empty = 1, rx_pop, tx_full = 0, tx_push, eng_start, eng_nop, eng_done = 0;
  logic [7:0] rx_data = 0, tx_data, eng_op, eng_idx;
  logic [N-1:0] stopped;
  logic [1:0] eng_cpu;
  logic [63:0] eng_a0, eng_a1;
  logic resp_we = 0; logic [1:0] resp_widx = 0; logic [63:0] resp_wdata = 0;
  logic idle; logic [31:0] req_count, nop_count;
  int checks = 0, failures = 0;

  fase_main_fsm dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // request format: {has cpu, has index, argument words, uses CPU port, response words}
  typedef struct { bit c; bit i; int w; bit p; int r; } fmt_t;
  function automatic fmt_t f_of(input int o);
    case (o)
      1: return '{1,0,1,1,0}; 2: return '{0,0,0,0,4}; 3: return '{1,0,1,1,0};
      4: return '{1,0,0,1,0}; 5: return '{1,0,0,1,0}; 6: return '{1,0,1,0,0};
      7: return '{1,0,1,0,0}; 8: return '{1,0,0,0,0}; 9: return '{1,1,0,1,1};
      10: return '{1,1,1,1,0}; 11: return '{1,0,1,1,1}; 12: return '{1,0,2,1,0};
      13: return '{1,0,2,1,0}; 14: return '{1,0,2,1,0}; 15: return '{1,0,1,1,0};
      16: return '{1,0,1,1,0}; 17: return '{0,0,0,0,1}; 18: return '{1,0,0,0,1};
      default: return '{1,1,0,0,0};   // 19, Interrupt
    endcase
  endfunction

  // RX buffer
  logic [7:0] rxq [$], txq [$];
  always @(negedge clk) begin
    rx_empty = (rxq.size() == 0);
    rx_data  = rx_empty ? 8'h00 : rxq[0];
    tx_full  = ($urandom % 5 == 0);
  end
  always @(posedge clk) begin
    if (rx_pop && !rx_empty) void'(rxq.pop_front());
    if (tx_push) begin
      check(!tx_full, "push into a full TX buffer");
      txq.push_back(tx_data);
    end
  end

  // fake engine
  typedef struct { int op; int cpu; int idx; logic [63:0] a0, a1; bit nop; } req_t;
  req_t got [$];
  initial begin
    forever begin
      @(posedge clk);
      if (eng_start) begin
        req_t r;
        r.op = eng_op; r.cpu = eng_cpu; r.idx = eng_idx; r.a0 = eng_a0; r.a1 = eng_a1; r.nop = eng_nop;
        got.push_back(r);
        repeat ($urandom % 6) @(posedge clk);
        for (int k = 0; k < 4; k++) begin
          @(negedge clk);
          resp_we = 1; resp_widx = 2'(k); resp_wdata = eng_a0 ^ {32'(k), 24'(eng_op), eng_idx};
        end
        @(negedge clk); resp_we = 0; eng_done = 1;
        @(negedge clk); eng_done = 0;
      end
    end
  end

  initial begin
    int n_nop = 0, n_req = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int o, c, idx, exp_nop;
      logic [63:0] a0, a1;
      fmt_t f;
      req_t r;
      stopped = 4'($urandom);
      o = 1 + $urandom % 19;
      f = f_of(o);
      c = ($urandom % 8 == 0) ? 4 + $urandom % 4 : $urandom % 4;
      idx = $urandom % 32;
      a0 = {$urandom, $urandom}; a1 = {$urandom, $urandom};
      if (!f.c) c = 0;
      if (!f.i) idx = 0;
      if (f.w < 1) a0 = 0;
      if (f.w < 2) a1 = 0;
      if ($urandom % 10 == 0) rxq.push_back(8'h80 + 8'($urandom % 64));   // stray byte
      rxq.push_back(8'(o));
      if (f.c) rxq.push_back(8'(c));
      if (f.i) rxq.push_back(8'(idx));
      for (int b = 0; b < 8 * f.w; b++) rxq.push_back((b < 8) ? a0[8*b +: 8] : a1[8*(b-8) +: 8]);
      exp_nop = f.c && (c >= N || (f.p && !stopped[c % N]));
      // wait for the request and its response bytes
      while (got.size() == 0) @(posedge clk);
      r = got.pop_front();
      n_req++;
      check(r.op == o && (!f.c || r.cpu == c % N) && (!f.i || r.idx == idx) &&
            (f.w < 1 || r.a0 == a0) && (f.w < 2 || r.a1 == a1),
            $sformatf("request %0d parsed wrongly", o));
      check(r.nop == exp_nop, $sformatf("nop decision op %0d cpu %0d", o, c));
      if (exp_nop) n_nop++;
      repeat (8 * f.r * 3 + 20) @(posedge clk);
      check(txq.size() == 8 * f.r, $sformatf("op %0d sent %0d bytes", o, txq.size()));
      for (int k = 0; k < f.r && txq.size() >= 8; k++) begin
        logic [63:0] w;
        for (int b = 0; b < 8; b++) w[8*b +: 8] = txq.pop_front();
        check(w == (r.a0 ^ {32'(k), 24'(o), 8'(r.idx)}), $sformatf("response word %0d of op %0d", k, o));
      end
      txq.delete();
      check(idle, "idle after the request");
    end
    check(req_count == 32'(n_req) && nop_count == 32'(n_nop) && n_nop > 20, "request / nop counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
