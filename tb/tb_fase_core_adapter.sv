// tb_fase_core_adapter: random stimulus on both sides of the adapter, compared
// with the rules of the modified pipeline written out independently here:
//  * StopFetch low: the IQ takes the fetch unit, injects are refused, the
//    register ports belong to the pipeline.
//  * StopFetch high: fetch is held, Inject and Reg are ready only when the
//    pipeline is empty, an injected instruction enters the IQ tagged, a reissue
//    front-end request is gated off, and a RegAccess takes the register ports.
`timescale 1ns/1ps
module tb_fase_core_adapter;
  import fase_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cpu_req_t fase_req; cpu_rsp_t fase_rsp;
  pipe_in_t pipe_in;  pipe_out_t pipe_out;
  int checks = 0, failures = 0;

  fase_core_adapter dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n_inj = 0, n_reg = 0, n_gate = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      bit stop, empty, take;
      @(negedge clk);
      stop  = 1'($urandom);
      empty = ($urandom % 3) != 0;
      fase_req.stop_fetch = stop;
      fase_req.irq        = 1'($urandom);
      fase_req.port.inject_valid = 1'($urandom);
      fase_req.port.inject_inst  = $urandom;
      fase_req.port.reg_valid    = 1'($urandom);
      fase_req.port.reg_wen      = 1'($urandom);
      fase_req.port.reg_idx      = 5'($urandom);
      fase_req.port.reg_wdata    = {$urandom, $urandom};
      pipe_in.fetch_valid    = 1'($urandom);
      pipe_in.fetch_inst     = $urandom;
      pipe_in.iq_ready       = empty ? 1'b1 : 1'($urandom);
      pipe_in.pipe_empty     = empty;
      pipe_in.fe_req_valid   = 1'($urandom);
      pipe_in.fe_req_reissue = 1'($urandom);
      pipe_in.dec_raddr      = 5'($urandom);
      // the pipeline does not write back while it is empty
      pipe_in.wb_en          = empty ? 1'b0 : 1'($urandom);
      pipe_in.wb_idx         = 5'($urandom);
      pipe_in.wb_data        = {$urandom, $urandom};
      pipe_in.rf_rdata       = {$urandom, $urandom};
      pipe_in.priv           = ($urandom % 2) ? PRIV_U : PRIV_M;
      #1;
      take = stop && empty;
      check(fase_rsp.priv == pipe_in.priv && pipe_out.irq == fase_req.irq, "priv / irq pass");
      check(fase_rsp.port.inject_busy == !empty, "InjectBusy");
      check(fase_rsp.port.inject_ready == (take && pipe_in.iq_ready), "Inject ready");
      check(fase_rsp.port.reg_ready == take, "Reg ready");
      check(fase_rsp.port.reg_rdata == pipe_in.rf_rdata, "Reg read data");
      check(pipe_out.fetch_ready == (!stop && pipe_in.iq_ready), "fetch clutch");
      if (!stop)
        check(pipe_out.iq_valid == pipe_in.fetch_valid && pipe_out.iq_inst == pipe_in.fetch_inst
              && !pipe_out.iq_injected, "IQ from fetch");
      else begin
        check(pipe_out.iq_valid == (fase_req.port.inject_valid && take && pipe_in.iq_ready)
              && pipe_out.iq_inst == fase_req.port.inject_inst && pipe_out.iq_injected, "IQ from inject");
        if (pipe_out.iq_valid) n_inj++;
      end
      check(pipe_out.fe_req_valid == (pipe_in.fe_req_valid && !(stop && pipe_in.fe_req_reissue)),
            "front-end gate");
      if (pipe_in.fe_req_valid && stop && pipe_in.fe_req_reissue) n_gate++;
      if (take && fase_req.port.reg_valid) begin
        n_reg++;
        check(pipe_out.rf_raddr == fase_req.port.reg_idx && pipe_out.rf_widx == fase_req.port.reg_idx
              && pipe_out.rf_wen == fase_req.port.reg_wen && pipe_out.rf_wdata == fase_req.port.reg_wdata,
              "register ports taken by RegAccess");
      end else
        check(pipe_out.rf_raddr == pipe_in.dec_raddr && pipe_out.rf_widx == pipe_in.wb_idx
              && pipe_out.rf_wen == pipe_in.wb_en && pipe_out.rf_wdata == pipe_in.wb_data,
              "register ports belong to the pipeline");
    end
    check(n_inj > 100 && n_reg > 100 && n_gate > 100, "all paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
