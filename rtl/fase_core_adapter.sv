// fase_core_adapter: the logic added inside a core to expose the FASE CPU
// interface (Priv, Reg, Inject and the optional Interrupt).
//
// It sits between the core's fetch unit, its instruction queue (IQ), its
// front-end request path and its register file, in the way the paper modifies
// the Rocket pipeline:
//  * Inject: a multiplexer in front of the IQ. While StopFetch is low the IQ is
//    fed by the fetch unit. While StopFetch is high the fetch unit is held
//    ("clutched", fetch_ready low) and the IQ is fed only from InjectInst.
//    Inject ready is given only when StopFetch is high and the whole pipeline
//    is empty, so exactly one injected instruction is in flight at a time.
//    InjectBusy is the inverse of pipeline-empty. Injected instructions are
//    tagged (iq_injected) so the core does not advance its fetch PC for them.
//  * Front-end gate: a front-end request marked as a reissue (replay) is
//    suppressed while StopFetch is high, because an injected instruction cannot
//    be fetched again; other front-end requests (such as the one mret makes)
//    pass, so fetch restarts at mepc once StopFetch drops.
//  * Reg: the register file's read port and write port are multiplexed. While
//    StopFetch is high and the pipeline is empty, a RegAccess takes the ports:
//    a read returns rf_rdata in the same cycle, a write is done in that cycle.
//    Otherwise the decode read index and the write-back go through unchanged.
//  * Priv is passed up from the CSR unit; Interrupt is passed down.
//
// Interface timing: reg_ready and inject_ready are combinational from the
// pipeline state; an access completes in the cycle valid and ready are both
// high. The list of signals and the IQ multiplexer, the gate and the register
// port multiplexers follow the paper's Rocket modification; the iq_injected tag
// and the same-cycle register read are this design's choices.
module fase_core_adapter
  import fase_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // FASE side
  input  cpu_req_t   fase_req,
  output cpu_rsp_t   fase_rsp,
  // pipeline side
  input  pipe_in_t   pipe_in,
  output pipe_out_t  pipe_out
);
  wire stop     = fase_req.stop_fetch;
  wire can_take = stop && pipe_in.pipe_empty;

  always_comb begin
    pipe_out = '0;
    // IQ multiplexer and fetch clutch
    pipe_out.fetch_ready = !stop && pipe_in.iq_ready;
    if (stop) begin
      pipe_out.iq_valid    = fase_req.port.inject_valid && can_take && pipe_in.iq_ready;
      pipe_out.iq_inst     = fase_req.port.inject_inst;
      pipe_out.iq_injected = 1'b1;
    end else begin
      pipe_out.iq_valid    = pipe_in.fetch_valid;
      pipe_out.iq_inst     = pipe_in.fetch_inst;
      pipe_out.iq_injected = 1'b0;
    end
    // front-end request gate
    pipe_out.fe_req_valid = pipe_in.fe_req_valid && !(stop && pipe_in.fe_req_reissue);
    // register file port multiplexers
    if (can_take && fase_req.port.reg_valid) begin
      pipe_out.rf_raddr = fase_req.port.reg_idx;
      pipe_out.rf_wen   = fase_req.port.reg_wen;
      pipe_out.rf_widx  = fase_req.port.reg_idx;
      pipe_out.rf_wdata = fase_req.port.reg_wdata;
    end else begin
      pipe_out.rf_raddr = pipe_in.dec_raddr;
      pipe_out.rf_wen   = pipe_in.wb_en;
      pipe_out.rf_widx  = pipe_in.wb_idx;
      pipe_out.rf_wdata = pipe_in.wb_data;
    end
    pipe_out.irq = fase_req.irq;
  end

  always_comb begin
    fase_rsp = '0;
    fase_rsp.priv              = pipe_in.priv;
    fase_rsp.port.inject_ready = can_take && pipe_in.iq_ready;
    fase_rsp.port.inject_busy  = !pipe_in.pipe_empty;
    fase_rsp.port.reg_ready    = can_take;
    fase_rsp.port.reg_rdata    = pipe_in.rf_rdata;
  end

  // While the interface owns the register ports the pipeline must not write back.
  a_no_wb_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (can_take && fase_req.port.reg_valid && fase_req.port.reg_wen) |-> !pipe_in.wb_en);
  // Nothing enters the IQ from the fetch unit while StopFetch is high.
  a_clutch: assert property (@(posedge clk) disable iff (!rst_n)
    stop |-> !(pipe_out.iq_valid && !pipe_out.iq_injected));
endmodule
