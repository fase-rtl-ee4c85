// fase_cpu_select: the CPU Select of the FASE controller.
//
// The operation state machines own a single CPU port (register access and
// instruction injection). This block steers that port to the core named by
// sel: the selected core sees the requests, all others see valid low, and the
// responses of the selected core are returned. When en is low no core is
// addressed. The payload fields (register index, write data, instruction) go
// to every core unchanged, so most output bits are wires from op_req; only the
// valid bits are steered. Purely combinational. Only the name and position of the block are
// in the paper; a plain multiplexer/demultiplexer is this design's choice.
module fase_cpu_select
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU = 4,
  parameter int unsigned IDW   = (N_CPU > 1) ? $clog2(N_CPU) : 1
) (
  input  logic                  en,
  input  logic [IDW-1:0]        sel,
  input  port_req_t             op_req,
  output port_rsp_t             op_rsp,
  output port_req_t [N_CPU-1:0] cpu_req,
  input  port_rsp_t [N_CPU-1:0] cpu_rsp
);
  always_comb begin
    op_rsp = '0;
    for (int i = 0; i < N_CPU; i++) begin
      cpu_req[i] = op_req;
      if (!(en && sel == IDW'(i))) begin
        cpu_req[i].inject_valid = 1'b0;
        cpu_req[i].reg_valid    = 1'b0;
      end else begin
        op_rsp = cpu_rsp[i];
      end
    end
  end
endmodule
