// tb_fase_cpu_select: random selections of one of four CPU ports; checks that
// only the selected core sees valid requests, that all cores see the request
// payload, and that the selected core's response comes back.
`timescale 1ns/1ps
module tb_fase_cpu_select;
  import fase_pkg::*;
  localparam int N = 4;
  logic en;
  logic [1:0] sel;
  port_req_t op_req;
  port_rsp_t op_rsp;
  port_req_t [N-1:0] cpu_req;
  port_rsp_t [N-1:0] cpu_rsp;
  int checks = 0, failures = 0;

  fase_cpu_select dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      en = ($urandom % 4) != 0;
      sel = 2'($urandom);
      op_req = '{inject_valid: 1'($urandom), inject_inst: $urandom, reg_valid: 1'($urandom),
                 reg_wen: 1'($urandom), reg_idx: 5'($urandom), reg_wdata: {$urandom, $urandom}};
      for (int i = 0; i < N; i++)
        cpu_rsp[i] = '{inject_ready: 1'($urandom), inject_busy: 1'($urandom),
                       reg_ready: 1'($urandom), reg_rdata: {$urandom, 32'(i)}};
      #1;
      for (int i = 0; i < N; i++) begin
        bit me;
        me = en && (sel == 2'(i));
        checks++;
        if (cpu_req[i].inject_valid != (me && op_req.inject_valid) ||
            cpu_req[i].reg_valid != (me && op_req.reg_valid) ||
            cpu_req[i].reg_idx != op_req.reg_idx || cpu_req[i].reg_wdata != op_req.reg_wdata ||
            cpu_req[i].inject_inst != op_req.inject_inst) begin
          failures++; $display("FAIL: request to core %0d", i);
        end
      end
      checks++;
      if (en ? (op_rsp != cpu_rsp[sel]) : (op_rsp != '0)) begin
        failures++; $display("FAIL: response en=%0d sel=%0d", en, sel);
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
