// tb_asm_pkg: RV64 instruction encoders for the test programs of the
// testbenches (user-mode code run by the core models).
package tb_asm_pkg;
  function automatic logic [31:0] a_addi(input logic [4:0] rd, input logic [4:0] rs1,
                                         input logic [11:0] imm);
    return {imm, rs1, 3'b000, rd, 7'b0010011};
  endfunction
  function automatic logic [31:0] a_lui(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] a_bne(input logic [4:0] rs1, input logic [4:0] rs2,
                                        input logic [12:0] off);
    return {off[12], off[10:5], rs2, rs1, 3'b001, off[4:1], off[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] a_ecall();
    return 32'h0000_0073;
  endfunction
  function automatic logic [31:0] a_jself();
    return 32'h0000_006F;   // jal x0, 0
  endfunction
endpackage
