// tb_rvv_pkg: instruction encoders for the testbenches.
//
// Each function returns the 32-bit RISC-V encoding of one vector
// instruction, built from the standard field layout (funct6 | vm | vs2 |
// vs1/rs1/imm | funct3 | vd | opcode for OP-V; nf | mew | mop | vm | lumop |
// rs1 | width | vd | opcode for loads and stores). vindexmac.vx uses the
// OPIVX format with funct6 = 111111, the slot this design gives it.
package tb_rvv_pkg;

  function automatic logic [31:0] opv(input logic [5:0] f6, input logic [4:0] vs2,
                                      input logic [4:0] s1, input logic [2:0] f3,
                                      input logic [4:0] vd);
    return {f6, 1'b1, vs2, s1, f3, vd, 7'b1010111};
  endfunction

  function automatic logic [31:0] enc_vle32(input logic [4:0] vd, input logic [4:0] rs1);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, rs1, 3'b110, vd, 7'b0000111};
  endfunction
  function automatic logic [31:0] enc_vse32(input logic [4:0] vs3, input logic [4:0] rs1);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, rs1, 3'b110, vs3, 7'b0100111};
  endfunction
  function automatic logic [31:0] enc_vfmacc_vv(input logic [4:0] vd, vs1, vs2);
    return opv(6'b101100, vs2, vs1, 3'b001, vd);
  endfunction
  function automatic logic [31:0] enc_vfmacc_vf(input logic [4:0] vd, rs1, vs2);
    return opv(6'b101100, vs2, rs1, 3'b101, vd);
  endfunction
  function automatic logic [31:0] enc_vindexmac(input logic [4:0] vd, vs2, rs);
    return opv(6'b111111, vs2, rs, 3'b100, vd);
  endfunction
  function automatic logic [31:0] enc_vslidedown_vi(input logic [4:0] vd, vs2, imm);
    return opv(6'b001111, vs2, imm, 3'b011, vd);
  endfunction
  function automatic logic [31:0] enc_vslidedown_vx(input logic [4:0] vd, vs2, rs1);
    return opv(6'b001111, vs2, rs1, 3'b100, vd);
  endfunction
  function automatic logic [31:0] enc_vrgather_vx(input logic [4:0] vd, vs2, rs1);
    return opv(6'b001100, vs2, rs1, 3'b100, vd);
  endfunction
  function automatic logic [31:0] enc_vrgather_vi(input logic [4:0] vd, vs2, imm);
    return opv(6'b001100, vs2, imm, 3'b011, vd);
  endfunction
  function automatic logic [31:0] enc_vmv_vi(input logic [4:0] vd, imm);
    return opv(6'b010111, 5'd0, imm, 3'b011, vd);
  endfunction
  function automatic logic [31:0] enc_vmv_vx(input logic [4:0] vd, rs1);
    return opv(6'b010111, 5'd0, rs1, 3'b100, vd);
  endfunction
  // vtype e32, m1: vsew = 010 in bits [5:3]
  function automatic logic [31:0] enc_vsetvli(input logic [4:0] rd, rs1);
    return {1'b0, 11'b000_0001_0000, rs1, 3'b111, rd, 7'b1010111};
  endfunction
  function automatic logic [31:0] enc_vsetivli(input logic [4:0] rd, uimm);
    return {2'b11, 10'b00_0001_0000, uimm, 3'b111, rd, 7'b1010111};
  endfunction

endpackage
