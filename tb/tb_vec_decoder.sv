// tb_vec_decoder: self-checking test of the instruction decoder.
//
// Encodes every supported instruction with random register fields (using
// tb_rvv_pkg, i.e. the standard RISC-V layouts) and checks the decoded
// operation, register numbers, immediate, scalar and the port-A select
// (set only for vindexmac). Masked forms, other element widths, other
// funct6 values and other opcodes must decode as illegal.
module tb_vec_decoder;
  import vec_pkg::*;
  import tb_rvv_pkg::*;
  vreq_t req;
  vdec_t dec;
  int checks = 0, failures = 0;

  vec_decoder dut (.req, .dec);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_op(input logic [31:0] insn, input vop_e op, input logic [4:0] vd,
                           input logic [4:0] vs1, input logic [4:0] vs2, input logic idx,
                           input logic imm_sel);
    req.insn = insn;
    req.rs1_val = {$urandom, $urandom};
    #1;
    checks++;
    if (dec.op !== op || dec.vd !== vd || dec.vs1 !== vs1 || dec.vs2 !== vs2 ||
        dec.idx_sel !== idx || dec.use_imm !== imm_sel || dec.scalar !== req.rs1_val) begin
      failures++;
      if (failures < 10)
        $display("FAIL insn %h: op %s vd %0d vs1 %0d vs2 %0d idx %0d imm %0d, expected %s",
                 insn, dec.op.name(), dec.vd, dec.vs1, dec.vs2, dec.idx_sel, dec.use_imm, op.name());
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [4:0] d, s1, s2;
      d = 5'($urandom); s1 = 5'($urandom); s2 = 5'($urandom);
      expect_op(enc_vle32(d, s1),          OP_VLE32,      d, s1, 5'd0, 1'b0, 1'b0);
      expect_op(enc_vse32(d, s1),          OP_VSE32,      d, s1, 5'd0, 1'b0, 1'b0);
      expect_op(enc_vfmacc_vv(d, s1, s2),  OP_VFMACC_VV,  d, s1, s2, 1'b0, 1'b0);
      expect_op(enc_vfmacc_vf(d, s1, s2),  OP_VFMACC_VF,  d, s1, s2, 1'b0, 1'b0);
      expect_op(enc_vindexmac(d, s2, s1),  OP_VINDEXMAC,  d, s1, s2, 1'b1, 1'b0);
      expect_op(enc_vslidedown_vi(d, s2, s1), OP_VSLIDEDOWN, d, s1, s2, 1'b0, 1'b1);
      expect_op(enc_vslidedown_vx(d, s2, s1), OP_VSLIDEDOWN, d, s1, s2, 1'b0, 1'b0);
      expect_op(enc_vrgather_vx(d, s2, s1), OP_VRGATHER, d, s1, s2, 1'b0, 1'b0);
      expect_op(enc_vrgather_vi(d, s2, s1), OP_VRGATHER, d, s1, s2, 1'b0, 1'b1);
      expect_op(enc_vmv_vi(d, s1),         OP_VMV,        d, s1, 5'd0, 1'b0, 1'b1);
      expect_op(enc_vmv_vx(d, s1),         OP_VMV,        d, s1, 5'd0, 1'b0, 1'b0);
      expect_op(enc_vsetvli(d, s1),        OP_VSETVL,     d, s1, 5'(enc_vsetvli(d, s1) >> 20), 1'b0, 1'b0);
      checks++;
      if (dec.avl_max !== (s1 == 5'd0 && d != 5'd0)) failures++;
      expect_op(enc_vsetivli(d, s1),       OP_VSETVL,     d, s1, 5'(enc_vsetivli(d, s1) >> 20), 1'b0, 1'b1);
      // illegal: masked forms, e8 loads, unknown funct6, other opcode
      expect_op(enc_vindexmac(d, s2, s1) & ~32'h0200_0000, OP_ILLEGAL, d, s1, s2, 1'b0, 1'b0);
      expect_op(enc_vfmacc_vv(d, s1, s2) & ~32'h0200_0000, OP_ILLEGAL, d, s1, s2, 1'b0, 1'b0);
      expect_op(enc_vle32(d, s1) & ~32'h0000_6000,         OP_ILLEGAL, d, s1, 5'd0, 1'b0, 1'b0);
      expect_op({6'b000000, 1'b1, s2, s1, 3'b100, d, 7'b1010111}, OP_ILLEGAL, d, s1, s2, 1'b0, 1'b0);
      expect_op({6'b111111, 1'b1, s2, s1, 3'b000, d, 7'b0110011}, OP_ILLEGAL, d, s1, s2, 1'b0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
