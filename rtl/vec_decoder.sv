// vec_decoder: decodes the vector instructions used by the sparse kernels.
//
// Input is a 32-bit RISC-V instruction plus the scalar operand value the
// scalar core sent with it; output is a vdec_t. Supported, all unmasked
// (vm = 1) and for 32-bit elements:
//   vsetvli rd, rs1, vtypei / vsetivli rd, uimm, vtypei   set vl
//   vle32.v vd, (rs1)          unit-stride load       LOAD-FP, width 110
//   vse32.v vs3, (rs1)         unit-stride store      STORE-FP, width 110
//   vfmacc.vv vd, vs1, vs2     OPFVV  funct6 101100
//   vfmacc.vf vd, rs1, vs2     OPFVF  funct6 101100
//   vslidedown.vx/.vi          OPIVX/OPIVI funct6 001111
//   vmv.v.x / vmv.v.i          OPIVX/OPIVI funct6 010111, vs2 = 0
//   vrgather.vx / .vi          OPIVX/OPIVI funct6 001100
//   vindexmac.vx vd, vs2, rs   OPIVX  funct6 111111
// vindexmac uses the standard .vx format: vd in [11:7], vs2 in [24:20] and
// the scalar register in [19:15]. It sets idx_sel so that VRF read port A
// is addressed by rs[4:0] instead of the vs1 field. Anything else, masked
// forms included, decodes as OP_ILLEGAL. Combinational.
//
// The vindexmac format (.vx) and semantics are the paper's; its funct6,
// and the restriction to this subset, are this design's choices.
// vrgather is decoded for the standard-ISA baseline kernel the paper
// compares against.
module vec_decoder
  import vec_pkg::*;
(
  input  vreq_t req,
  output vdec_t dec
);

  logic [31:0] in;
  logic [5:0]  f6;
  logic [2:0]  f3;
  logic        vm;

  always_comb begin
    in = req.insn;
    f6 = in[31:26];
    f3 = in[14:12];
    vm = in[25];

    dec         = '0;
    dec.op      = OP_ILLEGAL;
    dec.vd      = in[11:7];
    dec.vs1     = in[19:15];
    dec.vs2     = in[24:20];
    dec.imm     = in[19:15];
    dec.scalar  = req.rs1_val;

    unique case (in[6:0])
      OPC_LOADFP: begin
        if (f3 == WIDTH_E32 && in[31:29] == 3'b000 && in[28] == 1'b0 &&
            in[27:26] == 2'b00 && vm && in[24:20] == 5'd0)
          dec.op = OP_VLE32;
      end
      OPC_STOREFP: begin
        if (f3 == WIDTH_E32 && in[31:29] == 3'b000 && in[28] == 1'b0 &&
            in[27:26] == 2'b00 && vm && in[24:20] == 5'd0)
          dec.op = OP_VSE32;
      end
      OPC_OPV: begin
        unique case (f3)
          F3_OPCFG: begin
            if (in[31] == 1'b0) begin                // vsetvli
              dec.op      = OP_VSETVL;
              dec.avl_max = (in[19:15] == 5'd0) && (in[11:7] != 5'd0);
            end else if (in[31:30] == 2'b11) begin   // vsetivli
              dec.op      = OP_VSETVL;
              dec.use_imm = 1'b1;
            end
          end
          F3_OPFVV: if (f6 == F6_VFMACC && vm) dec.op = OP_VFMACC_VV;
          F3_OPFVF: if (f6 == F6_VFMACC && vm) dec.op = OP_VFMACC_VF;
          F3_OPIVX: begin
            if (vm) begin
              unique case (f6)
                F6_VINDEXMAC: begin
                  dec.op      = OP_VINDEXMAC;
                  dec.idx_sel = 1'b1;
                end
                F6_VSLIDEDN:  dec.op = OP_VSLIDEDOWN;
                F6_VRGATHER:  dec.op = OP_VRGATHER;
                F6_VMV:       if (in[24:20] == 5'd0) dec.op = OP_VMV;
                default: ;
              endcase
            end
          end
          F3_OPIVI: begin
            if (vm) begin
              unique case (f6)
                F6_VSLIDEDN: begin
                  dec.op      = OP_VSLIDEDOWN;
                  dec.use_imm = 1'b1;
                end
                F6_VRGATHER: begin
                  dec.op      = OP_VRGATHER;
                  dec.use_imm = 1'b1;
                end
                F6_VMV: begin
                  if (in[24:20] == 5'd0) begin
                    dec.op      = OP_VMV;
                    dec.use_imm = 1'b1;
                  end
                end
                default: ;
              endcase
            end
          end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

endmodule
