// vec_pkg: constants and types shared by the vector engine.
//
// The engine follows the basic configuration of the evaluated processor:
// 32 vector registers of 512 bits, holding 16 fp32 elements each, executed
// by 16 parallel lanes. Scalar operands arrive from an RV64 scalar core, so
// they are 64 bits wide. The instruction encodings are those of the RISC-V
// vector extension; the funct6 value chosen for vindexmac.vx is this
// design's own choice (the instruction only has to use the standard .vx
// format, which it does).
package vec_pkg;

  localparam int unsigned NREGS = 32;   // architectural vector registers
  localparam int unsigned VLEN  = 512;  // bits per vector register
  localparam int unsigned ELEN  = 32;   // fp32 elements
  localparam int unsigned XLEN  = 64;   // scalar operand width (RV64)
  localparam int unsigned ABITS = 64;   // byte address width of the L2 port

  // Major opcodes
  localparam logic [6:0] OPC_OPV     = 7'b1010111;
  localparam logic [6:0] OPC_LOADFP  = 7'b0000111;
  localparam logic [6:0] OPC_STOREFP = 7'b0100111;

  // OP-V funct3 categories
  localparam logic [2:0] F3_OPIVV = 3'b000;
  localparam logic [2:0] F3_OPFVV = 3'b001;
  localparam logic [2:0] F3_OPIVI = 3'b011;
  localparam logic [2:0] F3_OPIVX = 3'b100;
  localparam logic [2:0] F3_OPFVF = 3'b101;
  localparam logic [2:0] F3_OPCFG = 3'b111;

  // funct6 values
  localparam logic [5:0] F6_VFMACC    = 6'b101100;
  localparam logic [5:0] F6_VSLIDEDN  = 6'b001111;
  localparam logic [5:0] F6_VRGATHER  = 6'b001100;
  localparam logic [5:0] F6_VMV       = 6'b010111;
  localparam logic [5:0] F6_VINDEXMAC = 6'b111111;  // unused OPIVX slot

  localparam logic [2:0] WIDTH_E32 = 3'b110;

  typedef enum logic [3:0] {
    OP_ILLEGAL,
    OP_VSETVL,      // vsetvli / vsetivli: set vl
    OP_VLE32,       // unit-stride load
    OP_VSE32,       // unit-stride store
    OP_VFMACC_VV,   // vd[i] += vs1[i] * vs2[i]
    OP_VFMACC_VF,   // vd[i] += f[rs1] * vs2[i]
    OP_VINDEXMAC,   // vd[i] += vs2[0] * vrf[rs[4:0]][i]
    OP_VSLIDEDOWN,  // vd[i] = vs2[i + off]
    OP_VMV,         // vd[i] = scalar or immediate
    OP_VRGATHER     // vd[i] = vs2[x[rs1]] or vs2[uimm], 0 if out of range
  } vop_e;

  // A vector instruction as the scalar core hands it over
  typedef struct packed {
    logic [31:0]     insn;
    logic [XLEN-1:0] rs1_val;  // value of x[rs1] or f[rs1]
  } vreq_t;

  // Decoded instruction
  typedef struct packed {
    vop_e            op;
    logic [4:0]      vd;       // destination, or vs3 for stores
    logic [4:0]      vs1;
    logic [4:0]      vs2;
    logic            idx_sel;  // 1: VRF read port A is addressed by rs[4:0]
    logic            use_imm;  // operand comes from the 5-bit immediate
    logic [4:0]      imm;
    logic            avl_max;  // vsetvli with rs1 = x0 and rd != x0
    logic [XLEN-1:0] scalar;
  } vdec_t;

endpackage
