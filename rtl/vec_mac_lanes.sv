// vec_mac_lanes: the vector multiply-accumulate lanes.
//
// LANES = VLEN/32 lanes, one fp32 fused multiply-add each, so a whole
// 512-bit register (16 elements) is processed in one pass. Every lane
// computes an accumulate plus a product, where the multiplier operand depends on
// the mode:
//   MAC_VV  (vfmacc.vv)    res[i] = acc[i] + va[i]    * vb[i]
//   MAC_VF  (vfmacc.vf)    res[i] = acc[i] + scalar   * vb[i]
//   MAC_IDX (vindexmac.vx) res[i] = acc[i] + vb[0]    * va[i]
// va comes from VRF read port A (vs1, or the register picked by rs for
// vindexmac), vb from port B (vs2) and acc from port C (vd). For vindexmac
// element 0 of vs2 is broadcast to all lanes and plays the role of the
// scalar, as the instruction definition requires.
// Combinational; the engine writes the result back at the next clock edge.
//
// The lane count and vindexmac's operand roles follow the paper; the
// combinational single-pass organisation is this design's choice.
module vec_mac_lanes #(
  parameter int unsigned VLEN = vec_pkg::VLEN,
  localparam int unsigned LANES = VLEN / 32
) (
  input  logic [1:0]      mode,     // 0: VV, 1: VF, 2: IDX
  input  logic [VLEN-1:0] va,
  input  logic [VLEN-1:0] vb,
  input  logic [VLEN-1:0] acc,
  input  logic [31:0]     scalar,
  output logic [VLEN-1:0] res
);

  localparam logic [1:0] MAC_VV  = 2'd0;
  localparam logic [1:0] MAC_VF  = 2'd1;
  localparam logic [1:0] MAC_IDX = 2'd2;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [31:0] m1, m2;
    always_comb begin
      unique case (mode)
        MAC_VF:  begin m1 = scalar;       m2 = vb[i*32 +: 32]; end
        MAC_IDX: begin m1 = vb[31:0];     m2 = va[i*32 +: 32]; end
        MAC_VV:  begin m1 = va[i*32 +: 32]; m2 = vb[i*32 +: 32]; end
        default: begin m1 = va[i*32 +: 32]; m2 = vb[i*32 +: 32]; end
      endcase
    end
    fp32_fma u_fma (.a(m1), .b(m2), .c(acc[i*32 +: 32]), .y(res[i*32 +: 32]));
  end

endmodule
