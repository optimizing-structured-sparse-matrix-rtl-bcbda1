// vrf_index_mux: address multiplexer in front of VRF read port A.
//
// This is the entire hardware cost of the vindexmac instruction. For
// ordinary vector-vector instructions port A is addressed by the vs1 field of
// the instruction. For vindexmac.vx the same port is addressed by the five
// least significant bits of the scalar operand rs, which the scalar core
// sends along with the instruction, so the register to multiply is chosen at
// run time. Purely combinational; width is the 5 bits of a register number.
//
// The structure (a 5-bit 2-to-1 multiplexer on one existing read port, no
// extra port) is the paper's.
module vrf_index_mux #(
  parameter int unsigned AW   = 5,
  parameter int unsigned XLEN = vec_pkg::XLEN
) (
  input  logic            idx_sel,   // 1 for vindexmac
  input  logic [AW-1:0]   vs1,       // register field of the instruction
  input  logic [XLEN-1:0] rs_val,    // scalar operand value
  output logic [AW-1:0]   ra_addr
);

  assign ra_addr = idx_sel ? rs_val[AW-1:0] : vs1;

endmodule
