// vrf: vector register file with three read ports and one write port.
//
// NREGS registers of VLEN bits. The three read ports (A, B, C) let a
// multiply-accumulate read its two sources and its accumulator in the same
// cycle, as every RISC-V three-operand instruction needs; the write port
// retires one result per cycle. Port A is the one whose address is
// multiplexed for vindexmac (see vrf_index_mux).
//
// Timing: reads are combinational from the address; a write takes effect at
// the rising clock edge, so a read in the same cycle still sees the old
// value. The write carries one enable per 32-bit element so that elements at
// or above vl keep their contents (tail-undisturbed). The registers are
// flip-flops and are not reset, as a register file usually is not.
//
// Register count, width and port count follow the paper's 32 x 512-bit,
// 3-read/1-write file; element enables and the read timing are this
// design's choices.
module vrf #(
  parameter int unsigned NREGS = vec_pkg::NREGS,
  parameter int unsigned VLEN  = vec_pkg::VLEN,
  parameter int unsigned ELEN  = vec_pkg::ELEN,
  localparam int unsigned AW   = $clog2(NREGS),
  localparam int unsigned NEL  = VLEN / ELEN
) (
  input  logic            clk,
  input  logic [AW-1:0]   ra_addr,
  output logic [VLEN-1:0] ra_data,
  input  logic [AW-1:0]   rb_addr,
  output logic [VLEN-1:0] rb_data,
  input  logic [AW-1:0]   rc_addr,
  output logic [VLEN-1:0] rc_data,
  input  logic            we,
  input  logic [AW-1:0]   wa,
  input  logic [NEL-1:0]  wbe,
  input  logic [VLEN-1:0] wdata
);

  logic [VLEN-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int e = 0; e < NEL; e++) begin
        if (wbe[e]) regs[wa][e*ELEN +: ELEN] <= wdata[e*ELEN +: ELEN];
      end
    end
  end

  assign ra_data = regs[ra_addr];
  assign rb_data = regs[rb_addr];
  assign rc_data = regs[rc_addr];

endmodule
