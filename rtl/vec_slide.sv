// vec_slide: slide-down of a vector register by a number of elements.
//
// res[i] = src[i + off] for i + off below the element count, 0 above.
// The kernels use it with off = 1 after every vindexmac, so that the next
// non-zero value of the row of A moves into element 0, the only element
// vindexmac reads from vs2. The offset is the full scalar (or immediate)
// value, as in the RISC-V vslidedown instruction. Combinational.
//
// The operation is the one the paper's algorithms use; zero fill past the
// top is this design's choice (RISC-V leaves elements past VLMAX read as 0).
module vec_slide #(
  parameter int unsigned VLEN = vec_pkg::VLEN,
  parameter int unsigned XLEN = vec_pkg::XLEN,
  localparam int unsigned NEL = VLEN / 32
) (
  input  logic [VLEN-1:0] src,
  input  logic [XLEN-1:0] off,
  output logic [VLEN-1:0] res
);

  always_comb begin
    res = '0;
    for (int i = 0; i < NEL; i++) begin
      for (int j = i; j < NEL; j++) begin
        if (off == XLEN'(j - i)) res[i*32 +: 32] = src[j*32 +: 32];
      end
    end
  end

endmodule
