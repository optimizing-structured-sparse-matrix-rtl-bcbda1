// tb_vl_scaling: the sparse kernel on the three vector lengths evaluated.
//
// Runs spmm_harness, i.e. the tiled vindexmac kernel with 1:4 and 2:4
// sparsity, on engines with 256-, 512- and 1024-bit registers (8, 16 and 32
// lanes). Each C is checked bit for bit, and each run's cycle count must lie
// between one instruction per cycle and fully serialised memory accesses. It prints the cycles per output row
// for every configuration, which shows the scaling with vector length.
module tb_vl_scaling;
  logic d8, d16, d32;
  int c8, f8, c16, f16, c32, f32;
  int a8, b8, a16, b16, a32, b32;
  int checks, failures;

  spmm_harness #(.VLEN(256))  h8  (.done(d8),  .checks(c8),  .failures(f8),  .cycles14(a8),  .cycles24(b8));
  spmm_harness #(.VLEN(512))  h16 (.done(d16), .checks(c16), .failures(f16), .cycles14(a16), .cycles24(b16));
  spmm_harness #(.VLEN(1024)) h32 (.done(d32), .checks(c32), .failures(f32), .cycles14(a32), .cycles24(b32));

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + c32, f8 + f16 + f32 + 1);
    $finish;
  end

  initial begin
    wait (d8 && d16 && d32);
    checks = c8 + c16 + c32;
    failures = f8 + f16 + f32;
    $display("cycles for 2 rows of C (1:4 / 2:4): VL=8: %0d / %0d, VL=16: %0d / %0d, VL=32: %0d / %0d",
             a8, b8, a16, b16, a32, b32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
