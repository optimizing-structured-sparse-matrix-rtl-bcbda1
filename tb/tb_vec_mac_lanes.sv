// tb_vec_mac_lanes: self-checking test of the 16 multiply-accumulate lanes.
//
// Random fp32 vectors are applied in the three modes; each lane's result is
// compared with the double-precision reference of tb_fp_pkg using the
// operand pairing of that mode (vector-vector, scalar-vector, and the
// vindexmac broadcast of vb element 0).
module tb_vec_mac_lanes;
  import tb_fp_pkg::*;
  localparam int VLEN = 512, NEL = 16;
  logic [1:0] mode;
  logic [VLEN-1:0] va, vb, acc, res;
  logic [31:0] sc;
  int checks = 0, failures = 0;

  vec_mac_lanes dut (.mode, .va, .vb, .acc, .scalar(sc), .res);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      mode = 2'(t % 3);
      for (int i = 0; i < NEL; i++) begin
        va[i*32 +: 32]  = rand_f(118, 136);
        vb[i*32 +: 32]  = rand_f(118, 136);
        acc[i*32 +: 32] = rand_f(118, 136);
      end
      sc = rand_f(118, 136);
      #1;
      for (int i = 0; i < NEL; i++) begin
        logic [31:0] e;
        unique case (mode)
          2'd0: e = fma_ref(va[i*32 +: 32], vb[i*32 +: 32], acc[i*32 +: 32]);
          2'd1: e = fma_ref(sc, vb[i*32 +: 32], acc[i*32 +: 32]);
          default: e = fma_ref(vb[31:0], va[i*32 +: 32], acc[i*32 +: 32]);
        endcase
        checks++;
        if (res[i*32 +: 32] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d lane %0d: %h vs %h", mode, i, res[i*32 +: 32], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
