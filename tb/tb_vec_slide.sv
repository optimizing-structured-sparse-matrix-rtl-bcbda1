// tb_vec_slide: self-checking test of the slide-down unit.
//
// For offsets 0..20 and random large offsets, every element must be the
// source element off places higher, or zero past the top of the register.
module tb_vec_slide;
  localparam int VLEN = 512, NEL = 16;
  logic [VLEN-1:0] src, res;
  logic [63:0] off;
  int checks = 0, failures = 0;

  vec_slide dut (.src, .off, .res);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < NEL; i++) src[i*32 +: 32] = $urandom;
      off = (t < 21) ? 64'(t) : {$urandom, $urandom};
      #1;
      for (int i = 0; i < NEL; i++) begin
        logic [31:0] e;
        e = (off < 64'(NEL - i)) ? src[(i + int'(off))*32 +: 32] : 32'd0;
        checks++;
        if (res[i*32 +: 32] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL off=%0d el %0d", off, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
