// tb_vrf: self-checking test of the vector register file.
//
// Fills all 32 registers with random data, then for many random cycles
// reads three random registers on the three ports while writing a fourth
// with a random element mask, comparing every read with a shadow copy. A
// read of the register being written in the same cycle must return the old
// value; the new value must be visible one cycle later.
module tb_vrf;
  localparam int VLEN = 512, NEL = 16;
  logic clk = 0;
  logic [4:0] ra, rb, rc, wa;
  logic [VLEN-1:0] da, db, dc, wd;
  logic we;
  logic [NEL-1:0] wbe;
  logic [VLEN-1:0] shadow [32];
  int checks = 0, failures = 0;

  vrf dut (.clk, .ra_addr(ra), .ra_data(da), .rb_addr(rb), .rb_data(db),
           .rc_addr(rc), .rc_data(dc), .we, .wa, .wbe, .wdata(wd));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VLEN-1:0] rnd_vec();
    logic [VLEN-1:0] v;
    for (int i = 0; i < VLEN/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic cmp(input logic [VLEN-1:0] got, exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    we = 0; wbe = '1; ra = 0; rb = 0; rc = 0; wa = 0; wd = '0;
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      we = 1; wa = 5'(r); wbe = '1; wd = rnd_vec(); shadow[r] = wd;
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom); rc = 5'($urandom);
      we = ($urandom % 2) == 1; wa = (t % 3 == 0) ? ra : 5'($urandom);
      wbe = NEL'($urandom); wd = rnd_vec();
      #1;
      cmp(da, shadow[ra], "port A");
      cmp(db, shadow[rb], "port B");
      cmp(dc, shadow[rc], "port C");
      if (we) for (int e = 0; e < NEL; e++) if (wbe[e]) shadow[wa][e*32 +: 32] = wd[e*32 +: 32];
      @(posedge clk); #1;
      we = 0;
      ra = wa; #1;
      cmp(da, shadow[wa], "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
