// tb_vrf_index_mux: self-checking test of the port-A address multiplexer.
//
// With idx_sel low the address must be the vs1 field; with idx_sel high it
// must be the five low bits of the scalar operand, whatever its upper bits.
module tb_vrf_index_mux;
  logic sel;
  logic [4:0] vs1, ra;
  logic [63:0] rs;
  int checks = 0, failures = 0;

  vrf_index_mux dut (.idx_sel(sel), .vs1(vs1), .rs_val(rs), .ra_addr(ra));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2048; i++) begin
      sel = i[0];
      vs1 = 5'(i >> 1);
      rs  = {$urandom, $urandom};
      #1;
      checks++;
      if (ra !== (sel ? rs[4:0] : vs1)) begin
        failures++;
        $display("FAIL sel=%0d vs1=%0d rs=%h ra=%0d", sel, vs1, rs, ra);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
