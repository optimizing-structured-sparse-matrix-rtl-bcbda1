// tb_proposed84: the unrolled vindexmac kernel on the default engine,
// against the rolled kernel and against the standard-RVV baseline.
//
// Runs sparse x dense multiplication with 1:4 and then 2:4 sparsity for
// ROWS = 16 rows of A in three ways, on the same data:
//   - rolled: one row at a time (A row in v16, C row in v24), loading every
//     tile of B again for every row;
//   - unrolled 8 x full tile loop, the best configuration of the published
//     study: eight rows at once, A rows in v16..v23 and C rows in v24..v31,
//     so that each tile of L = 16 rows of B in v0..v15 is loaded once per
//     eight rows. For each non-zero position j of the tile, the eight
//     vindexmac.vx v(24+r), v(16+r), idx(r, j) are issued back to back,
//     followed by the eight vslidedown.vi v(16+r), v(16+r), 1;
//   - the baseline with standard instructions only, also eight rows at a
//     time: for each non-zero j of row r, vle32.v v(r) loads the row of B
//     its column names, vrgather.vx v(8+r), v(16+r), j broadcasts the
//     non-zero, and vfmacc.vv v(24+r), v(8+r), v(r) accumulates.
// The index of a non-zero is its column inside the tile,
// ((j / N) mod (L / M)) * M + col, computed here on the scalar side. Every
// C is compared bit for bit with a reference that performs the same fp32
// fused multiply-adds in the same order. The unrolled run must use all 32
// registers and be faster than the rolled one and than the baseline; the
// cycle counts and speedups are printed.
module tb_proposed84;
  import tb_fp_pkg::*;
  import tb_rvv_pkg::*;

  localparam int VLEN = 512, NEL = 16, LAT = 8, L = 16, ROWS = 16, U = 8;
  localparam int BASE_B = 'h0000, BASE_V = 'h4000, BASE_C = 'h8000;

  logic clk = 0, rst = 1;
  logic vreq_valid, vreq_ready;
  logic [31:0] vreq_insn;
  logic [63:0] vreq_rs1;
  logic rqv, rqr, rqwe, rsv;
  logic [63:0] rqa;
  logic [VLEN-1:0] rqwd, rsd;
  logic [VLEN/8-1:0] rqbe;
  logic [4:0] vl;
  logic retire, illegal, idle, accepted;
  int checks = 0, failures = 0, n_active = 0;
  logic [31:0] written;
  logic [31:0] p_insn[$];
  logic [63:0] p_val[$];
  int col [ROWS][NEL];
  logic [31:0] val [ROWS][NEL];

  vector_engine dut (
    .clk, .rst, .vreq_valid, .vreq_ready, .vreq_insn, .vreq_rs1,
    .l2_req_valid(rqv), .l2_req_ready(rqr), .l2_req_we(rqwe), .l2_req_addr(rqa),
    .l2_req_wdata(rqwd), .l2_req_be(rqbe), .l2_resp_valid(rsv), .l2_resp_rdata(rsd),
    .vl, .retire, .illegal, .idle);
  l2_model #(.VLEN(VLEN), .LAT(LAT)) u_l2 (
    .clk, .rst, .req_valid(rqv), .req_ready(rqr), .req_we(rqwe), .req_addr(rqa),
    .req_wdata(rqwd), .req_be(rqbe), .resp_valid(rsv), .resp_rdata(rsd));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    accepted <= vreq_valid && vreq_ready;
    if (!rst && (dut.issue || dut.lsu_busy)) n_active++;
    if (!rst && dut.vrf_we) written[dut.vrf_wa] <= 1'b1;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic emit(input logic [31:0] insn, input logic [63:0] val_);
    p_insn.push_back(insn);
    p_val.push_back(val_);
  endtask

  task automatic run_program(output int elapsed);
    int start_active;
    start_active = n_active;
    @(negedge clk);
    while (p_insn.size() > 0) begin
      vreq_valid = 1'b1;
      vreq_insn  = p_insn[0];
      vreq_rs1   = p_val[0];
      @(posedge clk);
      @(negedge clk);
      if (accepted) begin
        void'(p_insn.pop_front());
        void'(p_val.pop_front());
      end
    end
    vreq_valid = 1'b0;
    while (!idle) @(negedge clk);
    elapsed = n_active - start_active;
  endtask

  // random N:M matrix A (packed values and in-block columns) and dense B
  task automatic make_data(input int n, input int m);
    for (int k = 0; k < (m / n) * NEL; k++)
      for (int c = 0; c < NEL; c++) u_l2.wr32(BASE_B + k*64 + c*4, rand_f(120, 132));
    for (int r = 0; r < ROWS; r++) begin
      for (int b = 0; b < NEL / n; b++) begin
        int p0, p1;
        p0 = int'($urandom % m);
        p1 = (p0 + 1 + int'($urandom % (m - 1))) % m;
        if (n == 1) col[r][b] = p0;
        else begin
          col[r][2*b]     = (p0 < p1) ? p0 : p1;
          col[r][2*b + 1] = (p0 < p1) ? p1 : p0;
        end
      end
      for (int j = 0; j < NEL; j++) begin
        val[r][j] = rand_f(120, 132);
        u_l2.wr32(BASE_V + r*64 + j*4, val[r][j]);
      end
    end
  endtask

  // run the kernel with u rows of A at a time and check C
  task automatic spmm(input int n, input int m, input int u, input bit base, output int elapsed);
    int ntiles, nz_tile;
    ntiles  = (m / n) * NEL / L;
    nz_tile = NEL / ntiles;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NEL; c++) u_l2.wr32(BASE_C + r*64 + c*4, 32'h0);
    emit(enc_vsetvli(5'd1, 5'd0), 64'd0);
    for (int g = 0; g < ROWS; g += u) begin
      for (int r = 0; r < u; r++) begin
        int av, ac;
        av = BASE_V + (g + r)*64;
        ac = BASE_C + (g + r)*64;
        emit(enc_vle32(5'(16 + r), 5'd10), 64'(av));
        emit(enc_vle32(5'(24 + r), 5'd11), 64'(ac));
      end
      if (base) begin
        for (int j = 0; j < NEL; j++) begin
          for (int r = 0; r < u; r++) begin
            int ab;
            ab = BASE_B + ((j / n) * m + col[g + r][j])*64;
            emit(enc_vle32(5'(r), 5'd12), 64'(ab));
            emit(enc_vrgather_vx(5'(8 + r), 5'(16 + r), 5'd13), 64'(j));
            emit(enc_vfmacc_vv(5'(24 + r), 5'(8 + r), 5'(r)), 64'd0);
          end
        end
      end else for (int t = 0; t < ntiles; t++) begin
        for (int k = 0; k < L; k++) begin
          int ab;
          ab = BASE_B + (t*L + k)*64;
          emit(enc_vle32(5'(k), 5'd12), 64'(ab));
        end
        for (int j = t*nz_tile; j < (t+1)*nz_tile; j++) begin
          for (int r = 0; r < u; r++) begin
            int idx;
            idx = ((j / n) % (L / m)) * m + col[g + r][j];
            emit(enc_vindexmac(5'(24 + r), 5'(16 + r), 5'd13), 64'(idx));
          end
          for (int r = 0; r < u; r++)
            emit(enc_vslidedown_vi(5'(16 + r), 5'(16 + r), 5'd1), 64'd0);
        end
      end
      for (int r = 0; r < u; r++) begin
        int ac;
        ac = BASE_C + (g + r)*64;
        emit(enc_vse32(5'(24 + r), 5'd11), 64'(ac));
      end
    end
    run_program(elapsed);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NEL; c++) begin
        logic [31:0] acc;
        acc = 32'h0;
        for (int j = 0; j < NEL; j++)
          acc = fma_ref(val[r][j], u_l2.rd32(BASE_B + ((j / n) * m + col[r][j])*64 + c*4), acc);
        checks++;
        if (u_l2.rd32(BASE_C + r*64 + c*4) !== acc) begin
          failures++;
          if (failures < 10) $display("FAIL %0d:%0d unroll %0d%s C[%0d][%0d]", n, m, u,
                                      base ? " baseline" : "", r, c);
        end
      end
  endtask

  initial begin
    int rolled, unrolled, baseline;
    vreq_valid = 0; vreq_insn = '0; vreq_rs1 = '0;
    written = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int s = 0; s < 2; s++) begin
      int n;
      n = s + 1;
      make_data(n, 4);
      spmm(n, 4, 1, 1'b0, rolled);
      written = '0;
      spmm(n, 4, U, 1'b0, unrolled);
      checks++;
      if (written !== 32'hffff_ffff) begin
        failures++;
        $display("FAIL unrolled kernel wrote registers %h, expected all 32", written);
      end
      checks++;
      if (unrolled >= rolled) begin
        failures++;
        $display("FAIL unrolled kernel not faster");
      end
      spmm(n, 4, U, 1'b1, baseline);
      checks++;
      if (unrolled >= baseline) begin
        failures++;
        $display("FAIL vindexmac kernel not faster than the baseline");
      end
      $display("%0d:4, %0d rows: rolled %0d cycles, unrolled by %0d %0d cycles, speedup %0d.%02d",
               n, ROWS, rolled, U, unrolled, rolled / unrolled, (100 * rolled / unrolled) % 100);
      $display("      baseline unrolled by %0d: %0d cycles, vindexmac speedup %0d.%02d",
               U, baseline, baseline / unrolled, (100 * baseline / unrolled) % 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
