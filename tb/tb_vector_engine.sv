// tb_vector_engine: end-to-end test of the vector engine at its default size.
//
// The testbench plays the scalar core. It builds a structured-sparse matrix
// A (N:M = 1:4 and then 2:4), a dense B and a zero C in the behavioural L2,
// and streams to the engine the tiled vindexmac kernel: per row of A, load
// its VL = 16 packed non-zeros and its row of C; for each of the
// (M/N)(VL/L) tiles, load L = 16 rows of B into v0..v15, then for each
// non-zero of the tile issue vindexmac.vx v17, v16, idx (idx = column inside
// the tile, computed here on the scalar side) and vslidedown.vi v16, v16, 1;
// finally store the row of C. C is compared bit for bit with a reference
// that performs the same fp32 fused multiply-adds in the same order.
//
// A second program checks vsetvli / vsetivli with vl < 16 (tail elements
// must stay unchanged), vfmacc.vv (port A addressed by vs1), vfmacc.vf,
// vmv, vslidedown.vx, vrgather.vx / .vi and the dropping of an illegal
// (masked) instruction.
//
// Timing: the engine issues at most one instruction per cycle, and no load
// or store may cost more than LAT + 3 cycles (issue, request, LAT cycles of
// L2 latency, response), so the active cycles must lie between n_mem +
// n_other and n_mem * (LAT + 3) + n_other. The kernels must beat the upper
// bound, because accesses overlap. Each mechanism (vindexmac, port A
// addressed by vs1, load-use stall on a pending load, several loads in
// flight, queue full, tail-masked write, illegal drop, vl change) is
// counted and must occur at least once.
module tb_vector_engine;
  import tb_fp_pkg::*;
  import tb_rvv_pkg::*;

  localparam int VLEN = 512, NEL = 16, LAT = 8;
  localparam int L = 16;
  localparam int ROWS = 4;
  localparam int BASE_B = 'h0000, BASE_V = 'h4000, BASE_C = 'h8000, BASE_X = 'hC000;

  logic clk = 0, rst = 1;
  logic vreq_valid, vreq_ready;
  logic [31:0] vreq_insn;
  logic [63:0] vreq_rs1;
  logic rqv, rqr, rqwe, rsv;
  logic [63:0] rqa;
  logic [VLEN-1:0] rqwd, rsd;
  logic [VLEN/8-1:0] rqbe;
  logic [4:0] vl;
  logic retire, illegal, idle;

  vector_engine dut (
    .clk, .rst, .vreq_valid, .vreq_ready, .vreq_insn, .vreq_rs1,
    .l2_req_valid(rqv), .l2_req_ready(rqr), .l2_req_we(rqwe), .l2_req_addr(rqa),
    .l2_req_wdata(rqwd), .l2_req_be(rqbe), .l2_resp_valid(rsv), .l2_resp_rdata(rsd),
    .vl, .retire, .illegal, .idle
  );
  l2_model #(.VLEN(VLEN), .LAT(LAT)) u_l2 (
    .clk, .rst, .req_valid(rqv), .req_ready(rqr), .req_we(rqwe), .req_addr(rqa),
    .req_wdata(rqwd), .req_be(rqbe), .resp_valid(rsv), .resp_rdata(rsd));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_vindexmac = 0, n_vs1_port = 0, n_mem_stall = 0, n_qfull = 0, n_tail = 0;
  int n_overlap = 0, max_ld = 0;
  int n_illegal = 0, n_vlchange = 0, n_retire = 0, n_active = 0;

  // program queue (instruction, scalar operand)
  logic [31:0] p_insn[$];
  logic [63:0] p_val[$];
  int n_mem_ops, n_other_ops;

  task automatic emit(input logic [31:0] insn, input logic [63:0] val);
    p_insn.push_back(insn);
    p_val.push_back(val);
    if (insn[6:0] == 7'b0000111 || insn[6:0] == 7'b0100111) n_mem_ops++;
    else n_other_ops++;
  endtask

  // mechanism counters
  always @(posedge clk) if (!rst) begin
    if (dut.issue && dut.dec.op == vec_pkg::OP_VINDEXMAC) n_vindexmac++;
    if (dut.issue && dut.dec.op == vec_pkg::OP_VFMACC_VV && !dut.dec.idx_sel) n_vs1_port++;
    if (dut.head_valid && dut.hazard) n_mem_stall++;
    if (dut.u_lsu.n_ld > 1) n_overlap++;
    if (int'(dut.u_lsu.n_ld) > max_ld) max_ld = int'(dut.u_lsu.n_ld);
    if (vreq_valid && !vreq_ready) n_qfull++;
    if (dut.vrf_we && dut.vrf_wbe != '1) n_tail++;
    if (illegal) n_illegal++;
    if (dut.issue && dut.dec.op == vec_pkg::OP_VSETVL) n_vlchange++;
    if (retire) n_retire++;
    if (dut.issue || dut.lsu_busy) n_active++;
  end

  // stream the program into the engine, one instruction per cycle if accepted
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

  // sample the handshake at the clock edge
  logic accepted;
  always @(posedge clk) accepted <= vreq_valid && vreq_ready;

  function automatic logic [31:0] bval(input int k, input int c);
    return u_l2.rd32(BASE_B + k*64 + c*4);
  endfunction

  task automatic spmm(input int n, input int m);
    int nnz_row, ntiles, kcols;
    int col [ROWS][NEL];
    logic [31:0] val [ROWS][NEL];
    logic [31:0] cref [ROWS][NEL];
    int elapsed, exp_cycles;
    nnz_row = NEL;
    ntiles  = (m / n) * (NEL / L);
    kcols   = ntiles * L;
    n_mem_ops = 0; n_other_ops = 0;
    // B: kcols x 16, A: ROWS rows of 16 non-zeros, C = 0
    for (int k = 0; k < kcols; k++)
      for (int c = 0; c < NEL; c++) u_l2.wr32(BASE_B + k*64 + c*4, rand_f(120, 132));
    for (int r = 0; r < ROWS; r++) begin
      for (int b = 0; b < nnz_row / n; b++) begin
        // n distinct positions inside block b
        int p0, p1;
        p0 = int'($urandom % m);
        p1 = (p0 + 1 + int'($urandom % (m - 1))) % m;
        for (int q = 0; q < n; q++) begin
          int pos;
          pos = (q == 0) ? p0 : p1;
          if (n == 2 && q == 1 && p1 < p0) begin
            col[r][b*n] = p1; col[r][b*n + 1] = p0;
            break;
          end
          col[r][b*n + q] = pos;
        end
      end
      for (int j = 0; j < NEL; j++) begin
        val[r][j] = rand_f(120, 132);
        u_l2.wr32(BASE_V + r*64 + j*4, val[r][j]);
      end
      for (int c = 0; c < NEL; c++) u_l2.wr32(BASE_C + r*64 + c*4, 32'h0);
    end
    // reference: same fused MACs, same order
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NEL; c++) begin
        logic [31:0] acc;
        acc = 32'h0;
        for (int j = 0; j < NEL; j++) begin
          int kglob;
          kglob = (j / n) * m + col[r][j];
          acc = fma_ref(val[r][j], bval(kglob, c), acc);
        end
        cref[r][c] = acc;
      end
    // program: the tiled kernel
    emit(enc_vsetvli(5'd1, 5'd0), 64'd0);
    for (int r = 0; r < ROWS; r++) begin
      emit(enc_vle32(5'd16, 5'd10), 64'(BASE_V + r*64));
      emit(enc_vle32(5'd17, 5'd11), 64'(BASE_C + r*64));
      for (int t = 0; t < ntiles; t++) begin
        for (int k = 0; k < L; k++) begin
          int a;
          a = BASE_B + (t*L + k)*64;
          emit(enc_vle32(5'(k), 5'd12), 64'(a));
        end
        for (int j = t*L*n/m; j < (t+1)*L*n/m; j++) begin
          int idx;
          idx = ((j / n) % (L / m)) * m + col[r][j];
          emit(enc_vindexmac(5'd17, 5'd16, 5'd13), 64'(idx) | 64'hABCD_0000_0000_0000);
          emit(enc_vslidedown_vi(5'd16, 5'd16, 5'd1), 64'd0);
        end
      end
      emit(enc_vse32(5'd17, 5'd11), 64'(BASE_C + r*64));
    end
    exp_cycles = n_mem_ops * (LAT + 3) + n_other_ops;
    run_program(elapsed);
    checks++;
    if (elapsed >= exp_cycles || elapsed < n_mem_ops + n_other_ops) begin
      failures++;
      $display("FAIL %0d:%0d kernel took %0d active cycles, expected %0d..%0d", n, m, elapsed,
               n_mem_ops + n_other_ops, exp_cycles - 1);
    end else $display("%0d:%0d kernel: %0d cycles for %0d rows (%0d without overlapped accesses)",
                      n, m, elapsed, ROWS, exp_cycles);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NEL; c++) begin
        checks++;
        if (u_l2.rd32(BASE_C + r*64 + c*4) !== cref[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] = %h, expected %h", r, c,
                                      u_l2.rd32(BASE_C + r*64 + c*4), cref[r][c]);
        end
      end
  endtask

  task automatic misc_ops();
    logic [31:0] e;
    int elapsed;
    n_mem_ops = 0; n_other_ops = 0;
    // v1, v2 hold B rows 1 and 2 of the last tile loaded; reload known rows
    emit(enc_vle32(5'd1, 5'd10), 64'(BASE_B + 1*64));
    emit(enc_vle32(5'd2, 5'd10), 64'(BASE_B + 2*64));
    emit(enc_vmv_vi(5'd20, 5'd3), 64'd0);                  // v20 = 3 (all 16)
    emit(enc_vsetivli(5'd1, 5'd5), 64'd0);                 // vl = 5
    emit(enc_vle32(5'd20, 5'd10), 64'(BASE_B + 0*64));     // v20[0..4] = B[0]
    emit(enc_vfmacc_vv(5'd20, 5'd1, 5'd2), 64'd0);         // v20[0..4] += v1*v2
    emit(enc_vsetvli(5'd1, 5'd0), 64'd0);                  // vl = VLMAX
    emit(enc_vmv_vx(5'd21, 5'd14), 64'h3f80_0000);         // v21 = 1.0
    emit(enc_vfmacc_vf(5'd21, 5'd15, 5'd2), 64'h4000_0000);// v21 += 2.0*v2
    emit(enc_vslidedown_vx(5'd22, 5'd2, 5'd14), 64'd3);    // v22 = v2 slid by 3
    emit(enc_vrgather_vx(5'd23, 5'd2, 5'd14), 64'd5);      // v23 = v2[5] everywhere
    emit(enc_vrgather_vi(5'd24, 5'd2, 5'd20), 64'd0);      // v24 = 0 (index past VLMAX)
    emit(enc_vse32(5'd23, 5'd10), 64'(BASE_X + 3*64));
    emit(enc_vse32(5'd24, 5'd10), 64'(BASE_X + 4*64));
    emit(enc_vindexmac(5'd21, 5'd2, 5'd13) & ~32'h0200_0000, 64'd1); // masked: illegal
    emit(enc_vsetvli(5'd1, 5'd14), 64'd7);                 // vl = 7
    emit(enc_vse32(5'd22, 5'd10), 64'(BASE_X + 2*64));     // only 7 elements
    emit(enc_vsetvli(5'd1, 5'd14), 64'd100);               // vl = min(100,16)
    emit(enc_vse32(5'd20, 5'd10), 64'(BASE_X + 0*64));
    emit(enc_vse32(5'd21, 5'd10), 64'(BASE_X + 1*64));
    for (int c = 0; c < 5*NEL; c++) u_l2.wr32(BASE_X + c*4, 32'hdead_beef);
    run_program(elapsed);
    checks++;
    if (elapsed > n_mem_ops * (LAT + 3) + n_other_ops || elapsed < n_mem_ops + n_other_ops) begin
      failures++;
      $display("FAIL misc program took %0d active cycles", elapsed);
    end
    for (int c = 0; c < NEL; c++) begin
      e = (c < 5) ? fma_ref(bval(1, c), bval(2, c), bval(0, c)) : 32'h3;
      checks++;
      if (u_l2.rd32(BASE_X + c*4) !== e) begin
        failures++; $display("FAIL v20[%0d] = %h, expected %h", c, u_l2.rd32(BASE_X + c*4), e);
      end
      e = fma_ref(32'h4000_0000, bval(2, c), 32'h3f80_0000);
      checks++;
      if (u_l2.rd32(BASE_X + 64 + c*4) !== e) begin
        failures++; $display("FAIL v21[%0d] = %h, expected %h", c, u_l2.rd32(BASE_X + 64 + c*4), e);
      end
      e = (c >= 7) ? 32'hdead_beef : ((c + 3 < NEL) ? bval(2, c + 3) : 32'h0);
      checks++;
      if (u_l2.rd32(BASE_X + 128 + c*4) !== e) begin
        failures++; $display("FAIL v22[%0d] = %h, expected %h", c, u_l2.rd32(BASE_X + 128 + c*4), e);
      end
      checks++;
      if (u_l2.rd32(BASE_X + 192 + c*4) !== bval(2, 5) || u_l2.rd32(BASE_X + 256 + c*4) !== 32'h0) begin
        failures++; $display("FAIL vrgather result, element %0d", c);
      end
    end
    checks++;
    if (vl !== 5'd16) failures++;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_instr;
    vreq_valid = 0; vreq_insn = '0; vreq_rs1 = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    @(negedge clk);
    spmm(1, 4);
    spmm(2, 4);
    misc_ops();
    $display("vindexmac %0d, vs1-addressed port A %0d, load-use stall cycles %0d, queue-full cycles %0d",
             n_vindexmac, n_vs1_port, n_mem_stall, n_qfull);
    $display("cycles with several loads in flight %0d, most loads in flight %0d", n_overlap, max_ld);
    $display("tail-masked writes %0d, illegal drops %0d, vl changes %0d, retired %0d",
             n_tail, n_illegal, n_vlchange, n_retire);
    checks++; if (n_vindexmac == 0) failures++;
    checks++; if (n_vs1_port == 0)  failures++;
    checks++; if (n_mem_stall == 0) failures++;
    checks++; if (n_qfull == 0)     failures++;
    checks++; if (n_overlap == 0)   failures++;
    checks++; if (n_tail == 0)      failures++;
    checks++; if (n_illegal != 1)   failures++;
    checks++; if (n_vlchange == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
