// spmm_harness: the vector engine, a behavioural L2 and a scalar-core
// stimulus that runs the tiled vindexmac kernel, for any register width.
//
// For VLEN = 32 * NEL it builds ROWS rows of a structured-sparse A (N:M =
// 1:4, then 2:4) with NEL packed non-zeros per row, a dense B of
// (M/N) * NEL rows and a zero C, streams the kernel (per row: load the
// non-zeros into v16 and C into v17; per tile of L = 16 rows of B in
// v0..v15, one vindexmac.vx v17, v16, idx and one vslidedown.vi v16, v16, 1
// per non-zero; store C) and compares C with a reference that repeats the
// same fused multiply-adds in order. It also checks that the run is faster
// than one in which every memory instruction costs LAT + 3 cycles and every
// other one a single cycle (accesses overlap), and not faster than one
// instruction per cycle.
// done rises when both kernels have been checked; checks and failures
// count the comparisons.
module spmm_harness #(
  parameter int VLEN = 512,
  parameter int ROWS = 2
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles14,
  output int   cycles24
);
  import tb_fp_pkg::*;
  import tb_rvv_pkg::*;

  localparam int NEL = VLEN / 32, LAT = 8, L = 16, VLW = $clog2(NEL) + 1;
  localparam int BASE_B = 'h0000, BASE_V = 'h6000, BASE_C = 'h8000;

  logic clk = 0, rst = 1;
  logic vreq_valid, vreq_ready;
  logic [31:0] vreq_insn;
  logic [63:0] vreq_rs1;
  logic rqv, rqr, rqwe, rsv;
  logic [63:0] rqa;
  logic [VLEN-1:0] rqwd, rsd;
  logic [VLEN/8-1:0] rqbe;
  logic [VLW-1:0] vl;
  logic retire, illegal, idle, accepted;
  int n_active = 0, n_mem_ops, n_other_ops;
  logic [31:0] p_insn[$];
  logic [63:0] p_val[$];

  vector_engine #(.VLEN(VLEN)) dut (
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
  end

  task automatic emit(input logic [31:0] insn, input logic [63:0] val);
    p_insn.push_back(insn);
    p_val.push_back(val);
    if (insn[6:0] == 7'b0000111 || insn[6:0] == 7'b0100111) n_mem_ops++;
    else n_other_ops++;
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

  task automatic spmm(input int n, input int m, output int elapsed);
    int ntiles, kcols, exp_cycles;
    int col [ROWS][NEL];
    logic [31:0] val [ROWS][NEL];
    ntiles = (m / n) * NEL / L;
    if (ntiles < 1) ntiles = 1;
    kcols = (m / n) * NEL;
    n_mem_ops = 0; n_other_ops = 0;
    for (int k = 0; k < kcols; k++)
      for (int c = 0; c < NEL; c++) u_l2.wr32(BASE_B + k*VLEN/8 + c*4, rand_f(120, 132));
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
        u_l2.wr32(BASE_V + r*VLEN/8 + j*4, val[r][j]);
      end
      for (int c = 0; c < NEL; c++) u_l2.wr32(BASE_C + r*VLEN/8 + c*4, 32'h0);
    end
    emit(enc_vsetvli(5'd1, 5'd0), 64'd0);
    for (int r = 0; r < ROWS; r++) begin
      int nz_tile;
      emit(enc_vle32(5'd16, 5'd10), 64'(BASE_V + r*VLEN/8));
      emit(enc_vle32(5'd17, 5'd11), 64'(BASE_C + r*VLEN/8));
      nz_tile = NEL / ntiles;
      for (int t = 0; t < ntiles; t++) begin
        int rows_t;
        rows_t = nz_tile * m / n;   // rows of B this tile needs (L, or fewer for a short row)
        for (int k = 0; k < rows_t; k++) begin
          int a;
          a = BASE_B + (t*rows_t + k)*VLEN/8;
          emit(enc_vle32(5'(k), 5'd12), 64'(a));
        end
        for (int j = t*nz_tile; j < (t+1)*nz_tile; j++) begin
          int idx;
          idx = ((j / n) % (rows_t / m)) * m + col[r][j];
          emit(enc_vindexmac(5'd17, 5'd16, 5'd13), 64'(idx));
          emit(enc_vslidedown_vi(5'd16, 5'd16, 5'd1), 64'd0);
        end
      end
      emit(enc_vse32(5'd17, 5'd11), 64'(BASE_C + r*VLEN/8));
    end
    exp_cycles = n_mem_ops * (LAT + 3) + n_other_ops;
    run_program(elapsed);
    checks++;
    if (elapsed >= exp_cycles || elapsed < n_mem_ops + n_other_ops) begin
      failures++;
      $display("FAIL VLEN=%0d %0d:%0d took %0d cycles, expected %0d..%0d", VLEN, n, m, elapsed,
               n_mem_ops + n_other_ops, exp_cycles - 1);
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NEL; c++) begin
        logic [31:0] acc;
        acc = 32'h0;
        for (int j = 0; j < NEL; j++)
          acc = fma_ref(val[r][j], u_l2.rd32(BASE_B + ((j / n) * m + col[r][j])*VLEN/8 + c*4), acc);
        checks++;
        if (u_l2.rd32(BASE_C + r*VLEN/8 + c*4) !== acc) begin
          failures++;
          if (failures < 10) $display("FAIL VLEN=%0d %0d:%0d C[%0d][%0d]", VLEN, n, m, r, c);
        end
      end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    vreq_valid = 0; vreq_insn = '0; vreq_rs1 = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    spmm(1, 4, cycles14);
    spmm(2, 4, cycles24);
    done = 1;
  end
endmodule
