// tb_vec_lsu: self-checking test of the vector load/store unit.
//
// Drives loads and stores through the unit into the behavioural L2 (LAT
// cycles of latency, random back-pressure), in four phases:
//   1. isolated accesses: the cycles from start to done must be request
//      wait + LAT + 1 more, pend_ld must mark the destination of a load
//      while it is in flight, and busy must drop after it;
//   2. a random stream of loads and stores issued whenever ready is high:
//      every response must match, in order, the command it answers (a load
//      writes the requested register with its element mask and the memory
//      contents at the time of the request; a store writes nothing);
//   3. and 4. loads, then stores, issued back to back: the number in flight
//      must reach the queue size (16) and never exceed it.
// At the end the L2 memory must equal a reference image in which every
// store wrote exactly the bytes of its active elements.
module tb_vec_lsu;
  localparam int VLEN = 512, NEL = 16, LAT = 30, NQ = 16;
  logic clk = 0, rst = 1;
  logic start, is_store, ready, busy, done;
  logic [31:0] pend;
  logic [4:0] vd, wa;
  logic [63:0] addr;
  logic [VLEN-1:0] sdata, wdata;
  logic [NEL-1:0] emask, wbe;
  logic we;
  logic rqv, rqr, rqwe, rsv;
  logic [63:0] rqa;
  logic [VLEN-1:0] rqwd, rsd;
  logic [VLEN/8-1:0] rqbe;
  logic [7:0] ref_mem [65536];
  int checks = 0, failures = 0, wait_cycles;
  // expected responses, in order
  logic            exp_st  [$];
  logic [4:0]      exp_vd  [$];
  logic [NEL-1:0]  exp_m   [$];
  logic [VLEN-1:0] exp_dat [$];
  bit              stream = 0;
  int              inflight_ld = 0, inflight_st = 0, max_ld = 0, max_st = 0;

  // Reference for one command taken at this edge: apply stores to ref_mem
  // at once (the L2 handles accesses in order), remember what a load must
  // return.
  task automatic take(input logic st, input logic [4:0] rd, input logic [63:0] a,
                      input logic [NEL-1:0] m, input logic [VLEN-1:0] dat);
    logic [VLEN-1:0] e;
    e = '0;
    for (int i = 0; i < VLEN/8; i++) begin
      if (st) begin
        if (m[i/4]) ref_mem[int'(a) + i] = dat[i*8 +: 8];
      end else e[i*8 +: 8] = ref_mem[int'(a) + i];
    end
    exp_st.push_back(st); exp_vd.push_back(rd); exp_m.push_back(m); exp_dat.push_back(e);
  endtask

  // response checker and in-flight counters for phases 2 to 4
  always @(posedge clk) if (stream) begin
    if (start) begin
      if (is_store) inflight_st++; else inflight_ld++;
    end
    if (done) begin
      checks++;
      if (exp_st.size() == 0) begin
        failures++;
        $display("FAIL response with nothing outstanding");
      end else begin
        logic st;
        st = exp_st.pop_front();
        if (st) begin
          inflight_st--;
          if (we) failures++;
        end else begin
          inflight_ld--;
          if (!we || wa !== exp_vd[0] || wbe !== exp_m[0] || wdata !== exp_dat[0]) begin
            failures++;
            if (failures < 10) $display("FAIL load response to v%0d", exp_vd[0]);
          end
        end
        void'(exp_vd.pop_front()); void'(exp_m.pop_front()); void'(exp_dat.pop_front());
      end
    end
    if (inflight_ld > max_ld) max_ld = inflight_ld;
    if (inflight_st > max_st) max_st = inflight_st;
  end

  task automatic run_stream(input int n, input int kind, input int gap_pct);
    // kind: 0 random mix, 1 loads only, 2 stores only
    int issued;
    issued = 0;
    while (issued < n) begin
      logic st;
      logic [4:0] rd;
      logic [63:0] a;
      logic [NEL-1:0] m;
      logic [VLEN-1:0] dat;
      st = (kind == 0) ? (($urandom % 2) == 1) : (kind == 2);
      rd = 5'($urandom);
      a  = 64'($urandom % 60000);
      m  = ($urandom % 3 == 0) ? '1 : NEL'((1 << ($urandom % 17)) - 1);
      for (int i = 0; i < NEL; i++) dat[i*32 +: 32] = $urandom;
      @(negedge clk);
      is_store = st; vd = rd; addr = a; sdata = dat; emask = m;
      start = 1'b0;
      #1;
      if (ready && ($urandom % 100 >= gap_pct) &&
          !(st == 1'b0 && pend[rd])) begin
        start = 1'b1;
        take(st, rd, a, m, dat);
        issued++;
      end
    end
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
  endtask


  vec_lsu dut (.clk, .rst, .start, .is_store, .vd, .addr, .sdata, .emask, .ready, .busy, .done, .pend_ld(pend),
               .vrf_we(we), .vrf_wa(wa), .vrf_wbe(wbe), .vrf_wdata(wdata),
               .req_valid(rqv), .req_ready(rqr), .req_we(rqwe), .req_addr(rqa),
               .req_wdata(rqwd), .req_be(rqbe), .resp_valid(rsv), .resp_rdata(rsd));
  l2_model #(.LAT(LAT), .STALLS(1'b1)) u_l2 (.clk, .rst, .req_valid(rqv), .req_ready(rqr), .req_we(rqwe),
               .req_addr(rqa), .req_wdata(rqwd), .req_be(rqbe), .resp_valid(rsv), .resp_rdata(rsd));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      ref_mem[i] = 8'($urandom);
      u_l2.mem[i] = ref_mem[i];
    end
    start = 0; is_store = 0; vd = 0; addr = 0; sdata = '0; emask = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 150; t++) begin
      int cycles, stall;
      logic st;
      logic [4:0] rd;
      logic [63:0] a;
      logic [NEL-1:0] m;
      logic [VLEN-1:0] dat, got;
      st = ($urandom % 2) == 1;
      rd = 5'($urandom);
      a  = 64'($urandom % 60000);
      m  = (t % 4 == 0) ? '1 : NEL'((1 << ($urandom % 17)) - 1);
      for (int i = 0; i < NEL; i++) dat[i*32 +: 32] = $urandom;
      @(negedge clk);
      start = 1; is_store = st; vd = rd; addr = a; sdata = dat; emask = m;
      @(negedge clk);
      start = 0;
      cycles = 1; stall = 0; got = '0;
      if (!st) begin
        checks++;
        if (!pend[rd] || !busy) failures++;
      end
      while (!done) begin
        if (rqv && !rqr) stall++;
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (cycles != 1 + stall + 1 + LAT) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", cycles, 1 + stall + 1 + LAT);
      end
      if (!st) begin
        checks++;
        if (!we || wa !== rd || wbe !== m) failures++;
        for (int i = 0; i < VLEN/8; i++) begin
          checks++;
          if (wdata[i*8 +: 8] !== ref_mem[int'(a) + i]) failures++;
        end
      end else begin
        checks++;
        if (we) failures++;
        for (int i = 0; i < VLEN/8; i++) if (m[i/4]) ref_mem[int'(a) + i] = dat[i*8 +: 8];
      end
      @(negedge clk);
      checks++;
      if (busy || pend !== 32'd0) failures++;
    end
    stream = 1;
    run_stream(400, 0, 30);
    checks++;
    if (max_ld < 2 || max_st < 2) begin
      failures++;
      $display("FAIL accesses did not overlap (max loads %0d, stores %0d)", max_ld, max_st);
    end
    max_ld = 0; max_st = 0;
    run_stream(60, 1, 0);
    run_stream(60, 2, 0);
    checks++;
    if (max_ld != NQ || max_st != NQ) begin
      failures++;
      $display("FAIL most loads / stores in flight %0d / %0d, expected %0d", max_ld, max_st, NQ);
    end
    checks++;
    if (exp_st.size() != 0) failures++;
    $display("most in flight: %0d loads, %0d stores", max_ld, max_st);
    for (int i = 0; i < 65536; i++) begin
      if (u_l2.mem[i] !== ref_mem[i]) begin
        failures++;
        if (failures < 10) $display("FAIL memory byte %0d: %h vs %h", i, u_l2.mem[i], ref_mem[i]);
      end
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
