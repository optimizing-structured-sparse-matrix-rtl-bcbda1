// tb_sync_fifo: self-checking test of the instruction queue.
//
// Random pushes and pops against a SystemVerilog queue as reference: every
// popped word must match, the count must track, in_ready must be low only
// when full with no pop, and the full and empty cases must both occur.
module tb_sync_fifo;
  localparam int W = 96, D = 8;
  logic clk = 0, rst = 1;
  logic iv, ir, ov, orr;
  logic [W-1:0] id, od;
  logic [3:0] cnt;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  sync_fifo dut (.clk, .rst, .in_valid(iv), .in_ready(ir), .in_data(id),
                                         .out_valid(ov), .out_ready(orr), .out_data(od), .count(cnt));
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; orr = 0; id = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      // phases biased towards filling, then draining
      iv  = ($urandom % 8) < ((t / 500) % 2 == 0 ? 6 : 2);
      orr = ($urandom % 8) < ((t / 500) % 2 == 0 ? 2 : 6);
      id  = {$urandom, $urandom, $urandom};
      #1;
      checks++;
      if (ov !== (model.size() != 0) || int'(cnt) !== model.size() ||
          ir !== (model.size() < D || orr)) begin
        failures++;
        if (failures < 10) $display("FAIL status t=%0d size=%0d cnt=%0d", t, model.size(), cnt);
      end
      if (model.size() == D) fulls++;
      if (model.size() == 0) empties++;
      if (ov && orr) begin
        checks++;
        if (od !== model[0]) failures++;
      end
      @(posedge clk);
      if (ov && orr) void'(model.pop_front());
      if (iv && ir) model.push_back(id);
    end
    checks++;
    if (fulls == 0 || empties == 0) failures++;
    $display("full cycles %0d, empty cycles %0d", fulls, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
