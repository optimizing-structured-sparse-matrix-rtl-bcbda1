// l2_model: behavioural model of the L2 cache port seen by the vector engine.
//
// Not synthesizable logic of the design: it stands in for the shared L2 of
// the evaluated system, which always hits here. MEMBYTES bytes of storage.
// A request is accepted when req_valid && req_ready (req_ready drops at
// random when STALLS is set, to exercise back-pressure); LAT cycles later
// resp_valid pulses once. A read returns the 64 bytes starting at req_addr
// (wrapping at MEMBYTES); a write stores the enabled bytes and the pulse is
// its acknowledgement. It is pipelined: a request can be accepted every
// cycle and responses come back in request order; nothing is accepted
// while rst is high. LAT defaults to
// the 8-cycle L2 hit latency of the evaluated system.
module l2_model #(
  parameter int unsigned VLEN     = 512,
  parameter int unsigned MEMBYTES = 65536,
  parameter int unsigned LAT      = 8,
  parameter bit          STALLS   = 1'b0
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [63:0]       req_addr,
  input  logic [VLEN-1:0]   req_wdata,
  input  logic [VLEN/8-1:0] req_be,
  output logic              resp_valid,
  output logic [VLEN-1:0]   resp_rdata
);

  logic [7:0] mem [MEMBYTES];
  int         accesses = 0;
  int         cyc = 0;
  int         due_q [$];
  logic [VLEN-1:0] data_q [$];

  initial begin
    req_ready  = 1'b1;
    resp_valid = 1'b0;
    resp_rdata = '0;
  end

  always @(posedge clk) begin
    logic [VLEN-1:0] rd;
    cyc = cyc + 1;
    resp_valid <= 1'b0;
    if (due_q.size() != 0 && due_q[0] == cyc) begin
      resp_valid <= 1'b1;
      resp_rdata <= data_q[0];
      void'(due_q.pop_front());
      void'(data_q.pop_front());
    end
    if (req_valid && req_ready && !rst) begin
      accesses <= accesses + 1;
      rd = '0;
      for (int i = 0; i < VLEN/8; i++) begin
        int unsigned a;
        a = (int'(req_addr[31:0]) + i) % MEMBYTES;
        if (req_we) begin
          if (req_be[i]) mem[a] = req_wdata[i*8 +: 8];
        end else begin
          rd[i*8 +: 8] = mem[a];
        end
      end
      due_q.push_back(cyc + LAT);
      data_q.push_back(rd);
    end
    req_ready <= !STALLS || ($urandom % 4 != 0);
  end

  function automatic logic [31:0] rd32(input int unsigned addr);
    return {mem[addr+3], mem[addr+2], mem[addr+1], mem[addr]};
  endfunction

  task automatic wr32(input int unsigned addr, input logic [31:0] v);
    {mem[addr+3], mem[addr+2], mem[addr+1], mem[addr]} = v;
  endtask

endmodule
