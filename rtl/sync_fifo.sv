// sync_fifo: synchronous first-in first-out queue with valid/ready ports.
//
// Used as the instruction queue between the scalar core and the decoupled
// vector engine: each entry holds one vector instruction together with the
// scalar operand value the core read for it, so the engine never has to
// reach back into the scalar register file. DEPTH entries of WIDTH bits in
// a circular buffer. A push happens when in_valid && in_ready, a pop when
// out_valid && out_ready; both may happen in one cycle, also when full.
// out_data is the head entry, valid in the same cycle as out_valid
// (first-word fall-through). Synchronous active-high reset empties it.
//
// That instructions travel with their scalar operands is the paper's
// description of decoupled engines; the queue depth is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [PW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count < (PW+1)'(DEPTH)) || out_ready;
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= in_data;
        wp      <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // Never push into a full queue unless the head leaves in the same cycle
  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
    push |-> (count < (PW+1)'(DEPTH)) || pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst)
    pop |-> count != '0);

endmodule
