// vec_lsu: vector load/store unit between the register file and the L2 port.
//
// Executes unit-stride vle32.v / vse32.v with one whole-register (64-byte,
// one L2 line for an aligned address) access each, and keeps up to NLDQ
// loads and NSTQ stores in flight at once. A command is taken with start
// whenever ready is high (ready depends on is_store: room for one more
// access of that kind, and the request register free or leaving this
// cycle). The command goes into a request register, which drives req_valid
// with the byte address, write flag, store data and byte enables (the
// bytes of the elements below vl) until req_ready. Its destination and
// element mask go into an in-order tracker (a sync_fifo). The L2 answers
// every request with one resp_valid pulse, in request order. For a load,
// resp_rdata is written into the register at the tracker head in that same
// cycle, only for the elements of its mask. For a store the pulse is the
// write acknowledgement. done pulses with every response.
//
// pend_ld has one bit per vector register, set from the cycle after a load
// to that register is taken until the cycle after its data are written.
// The sequencer uses it to hold back instructions that read or write such a
// register. busy is high while any access is in flight. An isolated access
// takes LAT + 2 cycles from start to done with an L2 that accepts at once;
// back-to-back accesses can be taken every cycle.
//
// Following the paper: the engine reaches the L2 directly, through 16 load
// and 16 store queues (NLDQ, NSTQ). This design's own choice: the queues
// are counted entries of one in-order tracker, the L2 returns responses in
// order, and the request/response signalling.
module vec_lsu #(
  parameter int unsigned VLEN  = vec_pkg::VLEN,
  parameter int unsigned ABITS = vec_pkg::ABITS,
  parameter int unsigned NLDQ  = 16,
  parameter int unsigned NSTQ  = 16,
  localparam int unsigned NEL  = VLEN / 32
) (
  input  logic             clk,
  input  logic             rst,
  // command from the sequencer
  input  logic             start,
  input  logic             is_store,
  input  logic [4:0]       vd,
  input  logic [ABITS-1:0] addr,
  input  logic [VLEN-1:0]  sdata,
  input  logic [NEL-1:0]   emask,
  output logic             ready,
  output logic             busy,
  output logic             done,
  output logic [31:0]      pend_ld,
  // VRF write port, used for load data
  output logic             vrf_we,
  output logic [4:0]       vrf_wa,
  output logic [NEL-1:0]   vrf_wbe,
  output logic [VLEN-1:0]  vrf_wdata,
  // L2 port
  output logic             req_valid,
  input  logic             req_ready,
  output logic             req_we,
  output logic [ABITS-1:0] req_addr,
  output logic [VLEN-1:0]  req_wdata,
  output logic [VLEN/8-1:0] req_be,
  input  logic             resp_valid,
  input  logic [VLEN-1:0]  resp_rdata
);

  localparam int unsigned TW = 1 + 5 + NEL;
  localparam int unsigned LW = $clog2(NLDQ + 1);
  localparam int unsigned SW = $clog2(NSTQ + 1);

  // ---------------- request register ----------------
  logic [NEL-1:0] mask_q;
  logic           room;
  logic [LW-1:0]  n_ld;     // loads taken and not yet answered
  logic [SW-1:0]  n_st;     // stores taken and not yet answered

  assign room  = is_store ? (n_st < SW'(NSTQ)) : (n_ld < LW'(NLDQ));
  assign ready = (!req_valid || req_ready) && room;

  always_ff @(posedge clk) begin
    if (rst) begin
      req_valid <= 1'b0;
      req_we    <= 1'b0;
      req_addr  <= '0;
      req_wdata <= '0;
      mask_q    <= '0;
    end else if (start) begin
      req_valid <= 1'b1;
      req_we    <= is_store;
      req_addr  <= addr;
      req_wdata <= sdata;
      mask_q    <= emask;
    end else if (req_ready) begin
      req_valid <= 1'b0;
    end
  end

  always_comb begin
    for (int e = 0; e < NEL; e++) req_be[e*4 +: 4] = {4{mask_q[e]}};
  end

  // ---------------- in-order tracker ----------------
  logic [TW-1:0] trk_in, trk_head;
  logic          trk_valid, trk_in_ready;
  logic          head_store;
  logic [$clog2(NLDQ + NSTQ):0] trk_count;

  assign trk_in = {is_store, vd, emask};

  sync_fifo #(.WIDTH(TW), .DEPTH(NLDQ + NSTQ)) u_trk (
    .clk, .rst,
    .in_valid(start), .in_ready(trk_in_ready), .in_data(trk_in),
    .out_valid(trk_valid), .out_ready(resp_valid), .out_data(trk_head),
    .count(trk_count)
  );

  assign head_store = trk_head[TW-1];
  assign vrf_wa     = trk_head[TW-2 -: 5];
  assign vrf_wbe    = trk_head[NEL-1:0];
  assign vrf_wdata  = resp_rdata;
  assign done       = resp_valid;
  assign vrf_we     = resp_valid && !head_store;

  // ---------------- queue occupancy and pending loads ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      n_ld    <= '0;
      n_st    <= '0;
      pend_ld <= '0;
    end else begin
      n_ld <= n_ld + LW'(start && !is_store) - LW'(resp_valid && !head_store);
      n_st <= n_st + SW'(start && is_store)  - SW'(resp_valid && head_store);
      for (int r = 0; r < 32; r++) begin
        if (start && !is_store && vd == 5'(r))      pend_ld[r] <= 1'b1;
        else if (vrf_we && vrf_wa == 5'(r))         pend_ld[r] <= 1'b0;
      end
    end
  end

  assign busy = (n_ld != '0) || (n_st != '0);

  a_start_ready: assert property (@(posedge clk) disable iff (rst) start |-> ready && trk_in_ready);
  a_resp_known:  assert property (@(posedge clk) disable iff (rst) resp_valid |-> trk_valid);
  a_req_stable:  assert property (@(posedge clk) disable iff (rst)
    req_valid && !req_ready |=> req_valid && $stable(req_addr) && $stable(req_we));

endmodule
