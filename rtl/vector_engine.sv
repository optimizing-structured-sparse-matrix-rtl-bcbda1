// vector_engine: decoupled RISC-V vector engine with the vindexmac extension.
//
// The scalar core pushes vector instructions, each with the value of its
// scalar source register, into an instruction queue (sync_fifo). The engine
// takes them in order from the head, decodes them (vec_decoder) and executes
// them on a 32 x 512-bit register file (vrf) with three read ports:
//   port A  vs1, or vrf[rs[4:0]] for vindexmac (vrf_index_mux)
//   port B  vs2   (for vindexmac only element 0 is used)
//   port C  vd    (accumulator; vs3 of a store)
// Arithmetic results come from 16 fp32 multiply-accumulate lanes
// (vec_mac_lanes), a slide-down unit (vec_slide) or a splat (vmv) and are
// written through the single write port. vrgather.vx/.vi (broadcast of
// vs2[index]) reuses the slide unit: element 0 of vs2 slid down by the
// index is vs2[index], or 0 past the end, and is splatted. Loads and stores go through
// vec_lsu, which keeps up to 16 loads and 16 stores in flight to the L2.
//
// Timing: instructions issue in order, at most one per cycle. An arithmetic
// instruction or vsetvli at the queue head reads its operands, computes and
// is written back in its issue cycle, so back-to-back dependent vindexmac /
// vslidedown pairs issue one per cycle. A load or store issues as soon as
// the LSU has room for it and completes LAT + 2 cycles later; later
// instructions go on meanwhile. The head waits while
//   - it reads or writes a register with a load in flight (pend_ld),
//   - it is not a memory access and a response arrives this cycle (the
//     load data own the write port; one retire per cycle),
//   - it is a memory access and the LSU has no room.
// Elements at or above vl are left unchanged. vl resets to VLMAX = 16.
//
// Outputs for the scalar side: vreq_ready (queue not full), vl, a one-cycle
// retire pulse per completed instruction, a one-cycle illegal pulse for an
// instruction outside the supported subset (it is dropped), idle.
//
// Following the paper: 32 registers of 512 bits, 16 lanes of fp32, three
// read ports and one write port, vindexmac costing only the 5-bit address
// multiplexer on port A, and 16 load plus 16 store queues to the L2. This
// design's own: the in-order single-issue sequencer with a pending-load
// scoreboard, the queue depth, and the L2 request/response signalling.
module vector_engine
  import vec_pkg::*;
#(
  parameter int unsigned VLEN   = vec_pkg::VLEN,
  parameter int unsigned QDEPTH = 8,
  localparam int unsigned NEL   = VLEN / 32,
  localparam int unsigned VLW   = $clog2(NEL) + 1
) (
  input  logic             clk,
  input  logic             rst,
  // instruction stream from the scalar core
  input  logic             vreq_valid,
  output logic             vreq_ready,
  input  logic [31:0]      vreq_insn,
  input  logic [XLEN-1:0]  vreq_rs1,
  // L2 port
  output logic             l2_req_valid,
  input  logic             l2_req_ready,
  output logic             l2_req_we,
  output logic [ABITS-1:0] l2_req_addr,
  output logic [VLEN-1:0]  l2_req_wdata,
  output logic [VLEN/8-1:0] l2_req_be,
  input  logic             l2_resp_valid,
  input  logic [VLEN-1:0]  l2_resp_rdata,
  // status
  output logic [VLW-1:0]   vl,
  output logic             retire,
  output logic             illegal,
  output logic             idle
);

  // ---------------- instruction queue ----------------
  vreq_t  qin, head;
  logic   head_valid, head_pop;
  logic [$clog2(QDEPTH):0] qcount;

  assign qin = '{insn: vreq_insn, rs1_val: vreq_rs1};

  sync_fifo #(.WIDTH($bits(vreq_t)), .DEPTH(QDEPTH)) u_queue (
    .clk, .rst,
    .in_valid(vreq_valid), .in_ready(vreq_ready), .in_data(qin),
    .out_valid(head_valid), .out_ready(head_pop), .out_data(head),
    .count(qcount)
  );

  // ---------------- decode ----------------
  vdec_t dec;
  vec_decoder u_dec (.req(head), .dec(dec));

  // ---------------- register file ----------------
  logic [4:0]      ra_addr;
  logic [VLEN-1:0] ra_data, rb_data, rc_data;
  logic            vrf_we;
  logic [4:0]      vrf_wa;
  logic [NEL-1:0]  vrf_wbe;
  logic [VLEN-1:0] vrf_wdata;

  vrf_index_mux #(.AW(5), .XLEN(XLEN)) u_amux (
    .idx_sel(dec.idx_sel), .vs1(dec.vs1), .rs_val(dec.scalar), .ra_addr(ra_addr)
  );

  vrf #(.NREGS(NREGS), .VLEN(VLEN)) u_vrf (
    .clk,
    .ra_addr(ra_addr), .ra_data(ra_data),
    .rb_addr(dec.vs2), .rb_data(rb_data),
    .rc_addr(dec.vd),  .rc_data(rc_data),
    .we(vrf_we), .wa(vrf_wa), .wbe(vrf_wbe), .wdata(vrf_wdata)
  );

  // ---------------- execution units ----------------
  logic [1:0]      mac_mode;
  logic [VLEN-1:0] mac_res, slide_res, splat;
  logic [XLEN-1:0] slide_off;
  logic [31:0]     splat_val;

  always_comb begin
    unique case (dec.op)
      OP_VFMACC_VF: mac_mode = 2'd1;
      OP_VINDEXMAC: mac_mode = 2'd2;
      default:      mac_mode = 2'd0;
    endcase
  end

  vec_mac_lanes #(.VLEN(VLEN)) u_mac (
    .mode(mac_mode), .va(ra_data), .vb(rb_data), .acc(rc_data),
    .scalar(dec.scalar[31:0]), .res(mac_res)
  );

  assign slide_off = dec.use_imm ? XLEN'(dec.imm) : dec.scalar;
  vec_slide #(.VLEN(VLEN), .XLEN(XLEN)) u_slide (.src(rb_data), .off(slide_off), .res(slide_res));

  assign splat_val = dec.use_imm ? {{27{dec.imm[4]}}, dec.imm} : dec.scalar[31:0];
  assign splat     = {NEL{splat_val}};

  // ---------------- load/store unit ----------------
  logic            lsu_start, lsu_ready, lsu_busy, lsu_done;
  logic [31:0]     pend;
  logic            lsu_we;
  logic [4:0]      lsu_wa;
  logic [NEL-1:0]  lsu_wbe, emask;
  logic [VLEN-1:0] lsu_wdata;

  vec_lsu #(.VLEN(VLEN), .ABITS(ABITS)) u_lsu (
    .clk, .rst,
    .start(lsu_start), .is_store(dec.op == OP_VSE32), .vd(dec.vd),
    .addr(dec.scalar[ABITS-1:0]), .sdata(rc_data), .emask(emask),
    .ready(lsu_ready), .busy(lsu_busy), .done(lsu_done), .pend_ld(pend),
    .vrf_we(lsu_we), .vrf_wa(lsu_wa), .vrf_wbe(lsu_wbe), .vrf_wdata(lsu_wdata),
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req_we(l2_req_we),
    .req_addr(l2_req_addr), .req_wdata(l2_req_wdata), .req_be(l2_req_be),
    .resp_valid(l2_resp_valid), .resp_rdata(l2_resp_rdata)
  );

  // ---------------- sequencer ----------------
  logic            issue, is_mem, is_arith, hazard;
  logic [XLEN-1:0] avl;
  logic [VLW-1:0]  vl_next;

  always_comb begin
    for (int e = 0; e < NEL; e++) emask[e] = (VLW'(e) < vl);
  end

  assign is_mem   = (dec.op == OP_VLE32) || (dec.op == OP_VSE32);
  assign is_arith = (dec.op == OP_VFMACC_VV) || (dec.op == OP_VFMACC_VF) ||
                    (dec.op == OP_VINDEXMAC) || (dec.op == OP_VSLIDEDOWN) ||
                    (dec.op == OP_VMV) || (dec.op == OP_VRGATHER);
  always_comb begin
    unique case (dec.op)
      OP_VFMACC_VV, OP_VINDEXMAC: hazard = pend[ra_addr] || pend[dec.vs2] || pend[dec.vd];
      OP_VFMACC_VF, OP_VSLIDEDOWN, OP_VRGATHER: hazard = pend[dec.vs2] || pend[dec.vd];
      OP_VMV, OP_VLE32, OP_VSE32:  hazard = pend[dec.vd];
      default:                     hazard = 1'b0;
    endcase
  end

  assign issue     = head_valid && !hazard && (is_mem ? lsu_ready : !lsu_done);
  assign head_pop  = issue;
  assign lsu_start = issue && is_mem;

  always_comb begin
    if (lsu_we) begin
      vrf_we    = 1'b1;
      vrf_wa    = lsu_wa;
      vrf_wbe   = lsu_wbe;
      vrf_wdata = lsu_wdata;
    end else begin
      vrf_we  = issue && is_arith;
      vrf_wa  = dec.vd;
      vrf_wbe = emask;
      unique case (dec.op)
        OP_VSLIDEDOWN: vrf_wdata = slide_res;
        OP_VMV:        vrf_wdata = splat;
        OP_VRGATHER:   vrf_wdata = {NEL{slide_res[31:0]}};
        default:       vrf_wdata = mac_res;
      endcase
    end
  end

  always_comb begin
    avl = dec.use_imm ? XLEN'(dec.imm) : (dec.avl_max ? XLEN'(NEL) : dec.scalar);
    vl_next = (avl > XLEN'(NEL)) ? VLW'(NEL) : VLW'(avl);
  end

  always_ff @(posedge clk) begin
    if (rst) vl <= VLW'(NEL);
    else if (issue && dec.op == OP_VSETVL) vl <= vl_next;
  end

  assign retire  = (issue && !is_mem && dec.op != OP_ILLEGAL) || lsu_done;
  assign illegal = issue && (dec.op == OP_ILLEGAL);
  assign idle    = !head_valid && !lsu_busy;

  a_one_writer: assert property (@(posedge clk) disable iff (rst) !(lsu_we && issue && is_arith));
  a_one_retire: assert property (@(posedge clk) disable iff (rst) !(lsu_done && issue && !is_mem));

endmodule
