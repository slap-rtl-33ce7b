// slap_cu: one vector Compute Unit (CU), a SIMD4 integer vector pipeline that
// runs decoupled from, and behind, the GPCU that feeds it.
//
// Three elastic queues connect it to its GPCU: the vector instruction buffer
// (vector slots pushed at dispatch), the vector load address buffer and the
// vector store address buffer (addresses computed by the GPCU). A load address
// push also allocates the address in this CU's data memory (slap_cam), which
// starts the read early: the triangular load. All of this follows the paper.
//
// Issue (the DC stage) looks at the head of the instruction queue and issues
// it, one per cycle and in order, when:
//   V_ADD .. V_FMUL    no source or destination register is still in flight;
//   V_LD               a load address is queued and the data memory holds its
//                      data (otherwise the CU waits: a triangular-load stall);
//   V_ST               a store address is queued, the source register is not in
//                      flight and the memory port takes the store this cycle.
// An empty instruction queue stalls the CU, as the paper describes. Every
// register-writing op passes through VPIPE execute stages (E1..E7 in the
// paper's figure) and writes the register file at the end of the last one. A
// busy bit per register interlocks dependent ops, and the value being written
// back is forwarded to the op issuing in that cycle (the paper's
// vector-register forwarding), so a dependent op issues 7 cycles after its
// producer. Forwarding only from the last stage is this design's choice. The paper's CU
// is a floating-point SIMD unit; the lanes here offer both 32-bit integer add/sub/mul and binary32 add/sub/mul
// (fp32_alu, round to nearest even, subnormals flushed to zero); the paper does
// not give the number format, so binary32 is this design's choice. Results are
// computed in E1 and carried to E7, which models the latency rather than
// splitting the arithmetic over stages. One vector op per queue entry and the
// op set are this design's choices.
//
// Status pulses, for counting: ev_iq_empty (no instruction to issue),
// ev_ld_wait (V_LD at the head waiting for data), ev_hazard (register
// interlock). idle is high when all queues, the pipeline and the CAM are empty.
module slap_cu
  import slap_pkg::*;
#(
  parameter int unsigned IQ_DEPTH  = 32,   // vector instruction buffer
  parameter int unsigned AQ_DEPTH  = 32,   // load / store address buffers
  parameter int unsigned CAM_ENTRIES = 32,
  parameter int unsigned VPIPE     = 7
) (
  input  logic      clk,
  input  logic      rst_n,
  // from the owning GPCU (address already offset for this CU)
  input  logic      ins_push,
  input  slot_t     ins,
  input  logic      ld_push,
  input  logic      st_push,
  input  word_t     addr,
  output logic      ins_full,
  output logic      ld_full,      // load buffer full or CAM cannot allocate
  output logic      st_full,
  // memory hierarchy port of this CU
  output logic      mem_req_valid,
  output mem_req_t  mem_req,
  input  logic      mem_req_ready,
  input  logic      mem_resp_valid,
  input  mem_resp_t mem_resp,
  // status
  output logic      idle,
  output logic      ev_iq_empty,
  output logic      ev_ld_wait,
  output logic      ev_hazard
);
  slot_t  head;
  vec_t             vrf  [NVREG];   // vector register file
  logic [NVREG-1:0] busy;           // write in flight
  logic   iq_empty, iq_pop;
  word_t  lab_head, sab_head;
  logic   lab_empty, lab_full, lab_pop;
  logic   sab_empty, sab_pop;
  logic   alloc_ready, lk_hit, st_valid, st_ready, cam_idle;
  vec_t   lk_data;

  slap_fifo #(.WIDTH($bits(slot_t)), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .push(ins_push), .wdata(ins), .pop(iq_pop),
    .rdata(head), .full(ins_full), .empty(iq_empty), .count());

  slap_fifo #(.WIDTH(XLEN), .DEPTH(AQ_DEPTH)) u_lab (
    .clk, .rst_n, .push(ld_push), .wdata(addr), .pop(lab_pop),
    .rdata(lab_head), .full(lab_full), .empty(lab_empty), .count());

  slap_fifo #(.WIDTH(XLEN), .DEPTH(AQ_DEPTH)) u_sab (
    .clk, .rst_n, .push(st_push), .wdata(addr), .pop(sab_pop),
    .rdata(sab_head), .full(st_full), .empty(sab_empty), .count());

  assign ld_full = lab_full || !alloc_ready;

  vec_t vd_v;                       // store data, forwarded

  slap_cam #(.ENTRIES(CAM_ENTRIES)) u_cam (
    .clk, .rst_n,
    .alloc_valid(ld_push), .alloc_addr(addr), .alloc_ready,
    .lk_addr(lab_head), .lk_hit, .lk_data, .lk_consume(lab_pop),
    .st_valid, .st_addr(sab_head), .st_data(vd_v), .st_ready,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_resp_valid, .mem_resp,
    .idle(cam_idle));


  // ---------------------------------------------------------------- issue
  logic is_alu, is_fp, is_ld, is_st, regs_ok, can_issue;
  vec_t va_v, vb_v, alu_res;
  logic fwd_a, fwd_b, fwd_d;
  logic [NVREG-1:0] rdy;            // readable now: idle, or written back this cycle

  // binary32 lanes
  vec_t       fp_res;
  logic [1:0] fp_op;
  assign fp_op = (head.op == V_FMUL) ? 2'b10 : (head.op == V_FSUB) ? 2'b01 : 2'b00;
  for (genvar l = 0; l < LANES; l++) begin : g_fp
    fp32_alu u_fp (.op(fp_op), .a(va_v[l*XLEN +: XLEN]), .b(vb_v[l*XLEN +: XLEN]),
                   .y(fp_res[l*XLEN +: XLEN]));
  end

  always_comb begin
    is_fp  = (head.op == V_FADD) || (head.op == V_FSUB) || (head.op == V_FMUL);
    is_alu = (head.op == V_ADD) || (head.op == V_SUB) || (head.op == V_MUL) || is_fp;
    is_ld  = (head.op == V_LD);
    is_st  = (head.op == V_ST);
    for (int l = 0; l < LANES; l++) begin
      word_t x, y;
      x = va_v[l*XLEN +: XLEN];
      y = vb_v[l*XLEN +: XLEN];
      unique case (head.op)
        V_ADD:   alu_res[l*XLEN +: XLEN] = x + y;
        V_SUB:   alu_res[l*XLEN +: XLEN] = x - y;
        default: alu_res[l*XLEN +: XLEN] = x * y;
      endcase
    end
    regs_ok = 1'b1;
    if (is_alu) regs_ok = rdy[head.a] && rdy[head.b] && rdy[head.d];
    if (is_ld)  regs_ok = rdy[head.d];
    if (is_st)  regs_ok = rdy[head.d];
    can_issue = 1'b0;
    if (!iq_empty && regs_ok) begin
      if (is_alu)     can_issue = 1'b1;
      else if (is_ld) can_issue = !lab_empty && lk_hit;
      else if (is_st) can_issue = !sab_empty && st_ready;
      else            can_issue = 1'b1;            // V_NOP is dropped
    end
  end

  assign st_valid = !iq_empty && is_st && regs_ok && !sab_empty;
  assign iq_pop   = can_issue;
  assign lab_pop  = can_issue && is_ld;
  assign sab_pop  = can_issue && is_st;

  assign ev_iq_empty = iq_empty;
  assign ev_ld_wait  = !iq_empty && is_ld && regs_ok && !(!lab_empty && lk_hit);
  assign ev_hazard   = !iq_empty && !regs_ok;

  // ---------------------------------------------------------------- E1..E7
  typedef struct packed {
    logic       v;
    logic [3:0] d;
    vec_t       res;
  } pipe_t;

  pipe_t pipe [VPIPE];
  pipe_t e1;
  logic  wb;

  always_comb begin
    e1.v   = can_issue && (is_alu || is_ld);
    e1.d   = head.d;
    e1.res = is_ld ? lk_data : is_fp ? fp_res : alu_res;
  end

  assign wb = pipe[VPIPE-1].v;

  // forwarding from the write-back stage: a register is busy while its one
  // write is in flight, so a match at E7 is the value the op must see
  always_comb begin
    for (int r = 0; r < NVREG; r++)
      rdy[r] = !busy[r] || (wb && (pipe[VPIPE-1].d == 4'(r)));
    fwd_a = wb && (pipe[VPIPE-1].d == head.a);
    fwd_b = wb && (pipe[VPIPE-1].d == head.b);
    fwd_d = wb && (pipe[VPIPE-1].d == head.d);
  end
  assign va_v = fwd_a ? pipe[VPIPE-1].res : vrf[head.a];
  assign vb_v = fwd_b ? pipe[VPIPE-1].res : vrf[head.b];
  assign vd_v = fwd_d ? pipe[VPIPE-1].res : vrf[head.d];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < VPIPE; i++) pipe[i] <= '0;
      busy <= '0;
      for (int r = 0; r < NVREG; r++) vrf[r] <= '0;
    end else begin
      pipe[0] <= e1;
      for (int i = 1; i < VPIPE; i++) pipe[i] <= pipe[i-1];
      if (wb) vrf[pipe[VPIPE-1].d] <= pipe[VPIPE-1].res;
      for (int r = 0; r < NVREG; r++) begin
        if (e1.v && e1.d == 4'(r))                    busy[r] <= 1'b1;
        else if (wb && pipe[VPIPE-1].d == 4'(r))      busy[r] <= 1'b0;
      end
    end
  end

  logic pipe_empty;
  always_comb begin
    pipe_empty = 1'b1;
    for (int i = 0; i < VPIPE; i++) if (pipe[i].v) pipe_empty = 1'b0;
  end

  assign idle = iq_empty && lab_empty && sab_empty && pipe_empty && cam_idle;

endmodule
