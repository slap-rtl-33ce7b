// slap_gpcu: the Global Program Control Unit, the scalar half of a SLAP VLIW
// core. It fetches every bundle, runs the scalar slot itself and hands the
// vector slot to the Compute Units it owns through their instruction queues.
//
// Pipeline: PF_ADRSEND, PF_WAIT, PF_REC (gpcu_fetch) -> DP -> DC -> E1..E3.
//   * DP: the vector slot is pushed into the instruction queue of every owned
//     CU as the bundle moves on to DC, so it waits while any of those queues
//     is full -- the paper's GPCU stall. The bundle also waits for DC to free.
//   * DC: the whole bundle issues or waits (in-order, all-or-nothing). Scalar
//     operands must not be in flight (busy bit per register). For V_LD/V_ST
//     the address s[a]+imm is generated here, as the paper assigns all vector
//     address arithmetic to the GPCU, and pushed into the load or store
//     address buffers one stage after the instruction. A load push also
//     starts the read into each CU's data memory (triangular load), so it
//     waits while a load buffer is full or a data memory has no free entry.
//     S_LW/S_SW go to the data cache and wait while it is busy. S_BNEZ is
//     resolved here; a taken branch (or HALT) keeps the next bundle in DP and
//     a taken branch redirects fetch (nothing is predicted).
// ALU results are written after E3 (SPIPE stages); a load result when the cache
// answers. The value being written is forwarded to DC in the same cycle (the
// paper's scalar-register forwarding), so a dependent bundle issues SPIPE
// cycles after its producer instead of SPIPE+1. The vector slot's own timing is then the CU's: the GPCU never waits
// for a vector result, which is what decouples the two.
//
// Control: start (with start_pc) begins a program; S_HALT stops fetch, and done
// rises once the GPCU and all its CUs have drained. What DP and DC each
// check, forwarding only from write-back, the
// branch scheme and the instruction set are this design's choices; the paper
// gives the pipeline phases, the queues and the stall rules.
module slap_gpcu
  import slap_pkg::*;
#(
  parameter int unsigned AW    = 10,   // program address bits
  parameter int unsigned SPIPE = 3     // scalar execute stages (E1..E3)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] start_pc,
  output logic          done,
  // program memory
  output logic          pm_en,
  output logic [AW-1:0] pm_addr,
  input  bundle_t       pm_data,
  // data cache
  output logic          dc_req_valid,
  input  logic          dc_req_ready,
  output logic          dc_req_we,
  output word_t         dc_req_addr,
  output word_t         dc_req_wdata,
  input  logic          dc_resp_valid,
  input  word_t         dc_resp_rdata,
  // toward the owned CUs (through the association crossbar)
  output disp_t         disp,
  input  logic          own_any,       // owns at least one CU
  input  logic          cu_ins_full,   // some owned instruction queue is full
  input  logic          cu_ld_full,    // some owned load buffer / data memory is full
  input  logic          cu_st_full,    // some owned store buffer is full
  input  logic          cu_idle,       // every owned CU has drained
  // status pulses
  output logic          ev_issue,
  output logic          ev_stall_cu,
  output logic          ev_stall_raw,
  output logic          ev_stall_dc
);
  logic          halted, dp_valid, dp_pop, redirect;
  logic [AW-1:0] redirect_pc, dp_pc;
  bundle_t       dp_b;

  gpcu_fetch #(.AW(AW)) u_fetch (
    .clk, .rst_n, .redirect, .redirect_pc, .stop(halted),
    .pm_en, .pm_addr, .pm_data,
    .out_valid(dp_valid), .out_bundle(dp_b), .out_pc(dp_pc), .out_pop(dp_pop));

  word_t            sreg [NSREG];
  logic [NSREG-1:0] sbusy;

  typedef struct packed {
    logic       v;
    logic [3:0] d;
    word_t      res;
  } spipe_t;
  spipe_t epipe [SPIPE];
  logic [3:0] ld_rd;    // destination of the load waiting on the cache

  // forwarding: a register is busy while its one write is in flight; the
  // value written back this cycle (E3 result or load data) is passed to DC
  logic             wb;
  logic [NSREG-1:0] srdy;
  word_t            sval [NSREG];
  assign wb = epipe[SPIPE-1].v;
  always_comb begin
    for (int r = 0; r < NSREG; r++) begin
      srdy[r] = !sbusy[r] || (wb && (epipe[SPIPE-1].d == 4'(r)))
                          || (dc_resp_valid && (ld_rd == 4'(r)));
      if (dc_resp_valid && (ld_rd == 4'(r)))          sval[r] = dc_resp_rdata;
      else if (wb && (epipe[SPIPE-1].d == 4'(r)))     sval[r] = epipe[SPIPE-1].res;
      else                                            sval[r] = sreg[r];
    end
  end

  // ---------------------------------------------------------------- DP
  // The vector slot is pushed into the owned CUs' instruction queues when the
  // bundle moves from DP to DC; dc_vec remembers that it was, so the address
  // push in DC goes to the same CUs.
  logic          dc_v, dc_vec;
  bundle_t       dc_b;
  logic [AW-1:0] dc_pc;
  logic          dp_vec, dc_free, dp_move, dp_block;

  slot_t s;
  logic  s_ok, v_ok, v_raw, s_raw, v_full, s_dc, issue, taken;
  word_t s_a, s_b, v_base;

  always_comb begin
    s = dc_b.s;
    s_a    = sval[s.a];
    s_b    = sval[s.b];
    v_base = sval[dc_b.v.a];

    s_raw = 1'b0;
    s_dc  = 1'b0;
    unique case (s.op)
      S_ADDI:        s_raw = !srdy[s.a] || !srdy[s.d];
      S_ADD, S_SUB:  s_raw = !srdy[s.a] || !srdy[s.b] || !srdy[s.d];
      S_LW: begin    s_raw = !srdy[s.a] || !srdy[s.d]; s_dc = !dc_req_ready; end
      S_SW: begin    s_raw = !srdy[s.a] || !srdy[s.b]; s_dc = !dc_req_ready; end
      S_BNEZ:        s_raw = !srdy[s.a];
      default: ;
    endcase
    v_raw  = dc_vec && ((dc_b.v.op == V_LD) || (dc_b.v.op == V_ST)) && !srdy[dc_b.v.a];
    v_full = dc_vec && (((dc_b.v.op == V_LD) && cu_ld_full) || ((dc_b.v.op == V_ST) && cu_st_full));
    s_ok   = !s_raw && !s_dc;
    v_ok   = !v_raw && !v_full;
    issue  = dc_v && !halted && s_ok && v_ok;
    taken  = issue && (s.op == S_BNEZ) && (s_a != '0);

    // DP -> DC: wait for DC to free up and, for a vector slot, for room in
    // every owned instruction queue; nothing follows a taken branch or HALT
    dp_vec   = (dp_b.v.op != V_NOP) && own_any;
    dc_free  = !dc_v || issue;
    dp_block = issue && (taken || (s.op == S_HALT));
    dp_move  = dp_valid && !halted && !start && dc_free && !dp_block && !(dp_vec && cu_ins_full);
  end

  assign dp_pop      = dp_move;
  assign redirect    = start || taken;
  assign redirect_pc = start ? start_pc : dc_pc + AW'(s.imm);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dc_v   <= 1'b0;
      dc_vec <= 1'b0;
      dc_b   <= '0;
      dc_pc  <= '0;
    end else if (start || taken) begin
      dc_v   <= 1'b0;
    end else if (dp_move) begin
      dc_v   <= 1'b1;
      dc_vec <= dp_vec;
      dc_b   <= dp_b;
      dc_pc  <= dp_pc;
    end else if (issue) begin
      dc_v   <= 1'b0;
    end
  end

  // vector dispatch: instruction at DP, address when the bundle issues from DC
  always_comb begin
    disp          = '0;
    disp.ins      = dp_b.v;
    disp.ins_push = dp_move && dp_vec;
    disp.addr     = v_base + sext16(dc_b.v.imm);
    disp.ld_push  = issue && dc_vec && (dc_b.v.op == V_LD);
    disp.st_push  = issue && dc_vec && (dc_b.v.op == V_ST);
  end

  // data cache requests
  assign dc_req_valid = issue && ((s.op == S_LW) || (s.op == S_SW));
  assign dc_req_we    = (s.op == S_SW);
  assign dc_req_addr  = s_a + sext16(s.imm);
  assign dc_req_wdata = s_b;

  spipe_t e1;
  always_comb begin
    e1.v = issue && ((s.op == S_ADDI) || (s.op == S_ADD) || (s.op == S_SUB));
    e1.d = s.d;
    unique case (s.op)
      S_ADD:   e1.res = s_a + s_b;
      S_SUB:   e1.res = s_a - s_b;
      default: e1.res = s_a + sext16(s.imm);
    endcase
  end


  always_ff @(posedge clk) begin
    if (!rst_n) begin
      halted <= 1'b1;
      sbusy  <= '0;
      ld_rd  <= '0;
      for (int r = 0; r < NSREG; r++) sreg[r] <= '0;
      for (int i = 0; i < SPIPE; i++) epipe[i] <= '0;
    end else begin
      if (start) halted <= 1'b0;
      else if (issue && s.op == S_HALT) halted <= 1'b1;
      epipe[0] <= e1;
      for (int i = 1; i < SPIPE; i++) epipe[i] <= epipe[i-1];
      if (wb) sreg[epipe[SPIPE-1].d] <= epipe[SPIPE-1].res;
      if (dc_resp_valid) sreg[ld_rd] <= dc_resp_rdata;
      if (issue && s.op == S_LW) ld_rd <= s.d;
      for (int r = 0; r < NSREG; r++) begin
        if ((e1.v || (issue && s.op == S_LW)) && s.d == 4'(r)) sbusy[r] <= 1'b1;
        else if ((wb && epipe[SPIPE-1].d == 4'(r)) || (dc_resp_valid && ld_rd == 4'(r)))
          sbusy[r] <= 1'b0;
      end
    end
  end

  assign done = halted && !start && (sbusy == '0) && dc_req_ready && cu_idle;

  assign ev_issue     = issue;
  assign ev_stall_cu  = (dp_valid && !halted && dc_free && !dp_block && dp_vec && cu_ins_full)
                        || (dc_v && !halted && !v_raw && v_full);
  assign ev_stall_raw = dc_v && !halted && (s_raw || v_raw);
  assign ev_stall_dc  = dc_v && !halted && !s_raw && s_dc;

endmodule
