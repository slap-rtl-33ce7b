// gpcu_fetch: the GPCU's program fetch pipeline, PF_ADRSEND -> PF_WAIT ->
// PF_REC, feeding the dispatch (DP) stage through a small fetch buffer.
//
// The three phases are the paper's; the buffer, the credit rule and the
// redirect scheme are this design's. Each cycle in which the buffer plus the
// requests in flight leave room, the next bundle address is sent (PF_ADRSEND);
// the bundle comes back two cycles later (PF_WAIT, PF_REC, see prog_mem) and is
// written into the FB_DEPTH-entry buffer together with its pc. Bundles are
// counted, not bytes: pc + 1 is the next bundle.
//
// redirect (a taken branch, or start) loads a new pc, empties the buffer and
// flips an epoch bit, so bundles still in flight from the old path are dropped
// when they arrive. stop (after HALT) stops sending addresses. The DP stage
// reads out_bundle/out_pc when out_valid and takes it with out_pop.
module gpcu_fetch
  import slap_pkg::*;
#(
  parameter int unsigned AW       = 10,   // program address bits
  parameter int unsigned FB_DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          redirect,
  input  logic [AW-1:0] redirect_pc,
  input  logic          stop,
  // program memory port
  output logic          pm_en,
  output logic [AW-1:0] pm_addr,
  input  bundle_t       pm_data,
  // to DP
  output logic          out_valid,
  output bundle_t       out_bundle,
  output logic [AW-1:0] out_pc,
  input  logic          out_pop
);
  localparam int unsigned CW = $clog2(FB_DEPTH + 3);

  logic [AW-1:0] pc;
  logic          epoch;
  // in-flight tracking for PF_WAIT and PF_REC
  logic          wait_v, rec_v, wait_e, rec_e;
  logic [AW-1:0] wait_pc, rec_pc;

  bundle_t       fb_b  [FB_DEPTH];
  logic [AW-1:0] fb_pc [FB_DEPTH];
  logic [$clog2(FB_DEPTH)-1:0] rd_p, wr_p;
  logic [CW-1:0] fb_cnt, inflight;
  logic          fb_push, fb_pop;

  assign inflight = CW'(wait_v) + CW'(rec_v);
  assign pm_en    = !redirect && !stop && (fb_cnt + inflight < CW'(FB_DEPTH));
  assign pm_addr  = pc;

  assign fb_push    = rec_v && (rec_e == epoch) && !redirect;
  assign out_valid  = (fb_cnt != '0);
  assign out_bundle = fb_b[rd_p];
  assign out_pc     = fb_pc[rd_p];
  assign fb_pop     = out_pop && out_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc <= '0; epoch <= 1'b0;
      wait_v <= 1'b0; rec_v <= 1'b0; wait_e <= 1'b0; rec_e <= 1'b0;
      wait_pc <= '0; rec_pc <= '0;
      rd_p <= '0; wr_p <= '0; fb_cnt <= '0;
    end else begin
      // PF_ADRSEND -> PF_WAIT -> PF_REC
      wait_v  <= pm_en;
      wait_pc <= pc;
      wait_e  <= epoch;
      rec_v   <= wait_v;
      rec_pc  <= wait_pc;
      rec_e   <= wait_e;
      if (redirect) begin
        pc     <= redirect_pc;
        epoch  <= !epoch;
        rd_p   <= '0;
        wr_p   <= '0;
        fb_cnt <= '0;
      end else begin
        if (pm_en) pc <= pc + 1'b1;
        if (fb_push) wr_p <= wr_p + 1'b1;
        if (fb_pop)  rd_p <= rd_p + 1'b1;
        fb_cnt <= fb_cnt + CW'(fb_push) - CW'(fb_pop);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fb_push) begin
      fb_b[wr_p]  <= pm_data;
      fb_pc[wr_p] <= rec_pc;
    end
  end

  initial assert (FB_DEPTH == 2**$clog2(FB_DEPTH)) else $error("FB_DEPTH must be a power of two");

endmodule
