// cu_xbar: dynamic association of Compute Units to GPCUs, which gives each
// GPCU a vector length that can change while the machine runs.
//
// Each CU has an owner register (a GPCU index and an "assigned" bit). A GPCU's
// dispatch pushes go to every CU it owns in the same cycle, and the GPCU sees
// one combined full flag per queue type: it stalls while any owned queue is
// full, and it sees its CUs idle only when all of them are. This is the
// paper's rule: instructions are pushed to all queues at once, each CU pops at
// its own pace. With SIMD4 CUs a GPCU owning k CUs processes SIMD(4k).
//
// The k CUs of one GPCU are ranked by CU index (rank 0 is the lowest index),
// and the crossbar adds 16*rank bytes to the vector address the GPCU sends, so
// one vector load or store covers 16*k contiguous bytes. The rank rule and the
// reassignment handshake are this design's choices: the paper says the
// association is dynamic and set by the number of data sets to process, but
// not how it is changed. Here cfg_valid asks to give CU cfg_cu to GPCU
// cfg_owner (or to nobody, cfg_assign=0); cfg_ready is high, and the change is
// made at that clock edge, only when the CU has drained and no GPCU is pushing
// to it. The reset association is the one the paper's figure of two GPCUs and
// eight CUs draws (RESET_ASSIGN / RESET_OWNER).
module cu_xbar
  import slap_pkg::*;
#(
  parameter int unsigned NG = 2,
  parameter int unsigned NC = 8,
  parameter logic [NC-1:0] RESET_ASSIGN = 8'hFF,
  parameter logic [NC-1:0] RESET_OWNER  = 8'b1110_1100   // bit c = owner of CU c (NG=2)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // reassignment
  input  logic                  cfg_valid,
  input  logic [$clog2(NC)-1:0] cfg_cu,
  input  logic                  cfg_assign,
  input  logic [$clog2(NG)-1:0] cfg_owner,
  output logic                  cfg_ready,
  // GPCU side
  input  disp_t                 g_disp      [NG],
  output logic [NG-1:0]         g_own_any,
  output logic [NG-1:0]         g_ins_full,
  output logic [NG-1:0]         g_ld_full,
  output logic [NG-1:0]         g_st_full,
  output logic [NG-1:0]         g_idle,
  output logic [$clog2(NC+1)-1:0] g_ncu     [NG],
  // CU side
  output logic [NC-1:0]         c_ins_push,
  output slot_t                 c_ins       [NC],
  output logic [NC-1:0]         c_ld_push,
  output logic [NC-1:0]         c_st_push,
  output word_t                 c_addr      [NC],
  input  logic [NC-1:0]         c_ins_full,
  input  logic [NC-1:0]         c_ld_full,
  input  logic [NC-1:0]         c_st_full,
  input  logic [NC-1:0]         c_idle
);
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  logic [NC-1:0]  assigned;
  logic [GW-1:0]  owner [NC];
  logic [$clog2(NC+1)-1:0] rank [NC];

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      rank[c] = '0;
      for (int k = 0; k < c; k++)
        if (assigned[k] && assigned[c] && owner[k] == owner[c]) rank[c] = rank[c] + 1'b1;
    end
    for (int g = 0; g < NG; g++) begin
      g_own_any[g]  = 1'b0;
      g_ins_full[g] = 1'b0;
      g_ld_full[g]  = 1'b0;
      g_st_full[g]  = 1'b0;
      g_idle[g]     = 1'b1;
      g_ncu[g]      = '0;
    end
    for (int c = 0; c < NC; c++) begin
      c_ins_push[c] = 1'b0;
      c_ld_push[c]  = 1'b0;
      c_st_push[c]  = 1'b0;
      c_ins[c]      = g_disp[owner[c]].ins;
      c_addr[c]     = g_disp[owner[c]].addr + (word_t'(rank[c]) << 4);
      if (assigned[c]) begin
        c_ins_push[c] = g_disp[owner[c]].ins_push;
        c_ld_push[c]  = g_disp[owner[c]].ld_push;
        c_st_push[c]  = g_disp[owner[c]].st_push;
        g_own_any[owner[c]]  = 1'b1;
        g_ins_full[owner[c]] = g_ins_full[owner[c]] | c_ins_full[c];
        g_ld_full[owner[c]]  = g_ld_full[owner[c]]  | c_ld_full[c];
        g_st_full[owner[c]]  = g_st_full[owner[c]]  | c_st_full[c];
        g_idle[owner[c]]     = g_idle[owner[c]]     & c_idle[c];
        g_ncu[owner[c]]      = g_ncu[owner[c]] + 1'b1;
      end
    end
    cfg_ready = c_idle[cfg_cu] && !c_ins_push[cfg_cu] && !c_ld_push[cfg_cu]
                && !c_st_push[cfg_cu];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      assigned <= RESET_ASSIGN;
      for (int c = 0; c < NC; c++) owner[c] <= GW'(RESET_OWNER[c]);
    end else if (cfg_valid && cfg_ready) begin
      assigned[cfg_cu] <= cfg_assign;
      owner[cfg_cu]    <= GW'(cfg_owner);
    end
  end

endmodule
