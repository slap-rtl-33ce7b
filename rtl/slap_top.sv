// slap_top: a SLAP VLIW cluster of NG GPCUs sharing a pool of NC vector
// Compute Units, with a shared program memory. Defaults are the configuration
// the paper draws and evaluates: two GPCUs, eight SIMD4 CUs, 32-entry CU
// instruction queues, and a 16 KB scalar data cache per GPCU.
//
// Each GPCU fetches from its own port of prog_mem, runs the scalar slot, and
// broadcasts vector slots and vector addresses through cu_xbar to the CUs it
// currently owns; each CU executes them at its own pace out of its queues.
// Scalar data goes through the GPCU's data cache; vector data goes through
// each CU's own data memory and memory port ("each CU having an independent
// port to memory", as the paper puts it). The memory hierarchy behind those
// ports (shared SRAM, DRAM) is not part of this design: every port is brought
// out, as a valid/ready request channel and a response channel.
//
// Ports: program loading (pm_*), per-GPCU start/start_pc/done, the CU
// reassignment channel (cfg_*), NG data-cache memory ports (dc_mem_*), NC CU
// memory ports (cu_mem_*), and per-cycle status pulses for counting stalls.
module slap_top
  import slap_pkg::*;
#(
  parameter int unsigned NG           = 2,
  parameter int unsigned NC           = 8,
  parameter int unsigned IQ_DEPTH     = 32,
  parameter int unsigned AQ_DEPTH     = 32,
  parameter int unsigned CAM_ENTRIES  = 32,
  parameter int unsigned DCACHE_BYTES = 16384,
  parameter int unsigned PM_DEPTH     = 1024,
  parameter logic [NC-1:0] RESET_ASSIGN = 8'hFF,
  parameter logic [NC-1:0] RESET_OWNER  = 8'b1110_1100,
  localparam int unsigned AW = $clog2(PM_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // program loading
  input  logic          pm_we,
  input  logic [AW-1:0] pm_waddr,
  input  bundle_t       pm_wdata,
  // GPCU control
  input  logic [NG-1:0] start,
  input  logic [AW-1:0] start_pc [NG],
  output logic [NG-1:0] done,
  output logic [$clog2(NC+1)-1:0] ncu [NG],
  // CU reassignment
  input  logic                  cfg_valid,
  input  logic [$clog2(NC)-1:0] cfg_cu,
  input  logic                  cfg_assign,
  input  logic [$clog2(NG)-1:0] cfg_owner,
  output logic                  cfg_ready,
  // data-cache memory ports
  output logic [NG-1:0] dc_mem_req_valid,
  output mem_req_t      dc_mem_req       [NG],
  input  logic [NG-1:0] dc_mem_req_ready,
  input  logic [NG-1:0] dc_mem_resp_valid,
  input  mem_resp_t     dc_mem_resp      [NG],
  // CU memory ports
  output logic [NC-1:0] cu_mem_req_valid,
  output mem_req_t      cu_mem_req       [NC],
  input  logic [NC-1:0] cu_mem_req_ready,
  input  logic [NC-1:0] cu_mem_resp_valid,
  input  mem_resp_t     cu_mem_resp      [NC],
  // status pulses
  output logic [NG-1:0] ev_issue,
  output logic [NG-1:0] ev_stall_cu,
  output logic [NG-1:0] ev_stall_raw,
  output logic [NG-1:0] ev_stall_dc,
  output logic [NG-1:0] ev_dc_miss,
  output logic [NC-1:0] ev_iq_empty,
  output logic [NC-1:0] ev_ld_wait,
  output logic [NC-1:0] ev_hazard
);
  logic [NG-1:0] pm_en;
  logic [AW-1:0] pm_addr [NG];
  bundle_t       pm_data [NG];

  prog_mem #(.DEPTH(PM_DEPTH), .NPORT(NG)) u_pm (
    .clk, .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata),
    .rd_en(pm_en), .rd_addr(pm_addr), .rd_data(pm_data));

  disp_t         g_disp [NG];
  logic [NG-1:0] g_own_any, g_ins_full, g_ld_full, g_st_full, g_idle;
  logic [NC-1:0] c_ins_push, c_ld_push, c_st_push, c_ins_full, c_ld_full, c_st_full, c_idle;
  slot_t         c_ins  [NC];
  word_t         c_addr [NC];

  cu_xbar #(.NG(NG), .NC(NC), .RESET_ASSIGN(RESET_ASSIGN), .RESET_OWNER(RESET_OWNER)) u_xbar (
    .clk, .rst_n, .cfg_valid, .cfg_cu, .cfg_assign, .cfg_owner, .cfg_ready,
    .g_disp, .g_own_any, .g_ins_full, .g_ld_full, .g_st_full, .g_idle, .g_ncu(ncu),
    .c_ins_push, .c_ins, .c_ld_push, .c_st_push, .c_addr,
    .c_ins_full, .c_ld_full, .c_st_full, .c_idle);

  for (genvar g = 0; g < NG; g++) begin : g_gpcu
    logic  dc_req_valid, dc_req_ready, dc_req_we, dc_resp_valid;
    word_t dc_req_addr, dc_req_wdata, dc_resp_rdata;

    slap_gpcu #(.AW(AW)) u_gpcu (
      .clk, .rst_n, .start(start[g]), .start_pc(start_pc[g]), .done(done[g]),
      .pm_en(pm_en[g]), .pm_addr(pm_addr[g]), .pm_data(pm_data[g]),
      .dc_req_valid, .dc_req_ready, .dc_req_we, .dc_req_addr, .dc_req_wdata,
      .dc_resp_valid, .dc_resp_rdata,
      .disp(g_disp[g]), .own_any(g_own_any[g]), .cu_ins_full(g_ins_full[g]),
      .cu_ld_full(g_ld_full[g]), .cu_st_full(g_st_full[g]), .cu_idle(g_idle[g]),
      .ev_issue(ev_issue[g]), .ev_stall_cu(ev_stall_cu[g]),
      .ev_stall_raw(ev_stall_raw[g]), .ev_stall_dc(ev_stall_dc[g]));

    gpcu_dcache #(.SIZE_BYTES(DCACHE_BYTES)) u_dcache (
      .clk, .rst_n, .req_valid(dc_req_valid), .req_ready(dc_req_ready),
      .req_we(dc_req_we), .req_addr(dc_req_addr), .req_wdata(dc_req_wdata),
      .resp_valid(dc_resp_valid), .resp_rdata(dc_resp_rdata),
      .mem_req_valid(dc_mem_req_valid[g]), .mem_req(dc_mem_req[g]),
      .mem_req_ready(dc_mem_req_ready[g]), .mem_resp_valid(dc_mem_resp_valid[g]),
      .mem_resp(dc_mem_resp[g]), .ev_miss(ev_dc_miss[g]));
  end

  for (genvar c = 0; c < NC; c++) begin : g_cu
    slap_cu #(.IQ_DEPTH(IQ_DEPTH), .AQ_DEPTH(AQ_DEPTH), .CAM_ENTRIES(CAM_ENTRIES)) u_cu (
      .clk, .rst_n,
      .ins_push(c_ins_push[c]), .ins(c_ins[c]), .ld_push(c_ld_push[c]),
      .st_push(c_st_push[c]), .addr(c_addr[c]),
      .ins_full(c_ins_full[c]), .ld_full(c_ld_full[c]), .st_full(c_st_full[c]),
      .mem_req_valid(cu_mem_req_valid[c]), .mem_req(cu_mem_req[c]),
      .mem_req_ready(cu_mem_req_ready[c]), .mem_resp_valid(cu_mem_resp_valid[c]),
      .mem_resp(cu_mem_resp[c]),
      .idle(c_idle[c]), .ev_iq_empty(ev_iq_empty[c]), .ev_ld_wait(ev_ld_wait[c]),
      .ev_hazard(ev_hazard[c]));
  end

endmodule
