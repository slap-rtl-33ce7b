// tb_slap_top: end-to-end test of a SLAP cluster at its default size (two
// GPCUs, eight SIMD4 CUs, 32-entry queues, 16 KB data caches).
//
// Both GPCUs run, at the same time, a loop that mixes scalar and vector work:
//   scalar: acc += T[i] (scalar loads through the data cache, which miss once
//           per line), pointer updates, loop count and branch;
//   vector: C[i] = A[i]*B[i] + A[i] over 16*K bytes per iteration, where K is
//           the number of CUs the GPCU owns (V_LD twice from the same address,
//           so the data memory merges allocations), stored with V_ST.
// Phase 1 uses the reset association (3 CUs / 5 CUs, SIMD12 / SIMD20) and
// integer lanes; then the CUs are reassigned on the fly (6 CUs / 2 CUs,
// SIMD24 / SIMD8) and the loop runs again in binary32 (V_FMUL, V_FADD). Memory is modelled with random latency and back-pressure.
// Every stored vector word and each scalar sum are checked against values
// computed here from the memory model's initial contents, and each mechanism
// (GPCU stall on a full CU queue, CU stall on an empty queue, triangular-load
// wait, register interlocks, forwarding on both sides, cache misses, CAM
// merges, reassignment) must have
// happened at least once.
module tb_slap_top;
  import slap_pkg::*;
  import fp_ref_pkg::*;

  localparam int NG = 2, NC = 8, AW = 10, N = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic          pm_we = 1'b0;
  logic [AW-1:0] pm_waddr = '0;
  bundle_t       pm_wdata = '0;
  logic [NG-1:0] start = '0, done;
  logic [AW-1:0] start_pc [NG];
  logic [$clog2(NC+1)-1:0] ncu [NG];
  logic                  cfg_valid = 1'b0, cfg_assign = 1'b0, cfg_ready;
  logic [$clog2(NC)-1:0] cfg_cu = '0;
  logic [$clog2(NG)-1:0] cfg_owner = '0;
  logic [NG-1:0] dc_req_valid, dc_req_ready, dc_resp_valid;
  mem_req_t      dc_req [NG];
  mem_resp_t     dc_resp [NG];
  logic [NC-1:0] cu_req_valid, cu_req_ready, cu_resp_valid;
  mem_req_t      cu_req [NC];
  mem_resp_t     cu_resp [NC];
  logic [NG-1:0] ev_issue, ev_stall_cu, ev_stall_raw, ev_stall_dc, ev_dc_miss;
  logic [NC-1:0] ev_iq_empty, ev_ld_wait, ev_hazard;

  slap_top dut (
    .clk, .rst_n, .pm_we, .pm_waddr, .pm_wdata, .start, .start_pc, .done, .ncu,
    .cfg_valid, .cfg_cu, .cfg_assign, .cfg_owner, .cfg_ready,
    .dc_mem_req_valid(dc_req_valid), .dc_mem_req(dc_req), .dc_mem_req_ready(dc_req_ready),
    .dc_mem_resp_valid(dc_resp_valid), .dc_mem_resp(dc_resp),
    .cu_mem_req_valid(cu_req_valid), .cu_mem_req(cu_req), .cu_mem_req_ready(cu_req_ready),
    .cu_mem_resp_valid(cu_resp_valid), .cu_mem_resp(cu_resp),
    .ev_issue, .ev_stall_cu, .ev_stall_raw, .ev_stall_dc, .ev_dc_miss,
    .ev_iq_empty, .ev_ld_wait, .ev_hazard);

  mem_hier_model #(.NP(NG)) u_dmem (
    .clk, .req_valid(dc_req_valid), .req(dc_req), .req_ready(dc_req_ready),
    .resp_valid(dc_resp_valid), .resp(dc_resp));
  mem_hier_model #(.NP(NC)) u_vmem (
    .clk, .req_valid(cu_req_valid), .req(cu_req), .req_ready(cu_req_ready),
    .resp_valid(cu_resp_valid), .resp(cu_resp));

  // ------------------------------------------------------------ event counts
  int n_stall_cu = 0, n_iq_empty = 0, n_ld_wait = 0, n_hazard = 0, n_raw = 0;
  int n_dc_stall = 0, n_miss = 0, n_merge = 0, n_cfg = 0, n_taken = 0, n_issue = 0;
  int n_vfwd = 0, n_sfwd = 0;
  logic [NC-1:0] merge_ev, vfwd_ev;
  logic [NG-1:0] sfwd_ev;
  // forwarding: an op issues while a register it reads is still marked busy
  for (genvar c = 0; c < NC; c++) begin : g_mon
    assign merge_ev[c] = dut.g_cu[c].u_cu.u_cam.do_alloc && dut.g_cu[c].u_cu.u_cam.al_hit;
    assign vfwd_ev[c]  = dut.g_cu[c].u_cu.can_issue &&
                         ((dut.g_cu[c].u_cu.is_alu && (dut.g_cu[c].u_cu.busy[dut.g_cu[c].u_cu.head.a] ||
                                                       dut.g_cu[c].u_cu.busy[dut.g_cu[c].u_cu.head.b])) ||
                          (dut.g_cu[c].u_cu.is_st && dut.g_cu[c].u_cu.busy[dut.g_cu[c].u_cu.head.d]));
  end
  for (genvar g = 0; g < NG; g++) begin : g_smon
    assign sfwd_ev[g] = dut.g_gpcu[g].u_gpcu.issue &&
                        (dut.g_gpcu[g].u_gpcu.s.op != S_NOP) && (dut.g_gpcu[g].u_gpcu.s.op != S_HALT) &&
                        dut.g_gpcu[g].u_gpcu.sbusy[dut.g_gpcu[g].u_gpcu.s.a];
  end
  always @(posedge clk) if (rst_n) begin
    n_stall_cu += $countones(ev_stall_cu);
    n_raw      += $countones(ev_stall_raw);
    n_dc_stall += $countones(ev_stall_dc);
    n_miss     += $countones(ev_dc_miss);
    n_issue    += $countones(ev_issue);
    n_iq_empty += $countones(ev_iq_empty & ~{NC{&done}});
    n_ld_wait  += $countones(ev_ld_wait);
    n_hazard   += $countones(ev_hazard);
    n_merge    += $countones(merge_ev);
    n_vfwd     += $countones(vfwd_ev);
    n_sfwd     += $countones(sfwd_ev);
    if (cfg_valid && cfg_ready) n_cfg++;
  end

  // ------------------------------------------------------------ assembler
  function automatic slot_t sl(input logic [3:0] op, input int d, input int a,
                               input int b, input int imm);
    slot_t x;
    x.op = op; x.d = 4'(d); x.a = 4'(a); x.b = 4'(b); x.imm = 16'(imm);
    return x;
  endfunction
  localparam slot_t NOP = '0;

  task automatic put(input int addr, input slot_t s, input slot_t v);
    @(negedge clk);
    pm_we = 1'b1; pm_waddr = AW'(addr); pm_wdata = {s, v};
    @(negedge clk);
    pm_we = 1'b0;
  endtask

  // registers: s1 A ptr, s2 B ptr, s3 C ptr, s4 count, s6 T ptr, s7 acc, s8 tmp
  task automatic load_prog(input int at, input int k, input int a, input int b,
                           input int c, input int t, input int res, input bit fp);
    logic [3:0] mulop, addop;
    int st;
    st = 16 * k;
    mulop = fp ? V_FMUL : V_MUL;
    addop = fp ? V_FADD : V_ADD;
    put(at+0,  sl(S_ADDI,1,0,0,a), NOP);
    put(at+1,  sl(S_ADDI,2,0,0,b), NOP);
    put(at+2,  sl(S_ADDI,3,0,0,c), NOP);
    put(at+3,  sl(S_ADDI,4,0,0,N), NOP);
    put(at+4,  sl(S_ADDI,6,0,0,t), NOP);
    put(at+5,  sl(S_ADDI,7,0,0,0), NOP);
    // loop
    put(at+6,  sl(S_LW,8,6,0,0),      sl(V_LD,1,1,0,0));
    put(at+7,  sl(S_ADDI,6,6,0,4),    sl(V_LD,2,2,0,0));
    put(at+8,  sl(S_ADD,7,7,8,0),     sl(V_LD,5,1,0,0));
    put(at+9,  sl(S_ADDI,1,1,0,st),   sl(mulop,3,1,2,0));
    put(at+10, sl(S_ADDI,2,2,0,st),   sl(addop,4,3,5,0));
    put(at+11, NOP,                   sl(V_ST,4,3,0,0));
    put(at+12, sl(S_ADDI,3,3,0,st),   NOP);
    put(at+13, sl(S_ADDI,4,4,0,-1),   NOP);
    put(at+14, sl(S_BNEZ,0,4,0,-8),   NOP);
    put(at+15, sl(S_SW,0,0,7,res),    NOP);
    put(at+16, sl(S_HALT,0,0,0,0),    NOP);
  endtask

  task automatic check_results(input string tag, input int k, input int a, input int b,
                               input int c, input int t, input int res, input bit fp);
    word_t acc;
    int bad;
    acc = 0; bad = 0;
    for (int i = 0; i < N; i++) begin
      for (int w = 0; w < 4 * k; w++) begin
        word_t off, x, y, got, e;
        off = word_t'(i * 16 * k + 4 * w);
        x   = u_vmem.peek_word(word_t'(a) + off);
        y   = u_vmem.peek_word(word_t'(b) + off);
        got = u_vmem.peek_word(word_t'(c) + off);
        e   = fp ? fadd(fmul(x, y), x) : x * y + x;
        checks++;
        if (got !== e) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL %s C[%0d] word %0d: got %h expected %h", tag, i, w, got, e);
        end
      end
      acc += u_dmem.peek_word(word_t'(t + 4 * i));
    end
    // the word after the last vector must be untouched (vector length = 4k)
    checks++;
    if (u_vmem.peek_word(word_t'(c + N * 16 * k)) !== u_vmem.init_word(word_t'(c + N * 16 * k))) begin
      failures++; $display("FAIL %s wrote past the vector length", tag);
    end
    checks++;
    if (u_dmem.peek_word(word_t'(res)) !== acc) begin
      failures++; $display("FAIL %s scalar sum %h expected %h", tag, u_dmem.peek_word(word_t'(res)), acc);
    end
  endtask

  task automatic run_both(input int pc0, input int pc1);
    int t0;
    @(negedge clk);
    start_pc[0] = AW'(pc0); start_pc[1] = AW'(pc1); start = '1;
    @(negedge clk);
    start = '0;
    t0 = cycle;
    wait (&done);
    $display("ran in %0d cycles (SIMD%0d and SIMD%0d)", cycle - t0, 4 * ncu[0], 4 * ncu[1]);
  endtask

  task automatic reassign(input int cu, input int owner);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_cu = 3'(cu); cfg_assign = 1'b1; cfg_owner = 1'(owner);
    @(posedge clk);
    while (!cfg_ready) @(posedge clk);
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  int ab_base [4] = '{'h1000, 'h2000, 'h3000, 'h4000};
  initial begin
    start_pc[0] = '0; start_pc[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // phase 1: reset association, GPCU0 owns CUs 0,1,4 and GPCU1 owns 2,3,5,6,7
    load_prog(0,   3, 'h1000, 'h2000, 'h5000, 'h0100, 'h0800, 0);
    load_prog(64,  5, 'h3000, 'h4000, 'h6000, 'h0300, 'h0810, 0);
    checks++;
    if (ncu[0] != 3 || ncu[1] != 5) begin failures++; $display("FAIL reset association %0d/%0d", ncu[0], ncu[1]); end
    run_both(0, 64);
    check_results("p1 gpcu0", 3, 'h1000, 'h2000, 'h5000, 'h0100, 'h0800, 0);
    check_results("p1 gpcu1", 5, 'h3000, 'h4000, 'h6000, 'h0300, 'h0810, 0);
    // phase 2 runs in binary32: fill A and B with normal numbers
    for (int w = 0; w < 4096 / 4; w++)
      foreach (ab_base[j]) u_vmem.poke_word(word_t'(ab_base[j] + 4 * w), rnd(120, 134));
    // phase 2: CUs 2,3,5 move to GPCU0 (6 CUs), GPCU1 keeps 6,7
    reassign(2, 0); reassign(3, 0); reassign(5, 0);
    checks++;
    if (ncu[0] != 6 || ncu[1] != 2) begin failures++; $display("FAIL new association %0d/%0d", ncu[0], ncu[1]); end
    load_prog(128, 6, 'h1000, 'h2000, 'h7000, 'h0100, 'h0820, 1);
    load_prog(192, 2, 'h3000, 'h4000, 'h0A00, 'h0300, 'h0830, 1);
    run_both(128, 192);
    check_results("p2 gpcu0", 6, 'h1000, 'h2000, 'h7000, 'h0100, 'h0820, 1);
    check_results("p2 gpcu1", 2, 'h3000, 'h4000, 'h0A00, 'h0300, 'h0830, 1);

    $display("events: gpcu_stall_cu_full=%0d cu_iq_empty=%0d cu_ld_wait=%0d cu_hazard=%0d gpcu_raw=%0d dcache_stall=%0d dcache_miss=%0d cam_merge=%0d reassign=%0d issued=%0d vfwd=%0d sfwd=%0d",
             n_stall_cu, n_iq_empty, n_ld_wait, n_hazard, n_raw, n_dc_stall, n_miss, n_merge, n_cfg, n_issue, n_vfwd, n_sfwd);
    checks++; if (n_stall_cu == 0) begin failures++; $display("FAIL GPCU never stalled on a full CU queue"); end
    checks++; if (n_iq_empty == 0) begin failures++; $display("FAIL CU never waited on an empty queue"); end
    checks++; if (n_ld_wait  == 0) begin failures++; $display("FAIL no triangular-load wait"); end
    checks++; if (n_hazard   == 0) begin failures++; $display("FAIL no CU register interlock"); end
    checks++; if (n_raw      == 0) begin failures++; $display("FAIL no GPCU register interlock"); end
    checks++; if (n_miss     == 0) begin failures++; $display("FAIL no data cache miss"); end
    checks++; if (n_merge    == 0) begin failures++; $display("FAIL no CAM merge"); end
    checks++; if (n_vfwd     == 0) begin failures++; $display("FAIL no vector-register forwarding"); end
    checks++; if (n_sfwd     == 0) begin failures++; $display("FAIL no scalar-register forwarding"); end
    checks++; if (n_cfg      != 3) begin failures++; $display("FAIL reassignments %0d", n_cfg); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
