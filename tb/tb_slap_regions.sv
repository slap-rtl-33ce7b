// tb_slap_regions: a synthetic stand-in for a baseband "combo trace" made of
// five regions that differ in their mix of scalar and vector work, run on the
// full cluster at its default size (GPCU0 with its reset CUs 0, 1 and 4,
// SIMD12). The original traces are product code for another instruction set
// and are not available; what is kept here is their shape:
//   regions 1, 3, 5: scalar-heavy -- a table walk through the data cache
//                    (64 words, acc += T[i]) with one vector op per iteration;
//   regions 2, 4:    mixed -- a vector loop (C = A + B, then C = A - B) over
//                    16 x 48 bytes with scalar pointer and counter work.
// Each region is started on its own and runs until done, so its cycles,
// issues, cache misses and CU stalls can be counted separately.
// Checked: every scalar sum and stored vector word; the table misses the cache
// in region 1 only. Vector loads and stores never use the GPCU data cache, so
// the mixed regions must leave the table cached and regions 3 and 5 must run
// without a miss, which is the cache-pollution argument made for this
// architecture. Also checked: each region type shows the stall it is expected
// to (CUs waiting on an empty queue in scalar regions, triangular-load waits in
// mixed ones).
module tb_slap_regions;
  import slap_pkg::*;

  localparam int NG = 2, NC = 8, AW = 10;
  localparam int NT = 64, NV = 16, K = 3, ST = 16 * K;
  localparam int T_BASE = 'h0400, A_BASE = 'h1000, B_BASE = 'h2000;
  localparam int C2_BASE = 'h5000, C4_BASE = 'h6000, RES = 'h0200;

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
  logic                  cfg_ready;
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
    .cfg_valid(1'b0), .cfg_cu('0), .cfg_assign(1'b0), .cfg_owner('0), .cfg_ready,
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

  // ------------------------------------------------------------ per-region counts
  int n_issue, n_vpush, n_miss, n_iq_empty, n_ld_wait, n_stall_cu;
  logic [NC-1:0] own0;
  for (genvar c = 0; c < NC; c++) begin : g_own
    assign own0[c] = (c == 0) || (c == 1) || (c == 4);
  end
  always @(posedge clk) if (rst_n && !done[0]) begin
    n_issue    += int'(ev_issue[0]);
    n_vpush    += int'(dut.g_gpcu[0].u_gpcu.disp.ins_push);
    n_miss     += int'(ev_dc_miss[0]);
    n_stall_cu += int'(ev_stall_cu[0]);
    n_iq_empty += $countones(ev_iq_empty & own0);
    n_ld_wait  += $countones(ev_ld_wait & own0);
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

  // scalar-heavy region: s7 = sum of T[0..NT-1], stored at res
  task automatic scalar_region(input int at, input int res);
    put(at+0, sl(S_ADDI,6,0,0,T_BASE), NOP);
    put(at+1, sl(S_ADDI,4,0,0,NT),     NOP);
    put(at+2, sl(S_ADDI,7,0,0,0),      NOP);
    put(at+3, sl(S_LW,8,6,0,0),        sl(V_ADD,9,9,9,0));
    put(at+4, sl(S_ADDI,6,6,0,4),      NOP);
    put(at+5, sl(S_ADD,7,7,8,0),       NOP);
    put(at+6, sl(S_ADDI,4,4,0,-1),     NOP);
    put(at+7, sl(S_BNEZ,0,4,0,-4),     NOP);
    put(at+8, sl(S_SW,0,0,7,res),      NOP);
    put(at+9, sl(S_HALT,0,0,0,0),      NOP);
  endtask

  // mixed region: C = A op B over NV vectors of ST bytes; s9 = NV + ... + 1
  task automatic mixed_region(input int at, input logic [3:0] op, input int c, input int res);
    put(at+0,  sl(S_ADDI,1,0,0,A_BASE), NOP);
    put(at+1,  sl(S_ADDI,2,0,0,B_BASE), NOP);
    put(at+2,  sl(S_ADDI,3,0,0,c),      NOP);
    put(at+3,  sl(S_ADDI,4,0,0,NV),     NOP);
    put(at+4,  sl(S_ADDI,9,0,0,0),      NOP);
    put(at+5,  sl(S_ADD,9,9,4,0),       sl(V_LD,1,1,0,0));
    put(at+6,  sl(S_ADDI,1,1,0,ST),     sl(V_LD,2,2,0,0));
    put(at+7,  sl(S_ADDI,2,2,0,ST),     sl(op,3,1,2,0));
    put(at+8,  NOP,                     sl(V_ST,3,3,0,0));
    put(at+9,  sl(S_ADDI,3,3,0,ST),     NOP);
    put(at+10, sl(S_ADDI,4,4,0,-1),     NOP);
    put(at+11, sl(S_BNEZ,0,4,0,-6),     NOP);
    put(at+12, sl(S_SW,0,0,9,res),      NOP);
    put(at+13, sl(S_HALT,0,0,0,0),      NOP);
  endtask

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  int r_cycles [5], r_issue [5], r_vpush [5], r_miss [5], r_empty [5], r_ldw [5], r_stall [5];

  task automatic run_region(input int r, input int pc);
    int t0;
    @(negedge clk);
    n_issue = 0; n_vpush = 0; n_miss = 0; n_iq_empty = 0; n_ld_wait = 0; n_stall_cu = 0;
    start_pc[0] = AW'(pc); start = 2'b01;
    @(negedge clk);
    start = '0;
    t0 = cycle;
    wait (done[0]);
    r_cycles[r] = cycle - t0; r_issue[r] = n_issue; r_vpush[r] = n_vpush;
    r_miss[r] = n_miss; r_empty[r] = n_iq_empty; r_ldw[r] = n_ld_wait; r_stall[r] = n_stall_cu;
    $display("region %0d: %0d cycles, %0d bundles issued, %0d vector slots, %0d cache misses, CU empty-queue waits %0d, load waits %0d, GPCU full-queue stalls %0d",
             r + 1, r_cycles[r], r_issue[r], r_vpush[r], r_miss[r], r_empty[r], r_ldw[r], r_stall[r]);
  endtask

  task automatic check_vec(input string tag, input int c, input bit sub);
    int bad;
    bad = 0;
    for (int w = 0; w < NV * ST / 4; w++) begin
      word_t x, y, e, got;
      x   = u_vmem.peek_word(word_t'(A_BASE + 4 * w));
      y   = u_vmem.peek_word(word_t'(B_BASE + 4 * w));
      got = u_vmem.peek_word(word_t'(c + 4 * w));
      e   = sub ? x - y : x + y;
      checks++;
      if (got !== e) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s word %0d: got %h expected %h", tag, w, got, e);
      end
    end
  endtask

  initial begin
    word_t tsum;
    start_pc[0] = '0; start_pc[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    scalar_region(0,  RES + 0);
    mixed_region (32, V_ADD, C2_BASE, RES + 4);
    scalar_region(64, RES + 8);
    mixed_region (96, V_SUB, C4_BASE, RES + 12);
    scalar_region(128, RES + 16);
    chk(ncu[0] == 3, "GPCU0 owns 3 CUs after reset");

    run_region(0, 0);
    run_region(1, 32);
    run_region(2, 64);
    run_region(3, 96);
    run_region(4, 128);

    tsum = 0;
    for (int i = 0; i < NT; i++) tsum += u_dmem.peek_word(word_t'(T_BASE + 4 * i));
    chk(u_dmem.peek_word(RES + 0)  == tsum, "region 1 sum");
    chk(u_dmem.peek_word(RES + 8)  == tsum, "region 3 sum");
    chk(u_dmem.peek_word(RES + 16) == tsum, "region 5 sum");
    chk(u_dmem.peek_word(RES + 4)  == NV * (NV + 1) / 2, "region 2 scalar count");
    chk(u_dmem.peek_word(RES + 12) == NV * (NV + 1) / 2, "region 4 scalar count");
    check_vec("region 2", C2_BASE, 1'b0);
    check_vec("region 4", C4_BASE, 1'b1);
    chk(u_vmem.peek_word(word_t'(C2_BASE + NV * ST)) == u_vmem.init_word(word_t'(C2_BASE + NV * ST)),
        "region 2 wrote past its vectors");

    // cache behaviour: one miss per 16-byte line of the table, then none
    chk(r_miss[0] == NT / 4, $sformatf("region 1 misses %0d, expected %0d", r_miss[0], NT / 4));
    chk(r_miss[1] == 0 && r_miss[3] == 0, "mixed regions touched the data cache");
    chk(r_miss[2] == 0, $sformatf("region 3 misses %0d: table evicted", r_miss[2]));
    chk(r_miss[4] == 0, $sformatf("region 5 misses %0d: table evicted", r_miss[4]));
    chk(r_vpush[0] == NT && r_vpush[1] == 4 * NV, "vector slot counts");
    // stalls characteristic of each region type
    chk(r_empty[0] > 0 && r_empty[2] > 0, "CUs never waited in the scalar regions");
    chk(r_ldw[1] > 0 && r_ldw[3] > 0, "no triangular-load wait in the mixed regions");
    chk(r_cycles[2] < r_cycles[0], "warm-cache scalar region not faster than cold one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
