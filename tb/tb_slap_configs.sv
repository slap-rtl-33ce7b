// tb_slap_configs: the six cluster configurations of the FIFO-depth / data
// cache sweep (instruction queues of 24 or 32 entries, GPCU data caches of 8,
// 16 or 32 KB), side by side in one simulation, all running the same program
// on GPCU0 with its reset CUs (0, 1, 4: SIMD12).
// The program walks a 12 KB scalar table twice with a 16-byte stride (one
// word per cache line, 768 lines per pass), then runs a SIMD12 vector loop
// C = A + B over 32 vectors. Checked for every configuration: the scalar sum,
// every vector word, and the number of data-cache misses, which is computed
// here from a model of a direct-mapped cache of that size (768 + 512 misses
// with 8 KB, where the second pass loses the lines the table's far end
// evicted; 768 with 16 and 32 KB, where the second pass hits everywhere).
// The finishing cycle and the GPCU full-queue stalls are printed per
// configuration; the memory model's random latencies differ per instance.
module tb_slap_configs;
  import slap_pkg::*;

  localparam int NG = 2, NC = 8, AW = 10, NCFG = 6;
  localparam int FIFO  [NCFG] = '{24, 24, 24, 32, 32, 32};
  localparam int CACHE [NCFG] = '{8192, 16384, 32768, 8192, 16384, 32768};
  localparam int T_BASE = 'h4000, NW = 768, STRIDE = 16;
  localparam int A_BASE = 'h1000, B_BASE = 'h2000, C_BASE = 'h5000;
  localparam int NV = 32, K = 3, ST = 16 * K, RES = 'h0200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic          pm_we = 1'b0;
  logic [AW-1:0] pm_waddr = '0;
  bundle_t       pm_wdata = '0;
  logic [NG-1:0] start = '0;
  logic [AW-1:0] start_pc [NG];
  logic [NCFG-1:0] checked;

  // expected misses of a direct-mapped cache with 16-byte lines
  function automatic int model_misses(input int bytes);
    int tags [];
    int n;
    tags = new [bytes / 16];
    foreach (tags[i]) tags[i] = -1;
    n = 0;
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < NW; i++) begin
        int line, idx;
        line = (T_BASE + STRIDE * i) / 16;
        idx  = line % (bytes / 16);
        if (tags[idx] != line) begin n++; tags[idx] = line; end
      end
    return n;
  endfunction

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    logic [NG-1:0] done;
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

    slap_top #(.IQ_DEPTH(FIFO[i]), .DCACHE_BYTES(CACHE[i])) dut (
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

    int n_miss = 0, n_stall = 0, t_end = 0;
    always @(posedge clk) if (rst_n && !done[0]) begin
      n_miss  += int'(ev_dc_miss[0]);
      n_stall += int'(ev_stall_cu[0]);
      t_end    = cycle;
    end

    initial begin
      word_t tsum;
      int bad, exp_miss;
      checked[i] = 1'b0;
      wait (start[0]);
      @(negedge clk);
      wait (done[0]);
      tsum = 0;
      for (int j = 0; j < NW; j++) tsum += u_dmem.peek_word(word_t'(T_BASE + STRIDE * j));
      tsum = 2 * tsum;
      checks++;
      if (u_dmem.peek_word(RES) !== tsum) begin
        failures++; $display("FAIL config %0d: scalar sum %h expected %h", i, u_dmem.peek_word(RES), tsum);
      end
      bad = 0;
      for (int w = 0; w < NV * ST / 4; w++) begin
        word_t e;
        e = u_vmem.peek_word(word_t'(A_BASE + 4 * w)) + u_vmem.peek_word(word_t'(B_BASE + 4 * w));
        checks++;
        if (u_vmem.peek_word(word_t'(C_BASE + 4 * w)) !== e) begin
          failures++; bad++;
          if (bad < 4) $display("FAIL config %0d: C word %0d", i, w);
        end
      end
      exp_miss = model_misses(CACHE[i]);
      checks++;
      if (n_miss != exp_miss) begin
        failures++; $display("FAIL config %0d: %0d cache misses, expected %0d", i, n_miss, exp_miss);
      end
      $display("config %0d (%0d-entry queues, %0d KB data cache): done at cycle %0d, %0d misses, %0d GPCU full-queue stalls",
               i, FIFO[i], CACHE[i] / 1024, t_end, n_miss, n_stall);
      checked[i] = 1'b1;
    end
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

  initial begin
    start_pc[0] = '0; start_pc[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // two passes over the table: s7 += T[16*j]
    put(0,  sl(S_ADDI,5,0,0,2),        NOP);
    put(1,  sl(S_ADDI,7,0,0,0),        NOP);
    put(2,  sl(S_ADDI,6,0,0,T_BASE),   NOP);
    put(3,  sl(S_ADDI,4,0,0,NW),       NOP);
    put(4,  sl(S_LW,8,6,0,0),          NOP);
    put(5,  sl(S_ADDI,6,6,0,STRIDE),   NOP);
    put(6,  sl(S_ADD,7,7,8,0),         NOP);
    put(7,  sl(S_ADDI,4,4,0,-1),       NOP);
    put(8,  sl(S_BNEZ,0,4,0,-4),       NOP);
    put(9,  sl(S_ADDI,5,5,0,-1),       NOP);
    put(10, sl(S_BNEZ,0,5,0,-8),       NOP);
    put(11, sl(S_SW,0,0,7,RES),        NOP);
    // vector loop: C = A + B
    put(12, sl(S_ADDI,1,0,0,A_BASE),   NOP);
    put(13, sl(S_ADDI,2,0,0,B_BASE),   NOP);
    put(14, sl(S_ADDI,3,0,0,C_BASE),   NOP);
    put(15, sl(S_ADDI,4,0,0,NV),       NOP);
    put(16, sl(S_ADDI,1,1,0,ST),       sl(V_LD,1,1,0,0));
    put(17, sl(S_ADDI,2,2,0,ST),       sl(V_LD,2,2,0,0));
    put(18, NOP,                       sl(V_ADD,3,1,2,0));
    put(19, sl(S_ADDI,3,3,0,ST),       sl(V_ST,3,3,0,0));
    put(20, sl(S_ADDI,4,4,0,-1),       NOP);
    put(21, sl(S_BNEZ,0,4,0,-5),       NOP);
    put(22, sl(S_HALT,0,0,0,0),        NOP);
    @(negedge clk);
    start = 2'b01;
    @(negedge clk);
    start = '0;
    wait (&checked);
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
