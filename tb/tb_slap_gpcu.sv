// tb_slap_gpcu: one GPCU with its data cache, program memory and a
// random-latency memory; the CU side is played by the testbench, which raises
// the queue-full flags at random.
//   * the program's scalar results (a loop sum, a load-use chain) reach memory;
//   * vector slots leave in program order, with the addresses the GPCU
//     computes (s[a] + imm), load/store address pushes on V_LD/V_ST only;
//   * nothing is pushed while the CUs report a full queue (the paper's GPCU
//     stall), and that stall does happen;
//   * done rises after HALT once the CUs report idle.
module tb_slap_gpcu;
  import slap_pkg::*;
  localparam int AW = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic start = 0, done, pm_en;
  logic [AW-1:0] start_pc = '0, pm_addr;
  bundle_t pm_data;
  logic dc_req_valid, dc_req_ready, dc_req_we, dc_resp_valid;
  word_t dc_req_addr, dc_req_wdata, dc_resp_rdata;
  disp_t disp;
  logic own_any = 1, cu_ins_full = 0, cu_ld_full = 0, cu_st_full = 0, cu_idle = 1;
  logic ev_issue, ev_stall_cu, ev_stall_raw, ev_stall_dc;

  logic we = 0;
  logic [AW-1:0] waddr = '0;
  bundle_t wdata = '0;
  logic [AW-1:0] rd_addr [1];
  bundle_t rd_data [1];
  assign rd_addr[0] = pm_addr;
  assign pm_data = rd_data[0];
  prog_mem #(.NPORT(1)) u_pm (.clk, .we, .waddr, .wdata, .rd_en(pm_en), .rd_addr, .rd_data);

  logic mem_req_valid, mem_req_ready, mem_resp_valid, ev_miss;
  mem_req_t mem_req; mem_resp_t mem_resp;
  mem_req_t mreq [1]; mem_resp_t mresp [1];
  assign mreq[0] = mem_req;
  assign mem_resp = mresp[0];
  gpcu_dcache u_dc (.clk, .rst_n, .req_valid(dc_req_valid), .req_ready(dc_req_ready),
    .req_we(dc_req_we), .req_addr(dc_req_addr), .req_wdata(dc_req_wdata),
    .resp_valid(dc_resp_valid), .resp_rdata(dc_resp_rdata), .mem_req_valid, .mem_req,
    .mem_req_ready, .mem_resp_valid, .mem_resp, .ev_miss);
  mem_hier_model #(.NP(1)) u_mem (.clk, .req_valid(mem_req_valid), .req(mreq),
    .req_ready(mem_req_ready), .resp_valid(mem_resp_valid), .resp(mresp));

  slap_gpcu #(.AW(AW)) dut (.*);

  function automatic slot_t sl(input logic [3:0] op, input int d, input int a, input int b, input int imm);
    slot_t x; x.op = op; x.d = 4'(d); x.a = 4'(a); x.b = 4'(b); x.imm = 16'(imm); return x;
  endfunction
  task automatic put(input int at, input slot_t s, input slot_t v);
    @(negedge clk); we = 1; waddr = AW'(at); wdata = {s, v};
    @(negedge clk); we = 0;
  endtask
  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // logs of pushes: instructions leave at DP, addresses one stage later at DC
  typedef struct { word_t addr; logic ld, st; } apush_t;
  logic [3:0] ins_q [$];
  apush_t     adr_q [$];
  int n_full_stall = 0, bad_push = 0;
  always @(posedge clk) if (rst_n) begin
    if ((disp.ins_push && cu_ins_full) || (disp.ld_push && cu_ld_full) || (disp.st_push && cu_st_full))
      bad_push++;
    if (ev_stall_cu) n_full_stall++;
    if (disp.ins_push) ins_q.push_back(disp.ins.op);
    if (disp.ld_push || disp.st_push) adr_q.push_back('{disp.addr, disp.ld_push, disp.st_push});
  end
  // random CU back-pressure
  always @(negedge clk) begin
    cu_ins_full <= ($urandom_range(99) < 30);
    cu_ld_full  <= ($urandom_range(99) < 20);
    cu_st_full  <= ($urandom_range(99) < 20);
  end

  localparam slot_t NOP = '0;
  initial begin
    put(0,  sl(S_ADDI,1,0,0,5),      NOP);
    put(1,  sl(S_ADDI,2,0,0,'h100),  NOP);
    put(2,  sl(S_ADDI,3,0,0,0),      NOP);
    put(3,  sl(S_ADD,3,3,1,0),       sl(V_LD,1,2,0,0));
    put(4,  sl(S_ADDI,2,2,0,32),     sl(V_ADD,2,1,1,0));
    put(5,  sl(S_ADDI,1,1,0,-1),     sl(V_ST,2,2,0,-32));
    put(6,  sl(S_BNEZ,0,1,0,-3),     NOP);
    put(7,  sl(S_SW,0,0,3,'h200),    NOP);
    put(8,  sl(S_LW,4,0,0,'h200),    NOP);
    put(9,  sl(S_ADDI,5,4,0,1),      NOP);
    put(10, sl(S_SW,0,0,5,'h204),    NOP);
    put(11, sl(S_SUB,6,5,1,0),       NOP);
    put(12, sl(S_SW,0,0,6,'h208),    NOP);
    put(13, sl(S_HALT,0,0,0,0),      NOP);
    rst_n = 1;
    @(negedge clk); cu_idle = 0;
    start = 1; start_pc = '0;
    @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    chk(!done, "not done while running");
    wait (dut.halted);
    repeat (20) @(negedge clk);
    chk(!done, "not done while CUs busy");
    cu_idle = 1;
    repeat (2) @(negedge clk);
    chk(done, "done after HALT with idle CUs");
    chk(u_mem.peek_word(32'h200) == 15, $sformatf("loop sum %0d", u_mem.peek_word(32'h200)));
    chk(u_mem.peek_word(32'h204) == 16, "load-use result");
    chk(u_mem.peek_word(32'h208) == 16, "s5 - s1 after loop (s1 = 0)");
    chk(ins_q.size() == 15, $sformatf("%0d vector instruction pushes", ins_q.size()));
    chk(adr_q.size() == 10, $sformatf("%0d vector address pushes", adr_q.size()));
    for (int i = 0; i < 5 && ins_q.size() == 15 && adr_q.size() == 10; i++) begin
      word_t a;
      a = word_t'('h100 + 32 * i);
      chk(ins_q[3*i] == V_LD && ins_q[3*i+1] == V_ADD && ins_q[3*i+2] == V_ST, $sformatf("iter %0d op order", i));
      chk(adr_q[2*i].ld && !adr_q[2*i].st && adr_q[2*i].addr == a, $sformatf("iter %0d V_LD addr %h", i, adr_q[2*i].addr));
      chk(adr_q[2*i+1].st && !adr_q[2*i+1].ld && adr_q[2*i+1].addr == a, $sformatf("iter %0d V_ST addr %h", i, adr_q[2*i+1].addr));
    end
    chk(bad_push == 0, "no push while a CU queue is full");
    chk(n_full_stall > 0, "GPCU stalled on a full CU queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
