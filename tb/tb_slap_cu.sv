// tb_slap_cu: checks one Compute Unit against a random-latency memory model.
//   * latency: a V_ADD that depends on the previous one issues VPIPE = 7
//     cycles later (7 execute stages, the result forwarded as it is written);
//   * the instruction queue holds 32 entries and reports full while a V_LD at
//     its head waits for its address/data (the triangular-load wait);
//   * function: C = A*B + A, lane-wise, over 16 vectors loaded through the
//     data memory and stored with V_ST, compared with values computed here;
//     then the same in binary32 (V_FMUL, V_FADD, V_FSUB) against reference
//     floating-point arithmetic.
module tb_slap_cu;
  import slap_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic  ins_push = 0, ld_push = 0, st_push = 0, ins_full, ld_full, st_full;
  slot_t ins = '0;
  word_t addr = '0;
  logic  mem_req_valid, mem_req_ready, mem_resp_valid, idle, ev_iq_empty, ev_ld_wait, ev_hazard;
  mem_req_t  mem_req;
  mem_resp_t mem_resp;

  slap_cu dut (.*);

  mem_req_t  mreq  [1];
  mem_resp_t mresp [1];
  assign mreq[0]  = mem_req;
  assign mem_resp = mresp[0];
  mem_hier_model #(.NP(1)) u_mem (
    .clk, .req_valid(mem_req_valid), .req(mreq), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp(mresp));

  function automatic slot_t sl(input logic [3:0] op, input int d, input int a, input int b);
    slot_t x; x = '0; x.op = op; x.d = 4'(d); x.a = 4'(a); x.b = 4'(b); return x;
  endfunction

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // push one vector op (with its address when it is a load or a store)
  task automatic push(input slot_t s, input word_t a);
    @(negedge clk);
    while (ins_full || (s.op == V_LD && ld_full) || (s.op == V_ST && st_full)) @(negedge clk);
    ins_push = 1; ins = s; addr = a;
    ld_push = (s.op == V_LD); st_push = (s.op == V_ST);
    @(negedge clk);
    ins_push = 0; ld_push = 0; st_push = 0;
  endtask

  int pops [$];
  always @(posedge clk) if (dut.iq_pop) pops.push_back(cycle);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency of a dependent pair
    push(sl(V_ADD, 1, 0, 0), 0);
    push(sl(V_ADD, 2, 1, 1), 0);
    wait (idle); @(negedge clk);
    chk(pops.size() == 2 && pops[1] - pops[0] == 7, $sformatf("dependent issue distance %0d", pops.size() == 2 ? pops[1] - pops[0] : -1));
    // queue capacity with a load waiting at the head
    @(negedge clk); ins_push = 1; ins = sl(V_LD, 3, 0, 0);
    @(negedge clk); ins = sl(V_ADD, 4, 0, 0);
    repeat (31) @(negedge clk);
    ins_push = 0;
    chk(ins_full, "instruction queue full after 32 entries");
    chk(ev_ld_wait, "V_LD at head waits without address");
    @(negedge clk); ld_push = 1; addr = 32'h8000;
    @(negedge clk); ld_push = 0;
    wait (idle); @(negedge clk);
    chk(!ins_full, "queue drained");
    // C = A*B + A
    for (int i = 0; i < 16; i++) begin
      push(sl(V_LD, 1, 0, 0), word_t'(32'h1000 + 16 * i));
      push(sl(V_LD, 2, 0, 0), word_t'(32'h2000 + 16 * i));
      push(sl(V_MUL, 3, 1, 2), 0);
      push(sl(V_ADD, 4, 3, 1), 0);
      push(sl(V_ST, 4, 0, 0), word_t'(32'h3000 + 16 * i));
    end
    wait (idle); repeat (2) @(negedge clk);
    for (int w = 0; w < 64; w++) begin
      word_t x, y;
      x = u_mem.init_word(word_t'(32'h1000 + 4 * w));
      y = u_mem.init_word(word_t'(32'h2000 + 4 * w));
      chk(u_mem.peek_word(word_t'(32'h3000 + 4 * w)) == x * y + x, $sformatf("C word %0d", w));
    end
    // binary32: D = (A*B + A) - B
    for (int w = 0; w < 64; w++) begin
      u_mem.poke_word(word_t'(32'h4000 + 4 * w), rnd(120, 134));
      u_mem.poke_word(word_t'(32'h5000 + 4 * w), rnd(120, 134));
    end
    for (int i = 0; i < 16; i++) begin
      push(sl(V_LD, 1, 0, 0), word_t'(32'h4000 + 16 * i));
      push(sl(V_LD, 2, 0, 0), word_t'(32'h5000 + 16 * i));
      push(sl(V_FMUL, 3, 1, 2), 0);
      push(sl(V_FADD, 4, 3, 1), 0);
      push(sl(V_FSUB, 5, 4, 2), 0);
      push(sl(V_ST, 5, 0, 0), word_t'(32'h6000 + 16 * i));
    end
    wait (idle); repeat (2) @(negedge clk);
    for (int w = 0; w < 64; w++) begin
      word_t x, y, e;
      x = u_mem.peek_word(word_t'(32'h4000 + 4 * w));
      y = u_mem.peek_word(word_t'(32'h5000 + 4 * w));
      e = fsub(fadd(fmul(x, y), x), y);
      chk(u_mem.peek_word(word_t'(32'h6000 + 4 * w)) == e, $sformatf("FP word %0d", w));
    end
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
