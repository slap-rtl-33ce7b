// tb_slap_cam: checks the CU data memory (triangular-load CAM).
//   * two allocations of one address merge into one memory read;
//   * a lookup misses until the response arrives, then returns its data;
//     the entry serves exactly as many lookups as allocations;
//   * a vector store goes out on the memory port at once, overwrites the data
//     of a live entry, and a later (stale) response does not undo it;
//   * ENTRIES distinct allocations fill the CAM (alloc_ready low); responses
//     returned in reverse order are matched by address;
//   * idle once everything is consumed.
module tb_slap_cam;
  import slap_pkg::*;
  localparam int E = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic alloc_valid = 0, alloc_ready, lk_hit, lk_consume = 0, st_valid = 0, st_ready;
  word_t alloc_addr = '0, lk_addr = '0, st_addr = '0;
  vec_t  lk_data, st_data = '0;
  logic  mem_req_valid, mem_req_ready = 1'b1, mem_resp_valid = 1'b0, idle;
  mem_req_t mem_req;
  mem_resp_t mem_resp = '0;

  slap_cam #(.ENTRIES(E)) dut (.*);

  word_t reads [$];
  int    nwrites = 0;
  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready) begin
    if (mem_req.we) nwrites++;
    else reads.push_back(mem_req.addr);
  end

  function automatic vec_t f(input word_t a, input int salt);
    return {4{a ^ word_t'(salt)}};
  endfunction

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic alloc(input word_t a);
    @(negedge clk); alloc_valid = 1; alloc_addr = a;
    @(negedge clk); alloc_valid = 0;
  endtask
  task automatic respond(input word_t a, input vec_t d);
    @(negedge clk); mem_resp_valid = 1; mem_resp.addr = a; mem_resp.rdata = d;
    @(negedge clk); mem_resp_valid = 0;
  endtask
  task automatic consume(input word_t a, input vec_t d);
    @(negedge clk); lk_addr = a; #1;
    chk(lk_hit, $sformatf("lookup %h should hit", a));
    chk(lk_data == d, $sformatf("lookup %h data", a));
    lk_consume = lk_hit;
    @(negedge clk); lk_consume = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); chk(idle && alloc_ready, "idle after reset");
    // merge
    alloc(32'h100); alloc(32'h100);
    repeat (3) @(negedge clk);
    chk(reads.size() == 1 && reads[0] == 32'h100, "one read for two merged allocations");
    lk_addr = 32'h100; #1; chk(!lk_hit, "no hit before data returns");
    respond(32'h100, f(32'h100, 1));
    consume(32'h100, f(32'h100, 1));
    consume(32'h100, f(32'h100, 1));
    @(negedge clk); lk_addr = 32'h100; #1; chk(!lk_hit, "entry gone after two consumes");
    chk(idle, "idle after consumption");
    // store overrides pending fill
    reads.delete();
    alloc(32'h200);
    repeat (2) @(negedge clk);
    @(negedge clk); st_valid = 1; st_addr = 32'h200; st_data = f(32'h200, 7); #1;
    chk(st_ready && mem_req_valid && mem_req.we && mem_req.addr == 32'h200 && mem_req.wdata == f(32'h200, 7), "store on memory port");
    @(negedge clk); st_valid = 0;
    respond(32'h200, f(32'h200, 2));       // stale, read before the store
    consume(32'h200, f(32'h200, 7));
    chk(nwrites == 1, "one memory write");
    // fill all entries
    reads.delete();
    for (int i = 0; i < E; i++) alloc(word_t'(32'h1000 + 16 * i));
    @(negedge clk); chk(!alloc_ready, "alloc_ready low when all entries are used");
    repeat (E + 4) @(negedge clk);
    chk(reads.size() == E, $sformatf("%0d reads issued", reads.size()));
    for (int i = E - 1; i >= 0; i--) respond(word_t'(32'h1000 + 16 * i), f(word_t'(32'h1000 + 16 * i), 3));
    for (int i = 0; i < E; i++) consume(word_t'(32'h1000 + 16 * i), f(word_t'(32'h1000 + 16 * i), 3));
    @(negedge clk); chk(idle && alloc_ready, "idle after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
