// tb_gpcu_dcache: the GPCU data cache (16 KB, direct-mapped, 16-byte lines,
// write-through, no write-allocate) against a random-latency memory model.
//   * a read miss fetches the line; a read hit answers two cycles after
//     acceptance and makes no memory request;
//   * a write hit updates the cached word and memory; a write miss only
//     memory (the next read still misses);
//   * two addresses 16 KB apart evict each other (direct mapping);
//   * random traffic compared with a word-level reference model.
module tb_gpcu_dcache;
  import slap_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0, cycle = 0, misses = 0, mreads = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic req_valid = 0, req_ready, req_we = 0, resp_valid, ev_miss;
  word_t req_addr = '0, req_wdata = '0, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  mem_req_t  mreq [1];
  mem_resp_t mresp [1];
  assign mreq[0]  = mem_req;
  assign mem_resp = mresp[0];

  gpcu_dcache dut (.*);
  mem_hier_model #(.NP(1)) u_mem (.clk, .req_valid(mem_req_valid), .req(mreq),
    .req_ready(mem_req_ready), .resp_valid(mem_resp_valid), .resp(mresp));

  always @(posedge clk) begin
    if (ev_miss) misses++;
    if (mem_req_valid && mem_req_ready && !mem_req.we) mreads++;
  end

  word_t model [word_t];
  function automatic word_t ref_rd(input word_t a);
    return model.exists(a) ? model[a] : u_mem.init_word(a);
  endfunction

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // returns the number of cycles from acceptance to response
  task automatic rd(input word_t a, output int lat);
    int t0;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_we = 0; req_addr = a; t0 = cycle;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = cycle - t0;
    chk(resp_rdata == ref_rd(a), $sformatf("read %h: %h expected %h", a, resp_rdata, ref_rd(a)));
  endtask
  task automatic wr(input word_t a, input word_t d);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_we = 1; req_addr = a; req_wdata = d; model[a] = d;
    @(negedge clk); req_valid = 0;
  endtask

  initial begin
    int lat, m0, r0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m0 = misses;  rd(32'h0000_1234 & ~32'h3, lat); chk(misses == m0 + 1, "first read misses");
    r0 = mreads;  rd(32'h0000_1230, lat);
    chk(misses == m0 + 1 && mreads == r0, "second read of the line hits");
    chk(lat == 2, $sformatf("hit latency %0d", lat));
    wr(32'h0000_1238, 32'hDEAD_BEEF);
    r0 = mreads;  rd(32'h0000_1238, lat); chk(mreads == r0, "write hit keeps the line");
    wait (req_ready); @(negedge clk);
    chk(u_mem.peek_word(32'h0000_1238) == 32'hDEAD_BEEF, "write-through reached memory");
    wr(32'h0000_2000, 32'h1111_2222);
    m0 = misses;  rd(32'h0000_2000, lat); chk(misses == m0 + 1, "no allocation on write miss");
    m0 = misses;  rd(32'h0000_1230 + 32'h4000, lat); chk(misses == m0 + 1, "conflict line misses");
    m0 = misses;  rd(32'h0000_1230, lat); chk(misses == m0 + 1, "evicted line misses again");
    // random traffic in a 64 KB window
    for (int i = 0; i < 2000; i++) begin
      word_t a;
      a = word_t'($urandom_range(16383)) << 2;
      if ($urandom_range(3) == 0) wr(a, $urandom);
      else rd(a, lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
