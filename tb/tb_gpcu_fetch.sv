// tb_gpcu_fetch: program fetch pipeline with a real program memory.
//   * after a redirect the first bundle reaches DP four cycles later
//     (PF_ADRSEND, PF_WAIT, PF_REC, DP);
//   * bundles come out in pc order with the right contents under random
//     DP back-pressure, at one per cycle when DP always takes;
//   * a redirect in the middle drops the old path; stop ends fetching.
module tb_gpcu_fetch;
  import slap_pkg::*;
  localparam int AW = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic redirect = 0, stop = 0, pm_en, out_valid, out_pop = 0;
  logic [AW-1:0] redirect_pc = '0, pm_addr, out_pc;
  bundle_t pm_data, out_bundle;
  logic [AW-1:0] rd_addr [1];
  bundle_t rd_data [1];
  logic we = 0;
  logic [AW-1:0] waddr = '0;
  bundle_t wdata = '0;

  assign rd_addr[0] = pm_addr;
  assign pm_data    = rd_data[0];
  prog_mem #(.DEPTH(1024), .NPORT(1)) u_pm (.clk, .we, .waddr, .wdata, .rd_en(pm_en), .rd_addr, .rd_data);
  gpcu_fetch #(.AW(AW)) dut (.*);

  function automatic bundle_t content(input int i);
    return {32'(i) ^ 32'hABCD_0000, ~32'(i)};
  endfunction

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic go(input int pc);
    @(negedge clk); redirect = 1; redirect_pc = AW'(pc);
    @(negedge clk); redirect = 0;
  endtask

  // take n bundles, popping with probability pct, checking order from pc0
  task automatic take(input int pc0, input int n, input int pct);
    int got = 0;
    while (got < n) begin
      @(negedge clk);
      out_pop = out_valid && ($urandom_range(99) < pct);
      if (out_pop) begin
        chk(out_pc == AW'(pc0 + got) && out_bundle == content(pc0 + got),
            $sformatf("bundle %0d: pc %0d", pc0 + got, out_pc));
        got++;
      end
    end
    @(negedge clk); out_pop = 0;
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = content(i);
    end
    @(negedge clk); we = 0;
    rst_n = 1;
    // latency
    begin
      int t0;
      @(negedge clk); redirect = 1; redirect_pc = 10'd5; t0 = cycle;
      @(negedge clk); redirect = 0;
      while (!out_valid) @(negedge clk);
      chk(cycle - t0 == 4, $sformatf("redirect to DP takes %0d cycles", cycle - t0));
    end
    // throughput: 40 bundles in 40 cycles when always popped
    begin
      int t0;
      t0 = cycle;
      take(5, 40, 100);
      chk(cycle - t0 <= 42, $sformatf("40 bundles took %0d cycles", cycle - t0));
    end
    take(45, 100, 40);
    // redirect drops the old path
    go(700);
    take(700, 50, 70);
    // stop: at most the buffered/in-flight bundles still appear
    @(negedge clk); stop = 1;
    repeat (10) @(negedge clk);
    begin
      int n = 0;
      out_pop = 1;
      repeat (12) begin @(negedge clk); if (out_valid) n++; end
      out_pop = 0;
      chk(n <= 4, $sformatf("%0d bundles after stop", n));
      chk(!out_valid && !pm_en, "fetch stopped");
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
