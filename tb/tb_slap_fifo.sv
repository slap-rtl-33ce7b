// tb_slap_fifo: checks the elastic FIFO against a queue model: head data,
// full/empty/count after every cycle of random push/pop traffic, that it holds
// exactly DEPTH entries, and push+pop on a full FIFO.
module tb_slap_fifo;
  localparam int W = 16, D = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic push = 1'b0, pop = 1'b0, full, empty;
  logic [W-1:0] wdata = '0, rdata;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q [$];

  slap_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check_state();
    checks++;
    if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == D) ||
        (q.size() != 0 && rdata != q[0])) begin
      failures++;
      if (failures < 10) $display("FAIL count=%0d model=%0d full=%b empty=%b rdata=%h", count, q.size(), full, empty, rdata);
    end
  endtask

  task automatic step(input logic pu_in, input logic po);
    logic pu;
    logic [W-1:0] d;
    logic will_pop, will_push;
    pu = pu_in;
    d = W'($urandom);
    pu = pu && (q.size() < D || po);   // never push into a full FIFO
    push = pu; pop = po; wdata = d;
    will_pop  = po && q.size() != 0;
    will_push = pu && (q.size() < D || will_pop);
    @(posedge clk);
    #1;
    if (will_pop) void'(q.pop_front());
    if (will_push) q.push_back(d);
    push = 1'b0; pop = 1'b0;
    check_state();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 check_state();
    // fill exactly to DEPTH
    for (int i = 0; i < D; i++) step(1'b1, 1'b0);
    checks++; if (!full) begin failures++; $display("FAIL not full after %0d pushes", D); end
    step(1'b1, 1'b1);                      // push and pop while full
    for (int i = 0; i < D; i++) step(1'b0, 1'b1);
    checks++; if (!empty) begin failures++; $display("FAIL not empty after draining"); end
    for (int i = 0; i < 3000; i++) step($urandom_range(99) < 55, $urandom_range(99) < 50);
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
