// tb_prog_mem: writes random bundles, then reads them back on both ports at
// once, one address per cycle, and checks that each bundle arrives exactly
// two clock edges after its address (PF_WAIT, PF_REC).
module tb_prog_mem;
  import slap_pkg::*;
  localparam int D = 1024, NP = 2;
  logic clk = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [9:0] waddr = '0;
  bundle_t wdata = '0;
  logic [NP-1:0] rd_en = '0;
  logic [9:0] rd_addr [NP];
  bundle_t rd_data [NP];
  bundle_t model [D];

  prog_mem #(.DEPTH(D), .NPORT(NP)) dut (.*);

  initial begin
    rd_addr[0] = '0; rd_addr[1] = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 10'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      int a0, a1;
      a0 = $urandom_range(D - 1); a1 = $urandom_range(D - 1);
      @(negedge clk);
      rd_en = '1; rd_addr[0] = 10'(a0); rd_addr[1] = 10'(a1);
      @(negedge clk);
      rd_en = '0;
      checks++;
      @(negedge clk);
      if (rd_data[0] != model[a0] || rd_data[1] != model[a1]) begin
        failures++; $display("FAIL read %0d/%0d", a0, a1);
      end
    end
    // back-to-back addresses stream one bundle per cycle
    fork
      for (int i = 0; i < 64; i++) begin
        @(negedge clk); rd_en = '1; rd_addr[0] = 10'(i); rd_addr[1] = 10'(D - 1 - i);
      end
      begin
        repeat (3) @(negedge clk);
        for (int i = 0; i < 64; i++) begin
          checks++;
          if (rd_data[0] != model[i] || rd_data[1] != model[D - 1 - i]) begin
            failures++; $display("FAIL stream %0d", i);
          end
          @(negedge clk);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
