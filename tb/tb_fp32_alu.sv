// tb_fp32_alu: the binary32 lane against double-precision reference
// arithmetic (fp_ref_pkg): random add, subtract and multiply on normal numbers
// (exponent differences kept below 29 so the reference is exact before its one
// rounding), plus directed cases: ties to even, exact cancellation, overflow
// to infinity, flush to zero, infinities and NaN.
module tb_fp32_alu;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [1:0]  op;
  logic [31:0] a, b, y;

  fp32_alu dut (.*);

  task automatic t(input logic [1:0] o, input logic [31:0] x, input logic [31:0] z,
                   input logic [31:0] exp_y);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL op %0d %h %h: got %h expected %h", o, x, z, y, exp_y);
    end
  endtask

  initial begin
    // directed
    t(2'b00, 32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);   // 1 + 2^-24: tie, stays even
    t(2'b00, 32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);   // tie rounds up to even
    t(2'b00, 32'h4049_0FDB, 32'hC049_0FDB, 32'h0000_0000);   // x + (-x) = +0
    t(2'b01, 32'h4000_0000, 32'h3F80_0000, 32'h3F80_0000);   // 2 - 1 = 1
    t(2'b10, 32'h7F00_0000, 32'h4000_0000, 32'h7F80_0000);   // overflow -> inf
    t(2'b10, 32'h0080_0000, 32'h3F00_0000, 32'h0000_0000);   // underflow -> 0
    t(2'b00, 32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);   // inf - inf = NaN
    t(2'b10, 32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);   // inf * 0 = NaN
    t(2'b10, 32'hFF80_0000, 32'h4000_0000, 32'hFF80_0000);   // -inf * 2
    t(2'b00, 32'h7FC0_1234, 32'h3F80_0000, 32'h7FC0_0000);   // NaN in
    t(2'b10, 32'h3FC0_0000, 32'h4020_0000, 32'h4070_0000);   // 1.5 * 2.5 = 3.75
    // random
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, z;
      int base;
      base = $urandom_range(200, 40);
      x = rnd(base, base + 20);
      z = rnd(base, base + 20);
      case (i % 3)
        0: t(2'b00, x, z, fadd(x, z));
        1: t(2'b01, x, z, fsub(x, z));
        default: begin
          x = rnd(70, 180); z = rnd(70, 180);
          t(2'b10, x, z, fmul(x, z));
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
