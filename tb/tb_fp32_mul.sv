// tb_fp32_mul: checks the single-precision multiplier against a double-precision
// reference rounded once to single (exact for products), on directed cases
// (signs, rounding carry, overflow, underflow, zero, inf, NaN) and random operands.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] x, input logic [31:0] z, input logic [31:0] e);
    a = x; b = z; #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", x, z, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3fc00000, 32'h40000000, 32'h40400000);   // 1.5 * 2 = 3
    check(32'hbf800000, 32'h40490fdb, 32'hc0490fdb);   // -1 * pi
    check(32'h3f800001, 32'h3f7fffff, 32'h3f800000);   // rounds up to 1.0
    check(32'h7f000000, 32'h7f000000, 32'h7f800000);   // overflow -> inf
    check(32'h00800000, 32'h00800000, 32'h00000000);   // underflow -> 0
    check(32'h00000000, 32'h40000000, 32'h00000000);
    check(32'h7f800000, 32'h00000000, 32'h7fc00000);   // inf * 0 = NaN
    check(32'h7f800000, 32'hc0000000, 32'hff800000);   // inf * -2
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] x, z;
      x = rand_fp(40); z = rand_fp(40);
      check(x, z, r2fp(fp2r(x) * fp2r(z)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
