// tb_fp32_add: checks the single-precision adder against a double-precision
// reference rounded once to single. Random operands keep exponents within 14
// of each other so the double sum is exact; directed cases cover cancellation,
// large alignment shifts, rounding carry, overflow and the special values.
module tb_fp32_add;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] x, input logic [31:0] z, input logic [31:0] e);
    a = x; b = z; #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", x, z, y, e);
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
    check(32'h3f800000, 32'h40000000, 32'h40400000);   // 1 + 2 = 3
    check(32'h40400000, 32'hc0400000, 32'h00000000);   // 3 - 3 = +0
    check(32'h3f800000, 32'h33800000, 32'h3f800000);   // 1 + 2^-24 ties to even
    check(32'h3f800001, 32'h33800000, 32'h3f800002);   // tie rounds up to even
    check(32'h4b800000, 32'h3f800000, 32'h4b800000);   // 2^24 + 1
    check(32'h3f800000, 32'hb3800000, 32'h3f7fffff);   // 1 - 2^-24 exact
    check(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);   // overflow
    check(32'h7f800000, 32'hff800000, 32'h7fc00000);   // inf - inf
    check(32'h00000000, 32'hc0a00000, 32'hc0a00000);   // 0 + -5
    check(32'h3f800000, 32'h00000000, 32'h3f800000);
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] x, z;
      x = rand_fp(7); z = rand_fp(7);
      check(x, z, r2fp(fp2r(x) + fp2r(z)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
