// tb_systolic_pe: checks one processing element: operands and flags are
// forwarded with one cycle of delay, `first` restarts the accumulator, invalid
// cycles leave it alone, and the accumulated value matches a single-precision
// reference (multiply and add each rounded).
module tb_systolic_pe;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, out_valid, out_first;
  logic [31:0] a_in, b_in, a_out, b_out, acc;
  int checks = 0, failures = 0;

  systolic_pe dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, x, y;
    in_valid = 0; in_first = 0; a_in = 0; b_in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int n;
      n = $urandom_range(6, 1);
      for (int k = 0; k < n; k++) begin
        x = rand_fp(5) & 32'h7fffffff; y = rand_fp(5) & 32'h7fffffff;
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); a_in = x; b_in = y;
        r = (k == 0) ? r2fp(fp2r(x) * fp2r(y)) : r2fp(fp2r(r) + fp2r(r2fp(fp2r(x) * fp2r(y))));
        @(posedge clk); #1;
        chk(a_out == x && b_out == y && out_valid && out_first == (k == 0), "forwarding");
        // a bubble must not change the accumulator
        @(negedge clk); in_valid = 0; a_in = 32'h40000000; b_in = 32'h40000000;
        @(posedge clk); #1;
        chk(!out_valid, "bubble valid");
      end
      chk(acc == r, $sformatf("acc %h expected %h", acc, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
