// tb_vector_processor: self-checking test of the four-lane SIMD unit.
//
// Fills the vector memory through the system-bus lane, runs ADD, MUL, RELU,
// SCALE and SUM through the co-processor port, and checks every result element
// against single-precision references computed here, the response cycle count
// (len + 2), and a GCN-style mean aggregation: three neighbour vectors summed in
// place into an accumulator with ADD, then scaled by 1/3.
module tb_vector_processor;
  import hgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy;
  cop_cmd_t cmd; cop_resp_t resp;
  logic sb_valid, sb_ready, sb_rvalid; sbus_req_t sb_req; logic [31:0] sb_rdata;
  int checks = 0, failures = 0;

  vector_processor dut (.*);

  logic [31:0] mem [int];    // testbench copy of the vector memory (word address)

  task automatic sb_write(input int addr, input logic [31:0] d);
    @(negedge clk); sb_valid = 1; sb_req = '{write: 1'b1, addr: 24'(addr), wdata: d};
    @(posedge clk); while (!sb_ready) @(posedge clk);
    @(negedge clk); sb_valid = 0;
    mem[addr] = d;
  endtask

  task automatic sb_read(input int addr, output logic [31:0] d);
    @(negedge clk); sb_valid = 1; sb_req = '{write: 1'b0, addr: 24'(addr), wdata: 32'd0};
    @(posedge clk); while (!sb_ready) @(posedge clk);
    @(negedge clk); sb_valid = 0;
    while (!sb_rvalid) @(negedge clk);
    d = sb_rdata;
  endtask

  task automatic run(input vop_e op, input int x, input int y, input int z, input int len,
                     input logic [31:0] s, output logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{funct: 7'(op), rs1: {16'd0, 16'(z), 16'(y), 16'(x)}, rs2: {s, 32'(len)}, rd: 5'd3};
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0; resp_ready = 1;
    while (!resp_valid) @(negedge clk);
    data = resp.data;
    @(negedge clk); resp_ready = 0;
  endtask

  task automatic check_word(input int addr, input logic [31:0] e, input string what);
    logic [31:0] d;
    sb_read(addr, d);
    checks++;
    if (d !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s word %0d = %h expected %h", what, addr, d, e);
    end
  endtask

  task automatic check_val(input logic [63:0] got, input logic [63:0] e, input string what);
    checks++;
    if (got !== e) begin failures++; $display("FAIL %s = %0h expected %0h", what, got, e); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    logic [31:0] s, e, acc, t;
    int n;
    cmd_valid = 0; resp_ready = 0; sb_valid = 0; cmd = '0; sb_req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    n = 6;                                   // rows -> 24 elements
    for (int w = 0; w < n * L; w++) begin
      sb_write(100 * L + w, rand_fp(6));     // x at row 100
      sb_write(200 * L + w, rand_fp(6));     // y at row 200
    end
    run(VOP_ADD, 100, 200, 300, n, 32'd0, r);
    check_val(r, 64'(n + 2), "ADD cycles");
    for (int w = 0; w < n * L; w++)
      check_word(300 * L + w, r2fp(fp2r(mem[100 * L + w]) + fp2r(mem[200 * L + w])), "ADD");
    run(VOP_MUL, 100, 200, 400, n, 32'd0, r);
    for (int w = 0; w < n * L; w++)
      check_word(400 * L + w, r2fp(fp2r(mem[100 * L + w]) * fp2r(mem[200 * L + w])), "MUL");
    run(VOP_RELU, 100, 0, 500, n, 32'd0, r);
    for (int w = 0; w < n * L; w++)
      check_word(500 * L + w, mem[100 * L + w][31] ? 32'd0 : mem[100 * L + w], "RELU");
    s = r2fp(0.375);
    run(VOP_SCALE, 200, 0, 600, n, s, r);
    for (int w = 0; w < n * L; w++)
      check_word(600 * L + w, r2fp(fp2r(mem[200 * L + w]) * 0.375), "SCALE");
    // SUM over positive values (no cancellation, exact in double)
    for (int w = 0; w < n * L; w++) sb_write(700 * L + w, rand_fp(3) & 32'h7fffffff);
    run(VOP_SUM, 700, 0, 0, n, 32'd0, r);
    acc = 32'd0;
    for (int row = 0; row < n; row++) begin
      logic [31:0] p0, p1;
      p0 = r2fp(fp2r(mem[(700 + row) * L + 0]) + fp2r(mem[(700 + row) * L + 1]));
      p1 = r2fp(fp2r(mem[(700 + row) * L + 2]) + fp2r(mem[(700 + row) * L + 3]));
      t  = r2fp(fp2r(p0) + fp2r(p1));
      acc = r2fp(fp2r(acc) + fp2r(t));
    end
    check_val(r[31:0], acc, "SUM");
    // mean aggregation of three neighbour vectors (rows 800, 810, 820) into 900
    for (int w = 0; w < 2 * L; w++) begin
      sb_write(800 * L + w, rand_fp(4) & 32'h7fffffff);
      sb_write(810 * L + w, rand_fp(4) & 32'h7fffffff);
      sb_write(820 * L + w, rand_fp(4) & 32'h7fffffff);
      sb_write(900 * L + w, 32'd0);
    end
    run(VOP_ADD, 800, 900, 900, 2, 32'd0, r);
    run(VOP_ADD, 810, 900, 900, 2, 32'd0, r);
    run(VOP_ADD, 820, 900, 900, 2, 32'd0, r);
    run(VOP_SCALE, 900, 0, 900, 2, r2fp(1.0 / 3.0), r);
    for (int w = 0; w < 2 * L; w++) begin
      acc = r2fp(fp2r(mem[800 * L + w]) + 0.0);
      acc = r2fp(fp2r(mem[810 * L + w]) + fp2r(acc));
      acc = r2fp(fp2r(mem[820 * L + w]) + fp2r(acc));
      e   = r2fp(fp2r(acc) * fp2r(r2fp(1.0 / 3.0)));
      check_word(900 * L + w, e, "MEAN");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
