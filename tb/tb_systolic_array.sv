// tb_systolic_array: self-checking test of the 8x8 GEMM array.
//
// Loads A (stored transposed) and B into the scratchpad through the system-bus
// lane, starts GEMMs through the co-processor port and reads C back. The
// reference C is computed in the testbench in the same order the PE chain
// accumulates (k = 0..K-1, each multiply and add rounded to single precision).
// Three GEMMs: K = 5 with positive random values, K = 16 with signed small
// integers (exact), and K = 1. Each checks every C element, the response
// cycle count (K + 26 at DIM = 8) and that the scratchpad refuses the bus while busy.
module tb_systolic_array;
  import hgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int DIM = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy;
  cop_cmd_t cmd; cop_resp_t resp;
  logic sb_valid, sb_ready, sb_rvalid; sbus_req_t sb_req; logic [31:0] sb_rdata;
  int checks = 0, failures = 0;
  int refused = 0;

  systolic_array dut (.*);

  logic [31:0] A [DIM][64];
  logic [31:0] B [64][DIM];

  task automatic sb_write(input int addr, input logic [31:0] d);
    @(negedge clk); sb_valid = 1; sb_req = '{write: 1'b1, addr: 24'(addr), wdata: d};
    @(posedge clk); while (!sb_ready) @(posedge clk);
    @(negedge clk); sb_valid = 0;
  endtask

  task automatic sb_read(input int addr, output logic [31:0] d);
    @(negedge clk); sb_valid = 1; sb_req = '{write: 1'b0, addr: 24'(addr), wdata: 32'd0};
    @(posedge clk); while (!sb_ready) @(posedge clk);
    @(negedge clk); sb_valid = 0;
    while (!sb_rvalid) @(negedge clk);
    d = sb_rdata;
  endtask

  task automatic gemm(input int K, input int a_row, input int b_row, input int c_row);
    logic [31:0] c, ref_c;
    int t0, t1;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < DIM; i++) begin
        sb_write((a_row + k) * DIM + i, A[i][k]);
        sb_write((b_row + k) * DIM + i, B[k][i]);
      end
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{funct: SA_FUNCT_GEMM, rs1: {16'd0, 16'(c_row), 16'(b_row), 16'(a_row)}, rs2: 64'(K), rd: 5'd7};
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    // the scratchpad must refuse the bus during the run
    sb_valid = 1; sb_req = '{write: 1'b0, addr: 24'd0, wdata: 32'd0};
    #1; checks++; if (sb_ready) begin failures++; $display("FAIL bus accepted while busy"); end
    else refused++;
    sb_valid = 0;
    resp_ready = 1;
    while (!resp_valid) @(negedge clk);
    checks++;
    if (resp.data != 64'(K + 26) || resp.rd != 5'd7) begin
      failures++; $display("FAIL K=%0d cycles=%0d expected %0d", K, resp.data, K + 26);
    end
    @(negedge clk); resp_ready = 0;
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        ref_c = r2fp(fp2r(A[i][0]) * fp2r(B[0][j]));
        for (int k = 1; k < K; k++)
          ref_c = r2fp(fp2r(ref_c) + fp2r(r2fp(fp2r(A[i][k]) * fp2r(B[k][j]))));
        sb_read((c_row + i) * DIM + j, c);
        checks++;
        if (c !== ref_c) begin
          failures++;
          if (failures < 10) $display("FAIL K=%0d C[%0d][%0d]=%h expected %h", K, i, j, c, ref_c);
        end
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; resp_ready = 0; sb_valid = 0; cmd = '0; sb_req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < DIM; i++) for (int k = 0; k < 5; k++) begin
      A[i][k] = rand_fp(4) & 32'h7fffffff; B[k][i] = rand_fp(4) & 32'h7fffffff;
    end
    gemm(5, 10, 100, 300);
    for (int i = 0; i < DIM; i++) for (int k = 0; k < 16; k++) begin
      A[i][k] = r2fp(real'(int'($urandom_range(14, 0)) - 7));
      B[k][i] = r2fp(real'(int'($urandom_range(14, 0)) - 7));
    end
    gemm(16, 4000, 2000, 4088);
    for (int i = 0; i < DIM; i++) begin
      A[i][0] = rand_fp(20); B[0][i] = rand_fp(20);
    end
    gemm(1, 0, 1, 2);
    checks++; if (refused != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
