// tb_user_hetero: checks the heterogeneous User region as a whole: both units
// reachable on their own co-processor port and system-bus lane, able to run at
// the same time (a vector ADD and a GEMM in flight together), results right,
// and the unused ports idle (never ready).
module tb_user_hetero;
  import hgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int NCOP = 4, NSB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCOP-1:0] cmd_valid, cmd_ready, resp_valid, resp_ready, busy;
  cop_cmd_t cmd [NCOP]; cop_resp_t resp [NCOP];
  logic [NSB-1:0] sb_valid, sb_ready, sb_rvalid;
  sbus_req_t sb_req [NSB]; logic [31:0] sb_rdata [NSB];
  int checks = 0, failures = 0, overlap = 0;

  user_hetero dut (.*);

  always @(posedge clk) if (busy[0] && busy[1]) overlap++;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic sb_write(input int l, input int addr, input logic [31:0] d);
    @(negedge clk); sb_valid[l] = 1; sb_req[l] = '{write: 1'b1, addr: 24'(addr), wdata: d};
    @(posedge clk); while (!sb_ready[l]) @(posedge clk);
    @(negedge clk); sb_valid[l] = 0;
  endtask

  task automatic sb_read(input int l, input int addr, output logic [31:0] d);
    @(negedge clk); sb_valid[l] = 1; sb_req[l] = '{write: 1'b0, addr: 24'(addr), wdata: 32'd0};
    @(posedge clk); while (!sb_ready[l]) @(posedge clk);
    @(negedge clk); sb_valid[l] = 0;
    while (!sb_rvalid[l]) @(negedge clk);
    d = sb_rdata[l];
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x [32], y [32], a [8][4], b [4][8], d, r;
    cmd_valid = '0; resp_ready = '1; sb_valid = '0;
    for (int p = 0; p < NCOP; p++) cmd[p] = '0;
    for (int l = 0; l < NSB; l++) sb_req[l] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 32; w++) begin
      x[w] = rand_fp(5); y[w] = rand_fp(5);
      sb_write(0, w, x[w]); sb_write(0, 64 + w, y[w]);
    end
    for (int i = 0; i < 8; i++) for (int k = 0; k < 4; k++) begin
      a[i][k] = r2fp(real'(int'($urandom_range(8, 0)) - 4));
      b[k][i] = r2fp(real'(int'($urandom_range(8, 0)) - 4));
      sb_write(1, k * 8 + i, a[i][k]);
      sb_write(1, (16 + k) * 8 + i, b[k][i]);
    end
    // launch both in the same cycle
    @(negedge clk);
    cmd_valid[0] = 1; cmd[0] = '{funct: 7'(VOP_ADD), rs1: {16'd0, 16'd32, 16'd16, 16'd0}, rs2: 64'd8, rd: 5'd1};
    cmd_valid[1] = 1; cmd[1] = '{funct: SA_FUNCT_GEMM, rs1: {16'd0, 16'd40, 16'd16, 16'd0}, rs2: 64'd4, rd: 5'd2};
    cmd_valid[2] = 1; cmd_valid[3] = 1;
    @(posedge clk); #1;
    chk(cmd_ready[2] == 0 && cmd_ready[3] == 0 && sb_ready[2] == 0 && sb_ready[3] == 0, "unused ports idle");
    @(negedge clk); cmd_valid = '0;
    repeat (60) @(negedge clk);
    chk(overlap > 0, "vector processor and systolic array ran concurrently");
    for (int w = 0; w < 32; w++) begin
      sb_read(0, 128 + w, d);
      chk(d == r2fp(fp2r(x[w]) + fp2r(y[w])), $sformatf("vector ADD word %0d", w));
    end
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      real s;
      s = 0.0;
      for (int k = 0; k < 4; k++) s += fp2r(a[i][k]) * fp2r(b[k][j]);
      sb_read(1, (40 + i) * 8 + j, d);
      chk(d == r2fp(s), $sformatf("GEMM C[%0d][%0d]", i, j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
