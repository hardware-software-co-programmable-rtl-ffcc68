// tb_shell_bus: checks the round-robin DRAM arbiter with three masters that
// each issue a stream of writes and read-backs to their own address range at
// the same time, against a behavioural DRAM with random back-pressure. Every
// read must return what that master wrote, each master must be served, and
// the grant must rotate (no master served twice in a row while another waits).
module tb_shell_bus;
  import hgnn_pkg::*;
  localparam int NM = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NM-1:0] m_valid, m_ready, m_rvalid;
  mem_req_t m_req [NM];
  logic [DATA_W-1:0] m_rdata;
  logic s_valid, s_ready, s_rvalid; mem_req_t s_req; logic [DATA_W-1:0] s_rdata;
  int checks = 0, failures = 0;
  int served [NM];
  int back_to_back = 0;
  int last = -1;

  shell_bus #(.NM(NM)) dut (.*);
  mem_model u_dram (.clk, .valid(s_valid), .ready(s_ready), .req(s_req), .rvalid(s_rvalid), .rdata(s_rdata));

  always @(posedge clk) for (int m = 0; m < NM; m++)
    if (m_valid[m] && m_ready[m]) begin
      served[m]++;
      if (last == m && (m_valid & ~(NM'(1) << m)) != 0) back_to_back++;
      last = m;
    end

  task automatic master(input int m);
    for (int w = 0; w < 12; w++) begin
      logic [DATA_W-1:0] d;
      logic [ADDR_W-1:0] a;
      d = {32'(m), 32'(w * 77 + 5)};
      a = ADDR_W'(m * 'h1000 + w * 8);
      @(negedge clk); m_valid[m] = 1; m_req[m] = '{write: 1'b1, addr: a, wdata: d};
      @(posedge clk); while (!m_ready[m]) @(posedge clk);
      @(negedge clk); m_valid[m] = 1; m_req[m] = '{write: 1'b0, addr: a, wdata: '0};
      @(posedge clk); while (!m_ready[m]) @(posedge clk);
      @(negedge clk); m_valid[m] = 0;
      while (!m_rvalid[m]) @(negedge clk);
      checks++;
      if (m_rdata !== d) begin failures++; $display("FAIL master %0d word %0d: %h", m, w, m_rdata); end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_valid = '0;
    for (int m = 0; m < NM; m++) begin m_req[m] = '0; served[m] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      master(0);
      master(1);
      master(2);
    join
    for (int m = 0; m < NM; m++) begin
      checks++; if (served[m] != 24) begin failures++; $display("FAIL master %0d served %0d", m, served[m]); end
    end
    checks++; if (back_to_back != 0) begin failures++; $display("FAIL %0d unfair grants", back_to_back); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
