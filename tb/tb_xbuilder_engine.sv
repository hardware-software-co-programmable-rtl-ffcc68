// tb_xbuilder_engine: checks the reconfiguration engine with a behavioural
// DRAM and ICAP. A synthetic partial bitstream (dummy words, sync word, payload,
// DESYNC) is placed in DRAM; the engine must deliver every 32-bit word to the
// ICAP in order (lower half of each DRAM word first, checked by count and
// checksum), keep `decouple` high and the User reset low for the whole
// transfer, release both when PRDONE arrives, interrupt once and report done.
// A second bitstream without a sync word must end with the error status.
module tb_xbuilder_engine;
  import hgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_wr_valid; logic [7:0] cfg_addr; logic [DATA_W-1:0] cfg_wr_data, cfg_rd_data;
  logic dram_valid, dram_ready, dram_rvalid; mem_req_t dram_req; logic [DATA_W-1:0] dram_rdata;
  logic icap_csib, icap_rdwrb, icap_avail, icap_prdone, icap_prerror; logic [31:0] icap_i;
  logic decouple, user_rst_n, irq;
  int checks = 0, failures = 0, irqs = 0, leaks = 0, decoupled_cycles = 0;

  xbuilder_engine dut (.*);
  mem_model u_dram (.clk, .valid(dram_valid), .ready(dram_ready), .req(dram_req), .rvalid(dram_rvalid), .rdata(dram_rdata));
  icap_model u_icap (.clk, .csib(icap_csib), .rdwrb(icap_rdwrb), .i(icap_i), .avail(icap_avail), .prdone(icap_prdone), .prerror(icap_prerror));

  always @(posedge clk) begin
    if (irq && rst_n) irqs++;
    if (decouple) decoupled_cycles++;
    if (!icap_csib && !decouple) leaks++;        // ICAP written with the pins coupled
    if (decouple && user_rst_n && rst_n) leaks++; // User out of reset while decoupled
  end

  task automatic cfg_write(input logic [7:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); cfg_wr_valid = 1; cfg_addr = a; cfg_wr_data = d;
    @(negedge clk); cfg_wr_valid = 0;
  endtask

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // Build a bitstream of n 32-bit words at DRAM address a; return its checksum.
  function automatic logic [31:0] build(input logic [ADDR_W-1:0] a, input int n, input bit sync);
    logic [31:0] w [];
    logic [31:0] cs;
    w = new[n];
    for (int k = 0; k < n; k++) w[k] = $urandom & 32'h0fff_ffff;
    w[0] = 32'hFFFFFFFF; w[1] = 32'h000000BB; w[2] = 32'h11220044;
    w[3] = sync ? 32'hAA995566 : 32'h20000000;
    w[n-2] = 32'h30008001; w[n-1] = 32'h0000000D;
    cs = '0;
    for (int k = 0; k < n; k++) cs = {cs[30:0], cs[31]} ^ w[k];
    for (int k = 0; k < n / 2; k++) u_dram.poke(a + 40'(8 * k), {w[2*k+1], w[2*k]});
    return cs;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] cs;
    cfg_wr_valid = 0; cfg_addr = 0; cfg_wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk(!decouple && user_rst_n, "coupled and running after reset");
    cs = build(40'h40_0000, 200, 1'b1);
    cfg_write(8'h00, 64'h40_0000);
    cfg_write(8'h08, 64'd800);
    cfg_write(8'h10, 64'd1);
    chk(decouple, "decoupled after start");
    cfg_addr = 8'h10; #1;
    while (cfg_rd_data[0]) begin @(negedge clk); #1; end
    repeat (2) @(negedge clk);
    chk(u_icap.words == 200, $sformatf("ICAP got %0d words", u_icap.words));
    chk(u_icap.csum == cs, "ICAP checksum (order)");
    cfg_addr = 8'h10; #1;
    chk(cfg_rd_data[2:0] == 3'b010, "done, no error");
    chk(!decouple && user_rst_n, "pins coupled again, User out of reset");
    chk(irqs == 1, "one interrupt");
    chk(decoupled_cycles >= 200, "decoupled for the whole transfer");
    // bitstream without a sync word: error status
    cs = build(40'h50_0000, 40, 1'b0);
    cfg_write(8'h00, 64'h50_0000);
    cfg_write(8'h08, 64'd160);
    cfg_write(8'h10, 64'd1);
    cfg_addr = 8'h10; #1;
    while (cfg_rd_data[0]) begin @(negedge clk); #1; end
    repeat (2) @(negedge clk);
    cfg_addr = 8'h10; #1;
    chk(cfg_rd_data[2:0] == 3'b110, "error status");
    chk(irqs == 2, "second interrupt");
    chk(leaks == 0, "no ICAP write or User activity outside decoupling");
    chk(u_dram.stalls > 0, "DRAM back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
