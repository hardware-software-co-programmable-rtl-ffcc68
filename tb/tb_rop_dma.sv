// tb_rop_dma: checks the RPC-over-PCIe command target and DMA engine.
//
// A behavioural host memory and DRAM (with random back-pressure) sit on its two
// masters. The test writes commands through the BAR window the way the host
// driver does (opcode, address, length, doorbell) and checks: a SEND copies the
// host buffer to the DRAM receive buffer word for word, a RECV copies the DRAM
// transmit buffer to the host buffer, a length that is not a multiple of eight
// rounds up, the interrupt fires once per command, the status and byte-count
// registers read back right, and a doorbell while busy or with NOP sets error.
module tb_rop_dma;
  import hgnn_pkg::*;
  localparam logic [ADDR_W-1:0] RX = 40'h00_0000_4000, TX = 40'h00_0008_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bar_wr_valid; logic [7:0] bar_wr_addr, bar_rd_addr; logic [DATA_W-1:0] bar_wr_data, bar_rd_data;
  logic host_valid, host_ready, host_rvalid; mem_req_t host_req; logic [DATA_W-1:0] host_rdata;
  logic dram_valid, dram_ready, dram_rvalid; mem_req_t dram_req; logic [DATA_W-1:0] dram_rdata;
  logic irq;
  int checks = 0, failures = 0, irqs = 0;

  rop_dma #(.RX_BASE(RX), .TX_BASE(TX)) dut (.*);
  mem_model u_host (.clk, .valid(host_valid), .ready(host_ready), .req(host_req), .rvalid(host_rvalid), .rdata(host_rdata));
  mem_model u_dram (.clk, .valid(dram_valid), .ready(dram_ready), .req(dram_req), .rvalid(dram_rvalid), .rdata(dram_rdata));

  always @(posedge clk) if (irq) irqs++;

  task automatic bar_write(input logic [7:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); bar_wr_valid = 1; bar_wr_addr = a; bar_wr_data = d;
    @(negedge clk); bar_wr_valid = 0;
  endtask

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic wait_idle();
    bar_rd_addr = ROP_REG_DOORBELL;
    #1;
    while (bar_rd_data[0]) @(negedge clk);
    repeat (2) @(negedge clk);      // let the completion interrupt be counted
  endtask

  task automatic issue(input rop_opcode_e op, input logic [ADDR_W-1:0] a, input int len);
    bar_write(ROP_REG_OPCODE, DATA_W'(op));
    bar_write(ROP_REG_ADDR, DATA_W'(a));
    bar_write(ROP_REG_LEN, DATA_W'(len));
    bar_write(ROP_REG_DOORBELL, 64'd1);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int i0;
    bar_wr_valid = 0; bar_wr_addr = 0; bar_wr_data = 0; bar_rd_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // SEND: 20 words from host 0x1_0000 into DRAM RX buffer
    for (int w = 0; w < 20; w++) u_host.poke(40'h1_0000 + 40'(8 * w), {$urandom, $urandom});
    i0 = irqs;
    issue(ROP_SEND, 40'h1_0000, 160);
    // doorbell while busy must be refused
    bar_write(ROP_REG_DOORBELL, 64'd1);
    bar_rd_addr = ROP_REG_DOORBELL; #1;
    chk(bar_rd_data[2] == 1'b1, "error on doorbell while busy");
    wait_idle();
    for (int w = 0; w < 20; w++)
      chk(u_dram.peek(RX + 40'(8 * w)) == u_host.peek(40'h1_0000 + 40'(8 * w)), $sformatf("SEND word %0d", w));
    chk(irqs == i0 + 1, "one irq for SEND");
    bar_rd_addr = ROP_REG_XFERRED; #1; chk(bar_rd_data == 64'd160, "xferred 160");
    // RECV: 13 bytes (rounds up to 2 words) from DRAM TX buffer to host 0x2_0000
    u_dram.poke(TX, 64'h1122_3344_5566_7788);
    u_dram.poke(TX + 8, 64'h99aa_bbcc_ddee_ff00);
    issue(ROP_RECV, 40'h2_0000, 13);
    repeat (2) @(negedge clk);
    wait_idle();
    chk(u_host.peek(40'h2_0000) == 64'h1122_3344_5566_7788, "RECV word 0");
    chk(u_host.peek(40'h2_0008) == 64'h99aa_bbcc_ddee_ff00, "RECV word 1");
    chk(u_host.peek(40'h2_0010) == 64'd0, "RECV stops after 2 words");
    bar_rd_addr = ROP_REG_DOORBELL; #1; chk(bar_rd_data[2:0] == 3'b010, "status done");
    bar_rd_addr = ROP_REG_LEN; #1; chk(bar_rd_data == 64'd13, "len register");
    // NOP doorbell -> error
    issue(ROP_NOP, 40'h0, 8);
    bar_rd_addr = ROP_REG_DOORBELL; #1; chk(bar_rd_data[2] == 1'b1, "error on NOP");
    chk(irqs == i0 + 2, "two irqs in all");
    chk(u_host.stalls > 0 && u_dram.stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
