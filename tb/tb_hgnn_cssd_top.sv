// tb_hgnn_cssd_top: end-to-end test of the CSSD FPGA at its default sizes.
//
// The testbench plays the host (PCIe side), the Shell core (its DRAM master,
// XBuilder registers, co-processor ports and system-bus lanes), the DRAM and
// the ICAP. One complete service, as the framework runs it:
//   1. Program(): the host sends a partial bitfile over RPC-over-PCIe into
//      DRAM; the core points the XBuilder engine at it; the engine decouples
//      the partition pins and streams the bitfile to the ICAP. A co-processor
//      command issued meanwhile must be held off until the pins re-couple.
//   2. Run(): the host sends a batch (embeddings of 12 graph nodes, the
//      neighbour lists of 8 target nodes, each including a self-loop, and an
//      8x8 weight matrix) into DRAM, while the core is also reading DRAM, so
//      the bus arbitrates. The core then runs one GCN layer on the User
//      region: mean aggregation on the vector processor (ADD per neighbour,
//      SCALE by 1/degree), transformation on the systolic array (GEMM with
//      the weights), ReLU on the vector processor.
//   3. The core writes the 8x8 result to the DRAM transmit buffer and the host
//      fetches it with an RPC-over-PCIe receive.
// The result is compared with a reference computed here in the same rounding
// order. Each mechanism (RoP send, RoP receive, DRAM back-pressure, bus
// contention, ICAP back-pressure, decoupled hold-off, each vector op, GEMM)
// is counted and must occur at least once.
module tb_hgnn_cssd_top;
  import hgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int NCOP = 4, NSB = 4, F = 8, NT = 8, NN = 12;
  localparam logic [ADDR_W-1:0] RX = 40'h0, TX = 40'h10_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bar_wr_valid; logic [7:0] bar_wr_addr, bar_rd_addr; logic [DATA_W-1:0] bar_wr_data, bar_rd_data;
  logic host_valid, host_ready, host_rvalid; mem_req_t host_req; logic [DATA_W-1:0] host_rdata;
  logic dram_valid, dram_ready, dram_rvalid; mem_req_t dram_req; logic [DATA_W-1:0] dram_rdata;
  logic core_mem_valid, core_mem_ready, core_mem_rvalid; mem_req_t core_mem_req; logic [DATA_W-1:0] core_mem_rdata;
  logic xb_cfg_wr_valid; logic [7:0] xb_cfg_addr; logic [DATA_W-1:0] xb_cfg_wr_data, xb_cfg_rd_data;
  logic [NCOP-1:0] cop_cmd_valid, cop_cmd_ready, cop_resp_valid, cop_resp_ready, cop_busy;
  cop_cmd_t cop_cmd [NCOP]; cop_resp_t cop_resp [NCOP];
  logic [NSB-1:0] sb_valid, sb_ready, sb_rvalid; sbus_req_t sb_req [NSB]; logic [31:0] sb_rdata [NSB];
  logic rop_irq, xb_irq, user_decoupled;
  logic icap_csib, icap_rdwrb, icap_avail, icap_prdone, icap_prerror; logic [31:0] icap_i;

  hgnn_cssd_top dut (.*);
  mem_model u_host (.clk, .valid(host_valid), .ready(host_ready), .req(host_req), .rvalid(host_rvalid), .rdata(host_rdata));
  mem_model u_dram (.clk, .valid(dram_valid), .ready(dram_ready), .req(dram_req), .rvalid(dram_rvalid), .rdata(dram_rdata));
  icap_model u_icap (.clk, .csib(icap_csib), .rdwrb(icap_rdwrb), .i(icap_i), .avail(icap_avail), .prdone(icap_prdone), .prerror(icap_prerror));

  int checks = 0, failures = 0;
  int n_rop_send = 0, n_rop_recv = 0, n_contention = 0, n_holdoff = 0, n_icap_wait = 0;
  int n_vadd = 0, n_vscale = 0, n_vrelu = 0, n_gemm = 0, n_rop_irq = 0, n_xb_irq = 0;

  always @(posedge clk) if (rst_n) begin
    if (rop_irq) n_rop_irq++;
    if (xb_irq) n_xb_irq++;
    if ($countones({core_mem_valid, dut.rop_valid, dut.xb_valid}) > 1) n_contention++;
    if (cop_cmd_valid != 0 && user_decoupled) n_holdoff++;
    if (dut.u_xb.state == dut.u_xb.S_LO && !icap_avail) n_icap_wait++;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- host side
  task automatic bar_write(input logic [7:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); bar_wr_valid = 1; bar_wr_addr = a; bar_wr_data = d;
    @(negedge clk); bar_wr_valid = 0;
  endtask

  task automatic rop(input rop_opcode_e op, input logic [ADDR_W-1:0] a, input int len);
    int i0;
    i0 = n_rop_irq;
    bar_write(ROP_REG_OPCODE, DATA_W'(op));
    bar_write(ROP_REG_ADDR, DATA_W'(a));
    bar_write(ROP_REG_LEN, DATA_W'(len));
    bar_write(ROP_REG_DOORBELL, 64'd1);
    while (n_rop_irq == i0) @(negedge clk);
    bar_rd_addr = ROP_REG_DOORBELL; #1;
    chk(bar_rd_data[2:0] == 3'b010, "RoP completed without error");
    if (op == ROP_SEND) n_rop_send++; else n_rop_recv++;
  endtask

  // ---------------------------------------------------------------- core side
  task automatic core_rd(input logic [ADDR_W-1:0] a, output logic [DATA_W-1:0] d);
    @(negedge clk); core_mem_valid = 1; core_mem_req = '{write: 1'b0, addr: a, wdata: '0};
    @(posedge clk); while (!core_mem_ready) @(posedge clk);
    @(negedge clk); core_mem_valid = 0;
    while (!core_mem_rvalid) @(negedge clk);
    d = core_mem_rdata;
  endtask

  task automatic core_wr(input logic [ADDR_W-1:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); core_mem_valid = 1; core_mem_req = '{write: 1'b1, addr: a, wdata: d};
    @(posedge clk); while (!core_mem_ready) @(posedge clk);
    @(negedge clk); core_mem_valid = 0;
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

  task automatic cop(input int p, input cop_cmd_t c, output logic [XLEN-1:0] data);
    @(negedge clk); cop_cmd_valid[p] = 1; cop_cmd[p] = c;
    @(posedge clk); while (!cop_cmd_ready[p]) @(posedge clk);
    @(negedge clk); cop_cmd_valid[p] = 0; cop_resp_ready[p] = 1;
    while (!cop_resp_valid[p]) @(negedge clk);
    data = cop_resp[p].data;
    @(negedge clk); cop_resp_ready[p] = 0;
  endtask

  task automatic vop(input vop_e op, input int x, input int y, input int z, input int len, input logic [31:0] s);
    logic [XLEN-1:0] r;
    cop(0, '{funct: 7'(op), rs1: {16'd0, 16'(z), 16'(y), 16'(x)}, rs2: {s, 32'(len)}, rd: 5'd10}, r);
    case (op)
      VOP_ADD:   n_vadd++;
      VOP_SCALE: n_vscale++;
      VOP_RELU:  n_vrelu++;
      default: ;
    endcase
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: engine state %0d, icap words %0d, rop irqs %0d", dut.u_xb.state, u_icap.words, n_rop_irq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- scenario
  logic [31:0] emb [NN][F];
  logic [31:0] wgt [F][NT];
  int          nbr [NT][$];
  logic [31:0] agg [NT][F];
  logic [31:0] res [NT][NT];

  initial begin
    logic [DATA_W-1:0] d64;
    logic [XLEN-1:0]   r;
    logic [31:0]       d, cs, bit_w [];
    int                nbits, woff;

    bar_wr_valid = 0; bar_wr_addr = 0; bar_wr_data = 0; bar_rd_addr = 0;
    core_mem_valid = 0; core_mem_req = '0; xb_cfg_wr_valid = 0; xb_cfg_addr = 0; xb_cfg_wr_data = 0;
    cop_cmd_valid = '0; cop_resp_ready = '0; sb_valid = '0;
    for (int p = 0; p < NCOP; p++) cop_cmd[p] = '0;
    for (int l = 0; l < NSB; l++) sb_req[l] = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- 1. Program(): bitfile over RoP into DRAM, then XBuilder -> ICAP
    nbits = 256;
    bit_w = new[nbits];
    for (int k = 0; k < nbits; k++) bit_w[k] = $urandom & 32'h0fff_ffff;
    bit_w[0] = 32'hFFFFFFFF; bit_w[1] = 32'hAA995566;
    bit_w[nbits-2] = 32'h30008001; bit_w[nbits-1] = 32'h0000000D;
    cs = '0;
    for (int k = 0; k < nbits; k++) cs = {cs[30:0], cs[31]} ^ bit_w[k];
    for (int k = 0; k < nbits / 2; k++) u_host.poke(40'h8000_0000 + 40'(8 * k), {bit_w[2*k+1], bit_w[2*k]});
    rop(ROP_SEND, 40'h8000_0000, nbits * 4);
    @(negedge clk); xb_cfg_wr_valid = 1; xb_cfg_addr = 8'h00; xb_cfg_wr_data = 64'(RX);
    @(negedge clk); xb_cfg_addr = 8'h08; xb_cfg_wr_data = 64'(nbits * 4);
    @(negedge clk); xb_cfg_addr = 8'h10; xb_cfg_wr_data = 64'd1;
    @(negedge clk); xb_cfg_wr_valid = 0;
    chk(user_decoupled, "partition decoupled during Program()");
    // a kernel launch now must wait until reprogramming ends
    vop(VOP_RELU, 0, 0, 0, 1, 32'd0);
    chk(n_xb_irq == 1, "kernel accepted only after Program() finished");
    xb_cfg_addr = 8'h10; #1;
    chk(xb_cfg_rd_data[2:0] == 3'b010, "Program() status done");
    chk(u_icap.words == nbits && u_icap.csum == cs, "bitfile reached the ICAP intact");

    // ---- 2. Run(): batch over RoP into DRAM
    for (int j = 0; j < NN; j++) for (int f = 0; f < F; f++) emb[j][f] = rand_fp(3);
    for (int f = 0; f < F; f++) for (int t = 0; t < NT; t++) wgt[f][t] = rand_fp(2);
    for (int t = 0; t < NT; t++) begin
      int deg;
      nbr[t] = {};
      nbr[t].push_back(t);                     // self-loop
      deg = $urandom_range(3, 1);
      for (int k = 0; k < deg; k++) nbr[t].push_back($urandom_range(NN - 1, 0));
    end
    // host buffer layout: embeddings, then weights (two fp32 per word)
    woff = 0;
    for (int j = 0; j < NN; j++) for (int f = 0; f < F; f += 2) begin
      u_host.poke(40'h9000_0000 + 40'(8 * woff), {emb[j][f+1], emb[j][f]}); woff++;
    end
    for (int f = 0; f < F; f++) for (int t = 0; t < NT; t += 2) begin
      u_host.poke(40'h9000_0000 + 40'(8 * woff), {wgt[f][t+1], wgt[f][t]}); woff++;
    end
    fork
      rop(ROP_SEND, 40'h9000_0000, woff * 8);
      for (int k = 0; k < 16; k++) core_rd(TX + 40'(8 * k), d64);   // core busy on DRAM too
    join

    // core: embeddings DRAM -> vector memory (node j at rows 2j, 2j+1)
    woff = 0;
    for (int j = 0; j < NN; j++) for (int f = 0; f < F; f += 2) begin
      core_rd(RX + 40'(8 * woff), d64); woff++;
      sb_write(0, j * F + f, d64[31:0]);
      sb_write(0, j * F + f + 1, d64[63:32]);
    end
    // core: weights DRAM -> systolic scratchpad rows 100+f (B[f][*])
    for (int f = 0; f < F; f++) for (int t = 0; t < NT; t += 2) begin
      core_rd(RX + 40'(8 * woff), d64); woff++;
      sb_write(1, (100 + f) * 8 + t, d64[31:0]);
      sb_write(1, (100 + f) * 8 + t + 1, d64[63:32]);
    end

    // aggregation: accumulator of target t at vector rows 200+2t
    for (int t = 0; t < NT; t++) begin
      for (int f = 0; f < F; f++) sb_write(0, (200 + 2 * t) * 4 + f, 32'd0);
      foreach (nbr[t][k]) vop(VOP_ADD, 2 * nbr[t][k], 200 + 2 * t, 200 + 2 * t, 2, 32'd0);
      vop(VOP_SCALE, 200 + 2 * t, 0, 200 + 2 * t, 2, r2fp(1.0 / real'(nbr[t].size())));
    end
    // reference aggregation
    for (int t = 0; t < NT; t++) for (int f = 0; f < F; f++) begin
      logic [31:0] acc;
      acc = 32'd0;
      foreach (nbr[t][k]) acc = r2fp(fp2r(emb[nbr[t][k]][f]) + fp2r(acc));
      agg[t][f] = r2fp(fp2r(acc) * fp2r(r2fp(1.0 / real'(nbr[t].size()))));
    end
    // aggregated features -> systolic scratchpad, transposed (row f holds agg[*][f])
    for (int t = 0; t < NT; t++) for (int f = 0; f < F; f++) begin
      sb_read(0, (200 + 2 * t) * 4 + f, d);
      chk(d == agg[t][f], $sformatf("aggregation node %0d feature %0d", t, f));
      sb_write(1, f * 8 + t, d);
    end
    // transformation: C = agg x W on the systolic array, C at rows 300..307
    cop(1, '{funct: SA_FUNCT_GEMM, rs1: {16'd0, 16'd300, 16'd100, 16'd0}, rs2: 64'(F), rd: 5'd11}, r);
    n_gemm++;
    chk(r == 64'(F + 26), "GEMM latency K + 26 cycles");
    // C -> vector memory rows 400+2t, ReLU in place
    for (int t = 0; t < NT; t++) for (int c = 0; c < NT; c++) begin
      sb_read(1, (300 + t) * 8 + c, d);
      sb_write(0, (400 + 2 * t) * 4 + c, d);
    end
    vop(VOP_RELU, 400, 0, 400, 2 * NT, 32'd0);
    // reference transformation + ReLU
    for (int t = 0; t < NT; t++) for (int c = 0; c < NT; c++) begin
      logic [31:0] acc;
      acc = r2fp(fp2r(agg[t][0]) * fp2r(wgt[0][c]));
      for (int f = 1; f < F; f++) acc = r2fp(fp2r(acc) + fp2r(r2fp(fp2r(agg[t][f]) * fp2r(wgt[f][c]))));
      res[t][c] = acc[31] ? 32'd0 : acc;
    end

    // ---- 3. result -> DRAM TX buffer -> host via RoP receive
    for (int t = 0; t < NT; t++) for (int c = 0; c < NT; c += 2) begin
      logic [31:0] lo, hi;
      sb_read(0, (400 + 2 * t) * 4 + c, lo);
      sb_read(0, (400 + 2 * t) * 4 + c + 1, hi);
      core_wr(TX + 40'(int'(8 * (t * 4 + c / 2))), {hi, lo});
    end
    rop(ROP_RECV, 40'hA000_0000, NT * NT * 4);
    for (int t = 0; t < NT; t++) for (int c = 0; c < NT; c += 2) begin
      d64 = u_host.peek(40'hA000_0000 + 40'(int'(8 * (t * 4 + c / 2))));
      chk(d64 == {res[t][c+1], res[t][c]}, $sformatf("result node %0d outputs %0d,%0d", t, c, c + 1));
    end

    // ---- every mechanism happened
    chk(n_rop_send >= 2,        "RoP send");
    chk(n_rop_recv >= 1,        "RoP receive");
    chk(u_dram.stalls > 0,      "DRAM back-pressure");
    chk(u_host.stalls > 0,      "host-memory back-pressure");
    chk(n_contention > 0,       "Shell bus contention");
    chk(n_icap_wait > 0,        "ICAP back-pressure");
    chk(n_holdoff > 0,          "decoupled partition held a command off");
    chk(n_vadd > 0 && n_vscale > 0 && n_vrelu > 0, "vector ADD, SCALE, RELU");
    chk(n_gemm > 0,             "systolic GEMM");
    $display("mechanisms: rop_send=%0d rop_recv=%0d dram_stalls=%0d host_stalls=%0d contention=%0d icap_wait=%0d holdoff=%0d vadd=%0d vscale=%0d vrelu=%0d gemm=%0d",
             n_rop_send, n_rop_recv, u_dram.stalls, u_host.stalls, n_contention, n_icap_wait, n_holdoff,
             n_vadd, n_vscale, n_vrelu, n_gemm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
