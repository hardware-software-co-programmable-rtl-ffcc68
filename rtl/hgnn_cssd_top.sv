// hgnn_cssd_top: the FPGA of the computational SSD, Shell plus the
// heterogeneous User region.
//
// Inside:
//   Shell  - rop_dma:         RPC-over-PCIe command target and DMA engine
//          - shell_bus:       DRAM arbiter for core (0), RoP DMA (1), XBuilder (2)
//          - xbuilder_engine: streams a partial bitfile from DRAM to the ICAP
//          - partition_pin:   Shell/User boundary, tied off while reprogramming
//   User   - user_hetero:     vector processor + 8x8 systolic array
// Outside (ports of this module): the PCIe endpoint (BAR register window and
// host-memory master), the DRAM controller, the out-of-order RISC-V Shell core
// (its DRAM master, its co-processor ports and system-bus lanes, its access to
// the XBuilder registers, and the two interrupts), and the ICAP primitive.
// These are vendor IP, an open-source core or FPGA primitives and are not part
// of this RTL. The PCIe switch and the SSD sit behind the endpoint.
// The structure follows the paper's Shell/User figure; the port lists and
// the interconnect details are this design's choices (see each block).
module hgnn_cssd_top
  import hgnn_pkg::*;
#(
  parameter int unsigned NCOP    = 4,
  parameter int unsigned NSB     = 4,
  parameter int unsigned LANES   = 4,
  parameter int unsigned VMEM_KB = 64,
  parameter int unsigned DIM     = 8,
  parameter int unsigned SPAD_KB = 128,
  parameter logic [ADDR_W-1:0] RX_BASE = 40'h00_0000_0000,
  parameter logic [ADDR_W-1:0] TX_BASE = 40'h00_0010_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  // PCIe endpoint: BAR register window of the RoP engine
  input  logic              bar_wr_valid,
  input  logic [7:0]        bar_wr_addr,
  input  logic [DATA_W-1:0] bar_wr_data,
  input  logic [7:0]        bar_rd_addr,
  output logic [DATA_W-1:0] bar_rd_data,
  // PCIe endpoint: host memory master
  output logic              host_valid,
  input  logic              host_ready,
  output mem_req_t          host_req,
  input  logic              host_rvalid,
  input  logic [DATA_W-1:0] host_rdata,
  // DRAM controller
  output logic              dram_valid,
  input  logic              dram_ready,
  output mem_req_t          dram_req,
  input  logic              dram_rvalid,
  input  logic [DATA_W-1:0] dram_rdata,
  // Shell core: DRAM master
  input  logic              core_mem_valid,
  output logic              core_mem_ready,
  input  mem_req_t          core_mem_req,
  output logic              core_mem_rvalid,
  output logic [DATA_W-1:0] core_mem_rdata,
  // Shell core: XBuilder registers
  input  logic              xb_cfg_wr_valid,
  input  logic [7:0]        xb_cfg_addr,
  input  logic [DATA_W-1:0] xb_cfg_wr_data,
  output logic [DATA_W-1:0] xb_cfg_rd_data,
  // Shell core: co-processor ports
  input  logic [NCOP-1:0]   cop_cmd_valid,
  output logic [NCOP-1:0]   cop_cmd_ready,
  input  cop_cmd_t          cop_cmd [NCOP],
  output logic [NCOP-1:0]   cop_resp_valid,
  input  logic [NCOP-1:0]   cop_resp_ready,
  output cop_resp_t         cop_resp [NCOP],
  output logic [NCOP-1:0]   cop_busy,
  // Shell core: system-bus lanes into the User region
  input  logic [NSB-1:0]    sb_valid,
  output logic [NSB-1:0]    sb_ready,
  input  sbus_req_t         sb_req [NSB],
  output logic [NSB-1:0]    sb_rvalid,
  output logic [31:0]       sb_rdata [NSB],
  // interrupts to the Shell core
  output logic              rop_irq,
  output logic              xb_irq,
  output logic              user_decoupled,
  // ICAP primitive
  output logic              icap_csib,
  output logic              icap_rdwrb,
  output logic [31:0]       icap_i,
  input  logic              icap_avail,
  input  logic              icap_prdone,
  input  logic              icap_prerror
);
  // ------------------------------------------------------------ Shell bus
  logic [2:0]        m_valid, m_ready, m_rvalid;
  mem_req_t          m_req [3];
  logic [DATA_W-1:0] m_rdata;

  logic              rop_valid, xb_valid;
  mem_req_t          rop_req, xb_req;

  assign m_valid = {xb_valid, rop_valid, core_mem_valid};
  assign m_req[0] = core_mem_req;
  assign m_req[1] = rop_req;
  assign m_req[2] = xb_req;
  assign core_mem_ready  = m_ready[0];
  assign core_mem_rvalid = m_rvalid[0];
  assign core_mem_rdata  = m_rdata;

  shell_bus #(.NM(3)) u_bus (
    .clk, .rst_n,
    .m_valid, .m_ready, .m_req, .m_rvalid, .m_rdata,
    .s_valid(dram_valid), .s_ready(dram_ready), .s_req(dram_req),
    .s_rvalid(dram_rvalid), .s_rdata(dram_rdata)
  );

  // ------------------------------------------------------------ RoP DMA
  rop_dma #(.RX_BASE(RX_BASE), .TX_BASE(TX_BASE)) u_rop (
    .clk, .rst_n,
    .bar_wr_valid, .bar_wr_addr, .bar_wr_data, .bar_rd_addr, .bar_rd_data,
    .host_valid, .host_ready, .host_req, .host_rvalid, .host_rdata,
    .dram_valid(rop_valid), .dram_ready(m_ready[1]), .dram_req(rop_req),
    .dram_rvalid(m_rvalid[1]), .dram_rdata(m_rdata),
    .irq(rop_irq)
  );

  // ------------------------------------------------------------ XBuilder engine
  logic decouple, user_rst_n;
  xbuilder_engine u_xb (
    .clk, .rst_n,
    .cfg_wr_valid(xb_cfg_wr_valid), .cfg_addr(xb_cfg_addr),
    .cfg_wr_data(xb_cfg_wr_data), .cfg_rd_data(xb_cfg_rd_data),
    .dram_valid(xb_valid), .dram_ready(m_ready[2]), .dram_req(xb_req),
    .dram_rvalid(m_rvalid[2]), .dram_rdata(m_rdata),
    .icap_csib, .icap_rdwrb, .icap_i, .icap_avail, .icap_prdone, .icap_prerror,
    .decouple, .user_rst_n, .irq(xb_irq)
  );

  // ------------------------------------------------------------ partition pins
  logic [NCOP-1:0] u_cmd_valid, u_cmd_ready, u_resp_valid, u_resp_ready, u_busy;
  cop_cmd_t        u_cmd  [NCOP];
  cop_resp_t       u_resp [NCOP];
  logic [NSB-1:0]  u_sb_valid, u_sb_ready, u_sb_rvalid;
  sbus_req_t       u_sb_req   [NSB];
  logic [31:0]     u_sb_rdata [NSB];

  partition_pin #(.NCOP(NCOP), .NSB(NSB)) u_pp (
    .decouple, .decoupled(user_decoupled),
    .s_cmd_valid(cop_cmd_valid), .s_cmd_ready(cop_cmd_ready), .s_cmd(cop_cmd),
    .s_resp_valid(cop_resp_valid), .s_resp_ready(cop_resp_ready), .s_resp(cop_resp),
    .s_busy(cop_busy),
    .s_sb_valid(sb_valid), .s_sb_ready(sb_ready), .s_sb_req(sb_req),
    .s_sb_rvalid(sb_rvalid), .s_sb_rdata(sb_rdata),
    .u_cmd_valid, .u_cmd_ready, .u_cmd, .u_resp_valid, .u_resp_ready, .u_resp,
    .u_busy, .u_sb_valid, .u_sb_ready, .u_sb_req, .u_sb_rvalid, .u_sb_rdata
  );

  // ------------------------------------------------------------ User region
  logic user_rst;
  assign user_rst = rst_n & user_rst_n;

  user_hetero #(
    .NCOP(NCOP), .NSB(NSB), .LANES(LANES), .VMEM_KB(VMEM_KB), .DIM(DIM), .SPAD_KB(SPAD_KB)
  ) u_user (
    .clk, .rst_n(user_rst),
    .cmd_valid(u_cmd_valid), .cmd_ready(u_cmd_ready), .cmd(u_cmd),
    .resp_valid(u_resp_valid), .resp_ready(u_resp_ready), .resp(u_resp),
    .busy(u_busy),
    .sb_valid(u_sb_valid), .sb_ready(u_sb_ready), .sb_req(u_sb_req),
    .sb_rvalid(u_sb_rvalid), .sb_rdata(u_sb_rdata)
  );
endmodule
