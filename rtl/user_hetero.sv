// user_hetero: the User (reprogrammable) region in the heterogeneous
// configuration, the one the design is evaluated with end to end.
//
// It holds a four-lane vector processor for the aggregation-type kernels and
// an 8x8 floating-point systolic array for GEMM, each behind its own
// co-processor port and system-bus lane of the partition pins:
//   co-processor port 0 / system-bus lane 0 -> vector processor
//   co-processor port 1 / system-bus lane 1 -> systolic array
// The remaining ports of the boundary are left idle (never ready, never
// valid). The pairing of ports to units is this design's choice; the unit mix
// follows the paper's heterogeneous prototype. `rst_n` is the User reset that
// the reconfiguration engine holds low while the region is reprogrammed.
module user_hetero
  import hgnn_pkg::*;
#(
  parameter int unsigned NCOP    = 4,
  parameter int unsigned NSB     = 4,
  parameter int unsigned LANES   = 4,
  parameter int unsigned VMEM_KB = 64,
  parameter int unsigned DIM     = 8,
  parameter int unsigned SPAD_KB = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCOP-1:0]   cmd_valid,
  output logic [NCOP-1:0]   cmd_ready,
  input  cop_cmd_t          cmd [NCOP],
  output logic [NCOP-1:0]   resp_valid,
  input  logic [NCOP-1:0]   resp_ready,
  output cop_resp_t         resp [NCOP],
  output logic [NCOP-1:0]   busy,
  input  logic [NSB-1:0]    sb_valid,
  output logic [NSB-1:0]    sb_ready,
  input  sbus_req_t         sb_req [NSB],
  output logic [NSB-1:0]    sb_rvalid,
  output logic [31:0]       sb_rdata [NSB]
);
  vector_processor #(.LANES(LANES), .VMEM_KB(VMEM_KB)) u_vec (
    .clk, .rst_n,
    .cmd_valid (cmd_valid[0]), .cmd_ready (cmd_ready[0]), .cmd (cmd[0]),
    .resp_valid(resp_valid[0]), .resp_ready(resp_ready[0]), .resp(resp[0]),
    .busy      (busy[0]),
    .sb_valid  (sb_valid[0]), .sb_ready(sb_ready[0]), .sb_req(sb_req[0]),
    .sb_rvalid (sb_rvalid[0]), .sb_rdata(sb_rdata[0])
  );

  systolic_array #(.DIM(DIM), .SPAD_KB(SPAD_KB)) u_sa (
    .clk, .rst_n,
    .cmd_valid (cmd_valid[1]), .cmd_ready (cmd_ready[1]), .cmd (cmd[1]),
    .resp_valid(resp_valid[1]), .resp_ready(resp_ready[1]), .resp(resp[1]),
    .busy      (busy[1]),
    .sb_valid  (sb_valid[1]), .sb_ready(sb_ready[1]), .sb_req(sb_req[1]),
    .sb_rvalid (sb_rvalid[1]), .sb_rdata(sb_rdata[1])
  );

  for (genvar p = 2; p < NCOP; p++) begin : g_idle_cop
    assign cmd_ready[p]  = 1'b0;
    assign resp_valid[p] = 1'b0;
    assign resp[p]       = '0;
    assign busy[p]       = 1'b0;
  end
  for (genvar l = 2; l < NSB; l++) begin : g_idle_sb
    assign sb_ready[l]  = 1'b0;
    assign sb_rvalid[l] = 1'b0;
    assign sb_rdata[l]  = '0;
  end
endmodule
