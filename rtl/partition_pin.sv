// partition_pin: the boundary between the static Shell and the reprogrammable
// User region.
//
// It carries NCOP co-processor ports (RoCC-style command, response and busy)
// and NSB system-bus lanes (word access into User scratchpads). The Shell's
// wiring is fixed when the Shell is built, so the boundary offers the largest
// number of ports any User design may use; a User design leaves the rest idle.
// While `decouple` is high (the User region is being reprogrammed) every
// handshake signal crossing the boundary is forced inactive in both
// directions: valid and ready towards the User region are 0, and valid,
// ready and busy towards the Shell are 0, so partially configured logic can
// neither issue nor accept a transfer. Data fields pass unchanged; they mean
// nothing without their valid. Purely combinational, no added latency.
// Tying the partition wires during reconfiguration follows the paper; the
// port counts (four, like RoCC's custom0..custom3 opcodes) and the set of
// signals are this design's choices.
module partition_pin
  import hgnn_pkg::*;
#(
  parameter int unsigned NCOP = 4,
  parameter int unsigned NSB  = 4
) (
  input  logic              decouple,
  output logic              decoupled,
  // Shell side
  input  logic [NCOP-1:0]   s_cmd_valid,
  output logic [NCOP-1:0]   s_cmd_ready,
  input  cop_cmd_t          s_cmd [NCOP],
  output logic [NCOP-1:0]   s_resp_valid,
  input  logic [NCOP-1:0]   s_resp_ready,
  output cop_resp_t         s_resp [NCOP],
  output logic [NCOP-1:0]   s_busy,
  input  logic [NSB-1:0]    s_sb_valid,
  output logic [NSB-1:0]    s_sb_ready,
  input  sbus_req_t         s_sb_req [NSB],
  output logic [NSB-1:0]    s_sb_rvalid,
  output logic [31:0]       s_sb_rdata [NSB],
  // User side
  output logic [NCOP-1:0]   u_cmd_valid,
  input  logic [NCOP-1:0]   u_cmd_ready,
  output cop_cmd_t          u_cmd [NCOP],
  input  logic [NCOP-1:0]   u_resp_valid,
  output logic [NCOP-1:0]   u_resp_ready,
  input  cop_resp_t         u_resp [NCOP],
  input  logic [NCOP-1:0]   u_busy,
  output logic [NSB-1:0]    u_sb_valid,
  input  logic [NSB-1:0]    u_sb_ready,
  output sbus_req_t         u_sb_req [NSB],
  input  logic [NSB-1:0]    u_sb_rvalid,
  input  logic [31:0]       u_sb_rdata [NSB]
);
  logic pass;
  assign pass      = !decouple;
  assign decoupled = decouple;

  always_comb begin
    for (int p = 0; p < NCOP; p++) begin
      u_cmd_valid[p]  = s_cmd_valid[p]  & pass;
      s_cmd_ready[p]  = u_cmd_ready[p]  & pass;
      u_cmd[p]        = s_cmd[p];
      s_resp_valid[p] = u_resp_valid[p] & pass;
      u_resp_ready[p] = s_resp_ready[p] & pass;
      s_resp[p]       = u_resp[p];
      s_busy[p]       = u_busy[p]       & pass;
    end
    for (int l = 0; l < NSB; l++) begin
      u_sb_valid[l]  = s_sb_valid[l]  & pass;
      s_sb_ready[l]  = u_sb_ready[l]  & pass;
      u_sb_req[l]    = s_sb_req[l];
      s_sb_rvalid[l] = u_sb_rvalid[l] & pass;
      s_sb_rdata[l]  = u_sb_rdata[l];
    end
  end
endmodule
