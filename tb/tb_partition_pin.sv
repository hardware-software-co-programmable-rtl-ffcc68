// tb_partition_pin: drives random values on both sides of the Shell/User
// boundary and checks, for every port, that with `decouple` low each signal
// arrives unchanged on the other side, and with `decouple` high every valid,
// ready and busy crossing the boundary is 0 in both directions.
module tb_partition_pin;
  import hgnn_pkg::*;
  localparam int NCOP = 4, NSB = 4;
  logic decouple, decoupled;
  logic [NCOP-1:0] s_cmd_valid, s_cmd_ready, s_resp_valid, s_resp_ready, s_busy;
  cop_cmd_t s_cmd [NCOP]; cop_resp_t s_resp [NCOP];
  logic [NSB-1:0] s_sb_valid, s_sb_ready, s_sb_rvalid;
  sbus_req_t s_sb_req [NSB]; logic [31:0] s_sb_rdata [NSB];
  logic [NCOP-1:0] u_cmd_valid, u_cmd_ready, u_resp_valid, u_resp_ready, u_busy;
  cop_cmd_t u_cmd [NCOP]; cop_resp_t u_resp [NCOP];
  logic [NSB-1:0] u_sb_valid, u_sb_ready, u_sb_rvalid;
  sbus_req_t u_sb_req [NSB]; logic [31:0] u_sb_rdata [NSB];
  int checks = 0, failures = 0;

  partition_pin #(.NCOP(NCOP), .NSB(NSB)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      decouple = it[0];
      s_cmd_valid = 4'($urandom); u_cmd_ready = 4'($urandom); u_resp_valid = 4'($urandom);
      s_resp_ready = 4'($urandom); u_busy = 4'($urandom);
      s_sb_valid = 4'($urandom); u_sb_ready = 4'($urandom); u_sb_rvalid = 4'($urandom);
      for (int p = 0; p < NCOP; p++) begin
        s_cmd[p] = {$urandom, $urandom, $urandom, $urandom, $urandom};
        u_resp[p] = {$urandom, $urandom, $urandom};
      end
      for (int l = 0; l < NSB; l++) begin
        s_sb_req[l] = {$urandom, $urandom};
        u_sb_rdata[l] = $urandom;
      end
      #1;
      chk(decoupled == decouple, "decoupled status");
      if (decouple) begin
        chk(u_cmd_valid == 0 && s_cmd_ready == 0 && s_resp_valid == 0 && u_resp_ready == 0 && s_busy == 0,
            "co-processor handshakes tied while decoupled");
        chk(u_sb_valid == 0 && s_sb_ready == 0 && s_sb_rvalid == 0, "bus handshakes tied while decoupled");
      end else begin
        chk(u_cmd_valid == s_cmd_valid && s_cmd_ready == u_cmd_ready && s_resp_valid == u_resp_valid
            && u_resp_ready == s_resp_ready && s_busy == u_busy, "co-processor handshakes pass");
        chk(u_sb_valid == s_sb_valid && s_sb_ready == u_sb_ready && s_sb_rvalid == u_sb_rvalid,
            "bus handshakes pass");
      end
      for (int p = 0; p < NCOP; p++) chk(u_cmd[p] == s_cmd[p] && s_resp[p] == u_resp[p], "co-processor data");
      for (int l = 0; l < NSB; l++) chk(u_sb_req[l] == s_sb_req[l] && s_sb_rdata[l] == u_sb_rdata[l], "bus data");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
