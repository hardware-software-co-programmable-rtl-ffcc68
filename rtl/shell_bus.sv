// shell_bus: the Shell's shared bus in front of the DRAM controller.
//
// The Shell core, the RoP DMA engine and the XBuilder engine all reach the
// FPGA's DRAM through it. The paper draws this bus but says nothing about it;
// the arbitration here is this design's choice: round-robin among NM masters,
// one transaction at a time. A grant is held from the cycle a master raises
// `valid` until its write is accepted or, for a read, until the read data
// returns, so responses need no tags. Read data is broadcast; only the granted
// master sees `m_rvalid`.
// Timing: a request is presented to DRAM in the cycle after the arbiter picks
// its master (one cycle of arbitration latency when the bus was idle).
module shell_bus
  import hgnn_pkg::*;
#(
  parameter int unsigned NM = 3      // masters: core, RoP DMA, XBuilder engine
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NM-1:0]     m_valid,
  output logic [NM-1:0]     m_ready,
  input  mem_req_t          m_req [NM],
  output logic [NM-1:0]     m_rvalid,
  output logic [DATA_W-1:0] m_rdata,
  output logic              s_valid,
  input  logic              s_ready,
  output mem_req_t          s_req,
  input  logic              s_rvalid,
  input  logic [DATA_W-1:0] s_rdata
);
  localparam int unsigned IW = (NM > 1) ? $clog2(NM) : 1;

  typedef enum logic [1:0] {S_ARB, S_REQ, S_RESP} state_e;
  state_e state;
  logic [IW-1:0] grant, last;

  always_comb begin
    s_valid  = (state == S_REQ) && m_valid[grant];
    s_req    = m_req[grant];
    m_ready  = '0;
    m_rvalid = '0;
    if (state == S_REQ) m_ready[grant] = s_ready;
    if (state == S_RESP) m_rvalid[grant] = s_rvalid;
    m_rdata  = s_rdata;
  end

  // round-robin pick: first requester after the last granted master
  logic [IW-1:0] pick;
  logic          any;
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= NM; k++) begin
      int unsigned c;
      c = (32'(last) + 32'(k)) % NM;
      if (!any && m_valid[c]) begin
        pick = IW'(c);
        any  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ARB;
      grant <= '0;
      last  <= IW'(NM - 1);
    end else begin
      unique case (state)
        S_ARB: if (any) begin
          grant <= pick;
          last  <= pick;
          state <= S_REQ;
        end
        S_REQ: if (s_valid && s_ready) state <= s_req.write ? S_ARB : S_RESP;
        S_RESP: if (s_rvalid) state <= S_ARB;
        default: state <= S_ARB;
      endcase
    end
  end

  a_onehot_ready: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m_ready));
endmodule
