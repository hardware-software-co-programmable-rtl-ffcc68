// xbuilder_engine: the Shell's reconfiguration engine (the hardware behind the
// Program() RPC).
//
// Before it runs, the Shell core has copied a partial bitfile for the User
// region into FPGA DRAM (it arrives over RPC-over-PCIe). The core then writes
// the bitfile's DRAM address and byte length and starts the engine, which
//   1. raises `decouple`, tying off the partition pins so the User region
//      cannot disturb the Shell while its configuration memory is rewritten,
//      and holds the User region in reset;
//   2. reads the bitfile from DRAM, one 64-bit word at a time, and writes it to
//      the internal configuration access port (ICAP) as two 32-bit words,
//      lower half first, whenever the ICAP reports `icap_avail`;
//   3. waits for the ICAP's partial-reconfiguration done (or error) flag;
//   4. releases the User reset, drops `decouple` one cycle later (so the
//      region is out of reset before any handshake can cross) and pulses
//      `irq` with the status.
// Decoupling during programming and the DRAM-to-ICAP path follow the paper.
// The register map, the word order, the ICAP handshake (ICAPE3-style CSIB,
// RDWRB, AVAIL, PRDONE, PRERROR) and the reset of the User region are this
// design's choices. The bitfile is expected in DRAM already in ICAP word order.
//
// Register map (cfg port, 64-bit): 0x00 bitfile DRAM address, 0x08 length in
// bytes (a multiple of 8), 0x10 write: start; read: {.., error, done, busy}.
module xbuilder_engine
  import hgnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration registers (from the Shell core)
  input  logic              cfg_wr_valid,
  input  logic [7:0]        cfg_addr,
  input  logic [DATA_W-1:0] cfg_wr_data,
  output logic [DATA_W-1:0] cfg_rd_data,
  // DRAM master (through the Shell bus)
  output logic              dram_valid,
  input  logic              dram_ready,
  output mem_req_t          dram_req,
  input  logic              dram_rvalid,
  input  logic [DATA_W-1:0] dram_rdata,
  // ICAP
  output logic              icap_csib,     // active-low select
  output logic              icap_rdwrb,    // 0 = write
  output logic [31:0]       icap_i,
  input  logic              icap_avail,
  input  logic              icap_prdone,
  input  logic              icap_prerror,
  // partition control
  output logic              decouple,
  output logic              user_rst_n,
  output logic              irq
);
  typedef enum logic [2:0] {S_IDLE, S_DECOUPLE, S_RD, S_RWAIT, S_LO, S_HI, S_WAITDONE, S_RELEASE} state_e;
  state_e state;

  logic [ADDR_W-1:0] base;
  logic [31:0]       len, words, idx;
  logic [DATA_W-1:0] word_q;
  logic              done, error;

  assign dram_valid = (state == S_RD);
  assign dram_req   = '{write: 1'b0, addr: base + ADDR_W'({idx, 3'b000}), wdata: '0};
  assign icap_rdwrb = 1'b0;
  assign icap_csib  = !((state == S_LO || state == S_HI) && icap_avail);
  assign icap_i     = (state == S_HI) ? word_q[63:32] : word_q[31:0];
  assign decouple   = (state != S_IDLE);

  always_comb begin
    unique case (cfg_addr)
      8'h00:   cfg_rd_data = DATA_W'(base);
      8'h08:   cfg_rd_data = DATA_W'(len);
      8'h10:   cfg_rd_data = DATA_W'({error, done, state != S_IDLE});
      default: cfg_rd_data = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      base       <= '0;
      len        <= '0;
      words      <= '0;
      idx        <= '0;
      word_q     <= '0;
      done       <= 1'b0;
      error      <= 1'b0;
      irq        <= 1'b0;
      user_rst_n <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (state == S_IDLE) user_rst_n <= 1'b1;
      if (cfg_wr_valid && state == S_IDLE) begin
        unique case (cfg_addr)
          8'h00: base <= cfg_wr_data[ADDR_W-1:0];
          8'h08: len  <= cfg_wr_data[31:0];
          8'h10: if (len != 32'd0) begin
            words      <= len >> 3;
            idx        <= '0;
            done       <= 1'b0;
            error      <= 1'b0;
            user_rst_n <= 1'b0;
            state      <= S_DECOUPLE;
          end
          default: ;
        endcase
      end
      unique case (state)
        S_IDLE: ;
        S_DECOUPLE: begin
          user_rst_n <= 1'b0;
          state      <= S_RD;
        end
        S_RD:    if (dram_ready) state <= S_RWAIT;
        S_RWAIT: if (dram_rvalid) begin
          word_q <= dram_rdata;
          state  <= S_LO;
        end
        S_LO: if (icap_avail) state <= S_HI;
        S_HI: if (icap_avail) begin
          idx   <= idx + 32'd1;
          state <= (idx + 32'd1 == words) ? S_WAITDONE : S_RD;
        end
        S_WAITDONE: if (icap_prdone || icap_prerror) begin
          error <= icap_prerror;
          state <= S_RELEASE;
        end
        S_RELEASE: begin
          user_rst_n <= 1'b1;
          done  <= 1'b1;
          irq   <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the User region is never out of reset while its pins are decoupled
  a_rst_while_decoupled: assert property (@(posedge clk) disable iff (!rst_n)
    decouple && state != S_DECOUPLE |-> !user_rst_n);
endmodule
