// rop_dma: RPC-over-PCIe (RoP) command target and DMA engine of the Shell.
//
// RPC between the host and the CSSD runs over plain PCIe: the host driver keeps
// gRPC packets in a pre-allocated, memory-mapped host buffer and writes a
// command -- opcode (send or receive), buffer address and length -- to a
// designated address in the FPGA's PCIe BAR. This block is that target: it
// latches the command fields, and a write to the doorbell register starts a
// copy between the host buffer and FPGA-side DRAM:
//   ROP_SEND  host[addr .. addr+len)  -> DRAM[RX_BASE .. RX_BASE+len)
//   ROP_RECV  DRAM[TX_BASE .. +len)   -> host[addr .. addr+len)
// When the copy ends it pulses `irq` for the Shell core, which runs the gRPC
// service on the received packet (or has prepared the reply at TX_BASE).
// The command fields follow the paper; the register map, the fixed DRAM
// buffers RX_BASE/TX_BASE, the status word and the interrupt are this design's
// choices.
//
// Register map (64-bit registers, BAR offsets in hgnn_pkg):
//   0x00 opcode   0x08 host address   0x10 length in bytes
//   0x18 write: doorbell (start); read: status {.., error, done, busy}
//   0x20 read: bytes moved by the last command
// A doorbell while busy, or with opcode NOP, sets `error` and starts nothing.
//
// Timing: one 64-bit word in flight at a time; each word costs a read request,
// the read latency of the source, and a write request (>= 3 cycles/word when
// both memories answer in one cycle). Lengths round up to whole words.
module rop_dma
  import hgnn_pkg::*;
#(
  parameter logic [ADDR_W-1:0] RX_BASE = 40'h00_0000_0000,  // DRAM receive buffer
  parameter logic [ADDR_W-1:0] TX_BASE = 40'h00_0010_0000   // DRAM transmit buffer
) (
  input  logic              clk,
  input  logic              rst_n,
  // BAR register window (from the PCIe endpoint)
  input  logic              bar_wr_valid,
  input  logic [7:0]        bar_wr_addr,
  input  logic [DATA_W-1:0] bar_wr_data,
  input  logic [7:0]        bar_rd_addr,
  output logic [DATA_W-1:0] bar_rd_data,
  // host memory master (through the PCIe endpoint)
  output logic              host_valid,
  input  logic              host_ready,
  output mem_req_t          host_req,
  input  logic              host_rvalid,
  input  logic [DATA_W-1:0] host_rdata,
  // FPGA DRAM master (through the Shell bus)
  output logic              dram_valid,
  input  logic              dram_ready,
  output mem_req_t          dram_req,
  input  logic              dram_rvalid,
  input  logic [DATA_W-1:0] dram_rdata,
  // completion interrupt to the Shell core
  output logic              irq
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_RWAIT, S_WR} state_e;
  state_e state;

  rop_cmd_t          cmd_reg, cmd_act;
  logic [31:0]       words, idx, xferred;
  logic [DATA_W-1:0] buf_q;
  logic              done, error;

  logic [ADDR_W-1:0] dram_addr, host_addr;
  logic              src_is_host;
  assign src_is_host = (cmd_act.opcode == ROP_SEND);
  assign host_addr   = cmd_act.addr + ADDR_W'({idx, 3'b000});
  assign dram_addr   = (src_is_host ? RX_BASE : TX_BASE) + ADDR_W'({idx, 3'b000});

  always_comb begin
    host_valid = 1'b0;
    dram_valid = 1'b0;
    host_req   = '{write: 1'b0, addr: host_addr, wdata: buf_q};
    dram_req   = '{write: 1'b0, addr: dram_addr, wdata: buf_q};
    if (state == S_RD) begin
      host_valid = src_is_host;
      dram_valid = !src_is_host;
    end else if (state == S_WR) begin
      host_valid     = !src_is_host;
      dram_valid     = src_is_host;
      host_req.write = 1'b1;
      dram_req.write = 1'b1;
    end
  end

  always_comb begin
    unique case (bar_rd_addr)
      ROP_REG_OPCODE:   bar_rd_data = DATA_W'(cmd_reg.opcode);
      ROP_REG_ADDR:     bar_rd_data = DATA_W'(cmd_reg.addr);
      ROP_REG_LEN:      bar_rd_data = DATA_W'(cmd_reg.len);
      ROP_REG_DOORBELL: bar_rd_data = DATA_W'({error, done, state != S_IDLE});
      ROP_REG_XFERRED:  bar_rd_data = DATA_W'(xferred);
      default:          bar_rd_data = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cmd_reg <= '0;
      cmd_act <= '0;
      words   <= '0;
      idx     <= '0;
      xferred <= '0;
      buf_q   <= '0;
      done    <= 1'b0;
      error   <= 1'b0;
      irq     <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (bar_wr_valid) begin
        unique case (bar_wr_addr)
          ROP_REG_OPCODE: cmd_reg.opcode <= rop_opcode_e'(bar_wr_data[1:0]);
          ROP_REG_ADDR:   cmd_reg.addr   <= bar_wr_data[ADDR_W-1:0];
          ROP_REG_LEN:    cmd_reg.len    <= bar_wr_data[31:0];
          ROP_REG_DOORBELL:
            if (state != S_IDLE || cmd_reg.opcode == ROP_NOP || cmd_reg.opcode == rop_opcode_e'(2'd3))
              error <= 1'b1;
            else begin
              cmd_act <= cmd_reg;
              words   <= (cmd_reg.len + 32'd7) >> 3;
              idx     <= '0;
              xferred <= '0;
              done    <= 1'b0;
              error   <= 1'b0;
              state   <= (cmd_reg.len == 32'd0) ? S_IDLE : S_RD;
              if (cmd_reg.len == 32'd0) begin
                done <= 1'b1;
                irq  <= 1'b1;
              end
            end
          default: ;
        endcase
      end
      unique case (state)
        S_IDLE: ;
        S_RD:    if (src_is_host ? host_ready : dram_ready) state <= S_RWAIT;
        S_RWAIT: begin
          if (src_is_host && host_rvalid) begin
            buf_q <= host_rdata;
            state <= S_WR;
          end else if (!src_is_host && dram_rvalid) begin
            buf_q <= dram_rdata;
            state <= S_WR;
          end
        end
        S_WR: if (src_is_host ? dram_ready : host_ready) begin
          idx     <= idx + 32'd1;
          xferred <= xferred + 32'd8;
          if (idx + 32'd1 == words) begin
            state <= S_IDLE;
            done  <= 1'b1;
            irq   <= 1'b1;
          end else
            state <= S_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // valid/ready rule: a request, once raised, holds until accepted
  a_host_hold: assert property (@(posedge clk) disable iff (!rst_n)
    host_valid && !host_ready |=> host_valid && $stable(host_req));
  a_dram_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dram_valid && !dram_ready |=> dram_valid && $stable(dram_req));
endmodule
