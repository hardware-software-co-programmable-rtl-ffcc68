// vector_processor: four-lane single-precision SIMD unit of the heterogeneous
// User region.
//
// It runs the aggregation-style kernels of a GNN layer (element-wise
// operations, reductions, and the neighbour sums of SpMM), while the systolic
// array runs the dense GEMMs. The paper fixes only that the SIMD unit has four
// vector units; the instruction set, the local vector memory and its size are
// this design's choices. GCN's mean aggregation is an ADD per neighbour into an
// accumulator vector followed by SCALE with 1/degree; NGCF's similarity term
// uses MUL.
//
// Vector memory: VMEM_KB KiB as rows of LANES words; a vector of length
// len*LANES occupies len consecutive rows. Software on the Shell core fills it
// and reads results through the system-bus lane (word address = row*LANES +
// lane, 1-cycle read latency; refused while a command runs).
//
// Co-processor command: funct = vop_e; rs1[15:0] x_row, rs1[31:16] y_row,
// rs1[47:32] z_row; rs2[15:0] len (rows, >= 1), rs2[63:32] scalar s (fp32).
//   ADD z=x+y, MUL z=x*y, RELU z=max(x,0), SCALE z=x*s: one row per cycle,
//     response data = cycles from acceptance to response = len + 2.
//   SUM: response data[31:0] = sum of all len*LANES elements of x, added per
//     row as ((l0+l1)+(l2+l3)) and then into the running sum in row order.
//     Also len + 2 cycles.
// Rows are read in cycle t and written in cycle t+1, so z may equal x or y
// (in-place accumulation z = z + x works).
module vector_processor
  import hgnn_pkg::*;
#(
  parameter int unsigned LANES   = 4,    // vector units
  parameter int unsigned VMEM_KB = 64    // vector memory in KiB
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  cop_cmd_t  cmd,
  output logic      resp_valid,
  input  logic      resp_ready,
  output cop_resp_t resp,
  output logic      busy,
  input  logic      sb_valid,
  output logic      sb_ready,
  input  sbus_req_t sb_req,
  output logic      sb_rvalid,
  output logic [31:0] sb_rdata
);
  localparam int unsigned ROWS = VMEM_KB * 1024 / (LANES * 4);
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_TAIL, S_RESP} state_e;
  state_e state;


  vop_e          op;
  logic [RW-1:0] x_row, y_row, z_row;
  logic [15:0]   len, cnt;
  logic [31:0]   scalar, sum_acc, cycles;
  logic [4:0]    rd_q;

  logic                rd_en;
  logic [RW-1:0]       rd_x_addr, rd_y_addr;
  logic [LANES*32-1:0] x_data, y_data;
  logic                pipe_valid;       // x_data/y_data belong to row wr_row
  logic [RW-1:0]       pipe_row;
  logic                wr_en;
  logic [RW-1:0]       wr_addr;
  logic [LANES*32-1:0] wr_data;
  logic [LANES-1:0]    wr_mask;
  logic [LW-1:0]       sb_lane_q;

  logic sb_go;
  assign sb_ready = (state == S_IDLE);
  assign sb_go    = sb_valid && sb_ready;

  always_comb begin
    rd_en     = (state == S_RUN);
    rd_x_addr = x_row + RW'(cnt);
    rd_y_addr = y_row + RW'(cnt);
    if (sb_go && !sb_req.write) begin
      rd_en     = 1'b1;
      rd_x_addr = RW'(32'(sb_req.addr) / LANES);
    end
  end

  for (genvar w = 0; w < LANES; w++) begin : g_bank
    logic [31:0] vmem [ROWS];   // bank w: word w of every row
    always_ff @(posedge clk) begin
      if (rd_en) begin
        x_data[w*32 +: 32] <= vmem[rd_x_addr];
        y_data[w*32 +: 32] <= vmem[rd_y_addr];
      end
      if (wr_en && wr_mask[w]) vmem[wr_addr] <= wr_data[w*32 +: 32];
    end
  end

  // ------------------------------------------------------------ lanes
  logic [31:0] l_x [LANES];
  logic [31:0] l_sum [LANES];
  logic [31:0] l_prod [LANES];
  logic [31:0] l_res [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [31:0] mul_b;
    assign l_x[l]  = x_data[l*32 +: 32];
    assign mul_b   = (op == VOP_SCALE) ? scalar : y_data[l*32 +: 32];
    fp32_add u_add (.a(l_x[l]), .b(y_data[l*32 +: 32]), .y(l_sum[l]));
    fp32_mul u_mul (.a(l_x[l]), .b(mul_b),             .y(l_prod[l]));
    always_comb begin
      unique case (op)
        VOP_ADD:             l_res[l] = l_sum[l];
        VOP_MUL, VOP_SCALE:  l_res[l] = l_prod[l];
        VOP_RELU:            l_res[l] = (l_x[l][31] || l_x[l][30:23] == 8'h00) ? 32'd0 : l_x[l];
        default:             l_res[l] = l_x[l];
      endcase
    end
  end

  // Reduction tree across the lanes (pairwise), then into the running sum.
  logic [31:0] tree [2*LANES-1];
  for (genvar l = 0; l < LANES; l++) begin : g_leaf
    assign tree[LANES-1+l] = l_x[l];
  end
  for (genvar n = 0; n < LANES - 1; n++) begin : g_tree
    fp32_add u_tadd (.a(tree[2*n+1]), .b(tree[2*n+2]), .y(tree[n]));
  end
  logic [31:0] sum_next;
  fp32_add u_racc (.a(sum_acc), .b(tree[0]), .y(sum_next));

  // ------------------------------------------------------------ write port mux
  always_comb begin
    wr_en   = 1'b0;
    wr_addr = pipe_row;
    wr_data = '0;
    wr_mask = '1;
    if (pipe_valid && op != VOP_SUM) begin
      wr_en = 1'b1;
      for (int l = 0; l < LANES; l++) wr_data[l*32 +: 32] = l_res[l];
    end else if (sb_go && sb_req.write) begin
      wr_en   = 1'b1;
      wr_addr = RW'(32'(sb_req.addr) / LANES);
      wr_mask = LANES'(1) << (32'(sb_req.addr) % LANES);
      for (int l = 0; l < LANES; l++) wr_data[l*32 +: 32] = sb_req.wdata;
    end
  end

  // ------------------------------------------------------------ control
  assign cmd_ready  = (state == S_IDLE) && !sb_valid;
  assign busy       = (state != S_IDLE);
  assign resp_valid = (state == S_RESP);
  assign resp.rd    = rd_q;
  assign resp.data  = (op == VOP_SUM) ? XLEN'(sum_acc) : XLEN'(cycles);
  assign sb_rdata   = x_data[sb_lane_q*32 +: 32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      op         <= VOP_ADD;
      x_row      <= '0;
      y_row      <= '0;
      z_row      <= '0;
      len        <= '0;
      cnt        <= '0;
      scalar     <= '0;
      sum_acc    <= '0;
      cycles     <= '0;
      rd_q       <= '0;
      pipe_valid <= 1'b0;
      pipe_row   <= '0;
      sb_rvalid  <= 1'b0;
      sb_lane_q  <= '0;
    end else begin
      sb_rvalid  <= sb_go && !sb_req.write;
      if (sb_go) sb_lane_q <= LW'(32'(sb_req.addr) % LANES);
      pipe_valid <= (state == S_RUN);
      pipe_row   <= z_row + RW'(cnt);
      if (pipe_valid && op == VOP_SUM) sum_acc <= sum_next;
      if (state != S_IDLE) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          op      <= vop_e'(cmd.funct);
          x_row   <= RW'(cmd.rs1[15:0]);
          y_row   <= RW'(cmd.rs1[31:16]);
          z_row   <= RW'(cmd.rs1[47:32]);
          len     <= (cmd.rs2[15:0] == 16'd0) ? 16'd1 : cmd.rs2[15:0];
          scalar  <= cmd.rs2[63:32];
          cnt     <= '0;
          sum_acc <= '0;
          rd_q    <= cmd.rd;
          cycles  <= 32'd1;
          state   <= S_RUN;
        end
        S_RUN: begin
          cnt <= cnt + 16'd1;
          if (cnt + 16'd1 == len) state <= S_TAIL;
        end
        S_TAIL: state <= S_RESP;
        S_RESP: if (resp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_resp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid && !resp_ready |=> resp_valid && $stable(resp));
endmodule
