// systolic_array: GEMM accelerator of the heterogeneous User region.
//
// An 8x8 grid of floating-point PEs (64 PEs, as in the paper) computes
// C = A x B for an 8xK block A and a Kx8 block B held in a local scratchpad of
// 128 KB (the paper's size). The scratchpad is organised as rows of DIM
// single-precision words (4096 rows of 8 words at the defaults), built as DIM
// banks of 32-bit words so a row is read in one cycle and single words can be
// written:
//   * A is stored transposed: row a_row+k holds column k of A (A[0..7][k]),
//   * B is stored by rows:    row b_row+k holds row k of B,
//   * C is written by rows:   row c_row+i receives C[i][0..7].
// Larger matrices are tiled by software on the Shell core, which fills the
// scratchpad through the system-bus lane and starts each tile through the
// co-processor port.
//
// Dataflow (this design's choice; the paper gives only PE count, number format
// and scratchpad size): output-stationary. Each cycle of the feed phase reads
// one A row and one B row; A element i is delayed i cycles and B element j is
// delayed j cycles (skew) so PE(i,j) sees A[i][k] and B[k][j] together. After
// the wavefront drains, the eight accumulator rows are written back, one row
// per cycle.
//
// Co-processor command (funct SA_FUNCT_GEMM):
//   rs1[15:0] a_row, rs1[31:16] b_row, rs1[47:32] c_row;  rs2[15:0] K (>= 1).
// The response (to rd) carries the number of cycles from acceptance to the
// response. Timing at DIM = 8: 1 + K + (2*DIM + 1) + DIM cycles, i.e. K + 26.
// The system-bus lane (word reads and writes, 1-cycle read latency) is refused
// (ready low) while a GEMM runs.
module systolic_array
  import hgnn_pkg::*;
#(
  parameter int unsigned DIM     = 8,     // PEs per side (8x8 = 64 PEs)
  parameter int unsigned SPAD_KB = 128    // scratchpad size in KiB
) (
  input  logic      clk,
  input  logic      rst_n,
  // co-processor port
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  cop_cmd_t  cmd,
  output logic      resp_valid,
  input  logic      resp_ready,
  output cop_resp_t resp,
  output logic      busy,
  // system-bus lane (word address = row*DIM + column)
  input  logic      sb_valid,
  output logic      sb_ready,
  input  sbus_req_t sb_req,
  output logic      sb_rvalid,
  output logic [31:0] sb_rdata
);
  localparam int unsigned ROWS   = SPAD_KB * 1024 / (DIM * 4);
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned CW     = (DIM > 1) ? $clog2(DIM) : 1;
  localparam int unsigned DRAIN  = 2 * DIM + 1;

  typedef enum logic [2:0] {S_IDLE, S_FEED, S_DRAIN, S_WRITE, S_RESP} state_e;
  state_e state;


  logic [RW-1:0] a_row, b_row, c_row;
  logic [15:0]   k_len, k_cnt;
  logic [7:0]    drain_cnt;
  logic [CW-1:0] wr_i;
  logic [31:0]   cycles;
  logic [4:0]    rd_q;

  // ------------------------------------------------------------ scratchpad ports
  logic              rd_en;
  logic [RW-1:0]     rd_a_addr, rd_b_addr;
  logic [DIM*32-1:0] rd_a_data, rd_b_data;
  logic              rd_q_valid, rd_q_first;
  logic              wr_en;
  logic [RW-1:0]     wr_addr;
  logic [DIM*32-1:0] wr_data;
  logic [DIM-1:0]    wr_mask;

  logic sb_go;
  assign sb_ready = (state == S_IDLE);
  assign sb_go    = sb_valid && sb_ready;

  always_comb begin
    rd_en     = (state == S_FEED);
    rd_a_addr = a_row + RW'(k_cnt);
    rd_b_addr = b_row + RW'(k_cnt);
    if (sb_go && !sb_req.write) begin
      rd_en     = 1'b1;
      rd_a_addr = RW'(sb_req.addr / DIM);
    end
  end

  for (genvar w = 0; w < DIM; w++) begin : g_bank
    logic [31:0] spad [ROWS];   // bank w: word w of every row
    always_ff @(posedge clk) begin
      if (rd_en) begin
        rd_a_data[w*32 +: 32] <= spad[rd_a_addr];
        rd_b_data[w*32 +: 32] <= spad[rd_b_addr];
      end
      if (wr_en && wr_mask[w]) spad[wr_addr] <= wr_data[w*32 +: 32];
    end
  end

  // ------------------------------------------------------------ PE grid
  logic [31:0] a_h   [DIM][DIM+1];   // horizontal operand wires
  logic        v_h   [DIM][DIM+1];
  logic        f_h   [DIM][DIM+1];
  logic [31:0] b_v   [DIM+1][DIM];   // vertical operand wires
  logic [31:0] acc   [DIM][DIM];
  logic [31:0] b_dn  [DIM][DIM];

  // skew registers: row i of A delayed by i cycles, column j of B by j cycles
  logic [31:0] a_sk [DIM][DIM];
  logic        v_sk [DIM][DIM];
  logic        f_sk [DIM][DIM];
  logic [31:0] b_sk [DIM][DIM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DIM; i++)
        for (int d = 0; d < DIM; d++) begin
          a_sk[i][d] <= '0; v_sk[i][d] <= 1'b0; f_sk[i][d] <= 1'b0; b_sk[i][d] <= '0;
        end
    end else begin
      for (int i = 0; i < DIM; i++) begin
        a_sk[i][0] <= rd_a_data[i*32 +: 32];
        v_sk[i][0] <= rd_q_valid;
        f_sk[i][0] <= rd_q_first;
        b_sk[i][0] <= rd_b_data[i*32 +: 32];
        for (int d = 1; d < DIM; d++) begin
          a_sk[i][d] <= a_sk[i][d-1];
          v_sk[i][d] <= v_sk[i][d-1];
          f_sk[i][d] <= f_sk[i][d-1];
          b_sk[i][d] <= b_sk[i][d-1];
        end
      end
    end
  end

  // The read data of a feed cycle is valid one cycle after its address.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q_valid <= 1'b0;
      rd_q_first <= 1'b0;
    end else begin
      rd_q_valid <= (state == S_FEED);
      rd_q_first <= (state == S_FEED) && (k_cnt == 16'd0);
    end
  end

  // Element i/j enters the grid from skew stage i/j (stage 0 = no extra delay
  // beyond the one register every lane has).
  for (genvar i = 0; i < DIM; i++) begin : g_edge
    assign a_h[i][0] = a_sk[i][i];
    assign v_h[i][0] = v_sk[i][i];
    assign f_h[i][0] = f_sk[i][i];
    assign b_v[0][i] = b_sk[i][i];
  end

  for (genvar i = 0; i < DIM; i++) begin : g_row
    for (genvar j = 0; j < DIM; j++) begin : g_col
      systolic_pe u_pe (
        .clk, .rst_n,
        .in_valid (v_h[i][j]),
        .in_first (f_h[i][j]),
        .a_in     (a_h[i][j]),
        .b_in     (b_v[i][j]),
        .out_valid(v_h[i][j+1]),
        .out_first(f_h[i][j+1]),
        .a_out    (a_h[i][j+1]),
        .b_out    (b_dn[i][j]),
        .acc      (acc[i][j])
      );
      assign b_v[i+1][j] = b_dn[i][j];
    end
  end

  // ------------------------------------------------------------ write port mux
  always_comb begin
    wr_en   = 1'b0;
    wr_addr = c_row + RW'(wr_i);
    wr_data = '0;
    wr_mask = '1;
    if (state == S_WRITE) begin
      wr_en = 1'b1;
      for (int j = 0; j < DIM; j++) wr_data[j*32 +: 32] = acc[wr_i][j];
    end else if (sb_go && sb_req.write) begin
      wr_en   = 1'b1;
      wr_addr = RW'(sb_req.addr / DIM);
      wr_mask = DIM'(1) << (32'(sb_req.addr) % DIM);
      for (int j = 0; j < DIM; j++) wr_data[j*32 +: 32] = sb_req.wdata;
    end
  end

  // ------------------------------------------------------------ control
  logic [CW-1:0] sb_col_q;
  assign cmd_ready  = (state == S_IDLE) && !sb_valid;
  assign busy       = (state != S_IDLE);
  assign resp_valid = (state == S_RESP);
  assign resp.rd    = rd_q;
  assign resp.data  = XLEN'(cycles);
  assign sb_rdata   = rd_a_data[sb_col_q*32 +: 32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      a_row     <= '0;
      b_row     <= '0;
      c_row     <= '0;
      k_len     <= '0;
      k_cnt     <= '0;
      drain_cnt <= '0;
      wr_i      <= '0;
      cycles    <= '0;
      rd_q      <= '0;
      sb_rvalid <= 1'b0;
      sb_col_q  <= '0;
    end else begin
      sb_rvalid <= sb_go && !sb_req.write;
      if (sb_go) sb_col_q <= CW'(sb_req.addr % DIM);
      if (state != S_IDLE) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: if (cmd_valid && cmd_ready && cmd.funct == SA_FUNCT_GEMM) begin
          a_row  <= RW'(cmd.rs1[15:0]);
          b_row  <= RW'(cmd.rs1[31:16]);
          c_row  <= RW'(cmd.rs1[47:32]);
          k_len  <= (cmd.rs2[15:0] == 16'd0) ? 16'd1 : cmd.rs2[15:0];
          k_cnt  <= '0;
          rd_q   <= cmd.rd;
          cycles <= 32'd1;
          state  <= S_FEED;
        end
        S_FEED: begin
          k_cnt <= k_cnt + 16'd1;
          if (k_cnt + 16'd1 == k_len) begin
            drain_cnt <= '0;
            state     <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 8'd1;
          if (drain_cnt + 8'd1 == 8'(DRAIN)) begin
            wr_i  <= '0;
            state <= S_WRITE;
          end
        end
        S_WRITE: begin
          wr_i <= wr_i + CW'(1);
          if (wr_i == CW'(DIM - 1)) state <= S_RESP;
        end
        S_RESP: if (resp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A command that is not a GEMM is dropped; software only issues GEMMs here.
  property p_resp_stable;
    @(posedge clk) disable iff (!rst_n) resp_valid && !resp_ready |=> resp_valid && $stable(resp);
  endproperty
  a_resp_stable: assert property (p_resp_stable);
endmodule
