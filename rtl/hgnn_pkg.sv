// hgnn_pkg: types and constants shared by the computational-SSD FPGA design.
//
// The design is the FPGA of a computational SSD (CSSD) that serves graph neural
// network (GNN) inference next to the SSD. It is split into a static Shell
// (RPC-over-PCIe DMA engine, shared DRAM bus, reconfiguration engine driving the
// ICAP) and a reprogrammable User region (here the heterogeneous configuration:
// a four-lane vector processor and an 8x8 floating-point systolic array).
//
// This package holds:
//   * the RPC-over-PCIe (RoP) command opcodes (send / receive),
//   * the word-level memory request/response structs used on the Shell bus,
//   * the co-processor (RoCC-style) command/response structs that cross the
//     Shell/User partition pins,
//   * the system-bus lane structs (word reads/writes into User scratchpads),
//   * the function codes of the vector processor and systolic array.
// The opcode set (send/receive) and the fields of a RoP command (opcode,
// address, length) follow the paper; every width and encoding here is this
// design's own choice.
package hgnn_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned ADDR_W = 40;   // byte address, host and FPGA DRAM
  localparam int unsigned DATA_W = 64;   // one bus word (8 bytes)
  localparam int unsigned XLEN   = 64;   // co-processor operand width (RISC-V RV64)
  localparam int unsigned FP_W   = 32;   // IEEE-754 single precision

  // ---------------------------------------------------------------- RoP
  typedef enum logic [1:0] {
    ROP_NOP  = 2'd0,
    ROP_SEND = 2'd1,    // host -> CSSD: copy host buffer into FPGA DRAM
    ROP_RECV = 2'd2     // CSSD -> host: copy FPGA DRAM into host buffer
  } rop_opcode_e;

  // Register offsets of the RoP command window in the FPGA's PCIe BAR.
  localparam logic [7:0] ROP_REG_OPCODE = 8'h00;
  localparam logic [7:0] ROP_REG_ADDR   = 8'h08;
  localparam logic [7:0] ROP_REG_LEN    = 8'h10;
  localparam logic [7:0] ROP_REG_DOORBELL = 8'h18;  // write: start; read: status
  localparam logic [7:0] ROP_REG_XFERRED  = 8'h20;  // read: bytes moved by last command

  typedef struct packed {
    rop_opcode_e         opcode;
    logic [ADDR_W-1:0]   addr;   // host address of the mmap'ed buffer
    logic [31:0]         len;    // bytes
  } rop_cmd_t;

  // ---------------------------------------------------------------- memory bus
  typedef struct packed {
    logic                write;
    logic [ADDR_W-1:0]   addr;   // byte address, word aligned
    logic [DATA_W-1:0]   wdata;
  } mem_req_t;

  // ---------------------------------------------------------------- co-processor port
  typedef struct packed {
    logic [6:0]          funct;
    logic [XLEN-1:0]     rs1;
    logic [XLEN-1:0]     rs2;
    logic [4:0]          rd;
  } cop_cmd_t;

  typedef struct packed {
    logic [4:0]          rd;
    logic [XLEN-1:0]     data;
  } cop_resp_t;

  // ---------------------------------------------------------------- system bus lane
  // Word (32-bit) access into a User-region scratchpad.
  typedef struct packed {
    logic                write;
    logic [23:0]         addr;   // word address inside the User region
    logic [31:0]         wdata;
  } sbus_req_t;

  // ---------------------------------------------------------------- vector processor
  typedef enum logic [6:0] {
    VOP_ADD   = 7'd0,   // z = x + y
    VOP_MUL   = 7'd1,   // z = x * y           (element-wise product)
    VOP_RELU  = 7'd2,   // z = max(x, 0)
    VOP_SCALE = 7'd3,   // z = x * s           (s: fp32 scalar)
    VOP_SUM   = 7'd4    // rd <- sum of x      (reduce)
  } vop_e;

  // ---------------------------------------------------------------- systolic array
  localparam logic [6:0] SA_FUNCT_GEMM = 7'd0;  // C = A * B   (or C += A * B)

endpackage
