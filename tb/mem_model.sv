// mem_model: behavioural word memory for the testbenches (stands in for host
// memory behind the PCIe endpoint and for the FPGA DRAM behind its controller).
//
// 64-bit words addressed by byte address (low three bits ignored), stored
// sparsely. Requests use valid/ready; `ready` is randomly withheld when STALL
// is set, to exercise back-pressure. A read returns `rdata` with `rvalid` LAT
// cycles after it is accepted (one read in flight at a time, which is all the
// masters in this design issue). Unwritten words read as zero. `stalls` counts
// cycles in which a request waited.
module mem_model
  import hgnn_pkg::*;
#(
  parameter int unsigned LAT   = 2,
  parameter bit          STALL = 1'b1
) (
  input  logic              clk,
  input  logic              valid,
  output logic              ready,
  input  mem_req_t          req,
  output logic              rvalid,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [logic [ADDR_W-4:0]];
  int                stalls = 0;
  int                pend   = 0;
  logic [DATA_W-1:0] pend_data;

  initial begin
    ready  = 1'b0;
    rvalid = 1'b0;
    rdata  = '0;
  end

  always @(negedge clk) ready <= STALL ? ($urandom_range(3, 0) != 0) : 1'b1;

  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (pend > 0) begin
      pend <= pend - 1;
      if (pend == 1) begin
        rvalid <= 1'b1;
        rdata  <= pend_data;
      end
    end
    if (valid && !ready) stalls++;
    if (valid && ready) begin
      if (req.write) mem[req.addr[ADDR_W-1:3]] = req.wdata;
      else begin
        pend_data <= mem.exists(req.addr[ADDR_W-1:3]) ? mem[req.addr[ADDR_W-1:3]] : '0;
        pend      <= LAT;
      end
    end
  end

  function automatic logic [DATA_W-1:0] peek(input logic [ADDR_W-1:0] a);
    return mem.exists(a[ADDR_W-1:3]) ? mem[a[ADDR_W-1:3]] : '0;
  endfunction

  function automatic void poke(input logic [ADDR_W-1:0] a, input logic [DATA_W-1:0] d);
    mem[a[ADDR_W-1:3]] = d;
  endfunction
endmodule
