// icap_model: behavioural model of the FPGA's internal configuration access
// port and configuration memory, for the testbenches.
//
// Accepts a 32-bit word in every cycle where csib is low, rdwrb is low and
// `avail` is high; `avail` is randomly withheld to exercise back-pressure.
// It keeps a count and a running checksum (rotate-left-xor) of the words it
// takes. A bitstream is recognised the way a configuration controller does it:
// the sync word 32'hAA995566 starts it and the DESYNC command (word 32'h30008001
// followed by 32'h0000000D) ends it, upon which PRDONE pulses a few cycles
// later; a DESYNC without a preceding sync word pulses PRERROR instead.
module icap_model (
  input  logic        clk,
  input  logic        csib,
  input  logic        rdwrb,
  input  logic [31:0] i,
  output logic        avail,
  output logic        prdone,
  output logic        prerror
);
  int          words = 0;
  logic [31:0] csum  = '0;
  logic [31:0] prev  = '0;
  logic        synced = 1'b0;
  int          fin   = 0;
  logic        fin_err = 1'b0;

  initial begin avail = 1'b0; prdone = 1'b0; prerror = 1'b0; end

  always @(negedge clk) avail <= ($urandom_range(4, 0) != 0);

  always @(posedge clk) begin
    prdone  <= 1'b0;
    prerror <= 1'b0;
    if (fin > 0) begin
      fin <= fin - 1;
      if (fin == 1) begin
        prdone  <= !fin_err;
        prerror <= fin_err;
      end
    end
    if (!csib && !rdwrb && avail) begin
      words++;
      csum = {csum[30:0], csum[31]} ^ i;
      if (i == 32'hAA995566) synced = 1'b1;
      if (prev == 32'h30008001 && i == 32'h0000000D) begin
        fin     <= 3;
        fin_err <= !synced;
        synced   = 1'b0;
      end
      prev = i;
    end
  end
endmodule
