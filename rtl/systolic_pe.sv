// systolic_pe: one output-stationary floating-point multiply-accumulate element.
//
// The systolic array of the heterogeneous User region has 64 of these (8x8).
// Operand a enters from the left neighbour and b from the upper neighbour; both
// are forwarded, registered, to the right and lower neighbours one cycle later,
// together with the valid/first flags that travel with a. On a valid pair the
// PE updates its accumulator: acc = a*b when `first` marks step k = 0 of a dot
// product, acc = acc + a*b otherwise (multiply and add each rounded to single
// precision). The result stays in `acc` until the array reads it out.
// Output-stationary dataflow and the flag scheme are this design's choices; the
// paper gives only the PE count and that the PEs are floating-point.
module systolic_pe (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_first,
  input  logic [31:0] a_in,
  input  logic [31:0] b_in,
  output logic        out_valid,
  output logic        out_first,
  output logic [31:0] a_out,
  output logic [31:0] b_out,
  output logic [31:0] acc
);
  logic [31:0] prod, sum;

  fp32_mul u_mul (.a(a_in), .b(b_in), .y(prod));
  fp32_add u_add (.a(acc),  .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      a_out     <= '0;
      b_out     <= '0;
      acc       <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      a_out     <= a_in;
      b_out     <= b_in;
      if (in_valid) acc <= in_first ? prod : sum;
    end
  end
endmodule
