// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Used by every processing element of the systolic array and by the lanes of
// the vector processor, which the paper describes as floating-point units
// without giving their arithmetic. This design's choices: round to nearest,
// ties to even; subnormal inputs and results are flushed to (signed) zero;
// infinities propagate, and inf*0 or any NaN input gives the quiet NaN
// 32'h7fc00000. Purely combinational: y is valid in the cycle a and b are.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic        sgn;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [9:0]  exp_s;      // signed biased exponent with headroom
  logic [23:0] man;        // 1.23 mantissa before rounding
  logic        guard, sticky, rnd;
  logic [24:0] man_r;

  always_comb begin
    sgn   = a[31] ^ b[31];
    ea    = a[30:23];
    eb    = b[30:23];
    prod  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp_s = 10'(ea) + 10'(eb) - 10'd127;
    if (prod[47]) begin
      man    = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 10'd1;
    end else begin
      man    = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd   = guard & (sticky | man[0]);
    man_r = {1'b0, man} + 25'(rnd);
    if (man_r[24]) begin
      man_r = man_r >> 1;
      exp_s = exp_s + 10'd1;
    end

    if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0))
      y = QNAN;                                          // NaN in
    else if (ea == 8'hff || eb == 8'hff)
      y = (ea == 8'h00 || eb == 8'h00) ? QNAN : {sgn, 8'hff, 23'd0};  // inf*0 / inf
    else if (ea == 8'h00 || eb == 8'h00)
      y = {sgn, 31'd0};                                  // zero or flushed subnormal
    else if (exp_s[9] || exp_s == 10'd0)
      y = {sgn, 31'd0};                                  // underflow -> flush
    else if (exp_s >= 10'd255)
      y = {sgn, 8'hff, 23'd0};                           // overflow -> inf
    else
      y = {sgn, exp_s[7:0], man_r[22:0]};
  end
endmodule
