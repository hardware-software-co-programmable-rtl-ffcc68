// fp32_add: combinational IEEE-754 single-precision adder.
//
// Used by the processing elements of the systolic array (accumulate) and by the
// vector lanes (add, accumulate, reduce). The paper names floating-point PEs
// but not their arithmetic; the choices here are this design's own: round to
// nearest, ties to even, with three extra bits (guard, round, sticky);
// subnormals flushed to zero; x + (-x) gives +0; inf - inf and NaN inputs give
// the quiet NaN 32'h7fc00000. Combinational: y is valid in the cycle a and b are.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic [31:0] big, sml;
  logic [7:0]  eb, es, d;
  logic [26:0] mb, ms, ms_sh;     // 1.23 mantissa + guard/round/sticky
  logic        stk;
  logic [27:0] sum;
  logic [9:0]  exp_s;
  logic [4:0]  lz;
  logic        rnd;
  logic [24:0] man_r;
  logic        a_zero, b_zero;

  always_comb begin
    a_zero = (a[30:23] == 8'h00);
    b_zero = (b[30:23] == 8'h00);
    // order by magnitude
    if ({a_zero ? 31'd0 : a[30:0]} >= {b_zero ? 31'd0 : b[30:0]}) begin
      big = a_zero ? {a[31], 31'd0} : a;
      sml = b_zero ? {b[31], 31'd0} : b;
    end else begin
      big = b_zero ? {b[31], 31'd0} : b;
      sml = a_zero ? {a[31], 31'd0} : a;
    end
    eb = big[30:23];
    es = sml[30:23];
    mb = (eb == 8'h00) ? 27'd0 : {1'b1, big[22:0], 3'b000};
    ms = (es == 8'h00) ? 27'd0 : {1'b1, sml[22:0], 3'b000};
    d  = eb - es;
    if (es == 8'h00) begin
      ms_sh = 27'd0;
      stk   = 1'b0;
    end else if (d >= 8'd27) begin
      ms_sh = 27'd0;
      stk   = 1'b1;
    end else begin
      ms_sh = ms >> d;
      stk   = |(ms & ((27'd1 << d) - 27'd1));
    end
    ms_sh[0] = ms_sh[0] | stk;

    exp_s = 10'(eb);
    lz    = '0;
    if (big[31] == sml[31]) begin
      sum = {1'b0, mb} + {1'b0, ms_sh};
      if (sum[27]) begin
        sum   = {1'b0, sum[27:2], sum[1] | sum[0]};
        exp_s = exp_s + 10'd1;
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, ms_sh};
      for (int i = 0; i <= 26; i++)
        if (sum[i]) lz = 5'(26 - i);     // highest set bit wins
      sum   = sum << lz;
      exp_s = exp_s - 10'(lz);
    end
    rnd   = sum[2] & (sum[1] | sum[0] | sum[3]);
    man_r = {1'b0, sum[26:3]} + 25'(rnd);
    if (man_r[24]) begin
      man_r = man_r >> 1;
      exp_s = exp_s + 10'd1;
    end

    if ((a[30:23] == 8'hff && a[22:0] != 0) || (b[30:23] == 8'hff && b[22:0] != 0))
      y = QNAN;
    else if (a[30:23] == 8'hff && b[30:23] == 8'hff)
      y = (a[31] == b[31]) ? a : QNAN;
    else if (a[30:23] == 8'hff)
      y = a;
    else if (b[30:23] == 8'hff)
      y = b;
    else if (eb == 8'h00)
      y = {big[31] & sml[31], 31'd0};                    // both zero
    else if (sum[26:0] == '0)
      y = 32'd0;                                         // exact cancellation
    else if (exp_s[9] || exp_s == 10'd0)
      y = {big[31], 31'd0};                              // underflow -> flush
    else if (exp_s >= 10'd255)
      y = {big[31], 8'hff, 23'd0};
    else
      y = {big[31], exp_s[7:0], man_r[22:0]};
  end
endmodule
