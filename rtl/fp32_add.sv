// fp32_add: combinational IEEE-754 single-precision adder, used by the
// pipelined adder trees, the accumulators and the element-wise sum.
//
// The paper fixes the format (32-bit float) but not the adder; this is the
// textbook datapath: order the operands by magnitude, align the smaller one
// with guard, round and sticky bits, add or subtract, renormalise and round to
// nearest even.  Design choices: subnormal inputs are read as zero, subnormal
// results flush to zero, an exact zero difference is +0, and NaN or inf-inf
// gives 0x7FC00000.  Purely combinational.
//
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module fp32_add
  import scnn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       l, sm;
  logic [7:0]  d;
  logic [26:0] xl, xs;
  logic [27:0] sum;
  logic        sticky;
  logic [4:0]  lz;
  logic [9:0]  e;
  logic [23:0] mr;
  logic        rnd, l_nan, s_nan, l_inf, s_inf;

  always_comb begin
    // order by magnitude
    if (a[30:0] >= b[30:0]) begin l = a; sm = b; end
    else                    begin l = b; sm = a; end
    l_nan = (l[30:23] == 8'hFF) && (l[22:0] != 0);
    s_nan = (sm[30:23] == 8'hFF) && (sm[22:0] != 0);
    l_inf = (l[30:23] == 8'hFF) && (l[22:0] == 0);
    s_inf = (sm[30:23] == 8'hFF) && (sm[22:0] == 0);
    d  = l[30:23] - sm[30:23];
    xl = {1'b1, l[22:0], 3'b000};
    xs = (sm[30:23] == 0) ? 27'd0 : {1'b1, sm[22:0], 3'b000};
    sticky = 1'b0;
    if (d >= 8'd27) begin
      sticky = (xs != 0);
      xs     = 27'd0;
    end else begin
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && xs[i]) sticky = 1'b1;
      xs = xs >> d;
    end
    xs[0] = xs[0] | sticky;
    e  = 10'(l[30:23]);
    lz = 5'd0;
    if (l[31] == sm[31]) begin
      sum = {1'b0, xl} + {1'b0, xs};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 10'd1;
      end
    end else begin
      sum = {1'b0, xl} - {1'b0, xs};
      for (int i = 0; i < 27; i++)
        if (sum[26-i] == 1'b0 && lz == 5'(i)) lz = 5'(i + 1);
      sum = sum << lz;
      e   = e - 10'(lz);
    end
    rnd = sum[2] & (sum[1] | sum[0] | sum[3]);
    mr  = {1'b0, sum[25:3]} + 24'(rnd);
    if (mr[23]) e = e + 10'd1;
    if (l_nan || s_nan || (l_inf && s_inf && (l[31] != sm[31])))
      y = 32'h7FC0_0000;
    else if (l_inf)
      y = l;
    else if (l[30:23] == 8'd0)             // both operands zero
      y = {l[31] & sm[31], 31'd0};
    else if (sum[26:0] == 27'd0)           // exact cancellation
      y = 32'd0;
    else if (e[9] || e == 10'd0)
      y = {l[31], 31'd0};
    else if (e >= 10'd255)
      y = {l[31], 8'hFF, 23'd0};
    else
      y = {l[31], e[7:0], mr[22:0]};
  end
endmodule
