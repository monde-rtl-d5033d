// fp32_add: combinational IEEE-754 single-precision adder, round to nearest
// even, subnormals flushed to zero, Inf/NaN propagated. Operands are ordered by
// magnitude, the smaller is aligned with guard, round and sticky bits, the
// sum or difference is normalised with a leading-zero count and then rounded.
// It is the accumulator adder of every MAC processing element; the paper does
// not give the accumulator format, fp32 is this design's choice.
module fp32_add
  import monde_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sx, sy;          // sign of larger / smaller
  logic [7:0]  ex, ey;
  logic [23:0] mx, my;
  logic [7:0]  d;
  logic [26:0] mxe, mye, ysh;   // significand with guard, round, sticky
  logic [27:0] sum;
  logic [26:0] norm;
  logic [9:0]  e;
  logic [4:0]  lz;
  logic        found;
  logic        g, r, st, up;
  logic [24:0] rnd;
  logic        a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    lz    = 5'd0;
    found = 1'b0;
    a_nan = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf = (b[30:23] == 8'hFF) && (b[22:0] == 0);

    // order by magnitude
    if (a[30:0] >= b[30:0]) begin
      sx = a[31]; ex = a[30:23]; mx = (a[30:23] == 0) ? 24'd0 : {1'b1, a[22:0]};
      sy = b[31]; ey = b[30:23]; my = (b[30:23] == 0) ? 24'd0 : {1'b1, b[22:0]};
    end else begin
      sx = b[31]; ex = b[30:23]; mx = (b[30:23] == 0) ? 24'd0 : {1'b1, b[22:0]};
      sy = a[31]; ey = a[30:23]; my = (a[30:23] == 0) ? 24'd0 : {1'b1, a[22:0]};
    end
    if (ey == 0) ey = ex;        // a flushed operand needs no alignment
    d   = ex - ey;
    mxe = {mx, 3'b000};
    mye = {my, 3'b000};
    if (d >= 8'd27) begin
      ysh = {26'd0, |my};
    end else begin
      ysh = mye >> d;
      ysh[0] = ysh[0] | |(mye & ((27'd1 << d) - 27'd1));
    end

    e = {2'b00, ex};
    if (sx == sy) sum = {1'b0, mxe} + {1'b0, ysh};
    else          sum = {1'b0, mxe} - {1'b0, ysh};

    // normalise
    if (sum[27]) begin
      norm = {sum[27:2], sum[1] | sum[0]};
      e    = e + 10'd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      norm = sum[26:0] << lz;
      e    = e - {5'd0, lz};
    end

    // round to nearest even
    g   = norm[2];
    r   = norm[1];
    st  = norm[0];
    up  = g & (r | st | norm[3]);
    rnd = {1'b0, norm[26:3]} + {24'd0, up};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]))) begin
      y = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      y = a_inf ? a : b;
    end else if (sum == 28'd0) begin
      y = {sx & sy, 31'd0};            // exact cancellation gives +0
    end else if (e[9] || e == 10'd0) begin
      y = {sx, 31'd0};
    end else if (e >= 10'd255) begin
      y = {sx, 8'hFF, 23'd0};
    end else begin
      y = {sx, e[7:0], rnd[22:0]};
    end
  end
endmodule
