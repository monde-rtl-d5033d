// bf16_mul: combinational bfloat16 x bfloat16 multiplier with an fp32 result.
// The 8-bit x 8-bit significand product has at most 16 bits, so it fits in the
// fp32 significand exactly and no rounding is needed. Subnormal inputs and
// results are flushed to zero; Inf and NaN are propagated. Widening the product
// to fp32 for accumulation is this design's choice (the paper says only that it
// computes in bfloat16).
module bf16_mul
  import monde_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output fp32_t p
);
  logic        s;
  logic [7:0]  ea, eb;
  logic [15:0] prod;
  logic [9:0]  e;          // signed-ish biased exponent with headroom
  logic [22:0] frac;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    s      = a[15] ^ b[15];
    ea     = a[14:7];
    eb     = b[14:7];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[6:0] == 7'd0);
    b_inf  = (eb == 8'hFF) && (b[6:0] == 7'd0);
    a_nan  = (ea == 8'hFF) && (a[6:0] != 7'd0);
    b_nan  = (eb == 8'hFF) && (b[6:0] != 7'd0);
    prod   = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e      = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (prod[15]) begin
      frac = {prod[14:0], 8'd0};
      e    = e + 10'd1;
    end else begin
      frac = {prod[13:0], 9'd0};
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      p = {s, 8'hFF, 23'd0};
    end else if (a_zero || b_zero) begin
      p = {s, 31'd0};
    end else if (e[9] || e == 10'd0) begin     // underflow (negative or zero)
      p = {s, 31'd0};
    end else if (e >= 10'd255) begin           // overflow
      p = {s, 8'hFF, 23'd0};
    end else begin
      p = {s, e[7:0], frac};
    end
  end
endmodule
