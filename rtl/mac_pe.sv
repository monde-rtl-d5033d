// mac_pe: one processing element of the output-stationary systolic array.
// Each valid step it multiplies the bf16 activation arriving from the left with
// the bf16 weight arriving from the top and adds the fp32 product into its
// accumulator; on the first step of a tile the accumulator is overwritten
// instead. Operands and step flags are registered and passed on to the right
// (activation, flags) and downward (weight), one cycle per hop. 'done' pulses
// the cycle after the last step of a tile has been accumulated, when 'acc'
// holds the final value. Latency: one cycle from a_in/b_in to acc.
module mac_pe
  import monde_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  bf16_t a_in,
  input  bf16_t b_in,
  input  logic  v_in,
  input  logic  first_in,
  input  logic  last_in,
  output bf16_t a_out,
  output bf16_t b_out,
  output logic  v_out,
  output logic  first_out,
  output logic  last_out,
  output fp32_t acc,
  output logic  done
);
  fp32_t prod, addend, sum;

  bf16_mul u_mul (.a(a_in), .b(b_in), .p(prod));
  assign addend = first_in ? 32'd0 : acc;
  fp32_add u_add (.a(addend), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_out     <= 1'b0;
      first_out <= 1'b0;
      last_out  <= 1'b0;
      done      <= 1'b0;
      acc       <= '0;
      a_out     <= '0;
      b_out     <= '0;
    end else begin
      v_out     <= v_in;
      first_out <= v_in & first_in;
      last_out  <= v_in & last_in;
      done      <= v_in & last_in;
      a_out     <= a_in;
      b_out     <= b_in;
      if (v_in) acc <= sum;
    end
  end
endmodule
