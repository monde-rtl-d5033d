// tb_mac_pe: drives one processing element with integer-valued operands
// (exact in fp32, so the accumulator must match bit for bit), then with random
// bf16 operands checked against a real-valued reference within a relative
// tolerance. Also checks the one-cycle forwarding of operands and flags, the
// 'first' restart of the accumulator and the 'done' pulse.
module tb_mac_pe;
  import monde_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  bf16_t a_in, b_in, a_out, b_out;
  logic v_in, first_in, last_in, v_out, first_out, last_out, done;
  fp32_t acc;
  int checks = 0, failures = 0;

  mac_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(bf16_t a, bf16_t b, logic f, logic l);
    a_in = a; b_in = b; v_in = 1; first_in = f; last_in = l;
    @(posedge clk); #1;
    checks++;
    if (a_out !== a || b_out !== b || v_out !== 1 || first_out !== f || last_out !== l) begin
      failures++;
      $display("forwarding mismatch");
    end
    checks++;
    if (done !== l) begin failures++; $display("done mismatch"); end
  endtask

  task automatic idle();
    v_in = 0; first_in = 0; last_in = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    longint ref_sum;
    real    rref, got, tol;
    int     x, y;
    v_in = 0; first_in = 0; last_in = 0; a_in = 0; b_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // integer tiles, exact
    for (int t = 0; t < 20; t++) begin
      int n;
      n = 1 + int'($urandom % 40);
      ref_sum = 0;
      for (int k = 0; k < n; k++) begin
        x = int'($urandom % 41) - 20;
        y = int'($urandom % 41) - 20;
        ref_sum += x * y;
        step(int_to_bf16(x), int_to_bf16(y), k == 0, k == n - 1);
        if ($urandom % 4 == 0) idle();
      end
      checks++;
      if (acc !== int_to_fp32(ref_sum) && !(ref_sum == 0 && acc[30:0] == 0)) begin
        failures++;
        $display("int tile %0d: acc=%h expected %h (%0d)", t, acc, int_to_fp32(ref_sum), ref_sum);
      end
      idle();
      checks++;
      if (done !== 0) begin failures++; $display("done not a pulse"); end
    end

    // random bf16 values, real reference
    for (int t = 0; t < 30; t++) begin
      int n;
      bf16_t ra, rb;
      n = 1 + int'($urandom % 32);
      rref = 0.0; tol = 0.0;
      for (int k = 0; k < n; k++) begin
        ra = rand_bf16(-6, 6);
        rb = rand_bf16(-6, 6);
        rref += bf16_to_real(ra) * bf16_to_real(rb);
        tol  += fabs(bf16_to_real(ra) * bf16_to_real(rb));
        step(ra, rb, k == 0, k == n - 1);
      end
      got = fp32_to_real(acc);
      checks++;
      if (fabs(got - rref) > tol * 1.0e-6 + 1.0e-30) begin
        failures++;
        $display("real tile %0d: got %f expected %f", t, got, rref);
      end
      idle();
    end

    // special values
    step(16'h7F80, int_to_bf16(2), 1, 1);            // +inf * 2
    checks++; if (acc !== 32'h7F80_0000) begin failures++; $display("inf: %h", acc); end
    step(int_to_bf16(3), int_to_bf16(-5), 1, 0);
    step(int_to_bf16(3), int_to_bf16(5), 0, 1);      // cancellation to +0
    checks++; if (acc !== 32'h0000_0000) begin failures++; $display("cancel: %h", acc); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
