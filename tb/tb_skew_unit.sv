// tb_skew_unit: pushes a numbered stream of steps (with gaps) and checks that
// lane i of every output appears exactly i cycles after it entered.
module tb_skew_unit;
  import monde_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last;
  bf16_t in_a [L], in_b [L];
  logic out_valid [L], out_first [L], out_last [L];
  bf16_t out_a [L], out_b [L];
  int checks = 0, failures = 0;
  typedef struct { logic v, f, l; bf16_t a[L]; bf16_t b[L]; } step_t;
  step_t hist [$];

  skew_unit #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    step_t s;
    in_valid = 0; in_first = 0; in_last = 0;
    for (int i = 0; i < L; i++) begin in_a[i] = 0; in_b[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      s.v = 1'($urandom % 4 != 0); s.f = 1'($urandom); s.l = 1'($urandom);
      for (int i = 0; i < L; i++) begin s.a[i] = 16'($urandom); s.b[i] = 16'($urandom); end
      in_valid = s.v; in_first = s.f; in_last = s.l;
      for (int i = 0; i < L; i++) begin in_a[i] = s.a[i]; in_b[i] = s.b[i]; end
      hist.push_front(s);
      #1;
      if (c >= L) begin
        for (int i = 0; i < L; i++) begin
          checks++;
          if (out_valid[i] !== hist[i].v || out_first[i] !== hist[i].f || out_last[i] !== hist[i].l ||
              out_a[i] !== hist[i].a[i] || out_b[i] !== hist[i].b[i]) begin
            failures++; $display("cycle %0d lane %0d wrong", c, i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
