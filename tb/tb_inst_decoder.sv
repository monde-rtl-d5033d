// tb_inst_decoder: drives the instruction decoder with random legal gemm and
// gemm+relu instructions and with copies broken in one field at a time
// (opcode, isNDP flag, zero or unaligned dimension, K above the scratchpad
// limit, unaligned address, address beyond the device, size too small). The
// expected legality and job fields are computed here from the instruction
// rules: dimensions non-zero, K and N multiples of 256, K at most 16384,
// addresses 512-byte aligned and inside the 512 GB device, sizes at least
// the matrix footprints. The decoder is combinational.
module tb_inst_decoder;
  import monde_pkg::*;

  ndp_inst_t inst;
  gemm_job_t job;
  logic legal;
  int checks = 0, failures = 0;

  inst_decoder dut (.inst, .job, .legal);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ndp_inst_t random_legal();
    ndp_inst_t i;
    int m, k, n;
    i = '0;
    m = 1 + int'($urandom % 2048);
    k = 256 * (1 + int'($urandom % 64));
    n = 256 * (1 + int'($urandom % 64));
    i.opcode = ($urandom % 2) ? OP_GEMM_RELU : OP_GEMM;
    i.act_in.addr  = 64'({$urandom % 32'h3000_0000, 9'd0});
    i.wgt.addr     = 64'({$urandom % 32'h3000_0000, 9'd0});
    i.act_out.addr = 64'({$urandom % 32'h3000_0000, 9'd0});
    i.act_in.size  = 64'(longint'(m) * k * 2);
    i.wgt.size     = 64'(longint'(k) * n * 2 + ($urandom % 2) * 512);
    i.act_out.size = 64'(longint'(m) * n * 2);
    i.aux.is_ndp = 1'b1;
    i.aux.m_dim = 16'(m); i.aux.k_dim = 16'(k); i.aux.n_dim = 16'(n);
    i.aux.rsvd = 75'($urandom);
    return i;
  endfunction

  task automatic check(ndp_inst_t i, logic exp_legal, string what);
    inst = i;
    #1;
    checks++;
    if (legal !== exp_legal) begin
      failures++;
      $display("%s: legal=%0b expected %0b", what, legal, exp_legal);
    end
    if (exp_legal) begin
      checks++;
      if (job.relu !== (i.opcode == OP_GEMM_RELU) || job.a_addr !== i.act_in.addr[ADDR_W-1:0] ||
          job.b_addr !== i.wgt.addr[ADDR_W-1:0] || job.c_addr !== i.act_out.addr[ADDR_W-1:0] ||
          job.m !== i.aux.m_dim || job.k !== i.aux.k_dim || job.n !== i.aux.n_dim) begin
        failures++;
        $display("%s: job fields wrong", what);
      end
    end
  endtask

  initial begin
    ndp_inst_t g, b;
    for (int t = 0; t < 300; t++) begin
      g = random_legal();
      check(g, 1'b1, "legal");
      b = g; b.opcode = OP_NOP;                         check(b, 1'b0, "nop opcode");
      b = g; b.opcode = opcode_e'(4'd3 + 4'($urandom % 13)); check(b, 1'b0, "unknown opcode");
      b = g; b.aux.is_ndp = 1'b0;                       check(b, 1'b0, "isNDP clear");
      b = g; b.aux.m_dim = '0;                          check(b, 1'b0, "m zero");
      b = g; b.aux.k_dim = g.aux.k_dim + 16'(1 + $urandom % 255); b.act_in.size = '1; b.wgt.size = '1;
      check(b, 1'b0, "k unaligned");
      b = g; b.aux.n_dim = g.aux.n_dim - 16'(1 + $urandom % 255); check(b, 1'b0, "n unaligned");
      b = g; b.aux.k_dim = 16'(MAX_K + 256 * (1 + $urandom % 100)); b.act_in.size = 64'd1 << 38;
      b.wgt.size = 64'd1 << 38;                         check(b, 1'b0, "k too large");
      b = g; b.wgt.addr[8:0] = 9'(1 + $urandom % 511);  check(b, 1'b0, "weight unaligned");
      b = g; b.act_out.addr[40 + $urandom % 20] = 1'b1; check(b, 1'b0, "output beyond device");
      b = g; b.act_in.size = g.act_in.size - 64'(1 + $urandom % 100); check(b, 1'b0, "input size short");
      b = g; b.act_out.size = g.act_out.size - 64'd2;   check(b, 1'b0, "output size short");
    end
    // the largest legal K
    g = random_legal();
    g.aux.k_dim = 16'(MAX_K); g.act_in.size = '0; g.wgt.size = '0;
    g.act_in.size = 64'(longint'(g.aux.m_dim) * MAX_K * 2);
    g.wgt.size = 64'(longint'(g.aux.n_dim) * MAX_K * 2);
    check(g, 1'b1, "K = 16384");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
