// inst_decoder: combinational decoder of the 64-byte NDP instruction. It
// turns the opcode, the (address, size) pairs of input activation, expert
// weights and output activation, and the matrix dimensions carried in the
// auxiliary field into a GEMM job C[m x n] = A[m x k] * B[k x n] with an
// optional ReLU, and flags instructions the core cannot run: unknown or
// reserved opcode, isNDP clear, a zero dimension, k or n not a multiple of 256,
// k above the scratchpad limit, operands not 512-byte aligned or outside the
// 512 GB device memory, or sizes smaller than the matrices they hold.
// The opcode width, the three operand fields and the isNDP flag follow the
// paper; the dimension fields and all legality rules are this design's.
module inst_decoder
  import monde_pkg::*;
(
  input  ndp_inst_t inst,
  output gemm_job_t job,
  output logic      legal
);
  logic [47:0] need_a, need_b, need_c;
  logic        op_ok, dims_ok, align_ok, range_ok, size_ok;

  function automatic logic in_dev(operand_t o);
    return (o.addr[63:ADDR_W] == '0) && ((o.addr + o.size) <= (64'd1 << ADDR_W));
  endfunction

  always_comb begin
    need_a   = 48'(inst.aux.m_dim) * 48'(inst.aux.k_dim) * 48'd2;
    need_b   = 48'(inst.aux.k_dim) * 48'(inst.aux.n_dim) * 48'd2;
    need_c   = 48'(inst.aux.m_dim) * 48'(inst.aux.n_dim) * 48'd2;
    op_ok    = (inst.opcode == OP_GEMM) || (inst.opcode == OP_GEMM_RELU);
    dims_ok  = (inst.aux.m_dim != 0) && (inst.aux.k_dim != 0) && (inst.aux.n_dim != 0) &&
               (inst.aux.k_dim[7:0] == 0) && (inst.aux.n_dim[7:0] == 0) &&
               (32'(inst.aux.k_dim) <= MAX_K);
    align_ok = (inst.act_in.addr[8:0] == 0) && (inst.wgt.addr[8:0] == 0) && (inst.act_out.addr[8:0] == 0);
    range_ok = in_dev(inst.act_in) && in_dev(inst.wgt) && in_dev(inst.act_out);
    size_ok  = (inst.act_in.size >= 64'(need_a)) && (inst.wgt.size >= 64'(need_b)) &&
               (inst.act_out.size >= 64'(need_c));
    legal    = op_ok && inst.aux.is_ndp && dims_ok && align_ok && range_ok && size_ok;

    job.relu   = (inst.opcode == OP_GEMM_RELU);
    job.a_addr = inst.act_in.addr[ADDR_W-1:0];
    job.b_addr = inst.wgt.addr[ADDR_W-1:0];
    job.c_addr = inst.act_out.addr[ADDR_W-1:0];
    job.m      = inst.aux.m_dim;
    job.k      = inst.aux.k_dim;
    job.n      = inst.aux.n_dim;
  end
endmodule
