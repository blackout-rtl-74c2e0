// blackout_core_ext -- blinded-capability extension of an out-of-order CHERI-RISC-V core.
//
// Blinded capabilities let a program mark secret data so that the hardware
// enforces data-oblivious processing of it: any attempt to let the secret decide
// a branch, a jump target or a memory address, or to write it where a
// non-blinded capability could read it, faults. This module is everything the
// extension adds to a speculative out-of-order CHERI core; the core itself (fetch,
// decode, rename, reorder buffer, caches, functional units, the CHERI capability
// register file and bounds checks) stays outside and connects through the ports.
//
//   blindedness_bits          one bit per register, 7 read / 3 write ports
//   taint_propagation         blindedness of each register write (3 writebacks)
//   side_channel_prevention   x3: ALU/branch, FPU/Int-Mul/Int-Div, memory pipeline
//   blinded_ls_check          memory pipeline: I1, I2, load blindedness, BRR spills
//   cap_perm_unit             ALU pipeline: candperm / cgetperm with the new bit
//   commit_fault_gate         per-ROB-entry fault records, trap at commit,
//                             predictor-training mask
//
// Pipeline ports (prefix a_ ALU/branch, f_ FPU/Int-Mul/Int-Div, m_ memory) carry
// the instruction being executed in that pipeline this cycle: its class, its
// reorder-buffer index, its register indices and the operand values that may
// reach decision-making logic. In return the pipeline gets operand values with
// blinded data zeroed (*_dec_op*), a kill for a violating branch or memory
// access, and the blindedness of its result. The memory pipeline has a request
// side (address stage) and a response side (load writeback); the load/store
// queue carries m_req_bc from one to the other. The commit ports mark reorder
// buffer allocation, squash and commit; a violating instruction traps only when
// it reaches commit.
//
// Timing: every check and the propagation are combinational, so no instruction
// is delayed; the blindedness bits and the fault records update at the clock
// edge (a dependent instruction issued in the cycle of its producer's writeback
// must get the blindedness bit from the core's bypass network).
//
// From the paper: the block structure (blindedness bits, taint propagation,
// blinded store and load check in the memory pipeline, side-channel prevention
// in the memory, ALU/branch and FPU/Int-Mul/Int-Div pipelines and at commit), the
// rules, and the absence of added cycles. This design's choices: the port-level
// interface to the host core, the operand-use masks supplied by decode, and the
// register and reorder-buffer sizes (the paper gives neither).
// Some outputs of the side-channel prevention instances are left open. Their
// fault flag duplicates kill, which is what the pipeline uses, and the memory
// pipeline has no second decision operand.
module blackout_core_ext
  import blackout_pkg::*;
#(
  parameter int unsigned NUM_REGS    = 32,
  parameter int unsigned ROB_ENTRIES = 64,
  localparam int unsigned IDX_W      = $clog2(NUM_REGS),
  localparam int unsigned ROB_W      = $clog2(ROB_ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,

  // ---------------- ALU / branch execution pipeline
  input  logic             a_valid,
  input  uop_e             a_uop,
  input  logic [ROB_W-1:0] a_rob,
  input  logic [IDX_W-1:0] a_rs1,
  input  logic [IDX_W-1:0] a_rs2,
  input  logic [1:0]       a_src_used,    // {rs2, rs1} read as registers
  input  logic [IDX_W-1:0] a_rd,
  input  logic             a_rd_we,
  input  cap_t             a_rs1_cap,     // rs1 contents (jump target / capability operand)
  input  logic [XLEN-1:0]  a_op2,
  output logic [XLEN-1:0]  a_dec_op1,
  output logic [XLEN-1:0]  a_dec_op2,
  output logic             a_kill,
  output logic             a_rd_blinded,
  output cap_t             a_candperm_out,
  output logic [XLEN-1:0]  a_getperm_out,
  output logic [XLEN-1:0]  a_root_perms,

  // ---------------- FPU / Int-Mul / Int-Div execution pipeline
  input  logic             f_valid,
  input  uop_e             f_uop,
  input  logic [ROB_W-1:0] f_rob,
  input  logic [IDX_W-1:0] f_rs1,
  input  logic [IDX_W-1:0] f_rs2,
  input  logic [IDX_W-1:0] f_rs3,
  input  logic [2:0]       f_src_used,    // {rs3, rs2, rs1}
  input  logic [IDX_W-1:0] f_rd,
  input  logic             f_rd_we,
  input  logic [XLEN-1:0]  f_op1,
  input  logic [XLEN-1:0]  f_op2,
  output logic [XLEN-1:0]  f_dec_op1,
  output logic [XLEN-1:0]  f_dec_op2,
  output logic             f_kill,
  output logic             f_rd_blinded,

  // ---------------- memory execution pipeline, request side
  input  logic             m_valid,
  input  uop_e             m_uop,         // UOP_LOAD, UOP_STORE, UOP_CLC, UOP_CSC
  input  logic [ROB_W-1:0] m_rob,
  input  logic [IDX_W-1:0] m_rs1,         // address capability register
  input  logic [IDX_W-1:0] m_rs2,         // store data register
  input  cap_t             m_addr_cap,
  input  logic [XLEN-1:0]  m_vaddr,       // effective address
  input  cap_t             m_st_data,
  output logic             m_kill,        // do not send the access to the cache
  output logic [XLEN-1:0]  m_dec_vaddr,
  output logic             m_req_bc,
  output logic             m_req_brr,
  output cap_t             m_st_out,
  // memory execution pipeline, response side
  input  logic             m_resp_valid,
  input  logic [IDX_W-1:0] m_resp_rd,
  input  logic             m_resp_is_clc,
  input  logic             m_resp_bc,
  input  cap_t             m_resp_data,
  output cap_t             m_ld_out,
  output logic             m_ld_blinded,
  output logic             m_ld_brr,

  // ---------------- reorder buffer / commit
  input  logic             rob_alloc_valid,
  input  logic [ROB_W-1:0] rob_alloc_idx,
  input  logic             squash_all,
  input  logic             commit_valid,
  input  logic [ROB_W-1:0] commit_idx,
  output logic             commit_trap,
  output fault_e           commit_cause,
  output logic [4:0]       commit_cap_cause,
  input  bp_train_t        bp_train_in,
  output bp_train_t        bp_train_out
);

  // ------------------------------------------------ blindedness bits
  localparam int unsigned NRD = 7;
  localparam int unsigned NWR = 3;
  logic [NRD-1:0][IDX_W-1:0] rd_idx;
  logic [NRD-1:0]            rd_b;
  logic [NWR-1:0]            wr_en, wr_b;
  logic [NWR-1:0][IDX_W-1:0] wr_idx;

  assign rd_idx = {m_rs2, m_rs1, f_rs3, f_rs2, f_rs1, a_rs2, a_rs1};
  logic a_rs1_b, a_rs2_b, f_rs1_b, f_rs2_b, f_rs3_b, m_rs1_b, m_rs2_b;
  assign {m_rs2_b, m_rs1_b, f_rs3_b, f_rs2_b, f_rs1_b, a_rs2_b, a_rs1_b} = rd_b;

  blindedness_bits #(.NUM_REGS(NUM_REGS), .NUM_RD(NRD), .NUM_WR(NWR)) u_bits (
    .clk, .rst_n,
    .rd_idx, .rd_blinded(rd_b),
    .wr_en, .wr_idx, .wr_blinded(wr_b)
  );

  // ------------------------------------------------ ALU / branch pipeline
  fault_e a_cause;
  cap_t   a_perm_cap;
  logic   a_rs1_cap_bc;

  cap_perm_unit u_perm (
    .cap_in(a_rs1_cap), .mask(a_op2),
    .andperm_out(a_perm_cap), .getperm_out(a_getperm_out),
    .root_perms(a_root_perms), .is_blinded(a_rs1_cap_bc)
  );
  assign a_candperm_out = a_perm_cap;

  side_channel_prevention u_scp_alu (
    .valid(a_valid), .uop(a_uop),
    .rs1_blinded(a_rs1_b && a_src_used[0]), .rs2_blinded(a_rs2_b && a_src_used[1]),
    .rs1_cap_blinded(a_rs1_cap_bc && a_src_used[0]),
    .op1(a_rs1_cap.addr), .op2(a_op2),
    .fault(), .cause(a_cause), .dec_op1(a_dec_op1), .dec_op2(a_dec_op2),
    .kill(a_kill)
  );

  // ------------------------------------------------ FPU / Int-Mul / Int-Div pipeline
  fault_e f_cause;

  side_channel_prevention u_scp_fmd (
    .valid(f_valid), .uop(f_uop),
    .rs1_blinded(f_rs1_b && f_src_used[0]), .rs2_blinded(f_rs2_b && f_src_used[1]),
    .rs1_cap_blinded(1'b0),
    .op1(f_op1), .op2(f_op2),
    .fault(), .cause(f_cause), .dec_op1(f_dec_op1), .dec_op2(f_dec_op2),
    .kill(f_kill)
  );

  // ------------------------------------------------ memory pipeline
  fault_e m_scp_cause, m_ls_cause, m_cause;
  logic   m_scp_fault, m_scp_kill, m_ls_fault;
  logic   m_addr_bc;
  assign m_addr_bc = m_addr_cap.tag && !m_addr_cap.meta.non_oblivious;

  side_channel_prevention u_scp_mem (
    .valid(m_valid), .uop(m_uop),
    .rs1_blinded(m_rs1_b), .rs2_blinded(m_rs2_b), .rs1_cap_blinded(m_addr_bc),
    .op1(m_vaddr), .op2(m_st_data.addr),
    .fault(m_scp_fault), .cause(m_scp_cause), .dec_op1(m_dec_vaddr), .dec_op2(),
    .kill(m_scp_kill)
  );

  blinded_ls_check #(.IDX_W(IDX_W)) u_lscheck (
    .req_valid(m_valid), .req_uop(m_uop), .req_addr_reg(m_rs1), .req_addr_cap(m_addr_cap),
    .req_data_blinded(m_rs2_b), .req_data(m_st_data),
    .req_fault(m_ls_fault), .req_cause(m_ls_cause), .req_bc(m_req_bc), .req_brr(m_req_brr),
    .req_st_out(m_st_out),
    .resp_valid(m_resp_valid), .resp_is_clc(m_resp_is_clc), .resp_bc(m_resp_bc),
    .resp_data(m_resp_data), .resp_ld_out(m_ld_out), .resp_blinded(m_ld_blinded),
    .resp_brr(m_ld_brr)
  );

  assign m_cause = m_scp_fault ? m_scp_cause : m_ls_cause;
  assign m_kill  = m_scp_kill || m_ls_fault;

  // ------------------------------------------------ taint propagation / writeback
  logic [NWR-1:0]            wb_valid, wb_force;
  logic [NWR-1:0][IDX_W-1:0] wb_rd;
  logic [NWR-1:0][2:0]       wb_used, wb_srcb;

  always_comb begin
    // port 0: ALU / branch
    wb_valid[0] = a_valid && a_rd_we;
    wb_rd[0]    = a_rd;
    wb_used[0]  = {1'b0, a_src_used};
    wb_srcb[0]  = {1'b0, a_rs2_b, a_rs1_b};
    wb_force[0] = 1'b0;
    // port 1: FPU / Int-Mul / Int-Div
    wb_valid[1] = f_valid && f_rd_we;
    wb_rd[1]    = f_rd;
    wb_used[1]  = f_src_used;
    wb_srcb[1]  = {f_rs3_b, f_rs2_b, f_rs1_b};
    wb_force[1] = 1'b0;
    // port 2: load writeback
    wb_valid[2] = m_resp_valid;
    wb_rd[2]    = m_resp_rd;
    wb_used[2]  = '0;
    wb_srcb[2]  = '0;
    wb_force[2] = m_ld_blinded;
  end

  taint_propagation #(.NUM_WR(NWR), .NSRC(3), .IDX_W(IDX_W)) u_taint (
    .wb_valid, .wb_rd, .wb_src_used(wb_used), .wb_src_blinded(wb_srcb), .wb_force,
    .wr_en, .wr_idx, .wr_blinded(wr_b)
  );

  assign a_rd_blinded = wr_b[0];
  assign f_rd_blinded = wr_b[1];

  // ------------------------------------------------ commit
  commit_fault_gate #(.ROB_ENTRIES(ROB_ENTRIES), .NUM_EXEC(3)) u_commit (
    .clk, .rst_n,
    .alloc_valid(rob_alloc_valid), .alloc_idx(rob_alloc_idx), .squash_all,
    .ex_valid({m_valid, f_valid, a_valid}),
    .ex_idx({m_rob, f_rob, a_rob}),
    .ex_cause({m_cause, f_cause, a_cause}),
    .commit_valid, .commit_idx,
    .commit_trap, .commit_cause, .commit_cap_cause,
    .train_in(bp_train_in), .train_out(bp_train_out)
  );

  // The functional-unit pipeline never sees jumps or memory micro-ops.
  always_comb begin
    if (f_valid) assert (f_uop inside {UOP_ARITH, UOP_BRANCH, UOP_CAPMOD})
      else $error("memory or jump micro-op in the FPU/Int-Mul/Int-Div pipeline");
    if (m_valid) assert (m_uop inside {UOP_LOAD, UOP_STORE, UOP_CLC, UOP_CSC})
      else $error("non-memory micro-op in the memory pipeline");
  end

endmodule
