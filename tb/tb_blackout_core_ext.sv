// tb_blackout_core_ext -- end-to-end test of the blinded-capability extension.
//
// The testbench plays the host core: it keeps the capability register file and a
// tagged data memory, allocates reorder-buffer entries, sends each instruction to
// the ALU/branch, FPU/Int-Mul/Int-Div or memory pipeline port, writes results
// back and commits in order. It runs a short program that walks through the
// whole life of a secret:
//   candperm turns an ordinary capability into a blinded one; a store through it
//   and a load back make a register blinded; ALU and multiplier results inherit
//   the bit; overwriting with public data clears it; a spill through csp becomes a
//   blinded register record and its restore is blinded again;
// and through every violation the extension must stop:
//   branch on a secret, jump through a blinded capability, secret stored through an
//   ordinary capability (I1), capability stored into blinded memory (I2), secret
//   used as an address (I5), capability modified with a secret,
// plus a violation on a mis-speculated path that is squashed and must not trap.
// Every result is compared with values worked out here, in the same cycle the
// instruction is presented (the extension adds no cycle), and every violation
// must trap at commit, with the predictor training of that commit zeroed.
// Each mechanism is counted; one that never happened is a failure.
// The top runs with its default parameters.
module tb_blackout_core_ext;
  import blackout_pkg::*;
  localparam int unsigned NUM_REGS    = 32;
  localparam int unsigned ROB_ENTRIES = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- DUT ports
  logic a_valid; uop_e a_uop; logic [5:0] a_rob; logic [4:0] a_rs1, a_rs2, a_rd;
  logic [1:0] a_src_used; logic a_rd_we; cap_t a_rs1_cap; logic [63:0] a_op2;
  logic [63:0] a_dec_op1, a_dec_op2; logic a_kill, a_rd_blinded; cap_t a_candperm_out;
  logic [63:0] a_getperm_out, a_root_perms;
  logic f_valid; uop_e f_uop; logic [5:0] f_rob; logic [4:0] f_rs1, f_rs2, f_rs3, f_rd;
  logic [2:0] f_src_used; logic f_rd_we; logic [63:0] f_op1, f_op2, f_dec_op1, f_dec_op2;
  logic f_kill, f_rd_blinded;
  logic m_valid; uop_e m_uop; logic [5:0] m_rob; logic [4:0] m_rs1, m_rs2;
  cap_t m_addr_cap; logic [63:0] m_vaddr; cap_t m_st_data;
  logic m_kill; logic [63:0] m_dec_vaddr; logic m_req_bc, m_req_brr; cap_t m_st_out;
  logic m_resp_valid; logic [4:0] m_resp_rd; logic m_resp_is_clc, m_resp_bc; cap_t m_resp_data;
  cap_t m_ld_out; logic m_ld_blinded, m_ld_brr;
  logic rob_alloc_valid; logic [5:0] rob_alloc_idx; logic squash_all, commit_valid;
  logic [5:0] commit_idx; logic commit_trap; fault_e commit_cause; logic [4:0] commit_cap_cause;
  bp_train_t bp_train_in, bp_train_out;

  blackout_core_ext dut (.*);

  // ---------------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  typedef enum int {
    M_CANDPERM, M_STORE_BC, M_LOAD_BC, M_PROP_ALU, M_PROP_FMD, M_UNBLIND, M_BRANCH_FAULT,
    M_SQUASHED, M_JUMP_FAULT, M_I1_FAULT, M_BRR_SPILL, M_BRR_RESTORE, M_I2_FAULT,
    M_ADDR_FAULT, M_CAPMOD_FAULT, M_BP_MASK, M_PARALLEL, M_PUBLIC_LOAD, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"candperm blinds a capability", "store through BC",
    "load through BC", "ALU propagation", "mul/FPU propagation", "unblind on overwrite",
    "branch fault", "squashed violation", "jump fault", "I1 fault", "BRR spill", "BRR restore",
    "I2 fault", "address fault", "capmod fault", "predictor mask", "same-cycle issue",
    "public load"};

  cap_t        regs  [NUM_REGS];   // host capability register file
  logic        ref_b [NUM_REGS];   // expected blindedness bits
  cap_t        mem   [logic [59:0]];
  int          rob_next = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  task automatic idle();
    a_valid = 0; f_valid = 0; m_valid = 0; m_resp_valid = 0;
    rob_alloc_valid = 0; squash_all = 0; commit_valid = 0;
  endtask

  // allocate a reorder-buffer entry (one cycle)
  task automatic alloc(output logic [5:0] r);
    r = 6'(rob_next);
    rob_next = (rob_next + 1) % ROB_ENTRIES;
    rob_alloc_valid = 1; rob_alloc_idx = r;
    @(negedge clk);
    rob_alloc_valid = 0;
  endtask

  // commit an entry and check the trap outcome (one cycle)
  task automatic commit(logic [5:0] r, fault_e exp, string what);
    commit_valid = 1; commit_idx = r;
    bp_train_in = '{valid: 1'b1, taken: 1'b1, pc: {$urandom, $urandom}, target: {$urandom, $urandom}};
    #1;
    check(commit_trap === (exp !== FLT_NONE) && commit_cause === exp &&
          commit_cap_cause === ((exp !== FLT_NONE) ? CAP_CAUSE_BLINDED : 5'd0),
          $sformatf("%s: commit trap=%0b cause=%0d, expected cause %0d", what, commit_trap,
                    commit_cause, exp));
    if (exp !== FLT_NONE) begin
      check(bp_train_out === '0, {what, ": predictor training not zeroed"});
      if (bp_train_out === '0) mech[M_BP_MASK]++;
    end else begin
      check(bp_train_out === bp_train_in, {what, ": predictor training altered"});
    end
    @(negedge clk);
    commit_valid = 0;
  endtask

  // ---------------------------------------------------------------- pipeline helpers
  // ALU / branch pipeline; result value computed by the caller (the host ALU)
  task automatic alu(uop_e u, int rs1, int rs2, logic [1:0] used, int rd, logic we,
                     logic [63:0] op2, output logic [5:0] r);
    alloc(r);
    a_valid = 1; a_uop = u; a_rob = r; a_rs1 = 5'(rs1); a_rs2 = 5'(rs2); a_src_used = used;
    a_rd = 5'(rd); a_rd_we = we; a_rs1_cap = regs[rs1]; a_op2 = op2;
    #1;
  endtask

  task automatic alu_done();
    @(negedge clk);
    a_valid = 0;
  endtask

  // plain arithmetic on the ALU: rd = rs1 + rs2
  task automatic add(int rd, int rs1, int rs2, string what);
    logic [5:0] r;
    logic exp;
    exp = ref_b[rs1] | ref_b[rs2];
    alu(UOP_ARITH, rs1, rs2, 2'b11, rd, 1'b1, regs[rs2].addr, r);
    check(a_rd_blinded === exp && !a_kill, $sformatf("%s: add blinded=%0b want %0b", what, a_rd_blinded, exp));
    if (exp && a_rd_blinded) mech[M_PROP_ALU]++;
    if (ref_b[rd] && !exp && !a_rd_blinded) mech[M_UNBLIND]++;
    alu_done();
    regs[rd] = '{tag: 1'b0, meta: '0, addr: regs[rs1].addr + regs[rs2].addr};
    if (rd !== 0) ref_b[rd] = exp;
    commit(r, FLT_NONE, what);
  endtask

  // memory request; response (for loads) follows in the next cycle
  task automatic mem_op(uop_e u, int rs1, int rs2, int rd, logic [63:0] off,
                        fault_e exp_fault, string what);
    logic [5:0] r;
    logic [63:0] va;
    logic bc;
    alloc(r);
    va = regs[rs1].addr + off;
    bc = regs[rs1].tag && !regs[rs1].meta.non_oblivious;
    m_valid = 1; m_uop = u; m_rob = r; m_rs1 = 5'(rs1); m_rs2 = 5'(rs2);
    m_addr_cap = regs[rs1]; m_vaddr = va; m_st_data = regs[rs2];
    #1;
    check(m_kill === (exp_fault !== FLT_NONE), $sformatf("%s: kill=%0b", what, m_kill));
    check(m_req_bc === bc, $sformatf("%s: req_bc=%0b want %0b", what, m_req_bc, bc));
    if (exp_fault === FLT_ADDR) begin
      check(m_dec_vaddr === 64'h0, {what, ": blinded address reached the cache"});
      mech[M_ADDR_FAULT]++;
    end else begin
      check(m_dec_vaddr === va, {what, ": address altered"});
    end
    if (!m_kill && (u === UOP_STORE || u === UOP_CSC)) begin
      mem[va[63:4]] = m_st_out;
      if (m_req_brr) mech[M_BRR_SPILL]++;
      if (bc) mech[M_STORE_BC]++;
    end
    @(negedge clk);
    m_valid = 0;
    if (!m_kill && (u === UOP_LOAD || u === UOP_CLC)) begin
      cap_t d;
      d = mem.exists(va[63:4]) ? mem[va[63:4]] : '0;
      m_resp_valid = 1; m_resp_rd = 5'(rd); m_resp_is_clc = (u === UOP_CLC); m_resp_bc = bc;
      m_resp_data = d;
      #1;
      regs[rd] = m_ld_out;
      if (rd !== 0) ref_b[rd] = m_ld_blinded;
      if (bc) begin
        check(m_ld_blinded, {what, ": load through BC not blinded"});
        mech[M_LOAD_BC]++;
      end
      if (m_ld_brr) mech[M_BRR_RESTORE]++;
      if (!bc && !m_ld_brr) begin
        check(!m_ld_blinded, {what, ": public load blinded"});
        mech[M_PUBLIC_LOAD]++;
      end
      @(negedge clk);
      m_resp_valid = 0;
    end
    commit(r, exp_fault, what);
    case (exp_fault)
      FLT_STORE_DATA: mech[M_I1_FAULT]++;
      FLT_CAP_TO_BD:  mech[M_I2_FAULT]++;
      default: ;
    endcase
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  initial begin
    logic [5:0] r, r2, r3;
    cap_t root;
    idle();
    a_uop = UOP_ARITH; f_uop = UOP_ARITH; m_uop = UOP_LOAD;
    {a_rob, a_rs1, a_rs2, a_rd, a_src_used, a_rd_we, a_rs1_cap, a_op2} = '0;
    {f_rob, f_rs1, f_rs2, f_rs3, f_rd, f_src_used, f_rd_we, f_op1, f_op2} = '0;
    {m_rob, m_rs1, m_rs2, m_addr_cap, m_vaddr, m_st_data} = '0;
    {m_resp_rd, m_resp_is_clc, m_resp_bc, m_resp_data} = '0;
    {rob_alloc_idx, commit_idx} = '0; bp_train_in = '0;
    for (int i = 0; i < NUM_REGS; i++) begin regs[i] = '0; ref_b[i] = 0; end
    for (int i = 0; i < M_NUM; i++) mech[i] = 0;

    // an ordinary data capability in c1 and the stack capability in c2
    root = '{tag: 1'b1, meta: '{uperms: '1, perms: '1, non_oblivious: 1'b1, reserved: '0,
             otype: '1, bounds: '0}, addr: 64'h1000};
    regs[1] = root;
    regs[2] = root; regs[2].addr = 64'h8000;
    regs[7]  = '{tag: 1'b0, meta: '0, addr: 64'd21};
    regs[10] = '{tag: 1'b0, meta: '0, addr: ~(64'h1 << 12)};   // mask dropping non-oblivious
    regs[11] = '{tag: 1'b0, meta: '0, addr: 64'h5EC2E7};       // the secret, still public
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // newly created capabilities carry the non-oblivious permission
    check(a_root_perms[12] === 1'b1, "root capability lacks non-oblivious access");

    // 1. candperm c3 = c1 & ~non-oblivious  -> blinded capability
    alu(UOP_CAPMOD, 1, 10, 2'b11, 3, 1'b1, regs[10].addr, r);
    check(a_candperm_out.tag && !a_candperm_out.meta.non_oblivious, "candperm did not blind c3");
    check(a_getperm_out[12] === 1'b1 && !a_kill && !a_rd_blinded, "candperm side effects");
    if (a_candperm_out.tag && !a_candperm_out.meta.non_oblivious) mech[M_CANDPERM]++;
    regs[3] = a_candperm_out;
    alu_done();
    commit(r, FLT_NONE, "candperm");

    // 2. store the secret into blinded memory, 3. load it back: x5 blinded
    mem_op(UOP_STORE, 3, 11, 0, 0, FLT_NONE, "sd x11 via BC");
    mem_op(UOP_LOAD, 3, 0, 5, 0, FLT_NONE, "ld x5 via BC");
    check(ref_b[5] && regs[5].addr === 64'h5EC2E7, "secret value or blindedness lost");

    // 4. ALU propagation, 6. public add stays public
    add(6, 5, 7, "add x6=x5+x7");
    add(9, 7, 7, "add x9=x7+x7");

    // 5. multiplier / FPU propagation (rs3 of a fused op)
    alloc(r);
    f_valid = 1; f_uop = UOP_ARITH; f_rob = r; f_rs1 = 7; f_rs2 = 9; f_rs3 = 6; f_src_used = 3'b111;
    f_rd = 8; f_rd_we = 1; f_op1 = regs[7].addr; f_op2 = regs[9].addr;
    #1;
    check(f_rd_blinded && !f_kill && f_dec_op1 === regs[7].addr, "fused op not blinded by rs3");
    if (f_rd_blinded) mech[M_PROP_FMD]++;
    @(negedge clk);
    f_valid = 0; ref_b[8] = 1;
    commit(r, FLT_NONE, "fmadd x8");
    alloc(r);
    f_valid = 1; f_rob = r; f_rs1 = 7; f_rs2 = 8; f_rs3 = 0; f_src_used = 3'b011; f_rd = 12;
    #1;
    check(f_rd_blinded, "mul x12=x7*x8 not blinded");
    if (f_rd_blinded) mech[M_PROP_FMD]++;
    @(negedge clk);
    f_valid = 0; ref_b[12] = 1;
    commit(r, FLT_NONE, "mul x12");

    // 7. overwrite x6 with public data clears its bit
    add(6, 7, 9, "add x6=x7+x9 (unblind)");
    check(ref_b[6] === 0, "x6 still blinded");

    // 8. branch on a secret: killed, operands zeroed, trap at commit
    alu(UOP_BRANCH, 5, 0, 2'b11, 0, 1'b0, 64'h0, r);
    check(a_kill && a_dec_op1 === 64'h0, "branch on secret not stopped");
    alu_done();
    commit(r, FLT_BRANCH_COND, "beq x5");
    mech[M_BRANCH_FAULT]++;
    // a public branch is allowed and sees its real operands
    alu(UOP_BRANCH, 7, 9, 2'b11, 0, 1'b0, regs[9].addr, r);
    check(!a_kill && a_dec_op1 === regs[7].addr && a_dec_op2 === regs[9].addr, "public branch blocked");
    alu_done();
    commit(r, FLT_NONE, "beq x7,x9");

    // 9. violation on a mis-speculated path: squashed, never traps
    alu(UOP_BRANCH, 8, 0, 2'b11, 0, 1'b0, 64'h0, r);
    check(a_kill, "speculative branch on secret not killed");
    alu_done();
    // the older branch resolves as mispredicted: the entry is squashed and reused
    rob_next = int'(r);
    add(13, 7, 7, "add on the correct path reusing the squashed entry");
    mech[M_SQUASHED]++;
    // squash_all path: violation recorded, whole window flushed
    alu(UOP_BRANCH, 12, 0, 2'b11, 0, 1'b0, 64'h0, r);
    alu_done();
    squash_all = 1;
    @(negedge clk);
    squash_all = 0;
    commit_valid = 1; commit_idx = r;
    #1 check(!commit_trap, "violation survived squash_all");
    if (!commit_trap) mech[M_SQUASHED]++;
    @(negedge clk);
    commit_valid = 0;

    // 10. jump through a blinded capability
    alu(UOP_JUMPREG, 3, 0, 2'b01, 0, 1'b0, 64'h0, r);
    check(a_kill, "cjalr through blinded capability not stopped");
    alu_done();
    commit(r, FLT_JUMP_TARGET, "cjalr c3");
    mech[M_JUMP_FAULT]++;
    // jump through a blinded integer target
    alu(UOP_JUMPREG, 5, 0, 2'b01, 0, 1'b0, 64'h0, r);
    check(a_kill && a_dec_op1 === 64'h0, "jalr to secret not stopped");
    alu_done();
    commit(r, FLT_JUMP_TARGET, "jalr x5");
    mech[M_JUMP_FAULT]++;

    // 11. I1: secret stored through an ordinary capability
    mem_op(UOP_STORE, 1, 5, 0, 64'h40, FLT_STORE_DATA, "sd x5 via c1");
    // 12. allowed through the blinded capability
    mem_op(UOP_STORE, 3, 5, 0, 64'h10, FLT_NONE, "sd x5 via BC");

    // 13. spill x5 through csp, clobber it, restore it
    mem_op(UOP_CSC, 2, 5, 0, 64'h20, FLT_NONE, "csc x5 via csp");
    check(mem[60'h802].tag && mem[60'h802].meta === BRR_MARKER, "spill is not a BRR");
    add(5, 7, 7, "add x5=x7+x7 (clobber)");
    check(!ref_b[5], "x5 still blinded after clobber");
    mem_op(UOP_CLC, 2, 0, 5, 64'h20, FLT_NONE, "clc x5 via csp");
    check(ref_b[5] && !regs[5].tag && regs[5].addr === 64'h5EC2E7, "BRR restore wrong");
    // the same spill through an ordinary non-stack capability is an I1 fault
    mem_op(UOP_CSC, 1, 5, 0, 64'h20, FLT_STORE_DATA, "csc x5 via c1");

    // 14. I2: a valid capability stored into blinded memory
    mem_op(UOP_CSC, 3, 1, 0, 64'h30, FLT_CAP_TO_BD, "csc c1 via BC");
    // clc through the BC yields blinded data but never a valid capability
    mem_op(UOP_CLC, 3, 0, 14, 64'h0, FLT_NONE, "clc via BC");
    check(!regs[14].tag, "valid capability loaded through BC");

    // public data through an ordinary capability stays public
    mem_op(UOP_STORE, 1, 7, 0, 64'h100, FLT_NONE, "sd x7 via c1");
    mem_op(UOP_LOAD, 1, 0, 20, 64'h100, FLT_NONE, "ld x20 via c1");
    check(!ref_b[20] && regs[20].addr === 64'd21, "public load wrong");

    // 15. I5: secret used as an address
    regs[15] = regs[5];
    ref_b[15] = 1;
    add(15, 5, 0, "mv x15=x5");
    regs[15] = '{tag: 1'b0, meta: '0, addr: 64'h1000 + (regs[5].addr & 64'hF0)};
    mem_op(UOP_LOAD, 15, 0, 16, 0, FLT_ADDR, "ld via secret address");

    // 16. capability modified with a secret (csetaddr c17 = c1, x5)
    alu(UOP_CAPMOD, 1, 5, 2'b11, 17, 1'b1, regs[5].addr, r);
    check(a_kill && a_dec_op2 === 64'h0, "csetaddr with secret not stopped");
    alu_done();
    commit(r, FLT_CAPMOD, "csetaddr c17");
    mech[M_CAPMOD_FAULT]++;
    ref_b[17] = 1;

    // 17. all three pipelines in one cycle: no added latency, independent results
    alloc(r); alloc(r2); alloc(r3);
    a_valid = 1; a_uop = UOP_ARITH; a_rob = r; a_rs1 = 7; a_rs2 = 9; a_src_used = 2'b11; a_rd = 18;
    a_rd_we = 1; a_rs1_cap = regs[7]; a_op2 = regs[9].addr;
    f_valid = 1; f_uop = UOP_ARITH; f_rob = r2; f_rs1 = 5; f_rs2 = 7; f_rs3 = 0; f_src_used = 3'b011;
    f_rd = 19; f_rd_we = 1;
    m_valid = 1; m_uop = UOP_STORE; m_rob = r3; m_rs1 = 1; m_rs2 = 12; m_addr_cap = regs[1];
    m_vaddr = 64'h1080; m_st_data = regs[12];
    #1;
    check(!a_rd_blinded && f_rd_blinded && m_kill, "same-cycle issue results wrong");
    if (!a_rd_blinded && f_rd_blinded && m_kill) mech[M_PARALLEL]++;
    @(negedge clk);
    a_valid = 0; f_valid = 0; m_valid = 0;
    ref_b[18] = 0; ref_b[19] = 1;
    commit(r, FLT_NONE, "parallel add");
    commit(r2, FLT_NONE, "parallel mul");
    commit(r3, FLT_STORE_DATA, "parallel store");

    // the register bits seen through the pipelines match the reference
    // (an idle ALU port still reports what its operand's bit would give)
    a_src_used = 2'b01; a_rd_we = 0; a_uop = UOP_ARITH;
    for (int i = 0; i < NUM_REGS; i++) begin
      a_rs1 = 5'(i);
      #1 check(a_rd_blinded === ref_b[i], $sformatf("final blindedness of x%0d", i));
    end

    for (int i = 0; i < M_NUM; i++) begin
      $display("%-32s %0d", mech_name[i], mech[i]);
      check(mech[i] > 0, {"mechanism never happened: ", mech_name[i]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
