// tb_noninterference -- two runs of a data-oblivious search must look the same.
//
// The point of blinded capabilities is that nothing the secret touches reaches the
// parts of the core that leave observable traces: branch and jump decisions,
// memory addresses, predictor training, trap decisions. This testbench checks that
// for the extension at its default sizes. It plays the host core (same conventions
// as tb_blackout_core_ext) and runs one program twice, with different secrets:
//
//   c3 = candperm(c1, ~non-oblivious)         blinded capability over the array
//   key and N array words stored through c3   (the secret inputs)
//   for i in 0..N-1:                          oblivious lower-bound search
//     x5  = ld  c3[i]                         public address, blinded result
//     x6  = slt x5, x4                        blinded compare with the key
//     beq x6, jalr x5, ld 0(x5)                transient: issued on a mis-predicted
//                                             path, then squashed (Spectre-PHT,
//                                             -BTB/RSB, and the secret-addressed
//                                             access of PHT/STL gadgets)
//     x7  = x7 + x6                           blinded count
//     every 4th step: spill x7 via csp, restore it
//   sd x7 -> c3[N]                            result written back through c3
//
// Every cycle the testbench samples all outputs that feed decision-making logic
// (kills, zeroed decision operands of non-arithmetic operations, zeroed memory
// address, request/response flags, blindedness results, trap and cause,
// predictor training). It requires the two traces to be identical cycle by
// cycle. As a sanity check, it also requires the result values to differ
// between runs and to match a reference count.
// This is the extension-level part of a non-interference evaluation of a
// data-oblivious search, and of Spectre-style tests: every transient use of the
// secret must be killed with its operand zeroed, and must never trap.
module tb_noninterference;
  import blackout_pkg::*;
  localparam int unsigned NUM_REGS    = 32;
  localparam int unsigned ROB_ENTRIES = 64;
  localparam int unsigned N           = 16;     // array length

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- host state
  cap_t        regs [NUM_REGS];
  cap_t        mem  [logic [59:0]];
  int          rob_next;

  // ---------------------------------------------------------------- observation
  // Only what may steer timing, addresses or predictors. Values of arithmetic
  // operands, load data and store data are the secret itself and are excluded.
  typedef struct packed {
    logic        a_kill, f_kill, m_kill;
    logic        a_rd_blinded, f_rd_blinded, m_ld_blinded, m_ld_brr;
    logic        m_req_bc, m_req_brr, commit_trap;
    fault_e      commit_cause;
    logic [4:0]  commit_cap_cause;
    logic [63:0] a_dec_op1, a_dec_op2, m_dec_vaddr;
    bp_train_t   bp_train_out;
  } obs_t;
  obs_t trace [2][$];
  int   run = 0;
  logic recording = 0;
  int   n_transient = 0, spills = 0, restores = 0;

  always @(posedge clk) if (recording) begin
    obs_t o;
    o.a_kill = a_kill; o.f_kill = f_kill; o.m_kill = m_kill;
    o.a_rd_blinded = a_rd_blinded; o.f_rd_blinded = f_rd_blinded;
    o.m_ld_blinded = m_ld_blinded; o.m_ld_brr = m_ld_brr;
    o.m_req_bc = m_req_bc; o.m_req_brr = m_req_brr; o.commit_trap = commit_trap;
    o.commit_cause = commit_cause; o.commit_cap_cause = commit_cap_cause;
    o.a_dec_op1 = (a_valid && a_uop !== UOP_ARITH) ? a_dec_op1 : '0;
    o.a_dec_op2 = (a_valid && a_uop !== UOP_ARITH) ? a_dec_op2 : '0;
    o.m_dec_vaddr = m_valid ? m_dec_vaddr : '0;
    o.bp_train_out = bp_train_out;
    trace[run].push_back(o);
  end

  // ---------------------------------------------------------------- helpers
  task automatic idle();
    a_valid = 0; f_valid = 0; m_valid = 0; m_resp_valid = 0;
    rob_alloc_valid = 0; squash_all = 0; commit_valid = 0;
    a_uop = UOP_ARITH; f_uop = UOP_ARITH; m_uop = UOP_LOAD;
    {a_rob, a_rs1, a_rs2, a_rd, a_src_used, a_rd_we, a_rs1_cap, a_op2} = '0;
    {f_rob, f_rs1, f_rs2, f_rs3, f_rd, f_src_used, f_rd_we, f_op1, f_op2} = '0;
    {m_rob, m_rs1, m_rs2, m_addr_cap, m_vaddr, m_st_data} = '0;
    {m_resp_rd, m_resp_is_clc, m_resp_bc, m_resp_data} = '0;
    {rob_alloc_idx, commit_idx} = '0;
    bp_train_in = '0;
  endtask

  task automatic alloc(output logic [5:0] r);
    r = 6'(rob_next);
    rob_next = (rob_next + 1) % ROB_ENTRIES;
    rob_alloc_valid = 1; rob_alloc_idx = r;
    @(negedge clk);
    rob_alloc_valid = 0;
  endtask

  // commit; the predictor training input is a fixed public pattern per PC
  task automatic commit(logic [5:0] r, logic [63:0] pc);
    commit_valid = 1; commit_idx = r;
    bp_train_in = '{valid: 1'b1, taken: pc[2], pc: pc, target: pc + 64'h40};
    @(negedge clk);
    commit_valid = 0; bp_train_in = '0;
  endtask

  task automatic alu_op(uop_e u, int rd, int rs1, int rs2, logic [63:0] result, logic [63:0] pc);
    logic [5:0] r;
    alloc(r);
    a_valid = 1; a_uop = u; a_rob = r; a_rs1 = 5'(rs1); a_rs2 = 5'(rs2); a_src_used = 2'b11;
    a_rd = 5'(rd); a_rd_we = (u !== UOP_BRANCH); a_rs1_cap = regs[rs1]; a_op2 = regs[rs2].addr;
    #1;
    if (u === UOP_CAPMOD) regs[rd] = a_candperm_out;
    else if (u !== UOP_BRANCH && rd !== 0) regs[rd] = '{tag: 1'b0, meta: '0, addr: result};
    @(negedge clk);
    a_valid = 0;
    commit(r, pc);
  endtask

  task automatic mem_op(uop_e u, int rs1, int rs2, int rd, logic [63:0] off, logic [63:0] pc);
    logic [5:0] r;
    logic [63:0] va;
    logic bc;
    alloc(r);
    va = regs[rs1].addr + off;
    bc = regs[rs1].tag && !regs[rs1].meta.non_oblivious;
    m_valid = 1; m_uop = u; m_rob = r; m_rs1 = 5'(rs1); m_rs2 = 5'(rs2);
    m_addr_cap = regs[rs1]; m_vaddr = va; m_st_data = regs[rs2];
    #1;
    if (!m_kill && (u === UOP_STORE || u === UOP_CSC)) begin
      mem[va[63:4]] = m_st_out;
      if (m_req_brr) spills++;
    end
    @(negedge clk);
    m_valid = 0;
    if (!m_kill && (u === UOP_LOAD || u === UOP_CLC)) begin
      m_resp_valid = 1; m_resp_rd = 5'(rd); m_resp_is_clc = (u === UOP_CLC); m_resp_bc = bc;
      m_resp_data = mem.exists(va[63:4]) ? mem[va[63:4]] : '0;
      #1;
      if (rd !== 0) regs[rd] = m_ld_out;
      if (m_ld_brr) restores++;
      @(negedge clk);
      m_resp_valid = 0;
    end
    commit(r, pc);
  endtask

  // An instruction on the secret in x<rs>, issued on a mis-predicted path: it
  // executes, then the older branch resolves and the entry is discarded, either
  // by flushing the whole window (squash_all) or by handing the same entry to the
  // next instruction on the correct path (re-allocation clears its record).
  //   UOP_BRANCH   conditional branch on the secret        (Spectre-PHT)
  //   UOP_JUMPREG  indirect jump to the secret             (Spectre-BTB / RSB)
  //   UOP_LOAD     load with the secret as the address     (second access of
  //                                                          Spectre-PHT / STL gadgets)
  task automatic transient(uop_e u, int rs, bit flush);
    logic [5:0] r;
    alloc(r);
    if (u == UOP_LOAD) begin
      m_valid = 1; m_uop = u; m_rob = r; m_rs1 = 5'(rs); m_rs2 = 0;
      m_addr_cap = regs[rs]; m_vaddr = regs[rs].addr; m_st_data = '0;
      #1;
      check(m_kill && m_dec_vaddr === 64'h0, "transient load sent a secret address to the cache");
    end else begin
      a_valid = 1; a_uop = u; a_rob = r; a_rs1 = 5'(rs); a_rs2 = 0; a_src_used = 2'b11;
      a_rd = 0; a_rd_we = 0; a_rs1_cap = regs[rs]; a_op2 = 0;
      #1;
      check(a_kill && a_dec_op1 === 64'h0, "transient control transfer on a secret reached the predictor");
    end
    @(negedge clk);
    a_valid = 0; m_valid = 0;
    if (flush) begin
      squash_all = 1;
      @(negedge clk);
      squash_all = 0;
    end
    rob_next = int'(r);
    n_transient++;
  endtask

  // ---------------------------------------------------------------- program
  task automatic run_program(int unsigned seed, output logic [63:0] result);
    logic [63:0] key, a [N];
    int unsigned s;
    int ref_cnt;
    s = seed;
    idle();
    rob_next = 0;
    mem.delete();
    for (int i = 0; i < NUM_REGS; i++) regs[i] = '0;
    regs[1] = '{tag: 1'b1, meta: '{uperms: '1, perms: '1, non_oblivious: 1'b1, reserved: '0,
                otype: '1, bounds: '0}, addr: 64'h10000};
    regs[2] = regs[1]; regs[2].addr = 64'h80000;                 // csp
    regs[10] = '{tag: 1'b0, meta: '0, addr: ~(64'h1 << 12)};
    // secrets of this run
    key = 64'($urandom(s) % 1000);
    ref_cnt = 0;
    for (int i = 0; i < N; i++) begin
      a[i] = 64'($urandom() % 1000);
      if (a[i] < key) ref_cnt++;
    end
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    recording = 1;

    alu_op(UOP_CAPMOD, 3, 1, 10, 0, 64'h100);                     // c3: blinded
    // the secret inputs arrive in public registers and go straight to blinded memory
    regs[11] = '{tag: 1'b0, meta: '0, addr: key};
    mem_op(UOP_STORE, 3, 11, 0, 64'(N) * 16, 64'h104);
    for (int i = 0; i < N; i++) begin
      regs[11] = '{tag: 1'b0, meta: '0, addr: a[i]};
      mem_op(UOP_STORE, 3, 11, 0, 64'(i) * 16, 64'h108);
    end
    alu_op(UOP_ARITH, 11, 0, 0, 0, 64'h10C);                       // clear x11
    mem_op(UOP_LOAD, 3, 0, 4, 64'(N) * 16, 64'h110);               // x4 = key (blinded)
    alu_op(UOP_ARITH, 7, 0, 0, 0, 64'h114);                        // x7 = 0
    for (int i = 0; i < N; i++) begin
      mem_op(UOP_LOAD, 3, 0, 5, 64'(i) * 16, 64'h118);             // x5 = a[i]
      alu_op(UOP_ARITH, 6, 5, 4, 64'(regs[5].addr < regs[4].addr), 64'h11C);
      transient(UOP_BRANCH, 6, 1'b1);
      transient(UOP_JUMPREG, 5, 1'b0);
      transient(UOP_LOAD, 5, 1'b0);
      alu_op(UOP_ARITH, 7, 7, 6, regs[7].addr + regs[6].addr, 64'h120);
      if (i % 4 === 3) begin
        mem_op(UOP_CSC, 2, 7, 0, 64'h0, 64'h124);                   // spill x7
        alu_op(UOP_ARITH, 7, 0, 0, 0, 64'h128);                     // clobber
        mem_op(UOP_CLC, 2, 0, 7, 64'h0, 64'h12C);                   // restore
      end
    end
    mem_op(UOP_STORE, 3, 7, 0, 64'(N + 1) * 16, 64'h130);          // result via c3
    mem_op(UOP_LOAD, 3, 0, 8, 64'(N + 1) * 16, 64'h134);
    recording = 0;
    result = regs[8].addr;
    check(result === 64'(ref_cnt), $sformatf("run %0d: count %0d, expected %0d", run, result, ref_cnt));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] res0, res1;
    int unsigned seed1;
    idle();
    run = 0;
    run_program(32'd7, res0);
    // second run: pick a seed whose result differs from the first
    seed1 = 32'd11;
    run = 1;
    run_program(seed1, res1);
    while (res1 === res0 && seed1 < 32'd200) begin
      seed1 += 2;
      trace[1].delete();
      run_program(seed1, res1);
    end
    check(res1 !== res0, "the two runs did not use different secrets");
    check(trace[0].size() === trace[1].size() && trace[0].size() > 0,
          $sformatf("trace lengths %0d / %0d", trace[0].size(), trace[1].size()));
    for (int c = 0; c < trace[0].size() && c < trace[1].size(); c++)
      check(trace[0][c] === trace[1][c], $sformatf("observable outputs differ at cycle %0d", c));
    check(n_transient >= 6 * N, "transient instructions not executed");
    check(spills > 0 && restores > 0, "no blinded register spill/restore");
    $display("results %0d / %0d, %0d cycles compared, %0d transient instructions, %0d spills, %0d restores",
             res0, res1, trace[0].size(), n_transient, spills, restores);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
