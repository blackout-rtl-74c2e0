// tb_commit_fault_gate -- self-checking test of the commit-stage fault gate.
//
// Models a reorder buffer as a circular queue: instructions are allocated at the
// tail, finish execution out of order on three execution ports (some with a
// blinded-data violation), commit in order at the head, and are sometimes
// squashed (all younger entries dropped, as after a mis-speculation). Checks that
// a violation traps exactly when its instruction commits, with the blinded cause
// code, that squashed violations never trap, that squash_all clears every record,
// and that predictor training is zeroed on a trapping commit and passed otherwise.
module tb_commit_fault_gate;
  import blackout_pkg::*;
  localparam int unsigned ROB_ENTRIES = 16;
  localparam int unsigned NUM_EXEC    = 3;
  localparam int unsigned ROB_W       = $clog2(ROB_ENTRIES);

  logic clk = 0, rst_n = 0;
  logic                           alloc_valid, squash_all, commit_valid;
  logic [ROB_W-1:0]               alloc_idx, commit_idx;
  logic [NUM_EXEC-1:0]            ex_valid;
  logic [NUM_EXEC-1:0][ROB_W-1:0] ex_idx;
  fault_e [NUM_EXEC-1:0]          ex_cause;
  logic                           commit_trap;
  fault_e                         commit_cause;
  logic [4:0]                     commit_cap_cause;
  bp_train_t                      train_in, train_out;

  int checks = 0, failures = 0;
  int n_traps = 0, n_squashed_faults = 0, n_clean = 0;

  commit_fault_gate #(.ROB_ENTRIES(ROB_ENTRIES), .NUM_EXEC(NUM_EXEC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference reorder buffer
  fault_e ref_cause [ROB_ENTRIES];
  logic   done      [ROB_ENTRIES];
  int head = 0, tail = 0, count = 0;

  initial begin
    alloc_valid = 0; squash_all = 0; commit_valid = 0; alloc_idx = 0; commit_idx = 0;
    ex_valid = 0; ex_idx = 0; ex_cause = {NUM_EXEC{FLT_NONE}}; train_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      alloc_valid = 0; commit_valid = 0; ex_valid = 0; squash_all = 0;
      // execute: up to three finished instructions this cycle
      for (int p = 0; p < NUM_EXEC; p++) begin
        int k;
        ex_cause[p] = FLT_NONE;
        if (count > 0 && $urandom_range(0, 1)) begin
          k = (head + $urandom_range(0, count - 1)) % ROB_ENTRIES;
          if (!done[k]) begin
            logic dup;
            dup = 0;
            for (int q = 0; q < p; q++) if (ex_valid[q] && ex_idx[q] == ROB_W'(k)) dup = 1;
            if (!dup) begin
              ex_valid[p] = 1;
              ex_idx[p]   = ROB_W'(k);
              if ($urandom_range(0, 4) == 0) ex_cause[p] = fault_e'($urandom_range(1, 6));
            end
          end
        end
      end
      // commit the head if it has finished (it may finish this very cycle)
      if (count > 0) begin
        logic fin;
        fault_e c;
        fin = done[head];
        c   = ref_cause[head];
        for (int p = 0; p < NUM_EXEC; p++)
          if (ex_valid[p] && ex_idx[p] == ROB_W'(head)) begin fin = 1; c = ex_cause[p]; end
        if (fin && $urandom_range(0, 1)) begin
          commit_valid = 1;
          commit_idx   = ROB_W'(head);
          train_in     = {1'b1, 1'($urandom), {$urandom, $urandom}, {$urandom, $urandom}};
          #1;
          checks++;
          if (commit_trap !== (c != FLT_NONE) || commit_cause !== c ||
              commit_cap_cause !== ((c != FLT_NONE) ? 5'h1C : 5'h0)) begin
            failures++;
            $display("commit %0d: trap=%0b cause=%0d want %0d", head, commit_trap, commit_cause, c);
          end
          checks++;
          if (train_out !== ((c != FLT_NONE) ? '0 : train_in)) begin
            failures++; $display("predictor training not masked correctly");
          end
          if (c != FLT_NONE) n_traps++; else n_clean++;
        end
      end
      // allocate at the tail
      if (count < ROB_ENTRIES - 1 && $urandom_range(0, 1)) begin
        alloc_valid = 1;
        alloc_idx   = ROB_W'(tail);
      end
      // update the reference at the clock edge
      @(posedge clk);
      for (int p = 0; p < NUM_EXEC; p++)
        if (ex_valid[p]) begin done[ex_idx[p]] = 1; ref_cause[ex_idx[p]] = ex_cause[p]; end
      if (commit_valid) begin head = (head + 1) % ROB_ENTRIES; count--; end
      if (alloc_valid) begin done[tail] = 0; ref_cause[tail] = FLT_NONE; tail = (tail + 1) % ROB_ENTRIES; count++; end
      // occasional mis-speculation: drop everything younger than head+keep
      if (count > 1 && $urandom_range(0, 15) == 0) begin
        int keep;
        keep = $urandom_range(1, count - 1);
        for (int j = keep; j < count; j++)
          if (done[(head + j) % ROB_ENTRIES] && ref_cause[(head + j) % ROB_ENTRIES] != FLT_NONE)
            n_squashed_faults++;
        tail  = (head + keep) % ROB_ENTRIES;
        count = keep;
      end
    end
    // squash_all clears every record: fill faults, squash, re-commit the same indices
    @(negedge clk);
    alloc_valid = 0; commit_valid = 0;
    for (int k = 0; k < ROB_ENTRIES; k++) begin
      ex_valid = 3'b001; ex_idx[0] = ROB_W'(k); ex_cause[0] = FLT_ADDR;
      @(negedge clk);
    end
    ex_valid = 0; squash_all = 1;
    @(negedge clk);
    squash_all = 0;
    for (int k = 0; k < ROB_ENTRIES; k++) begin
      commit_valid = 1; commit_idx = ROB_W'(k);
      #1 checks++;
      if (commit_trap) begin failures++; $display("record %0d survived squash_all", k); end
    end
    commit_valid = 0;
    checks++;
    if (n_traps == 0 || n_clean == 0 || n_squashed_faults == 0) begin
      failures++; $display("a case never happened: traps=%0d clean=%0d squashed=%0d", n_traps, n_clean, n_squashed_faults);
    end
    $display("traps=%0d clean commits=%0d squashed violations=%0d", n_traps, n_clean, n_squashed_faults);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
