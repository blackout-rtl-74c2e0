// commit_fault_gate -- commit-stage side-channel prevention.
//
// Blinded-data violations are detected while an instruction executes, possibly
// under speculation, but must only trap when the instruction is known to be on the
// correct path. This unit keeps one fault record per reorder-buffer entry next to
// the core's reorder buffer:
//   * allocating an entry clears its record;
//   * an execution pipeline that detects a violation writes the cause into the
//     record of its instruction (NUM_EXEC ports);
//   * when the entry at the head commits, a non-empty record raises a capability
//     exception with cause CAP_CAUSE_BLINDED; instructions squashed by a
//     mis-speculation never commit, so their records are silently dropped and
//     overwritten on reallocation; squash_all clears every record at once;
//   * the branch-predictor training record produced at commit is zeroed when the
//     committing instruction trapped, so no blinded outcome trains the predictor.
// Timing: records are written at the clock edge; the commit outputs are
// combinational and also see a record written in the same cycle.
//
// From the paper: violations are caught during speculation, faults suppressed until
// speculation is confirmed and ignored otherwise, and blinded data never reaches
// the predictor. This design's choices: the per-entry record, the
// reorder-buffer size (ROB_ENTRIES), the cause encoding, masking the whole
// training record of a trapping instruction. The paper's hardware adds no storage
// beyond the per-register bit, because a host reorder buffer already keeps an
// exception cause per entry. The record array here stands in for that field, so
// the extension can be used and tested on its own.
module commit_fault_gate
  import blackout_pkg::*;
#(
  parameter int unsigned ROB_ENTRIES = 64,
  parameter int unsigned NUM_EXEC    = 3,
  localparam int unsigned ROB_W      = $clog2(ROB_ENTRIES)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         alloc_valid,
  input  logic [ROB_W-1:0]             alloc_idx,
  input  logic                         squash_all,
  input  logic [NUM_EXEC-1:0]          ex_valid,
  input  logic [NUM_EXEC-1:0][ROB_W-1:0] ex_idx,
  input  fault_e [NUM_EXEC-1:0]        ex_cause,    // FLT_NONE: no violation
  input  logic                         commit_valid,
  input  logic [ROB_W-1:0]             commit_idx,
  output logic                         commit_trap,
  output fault_e                       commit_cause,
  output logic [4:0]                   commit_cap_cause,
  input  bp_train_t                    train_in,
  output bp_train_t                    train_out
);

  fault_e rec_q [ROB_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROB_ENTRIES; i++) rec_q[i] <= FLT_NONE;
    end else if (squash_all) begin
      for (int i = 0; i < ROB_ENTRIES; i++) rec_q[i] <= FLT_NONE;
    end else begin
      if (alloc_valid) rec_q[alloc_idx] <= FLT_NONE;
      for (int p = 0; p < NUM_EXEC; p++) begin
        if (ex_valid[p] && ex_cause[p] != FLT_NONE) rec_q[ex_idx[p]] <= ex_cause[p];
      end
    end
  end

  always_comb begin
    commit_cause = rec_q[commit_idx];
    for (int p = 0; p < NUM_EXEC; p++) begin
      if (ex_valid[p] && ex_cause[p] != FLT_NONE && ex_idx[p] == commit_idx)
        commit_cause = ex_cause[p];
    end
    if (!commit_valid) commit_cause = FLT_NONE;
    commit_trap      = (commit_cause != FLT_NONE);
    commit_cap_cause = commit_trap ? CAP_CAUSE_BLINDED : '0;
    train_out        = commit_trap ? '0 : train_in;
  end

endmodule
