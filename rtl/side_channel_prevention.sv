// side_channel_prevention -- blocks blinded operands from steering control flow or addresses.
//
// One instance sits in every execution pipeline that can see blinded operands
// (memory, ALU/branch, FPU/Int-Mul/Int-Div). For the instruction the pipeline is
// executing it applies the fault rules of the propagation table:
//   conditional branch   blinded condition operand                -> fault (I4)
//   jump through a reg   blinded target register, or a target
//                        capability that is itself blinded         -> fault (I4)
//   load / store / clc / csc  blinded address register             -> fault (I5)
//   capability-modifying instruction with a blinded operand        -> fault
//   arithmetic / logic                                             -> never faults
// and it zeroes every blinded operand before it reaches decision-making hardware
// (branch resolution, predictor update, address generation), so even a
// mis-speculated instruction that later gets squashed cannot make timing, cache
// or predictor state depend on blinded data. Operands of arithmetic instructions
// pass through unchanged: the functional units compute on blinded data, which is
// safe because they are assumed to have data-independent timing.
// The fault is not raised here: it goes to commit_fault_gate with the
// instruction's reorder-buffer index and is raised only if the instruction commits.
//
// Interface: the pipeline's micro-op class, the blindedness bits of its register
// operands, whether the capability in the address/target register is a blinded
// capability, and the two operand values. Outputs: fault and cause, the operands
// to pass to decision-making logic, and kill, which stops a memory access from
// being sent to the cache.
// Timing: purely combinational; no instruction takes an extra cycle.
//
// From the paper: the fault rules and zeroing of blinded data fed to decision-making
// parts. This design's choices: the micro-op classes, faulting a
// capability-modifying instruction on any blinded operand (the paper: "any
// capability-modifying instruction with operands that would result in a blinded
// capability causes a fault"), and the choice of which operands count as
// decision-making for each class.
module side_channel_prevention
  import blackout_pkg::*;
(
  input  logic            valid,
  input  uop_e            uop,
  input  logic            rs1_blinded,      // address / target / first condition operand
  input  logic            rs2_blinded,      // second condition operand, store data, cap operand
  input  logic            rs1_cap_blinded,  // rs1 holds a valid blinded capability
  input  logic [XLEN-1:0] op1,
  input  logic [XLEN-1:0] op2,
  output logic            fault,
  output fault_e          cause,
  output logic [XLEN-1:0] dec_op1,          // operand values safe for decision-making logic
  output logic [XLEN-1:0] dec_op2,
  output logic            kill              // suppress the memory access / redirect
);

  always_comb begin
    cause   = FLT_NONE;
    dec_op1 = op1;
    dec_op2 = op2;
    unique case (uop)
      UOP_ARITH: ;
      UOP_BRANCH: begin
        if (rs1_blinded || rs2_blinded) cause = FLT_BRANCH_COND;
        if (rs1_blinded) dec_op1 = '0;
        if (rs2_blinded) dec_op2 = '0;
      end
      UOP_JUMPREG: begin
        if (rs1_blinded || rs1_cap_blinded) cause = FLT_JUMP_TARGET;
        if (rs1_blinded) dec_op1 = '0;
      end
      UOP_LOAD, UOP_STORE, UOP_CLC, UOP_CSC: begin
        if (rs1_blinded) begin
          cause   = FLT_ADDR;
          dec_op1 = '0;
        end
      end
      UOP_CAPMOD: begin
        if (rs1_blinded || rs2_blinded) cause = FLT_CAPMOD;
        if (rs1_blinded) dec_op1 = '0;
        if (rs2_blinded) dec_op2 = '0;
      end
      default: ;
    endcase
    if (!valid) cause = FLT_NONE;
    fault = (cause != FLT_NONE);
    kill  = fault;
  end

endmodule
