// tb_side_channel_prevention -- self-checking test of the per-pipeline fault rules.
//
// Walks every micro-op class against every combination of operand blindedness
// and blinded-capability target, with random operand values, and compares fault,
// cause, kill and the operands passed to decision-making logic with a reference
// written row by row from the propagation table:
//   branch      addr reg 0 / cond ops 0 -> allow; cond op blinded -> fault
//   jump        target reg blinded, or target capability blinded -> fault
//   load/store  address register blinded -> fault
//   cap-modify  any blinded operand -> fault; arithmetic never faults.
// Blinded operands of decision-making classes must arrive as zero; arithmetic
// operands must pass untouched. The block is combinational (no added cycle).
module tb_side_channel_prevention;
  import blackout_pkg::*;

  logic            valid;
  uop_e            uop;
  logic            rs1_blinded, rs2_blinded, rs1_cap_blinded;
  logic [XLEN-1:0] op1, op2;
  logic            fault, kill;
  fault_e          cause;
  logic [XLEN-1:0] dec_op1, dec_op2;

  int checks = 0, failures = 0;

  side_channel_prevention dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++)
    for (int u = 0; u < 8; u++)
    for (int v = 0; v < 2; v++)
    for (int bits = 0; bits < 8; bits++) begin
      fault_e          exp_cause;
      logic [XLEN-1:0] exp_d1, exp_d2;
      valid           = 1'(v);
      uop             = uop_e'(u);
      rs1_blinded     = bits[0];
      rs2_blinded     = bits[1];
      rs1_cap_blinded = bits[2];
      op1             = {$urandom, $urandom} | 64'h1;   // never zero, so masking is visible
      op2             = {$urandom, $urandom} | 64'h1;
      exp_cause = FLT_NONE;
      exp_d1    = op1;
      exp_d2    = op2;
      if (u == int'(UOP_BRANCH)) begin
        if (bits[0] | bits[1]) exp_cause = FLT_BRANCH_COND;
        if (bits[0]) exp_d1 = 0;
        if (bits[1]) exp_d2 = 0;
      end else if (u == int'(UOP_JUMPREG)) begin
        if (bits[0] | bits[2]) exp_cause = FLT_JUMP_TARGET;
        if (bits[0]) exp_d1 = 0;
      end else if (u >= int'(UOP_LOAD)) begin
        if (bits[0]) begin exp_cause = FLT_ADDR; exp_d1 = 0; end
      end else if (u == int'(UOP_CAPMOD)) begin
        if (bits[0] | bits[1]) exp_cause = FLT_CAPMOD;
        if (bits[0]) exp_d1 = 0;
        if (bits[1]) exp_d2 = 0;
      end
      if (v == 0) exp_cause = FLT_NONE;
      #1;
      checks++;
      if (cause !== exp_cause || fault !== (exp_cause != FLT_NONE) || kill !== fault) begin
        failures++;
        $display("uop=%0d v=%0d bits=%b: cause=%0d fault=%0b kill=%0b want %0d", u, v, bits[2:0],
                 cause, fault, kill, exp_cause);
      end
      checks++;
      if (dec_op1 !== exp_d1 || dec_op2 !== exp_d2) begin
        failures++;
        $display("uop=%0d bits=%b: decision operands %h %h want %h %h", u, bits[2:0], dec_op1,
                 dec_op2, exp_d1, exp_d2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
