// taint_propagation -- blindedness of every register write.
//
// Each writeback path of the core (one per execution pipeline) presents the
// destination register, the blindedness bits of the source operands it read and a
// mask of the operands the instruction actually uses. The destination becomes
// blinded if any used source is blinded (the OR rule of the arithmetic/logic row
// of the propagation table) or if the pipeline forces it (a load through a blinded
// capability, or the restore of a blinded register record). Otherwise the bit is
// cleared, so overwriting a blinded register with non-blinded data unblinds it.
// The outputs drive the write ports of blindedness_bits.
//
// Timing: purely combinational, adding no cycle to any instruction.
//
// From the paper: the OR rule, the forced blinding of loads through blinded
// capabilities, clearing on overwrite. This design's choices: the per-port operand
// mask and the port layout.
module taint_propagation #(
  parameter int unsigned NUM_WR = 3,
  parameter int unsigned NSRC   = 3,
  parameter int unsigned IDX_W  = 5
) (
  input  logic [NUM_WR-1:0]            wb_valid,      // pipeline writes a register this cycle
  input  logic [NUM_WR-1:0][IDX_W-1:0] wb_rd,
  input  logic [NUM_WR-1:0][NSRC-1:0]  wb_src_used,   // which source operands the instruction reads
  input  logic [NUM_WR-1:0][NSRC-1:0]  wb_src_blinded,
  input  logic [NUM_WR-1:0]            wb_force,      // result blinded regardless of sources
  output logic [NUM_WR-1:0]            wr_en,
  output logic [NUM_WR-1:0][IDX_W-1:0] wr_idx,
  output logic [NUM_WR-1:0]            wr_blinded
);

  always_comb begin
    for (int w = 0; w < NUM_WR; w++) begin
      wr_en[w]      = wb_valid[w] && (wb_rd[w] != '0);
      wr_idx[w]     = wb_rd[w];
      wr_blinded[w] = wb_force[w] || |(wb_src_used[w] & wb_src_blinded[w]);
    end
  end

endmodule
