// blindedness_bits -- the blindedness bit of every general-purpose capability register.
//
// Each capability register of the core gets one extra bit that says whether the
// value it holds is blinded (derived from data loaded through a blinded
// capability). This module stores those bits next to the core's capability
// register file: NUM_RD combinational read ports, one per register operand read
// by the execution pipelines, and NUM_WR write ports, one per writeback path.
// Register 0 (the null register) is never blinded.
//
// Timing: reads are combinational and return the bits as of the last rising edge;
// a write takes effect at the next rising edge. There is deliberately no
// write-to-read bypass inside: a pipeline writes its result's bit in the same
// cycle as it reads its sources, so a bypass would close a loop for an
// instruction whose destination is also a source. A consumer that issues in the
// same cycle as its producer's writeback must take the bit from the core's
// operand bypass network, next to the value. When two ports write the same
// register in one cycle, the higher-numbered port wins.
// Reset clears every bit: after reset no register is blinded.
//
// From the paper: one blindedness bit per general-purpose capability register, set
// by loads through blinded capabilities and by propagation, cleared when the
// register is overwritten with non-blinded data. This design's choices: the port
// counts, the write priority and the reset value. NUM_REGS defaults to
// the 32 architectural registers of RISC-V; in a renaming core it is the number of
// physical registers.
module blindedness_bits #(
  parameter int unsigned NUM_REGS = 32,
  parameter int unsigned NUM_RD   = 7,
  parameter int unsigned NUM_WR   = 3,
  localparam int unsigned IDX_W   = $clog2(NUM_REGS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // read ports
  input  logic [NUM_RD-1:0][IDX_W-1:0] rd_idx,
  output logic [NUM_RD-1:0]            rd_blinded,
  // write ports
  input  logic [NUM_WR-1:0]            wr_en,
  input  logic [NUM_WR-1:0][IDX_W-1:0] wr_idx,
  input  logic [NUM_WR-1:0]            wr_blinded
);

  logic [NUM_REGS-1:0] bits_q;
  logic [NUM_REGS-1:0] bits_d;

  // Next state: apply the write ports in order, so the last port wins.
  always_comb begin
    bits_d = bits_q;
    for (int w = 0; w < NUM_WR; w++) begin
      if (wr_en[w]) bits_d[wr_idx[w]] = wr_blinded[w];
    end
    bits_d[0] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bits_q <= '0;
    else        bits_q <= bits_d;
  end

  always_comb begin
    for (int r = 0; r < NUM_RD; r++) rd_blinded[r] = bits_q[rd_idx[r]];
  end

endmodule
